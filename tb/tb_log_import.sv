// tb_log_import: streams random block, order and checksum records for four cores, with
// a few malformed ones (core number out of range, unused kind), into the import logic
// while the per-core targets accept at random. Every good record must reach exactly the
// target its kind and core name, in stream order; malformed ones must vanish and raise
// bad_record; n_records must count the delivered ones; the room bits must be set exactly
// when the target has room and no record for the same core and target is held.
module tb_log_import;
  import reptfd_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, bad_record;
  log_rec_t in_rec = '0, rec;
  logic [N-1:0] blk_valid, blk_ready = '0, ord_valid, ord_ready = '0, cs_valid, cs_ready = '0;
  logic [31:0] n_records;
  logic [N-1:0] room_blk, room_ord, room_cs;
  int checks = 0, failures = 0;

  log_import #(.N_CORES(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_rec, .blk_valid,
    .blk_ready, .ord_valid, .ord_ready, .cs_valid, .cs_ready, .rec, .room_blk, .room_ord, .room_cs,
    .bad_record, .n_records);

  always #5 clk = !clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  log_rec_t exp_q[$];
  int n_good = 0, n_bad = 0, n_del = 0;

  function automatic log_rec_t rand_rec(input bit make_bad);
    log_rec_t r;
    r = '0;
    r.kind = log_kind_e'($urandom_range(0, 2));
    r.core = CORE_W'($urandom_range(0, N - 1));
    r.peer = CORE_W'($urandom_range(0, N - 1));
    r.seq = {$urandom, $urandom}; r.peer_seq = {$urandom, $urandom}; r.data = $urandom;
    if (make_bad) begin
      if ($urandom_range(0, 1)) r.core = CORE_W'($urandom_range(N, 15));
      else r.kind = log_kind_e'(2'd3);
    end
    return r;
  endfunction

  initial begin
    bit bad_now;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready_q) begin
        in_valid = ($urandom_range(0, 3) != 0);
        bad_now  = (i > 100) && ($urandom_range(0, 49) == 0);
        in_rec   = rand_rec(bad_now);
      end
      for (int c = 0; c < N; c++) begin
        blk_ready[c] = $urandom_range(0, 1);
        ord_ready[c] = $urandom_range(0, 1);
        cs_ready[c]  = $urandom_range(0, 1);
      end
      #1;
      in_ready_q = in_ready;
      // per-sequence room: target free and no record of that core and kind held
      for (int c = 0; c < N; c++) begin
        bit h;
        h = dut.held && int'(rec.core) == c;
        chk(room_blk[c] == (blk_ready[c] && !(h && rec.kind == LOG_BLOCK)), "room_blk");
        chk(room_ord[c] == (ord_ready[c] && !(h && rec.kind == LOG_ORDER)), "room_ord");
        chk(room_cs[c]  == (cs_ready[c]  && !(h && rec.kind == LOG_CHECKSUM)), "room_cs");
      end
      // delivery in the coming edge
      for (int c = 0; c < N; c++) begin
        if ((blk_valid[c] && blk_ready[c]) || (ord_valid[c] && ord_ready[c]) ||
            (cs_valid[c] && cs_ready[c])) begin
          log_rec_t e;
          n_del++;
          chk(exp_q.size() > 0, "delivery with nothing expected");
          e = exp_q.pop_front();
          chk(rec === e, "record content");
          chk(int'(e.core) == c, "wrong core");
          chk((blk_valid[c] && e.kind == LOG_BLOCK) || (ord_valid[c] && e.kind == LOG_ORDER) ||
              (cs_valid[c] && e.kind == LOG_CHECKSUM), "wrong target");
        end
      end
      chk($countones({blk_valid, ord_valid, cs_valid}) <= 1, "several targets offered");
      if (in_valid && in_ready) begin
        if (int'(in_rec.core) < N && in_rec.kind != log_kind_e'(2'd3)) begin
          exp_q.push_back(in_rec); n_good++;
        end else n_bad++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    blk_ready = '1; ord_ready = '1; cs_ready = '1;
    repeat (5) begin
      #1;
      for (int c = 0; c < N; c++)
        if (blk_valid[c] || ord_valid[c] || cs_valid[c]) begin void'(exp_q.pop_front()); n_del++; end
      @(negedge clk);
    end
    chk(exp_q.size() == 0, "records lost");
    chk(n_bad > 0 && bad_record, "bad record not flagged");
    chk(int'(n_records) == n_good, $sformatf("n_records %0d exp %0d", n_records, n_good));
    $display("good %0d bad %0d delivered %0d", n_good, n_bad, n_del);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  bit in_ready_q = 1'b1;
endmodule
