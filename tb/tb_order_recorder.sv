// tb_order_recorder: four checked cores raise L1-miss search requests at random; the
// CAMs are modelled by fixed tables (per core, which lines hit and with which 10-bit
// counter). For every accepted request the testbench predicts the records, one per
// other core whose table hits, lowest core first, with v's full 64-bit number rebuilt
// from the core's committed count, and compares them with the order stream, which it
// back-pressures at random. It also checks that the requester's own CAM never yields a
// record and that every request is eventually accepted.
module tb_order_recorder;
  import reptfd_pkg::*;
  localparam int N = 4;
  localparam int LINES = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] miss_valid = '0, miss_ready, miss_store = '0, cam_hit;
  logic [PADDR_W-1:0] miss_addr [N];
  logic [SEQ_W-1:0] miss_seq [N], mem_count [N];
  logic [PADDR_W-1:0] srch_addr;
  logic srch_store;
  cam_entry_t cam_entry [N];
  logic ord_valid, busy, ord_ready = 1'b0;
  log_rec_t ord;
  int checks = 0, failures = 0;

  order_recorder #(.N_CORES(N)) dut (.clk, .rst_n, .miss_valid, .miss_ready, .miss_addr,
    .miss_store, .miss_seq, .mem_count, .srch_addr, .srch_store, .cam_hit, .cam_entry,
    .ord_valid, .busy, .ord_ready, .ord);

  always #5 clk = !clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CAM model tables
  bit               tab_hit [N][LINES];
  logic [9:0]       tab_cnt [N][LINES];
  bit               tab_st  [N][LINES];

  always_comb begin
    for (int c = 0; c < N; c++) begin
      int l;
      l = int'(srch_addr[LINE_OFS +: 4]);
      cam_hit[c]   = tab_hit[c][l];
      cam_entry[c] = '{is_store: tab_st[c][l], l1_hit: 1'b0, cnt: tab_cnt[c][l],
                       tag: addr_tag(srch_addr)};
    end
  end

  log_rec_t exp_q[$];
  logic [N-1:0] drop;
  int       accepted = 0, received = 0;

  function automatic logic [SEQ_W-1:0] full_seq(input logic [SEQ_W-1:0] cnt_total,
                                                input logic [9:0] low);
    // the one number in [C-1024, C-1] whose low 10 bits are `low`
    for (longint k = 1; k <= 1024; k++)
      if (((cnt_total - SEQ_W'(k)) & 64'h3ff) == SEQ_W'(low)) return cnt_total - SEQ_W'(k);
    return '0;
  endfunction

  // requests
  initial begin
    for (int c = 0; c < N; c++) begin
      mem_count[c] = 64'h1_0000_0000 * (c + 1) + 64'($urandom_range(1024, 100000));
      miss_addr[c] = '0; miss_seq[c] = '0;
      for (int l = 0; l < LINES; l++) begin
        tab_hit[c][l] = ($urandom_range(0, 2) == 0);
        tab_cnt[c][l] = 10'($urandom);
        tab_st[c][l]  = $urandom_range(0, 1);
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    drop = '0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      miss_valid = miss_valid & ~drop;
      drop = '0;
      for (int c = 0; c < N; c++) begin
        if (!miss_valid[c] && $urandom_range(0, 9) == 0) begin
          miss_valid[c] = 1'b1;
          miss_addr[c]  = PADDR_W'($urandom_range(0, LINES - 1)) << LINE_OFS;
          miss_store[c] = $urandom_range(0, 1);
          miss_seq[c]   = 64'($urandom);
        end
      end
      ord_ready = ($urandom_range(0, 3) != 0);
      #1;  // handshakes below take place at the coming edge
      for (int c = 0; c < N; c++) begin
        if (miss_valid[c] && miss_ready[c]) begin
          int l;
          l = int'(miss_addr[c][LINE_OFS +: 4]);
          accepted++;
          for (int v = 0; v < N; v++) begin
            if (v != c && tab_hit[v][l]) begin
              log_rec_t r;
              r = '0;
              r.kind = LOG_ORDER; r.core = CORE_W'(c); r.peer = CORE_W'(v);
              r.seq = miss_seq[c];
              r.peer_seq = full_seq(mem_count[v], tab_cnt[v][l]);
              r.data = {30'd0, tab_st[v][l], 1'b0};
              exp_q.push_back(r);
            end
          end
          drop[c] = 1'b1;
        end
      end
      if (ord_valid && ord_ready) begin
        received++;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected record"); end
        else begin
          log_rec_t e;
          e = exp_q.pop_front();
          if (ord !== e) begin
            failures++;
            $display("record u%0d v%0d seq %0d/%0d exp u%0d v%0d %0d/%0d", ord.core, ord.peer,
                     ord.seq, ord.peer_seq, e.core, e.peer, e.seq, e.peer_seq);
          end
        end
      end
    end
    // drain
    miss_valid = '0;
    ord_ready  = 1'b1;
    repeat (50) @(negedge clk) if (ord_valid) begin
      log_rec_t e;
      e = exp_q.pop_front(); checks++;
      if (ord !== e) failures++;
    end
    checks++;
    if (exp_q.size() != 0 || accepted < 500) begin
      failures++; $display("left %0d accepted %0d", exp_q.size(), accepted);
    end
    $display("accepted %0d records %0d", accepted, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
