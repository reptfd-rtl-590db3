// tb_log_export: four cores' block records and checksums plus order records are pushed
// at random while the off-chip side accepts at random. Every record must leave exactly
// once, in order per source, with the right kind, core and payload; the order source
// must be back-pressured, not dropped. A final phase stalls the output until the FIFOs
// fill: the records that find their FIFO full must be the ones lost and the overflow
// flag must rise then and not before. Block records must never leave while an order
// record is queued or the order recorder reports itself busy.
module tb_log_export;
  import reptfd_pkg::*;
  localparam int N = 4, D = 4, NS = 2 * N + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] blk_valid = '0, cs_valid = '0;
  logic [BLK_W-1:0] blk_size [N];
  logic [IDX_W-1:0] blk_end [N];
  logic [31:0] cs_value [N];
  logic ord_valid = 1'b0, ord_busy = 1'b0, ord_ready, out_valid, out_ready = 1'b0, overflow;
  log_rec_t ord, out_rec;
  int checks = 0, failures = 0;

  log_export #(.N_CORES(N), .FIFO_DEPTH(D)) dut (.clk, .rst_n, .blk_valid, .blk_size,
    .blk_end, .cs_valid, .cs_value, .ord_valid, .ord_busy, .ord_ready, .ord, .out_valid, .out_ready,
    .out_rec, .overflow);

  always #5 clk = !clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  log_rec_t q[NS][$];
  int occ[NS];
  int sent = 0, got = 0, dropped = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cycle(input int rate, input int rdy, input bit allow_drop);
    log_rec_t r;
    int src;
    @(negedge clk);
    for (int c = 0; c < N; c++) begin
      blk_valid[c] = ($urandom_range(0, 99) < rate);
      blk_size[c]  = BLK_W'($urandom_range(0, SPAN));
      blk_end[c]   = IDX_W'($urandom);
      cs_valid[c]  = ($urandom_range(0, 99) < rate);
      cs_value[c]  = $urandom;
    end
    ord_valid = ($urandom_range(0, 99) < rate);
    ord = '0;
    ord.kind = LOG_ORDER; ord.core = CORE_W'($urandom_range(0, N - 1));
    ord.peer = CORE_W'($urandom_range(0, N - 1));
    ord.seq = {$urandom, $urandom}; ord.peer_seq = {$urandom, $urandom}; ord.data = 32'd3;
    out_ready = ($urandom_range(0, 99) < rdy);
    ord_busy  = ($urandom_range(0, 99) < 20);
    #1;
    // output side of the coming edge
    if (out_valid && out_ready) begin
      got++;
      src = (out_rec.kind == LOG_ORDER) ? NS - 1 :
            (out_rec.kind == LOG_CHECKSUM) ? N + int'(out_rec.core) : int'(out_rec.core);
      if (out_rec.kind == LOG_BLOCK) chk(!ord_busy && occ[NS-1] == 0, "block record ahead of orders");
      if (q[src].size() == 0) chk(0, "record from empty source");
      else begin
        r = q[src].pop_front();
        chk(out_rec === r, $sformatf("source %0d record mismatch", src));
      end
      occ[src]--;
    end
    // input side of the coming edge (full is judged before the edge)
    for (int c = 0; c < N; c++) begin
      if (blk_valid[c]) begin
        r = '0; r.kind = LOG_BLOCK; r.core = CORE_W'(c);
        r.data[BLK_W-1:0] = blk_size[c]; r.data[23:16] = blk_end[c];
        if (occ[c] + ((out_valid && out_ready && src == c) ? 1 : 0) < D) begin
          q[c].push_back(r); occ[c]++; sent++;
        end else begin
          dropped++; chk(allow_drop, "block record dropped");
        end
      end
      if (cs_valid[c]) begin
        r = '0; r.kind = LOG_CHECKSUM; r.core = CORE_W'(c); r.data = cs_value[c];
        if (occ[N+c] + ((out_valid && out_ready && src == N + c) ? 1 : 0) < D) begin
          q[N+c].push_back(r); occ[N+c]++; sent++;
        end else begin
          dropped++; chk(allow_drop, "checksum dropped");
        end
      end
    end
    if (ord_valid && ord_ready) begin q[NS-1].push_back(ord); occ[NS-1]++; sent++; end
  endtask

  initial begin
    foreach (occ[i]) occ[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) cycle(5, 80, 0);
    chk(!overflow, "overflow without cause");
    for (int i = 0; i < 200; i++) cycle(0, 100, 0);
    for (int i = 0; i < 30; i++) cycle(60, 0, 1);   // output stalled
    @(negedge clk);
    chk(overflow && dropped > 0, "overflow not flagged");
    for (int i = 0; i < 300; i++) cycle(0, 100, 1);
    foreach (q[s]) chk(q[s].size() == 0, $sformatf("source %0d left %0d", s, q[s].size()));
    $display("sent %0d got %0d dropped %0d", sent, got, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
