// tb_grant_array: four model cores walk through 700 blocks each (the 256-entry ring wraps
// more than twice). Block b has pending period [b, b+2]; a core starts it when the array
// reports entry b full and, after a random time (often zero, so that several cores
// increment the same entry in one cycle), finishes it by incrementing entry b+2.
// Every cycle the read port of every core is compared with the independent rule:
// entry s is full iff every core has finished at least s-1 blocks.
module tb_grant_array;
  import reptfd_pkg::*;
  localparam int N = 4, NBLK = 700;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] inc_valid = '0, rd_full;
  logic [IDX_W-1:0] inc_idx [N], rd_idx [N];
  int checks = 0, failures = 0;

  grant_array #(.N_CORES(N)) dut (.clk, .rst_n, .inc_valid, .inc_idx, .rd_idx, .rd_full);

  always #5 clk = !clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nxt[N];       // next block to start
  int fin[N];       // blocks finished
  bit inb[N];       // inside a block
  int left[N];      // cycles to the end of the block
  int waits = 0, multi = 0;

  initial begin
    bit done;
    for (int c = 0; c < N; c++) begin
      nxt[c] = 0; fin[c] = 0; inb[c] = 0; left[c] = 0;
      inc_idx[c] = '0; rd_idx[c] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    done = 0;
    while (!done) begin
      @(negedge clk);
      inc_valid = '0;
      for (int c = 0; c < N; c++) rd_idx[c] = IDX_W'(nxt[c]);
      #1;
      for (int c = 0; c < N; c++) begin
        int minfin;
        bit e;
        minfin = fin[0];
        for (int k = 1; k < N; k++) if (fin[k] < minfin) minfin = fin[k];
        e = (minfin >= nxt[c] - 1);
        checks++;
        if (rd_full[c] !== e) begin
          failures++; $display("core %0d entry %0d full=%0b exp %0b", c, nxt[c], rd_full[c], e);
        end
      end
      // decide this cycle's actions
      for (int c = 0; c < N; c++) begin
        if (inb[c]) begin
          if (left[c] == 0) begin
            inc_valid[c] = 1'b1;
            inc_idx[c]   = IDX_W'(nxt[c] - 1 + 2);
            inb[c] = 0;
          end else left[c]--;
        end else if (nxt[c] < NBLK) begin
          if (rd_full[c]) begin
            inb[c] = 1;
            left[c] = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(0, 6));
            nxt[c]++;
          end else waits++;
        end
      end
      if ($countones(inc_valid) > 1) begin
        for (int a = 0; a < N; a++) for (int b = a + 1; b < N; b++)
          if (inc_valid[a] && inc_valid[b] && inc_idx[a] == inc_idx[b]) multi++;
      end
      @(posedge clk);
      for (int c = 0; c < N; c++) if (inc_valid[c]) fin[c]++;
      done = 1;
      for (int c = 0; c < N; c++) if (fin[c] < NBLK) done = 0;
    end
    checks++;
    if (waits == 0 || multi == 0) begin
      failures++; $display("coverage: waits %0d same-entry increments %0d", waits, multi);
    end
    $display("waits %0d same-entry increments %0d", waits, multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
