// tb_block_counter: drives random memory commits and 512-cycle ticks and checks every
// block record (size of the block, including a commit in the tick cycle; end index
// 2, 3, 4, ...; valid exactly in the cycle after the tick) and the running 64-bit count.
// Spans with no commit and fully busy spans (512 commits) are both exercised.
module tb_block_counter;
  import reptfd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic mem_commit = 1'b0, tick = 1'b0;
  logic [SEQ_W-1:0] mem_count;
  logic blk_valid;
  logic [BLK_W-1:0] blk_size;
  logic [IDX_W-1:0] blk_end;
  int checks = 0, failures = 0;

  block_counter dut (.clk, .rst_n, .mem_commit, .tick, .mem_count, .blk_valid,
                     .blk_size, .blk_end);

  always #5 clk = !clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int cnt, total, blocks, rate;
    bit  exp_valid;
    int  exp_size;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    cnt = 0; total = 0; blocks = 0; exp_valid = 0; exp_size = 0;
    for (int span = 0; span < 20; span++) begin
      rate = (span == 3) ? 0 : (span == 5) ? 100 : int'($urandom_range(0, 100));
      for (int k = 0; k < SPAN; k++) begin
        @(negedge clk);
        // outputs for the edge just taken
        chk(blk_valid == exp_valid, "blk_valid");
        if (exp_valid) begin
          chk(int'(blk_size) == exp_size, $sformatf("size %0d exp %0d", blk_size, exp_size));
          chk(int'(blk_end) == blocks + 1, $sformatf("end %0d", blk_end));
        end
        chk(mem_count == SEQ_W'(total), "mem_count");
        mem_commit = ($urandom_range(1, 100) <= rate);
        tick       = (k == SPAN - 1);
        exp_valid  = tick;
        if (mem_commit) begin cnt++; total++; end
        if (tick) begin exp_size = cnt; cnt = 0; blocks++; end
      end
    end
    @(negedge clk);
    chk(blk_valid && int'(blk_size) == exp_size, "last block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
