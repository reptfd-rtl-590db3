// tb_checksum_unit: commits random results with random gaps and checks that exactly one
// checksum leaves per 1024 commits, in the cycle after the 1024th, equal to the XOR of
// those 1024 results, and that a commit in the export cycle is folded into the next.
module tb_checksum_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] result = '0;
  logic new_commit = 1'b0;
  logic [63:0] commit_instructions = '0;
  logic [31:0] checksum;
  logic out_valid;
  int checks = 0, failures = 0;

  checksum_unit dut (.clk, .rst_n, .result, .new_commit, .commit_instructions,
                     .checksum, .out_valid);

  always #5 clk = !clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_acc, exp_val;
    bit exp_out;
    longint n;
    int exports;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    ref_acc = '0; exp_out = 0; n = 0; exports = 0; exp_val = '0;
    while (exports < 8) begin
      @(negedge clk);
      checks++;
      if (out_valid !== exp_out) begin failures++; $display("out_valid at commit %0d", n); end
      if (exp_out) begin
        checks++;
        if (checksum !== exp_val) begin
          failures++; $display("checksum %h exp %h", checksum, exp_val);
        end
        exports++;
      end
      exp_out = 0;
      // busy bursts and idle gaps
      new_commit = ($urandom_range(0, 3) != 0);
      result     = $urandom;
      if (new_commit) begin
        n++;
        commit_instructions = 64'(n);
        ref_acc ^= result;
        if (n % 1024 == 0) begin exp_out = 1; exp_val = ref_acc; ref_acc = '0; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
