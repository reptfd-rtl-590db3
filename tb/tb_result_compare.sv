// tb_result_compare: feeds 200 checksum pairs, the imported (expected) ones and the
// replay (actual) ones arriving at independent random times, with three pairs made to
// differ. The mismatch pulse must fire for exactly those pairs, fault must rise at the
// first and stay, and n_compared must count every pair. Finally the actual side is
// flooded without expected values to check the overflow flag.
module tb_result_compare;
  logic clk = 1'b0, rst_n = 1'b0;
  logic exp_valid = 0, exp_ready, act_valid = 0;
  logic [31:0] exp_value = '0, act_value = '0, n_compared;
  logic mismatch, fault, overflow;
  int checks = 0, failures = 0;

  result_compare dut (.clk, .rst_n, .exp_valid, .exp_ready, .exp_value, .act_valid,
                      .act_value, .mismatch, .fault, .overflow, .n_compared);

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

  localparam int NP = 200;
  logic [31:0] vals [NP];
  bit bad [NP];
  int ne = 0, na = 0, nm = 0, first_bad = -1;

  // pair k is compared when both k-th values are queued; count pulses as they come
  int pulses = 0;
  always @(negedge clk) if (rst_n && mismatch) pulses++;

  initial begin
    for (int k = 0; k < NP; k++) begin vals[k] = $urandom; bad[k] = 0; end
    bad[17] = 1; bad[90] = 1; bad[191] = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (ne < NP || na < NP) begin
      @(negedge clk);
      exp_valid = (ne < NP) && ($urandom_range(0, 2) == 0);
      exp_value = (ne < NP) ? vals[ne] : '0;
      // actual side: pulse only when the FIFO has room, as the checksum period ensures
      act_valid = (na < NP) && (na < ne + 3) && ($urandom_range(0, 2) == 0);
      act_value = (na < NP) ? (vals[na] ^ (bad[na] ? 32'h0000_0100 : 32'h0)) : '0;
      #1;
      if (exp_valid && exp_ready) ne++;
      if (act_valid) na++;
      // fault must not be up before the first bad pair has been compared
      if (int'(n_compared) <= 17) chk(!fault, "early fault");
    end
    @(negedge clk);
    exp_valid = 0; act_valid = 0;
    repeat (10) @(negedge clk);
    chk(int'(n_compared) == NP, $sformatf("compared %0d", n_compared));
    chk(pulses == 3, $sformatf("mismatch pulses %0d", pulses));
    chk(fault, "fault not sticky");
    chk(!overflow, "overflow without cause");
    // flood the actual side
    repeat (6) begin
      @(negedge clk); act_valid = 1; act_value = $urandom;
    end
    @(negedge clk); act_valid = 0;
    @(negedge clk);
    chk(overflow, "overflow not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
