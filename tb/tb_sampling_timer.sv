// tb_sampling_timer: checks that the global sampling clock ticks exactly once every
// 512 cycles, in the cycle its counter reaches 511, and that the sampling index counts
// the ticks (modulo 256) from 0 after reset.
module tb_sampling_timer;
  import reptfd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick;
  logic [IDX_W-1:0] sample_idx;
  int checks = 0, failures = 0;

  sampling_timer dut (.clk, .rst_n, .tick, .sample_idx);

  always #5 clk = !clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nticks;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    cyc = 0; nticks = 0;
    // 300 spans: the index wraps once
    while (nticks < 300) begin
      @(negedge clk);
      checks++;
      if (tick !== ((cyc % SPAN) == SPAN - 1)) begin
        failures++; $display("tick wrong at cycle %0d", cyc);
      end
      checks++;
      if (sample_idx !== IDX_W'(cyc / SPAN)) begin
        failures++; $display("index %0d at cycle %0d", sample_idx, cyc);
      end
      if (tick) nticks++;
      cyc++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
