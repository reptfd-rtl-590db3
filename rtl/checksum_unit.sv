// checksum_unit: lossy compression of instruction results into the result-log.
//
// Every committed instruction result is XOR-ed into a 32-bit accumulator. When the
// commit that makes commit_instructions a multiple of PERIOD (1024) arrives, the
// accumulated value including that result is copied to `checksum` and out_valid pulses
// for one cycle in the next cycle; the accumulator restarts from zero. The same unit
// serves both groups: on a checked core its output is written to the result-log, on a
// redundant core it is compared with the imported log.
// commit_instructions is the core's count of committed instructions including the one
// being committed; one instruction commits per cycle at most.
// The XOR folding, the 32-bit register, the 1024-instruction period and the reset to 0
// follow the published algorithm. Two details differ from its literal text: the period
// test is made only on a commit (so a count that stays at a multiple of 1024 does not
// export again), and a commit in the export cycle is kept rather than lost.
module checksum_unit #(
  parameter int unsigned PERIOD = reptfd_pkg::CS_PERIOD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] result,
  input  logic        new_commit,
  input  logic [63:0] commit_instructions,
  output logic [31:0] checksum,
  output logic        out_valid
);
  logic [31:0] acc;
  wire  [31:0] acc_next = acc ^ result;
  wire         period_end = ((commit_instructions % 64'(PERIOD)) == 64'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      checksum  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (new_commit) begin
        if (period_end) begin
          checksum  <= acc_next;
          out_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc_next;
        end
      end
    end
  end
endmodule
