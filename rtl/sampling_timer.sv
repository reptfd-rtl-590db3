// sampling_timer: the global clock of the first-run.
//
// All checked cores share one sampling clock so that pending periods recorded by
// different cores can be compared. A cycle counter runs from 0 to SPAN-1; in the
// cycle it reaches SPAN-1 the one-cycle pulse `tick` is raised, and on the following
// edge `sample_idx` (the number of samplings since reset, modulo 2^IDX_W) advances.
// Reset is taken as sampling 0, i.e. the start of a recorded segment.
// The 512-cycle span and the 8-bit index follow the design description; building the
// global clock as one shared counter is this design's choice.
module sampling_timer #(
  parameter int unsigned SPAN  = reptfd_pkg::SPAN,
  parameter int unsigned IDX_W = reptfd_pkg::IDX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             tick,
  output logic [IDX_W-1:0] sample_idx
);
  localparam int unsigned CW = $clog2(SPAN);

  logic [CW-1:0] cyc;

  assign tick = (cyc == CW'(SPAN-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc        <= '0;
      sample_idx <= '0;
    end else begin
      cyc <= tick ? '0 : cyc + 1'b1;
      if (tick) sample_idx <= sample_idx + 1'b1;
    end
  end
endmodule
