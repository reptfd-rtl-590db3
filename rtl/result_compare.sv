// result_compare: result check of one redundant core.
//
// The checked core's checksums arrive from the imported result-log (exp_*, valid/ready)
// and the redundant core's own checksums from its checksum unit (act_valid, one-cycle
// pulse, no back-pressure). Both are queued in DEPTH-entry FIFOs and compared in order
// as soon as both heads are present, one pair per cycle. A difference raises the
// one-cycle `mismatch` and the sticky `fault`, which is the detection of a transient
// fault in either group of cores or in the shared uncore; n_compared counts pairs.
// If the replay produces checksums faster than the log delivers them and the actual
// FIFO is full, the sticky `overflow` is set and the checksum is lost.
// Comparing checksum against checksum follows the design description; the queues are
// this design's own.
module result_compare #(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        exp_valid,
  output logic        exp_ready,
  input  logic [31:0] exp_value,
  input  logic        act_valid,
  input  logic [31:0] act_value,
  output logic        mismatch,
  output logic        fault,
  output logic        overflow,
  output logic [31:0] n_compared
);
  logic [31:0] e_head, a_head;
  logic        e_full, e_empty, a_full, a_empty;
  wire         both = !e_empty && !a_empty;

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_exp (
    .clk, .rst_n, .push(exp_valid), .wdata(exp_value), .pop(both),
    .rdata(e_head), .full(e_full), .empty(e_empty));
  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_act (
    .clk, .rst_n, .push(act_valid), .wdata(act_value), .pop(both),
    .rdata(a_head), .full(a_full), .empty(a_empty));
  assign exp_ready = !e_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mismatch   <= 1'b0;
      fault      <= 1'b0;
      overflow   <= 1'b0;
      n_compared <= '0;
    end else begin
      mismatch <= both && (e_head != a_head);
      if (both && (e_head != a_head)) fault <= 1'b1;
      if (both) n_compared <= n_compared + 1'b1;
      if (act_valid && a_full) overflow <= 1'b1;
    end
  end
endmodule
