// block_counter: pending-period recorder of one checked core.
//
// The execution of a core is cut into instruction blocks by the sampling ticks: block b
// holds the memory instructions that commit between sampling b and sampling b+1. Its
// pending period runs from sampling b-1 to sampling b+1, twice the block's real length,
// because an instruction that commits after a sampling may have started before it.
// This unit counts the memory instructions of the current block and, on each tick,
// emits the count as one determinism-log entry (registered: blk_valid is high the cycle
// after tick). A commit in the tick cycle is counted in the block the tick closes.
// Sampling times are numbered so that block b's pending period is [b, b+2] (index 0 is
// the sampling one span before reset); blk_end is that end index, b+2.
// It also keeps mem_count, the 64-bit number of memory instructions committed since
// reset, which names every memory instruction in order records.
// The counter per core, the 64-bit register and recording the size of every block
// follow the design description; emitting a record for empty blocks too is this
// design's choice, so the replay side sees every sampling span.
module block_counter
  import reptfd_pkg::*;
#(
  parameter int unsigned SPAN = reptfd_pkg::SPAN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mem_commit,
  input  logic             tick,
  output logic [SEQ_W-1:0] mem_count,
  output logic             blk_valid,
  output logic [BLK_W-1:0] blk_size,
  output logic [IDX_W-1:0] blk_end
);
  logic [BLK_W-1:0] cur;
  logic [IDX_W-1:0] end_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur       <= '0;
      mem_count <= '0;
      blk_valid <= 1'b0;
      blk_size  <= '0;
      blk_end   <= '0;
      end_idx   <= IDX_W'(2);
    end else begin
      blk_valid <= 1'b0;
      if (mem_commit) mem_count <= mem_count + 1'b1;
      if (tick) begin
        blk_valid <= 1'b1;
        blk_size  <= cur + BLK_W'(mem_commit);
        blk_end   <= end_idx;
        end_idx   <= end_idx + 1'b1;
        cur       <= '0;
      end else if (mem_commit) begin
        cur <= cur + 1'b1;
      end
    end
  end

  // One memory unit per core: a block can never exceed one span.
  a_blk_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                blk_valid |-> blk_size <= BLK_W'(SPAN));
endmodule
