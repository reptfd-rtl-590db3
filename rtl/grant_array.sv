// grant_array: the global grant array of the replay-run.
//
// Entry s counts how many redundant cores have finished every block whose pending
// period (in the first-run) ends no later than sampling s. A block whose pending period
// starts at s may begin only when entry s equals p, the number of cores: then every
// block that ended before it in the first-run has also ended in the replay-run, and all
// physical time orders into it hold.
//
// Each core has one increment port (inc_valid/inc_idx, the entry it passes when it
// finishes a block) and one read port (rd_idx -> rd_full, entry == p). Several cores may
// increment the same entry in one cycle; the increments are added.
// The 2^IDX_W = 256 entries are used as a ring. Once entry s+2 reaches p, every core
// has finished the block whose pending period is [s, s+2], so no core will read entry s
// again: it is cleared in that cycle and serves sampling s+256 later. Entries 0 and 1
// reset to p because no block ends at or before them.
// The counting rule and the p test follow the published replay algorithm; the ring, the
// clearing rule and the reset values are this design's own.
module grant_array
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CORES-1:0] inc_valid,
  input  logic [IDX_W-1:0]   inc_idx [N_CORES],
  input  logic [IDX_W-1:0]   rd_idx  [N_CORES],
  output logic [N_CORES-1:0] rd_full
);
  localparam int unsigned ENTRIES = 1 << IDX_W;
  localparam int unsigned CW      = $clog2(N_CORES + 1);
  localparam logic [CW-1:0] P     = CW'(N_CORES);

  logic [CW-1:0] g      [ENTRIES];
  logic [CW-1:0] g_new  [ENTRIES];
  logic [ENTRIES-1:0] reach;

  always_comb begin
    for (int s = 0; s < int'(ENTRIES); s++) begin
      logic [CW-1:0] n;
      n = '0;
      for (int c = 0; c < int'(N_CORES); c++)
        if (inc_valid[c] && inc_idx[c] == IDX_W'(s)) n = n + 1'b1;
      g_new[s] = g[s] + n;
      reach[s] = (n != '0) && (g_new[s] == P);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(ENTRIES); s++) g[s] <= (s < 2) ? P : '0;
    end else begin
      for (int s = 0; s < int'(ENTRIES); s++)
        g[s] <= reach[(s + 2) % ENTRIES] ? '0 : g_new[s];
    end
  end

  always_comb begin
    for (int c = 0; c < int'(N_CORES); c++) rd_full[c] = (g[rd_idx[c]] == P);
  end

  // No entry may count more cores than there are.
  for (genvar s = 0; s < int'(ENTRIES); s++) begin : g_chk
    a_bound: assert property (@(posedge clk) disable iff (!rst_n) g[s] <= P);
  end
endmodule
