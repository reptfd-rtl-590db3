// access_cam: the 1024 x 27-bit access CAM of one checked core.
//
// It holds the memory accesses of the core's last block and current block, i.e. of the
// instructions whose pending periods can still overlap those of instructions now running
// on other cores. The array is split into two halves of DEPTH/2 entries, one per block.
// Each committed memory access is written into the current half at the next free slot;
// on a sampling tick the halves swap roles and the older one is emptied (its valid bits
// are cleared in one cycle), so the entries never need to be shifted. An access that
// commits in the tick cycle still goes into the closing block's half.
//
// Search is combinational. An entry conflicts with the searched access when its tag
// equals the searched line tag and at least one of the two is a store. Of all
// conflicting entries the most recent is returned: the highest slot of the current half,
// else the highest slot of the last half.
//
// An entry is type, L1 hit, the low 10 bits of the instruction's memory-instruction
// number, and a 15-bit line tag: 27 bits, as in the design description, but the split
// is this design's own. A partial tag can alias; that records extra execution orders,
// which costs replay time but never correctness.
module access_cam
  import reptfd_pkg::*;
#(
  parameter int unsigned DEPTH = reptfd_pkg::CAM_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // insert
  input  logic                 wr_en,
  input  logic                 wr_store,
  input  logic                 wr_l1hit,
  input  logic [PADDR_W-1:0]   wr_addr,
  input  logic [CAM_CNT_W-1:0] wr_cnt,
  // block boundary
  input  logic                 tick,
  // search
  input  logic [PADDR_W-1:0]   srch_addr,
  input  logic                 srch_store,
  output logic                 hit,
  output cam_entry_t           hit_entry
);
  localparam int unsigned HALF = DEPTH / 2;
  localparam int unsigned HW   = $clog2(HALF);

  cam_entry_t       ent   [DEPTH];
  logic [DEPTH-1:0] valid;
  logic             cur_half;   // half that holds the current block
  logic [HW:0]      wptr;       // next free slot in the current half

  wire [HW:0] wr_slot_ext = wptr;
  wire        do_wr       = wr_en && (wptr < (HW+1)'(HALF));
  wire [HW:0] wr_index    = {cur_half, wr_slot_ext[HW-1:0]};

  // ---- insert and block swap ------------------------------------------------------
  always_ff @(posedge clk) begin
    if (do_wr) ent[wr_index[HW:0]] <= '{is_store: wr_store, l1_hit: wr_l1hit,
                                        cnt: wr_cnt, tag: addr_tag(wr_addr)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      cur_half <= 1'b0;
      wptr     <= '0;
    end else begin
      if (do_wr) valid[wr_index] <= 1'b1;
      if (tick) begin
        cur_half <= !cur_half;
        wptr     <= '0;
        // empty the half that held the last block; it becomes the current one
        if (cur_half) valid[HALF-1:0]     <= '0;
        else          valid[DEPTH-1:HALF] <= '0;
      end else if (do_wr) begin
        wptr <= wptr + 1'b1;
      end
    end
  end

  // ---- search ---------------------------------------------------------------------
  logic [CAM_TAG_W-1:0] stag;
  logic [DEPTH-1:0]     match;
  logic                 hit_cur, hit_last;
  logic [HW-1:0]        idx_cur, idx_last;

  assign stag = addr_tag(srch_addr);

  always_comb begin
    for (int i = 0; i < int'(DEPTH); i++)
      match[i] = valid[i] && (ent[i].tag == stag) && (ent[i].is_store || srch_store);
  end

  wire [HALF-1:0] m_cur  = cur_half ? match[DEPTH-1:HALF] : match[HALF-1:0];
  wire [HALF-1:0] m_last = cur_half ? match[HALF-1:0]     : match[DEPTH-1:HALF];

  always_comb begin
    hit_cur  = |m_cur;
    hit_last = |m_last;
    idx_cur  = '0;
    idx_last = '0;
    for (int i = 0; i < int'(HALF); i++) begin
      if (m_cur[i])  idx_cur  = HW'(i);
      if (m_last[i]) idx_last = HW'(i);
    end
  end

  assign hit = hit_cur || hit_last;
  always_comb begin
    if (hit_cur) hit_entry = ent[{cur_half, idx_cur}];
    else         hit_entry = ent[{!cur_half, idx_last}];
  end

  // A block never holds more than one span of memory instructions.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  wr_en |-> wptr < (HW+1)'(HALF));
endmodule
