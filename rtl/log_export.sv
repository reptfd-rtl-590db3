// log_export: gathers the first-run logs and streams them off chip.
//
// Sources: per checked core a block record (block size and pending-period end index,
// once per sampling span) and a checksum (once per 1024 instructions), plus the order
// records of the order recorder. Each source has a small FIFO; block and checksum FIFOs
// keep only the 32-bit payload, the record is completed on the way out. An arbiter
// takes one record per cycle, order records first and the other FIFOs in round-robin
// order, and drives the output stream (out_valid/out_ready/out_rec; a record moves when
// both are high).
// Order records are back-pressured (ord_ready); block and checksum records cannot be
// held back by the cores, so a full FIFO drops the record and sets the sticky flag
// `overflow`. With one record per cycle leaving and at most 2N+1 arriving per sampling
// span of 512 cycles this only happens if the off-chip side stalls for long.
// Order records come first, and block records also wait while the order recorder is
// still working through a request (ord_busy), so each order reaches the replay side
// before the record of the block holding its later instruction (see the arbiter).
// Block record payload: data[BLK_W-1:0] = size, data[23:16] = pending-period end index.
// Where the logs go is not specified by the design description; the record format, the
// FIFOs and the arbitration are this design's own.
module log_export
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CORES-1:0] blk_valid,
  input  logic [BLK_W-1:0]   blk_size  [N_CORES],
  input  logic [IDX_W-1:0]   blk_end   [N_CORES],
  input  logic [N_CORES-1:0] cs_valid,
  input  logic [31:0]        cs_value  [N_CORES],
  input  logic               ord_valid,
  input  logic               ord_busy,     // order recorder serving a request
  output logic               ord_ready,
  input  log_rec_t           ord,
  output logic               out_valid,
  input  logic               out_ready,
  output log_rec_t           out_rec,
  output logic               overflow
);
  localparam int unsigned NS = 2 * N_CORES + 1;   // sources: blocks, checksums, orders
  localparam int unsigned SW = $clog2(NS);

  logic [31:0]   pay   [2*N_CORES];
  logic [NS-1:0] empty, full, pop;
  log_rec_t      ord_head;

  for (genvar c = 0; c < int'(N_CORES); c++) begin : g_core
    logic [31:0] bdata;
    always_comb begin
      bdata = '0;
      bdata[BLK_W-1:0] = blk_size[c];
      bdata[23:16]     = blk_end[c];
    end
    sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_blk (
      .clk, .rst_n, .push(blk_valid[c]), .wdata(bdata), .pop(pop[c]),
      .rdata(pay[c]), .full(full[c]), .empty(empty[c]));
    sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_cs (
      .clk, .rst_n, .push(cs_valid[c]), .wdata(cs_value[c]), .pop(pop[N_CORES+c]),
      .rdata(pay[N_CORES+c]), .full(full[N_CORES+c]), .empty(empty[N_CORES+c]));
  end

  sync_fifo #(.WIDTH($bits(log_rec_t)), .DEPTH(FIFO_DEPTH)) u_ord (
    .clk, .rst_n, .push(ord_valid), .wdata(ord), .pop(pop[NS-1]),
    .rdata(ord_head), .full(full[NS-1]), .empty(empty[NS-1]));
  assign ord_ready = !full[NS-1];

  // ---- round-robin selection --------------------------------------------------------
  // Order records go first: an order v->u is captured when u is performed, before the
  // tick that closes u's block, and its record is in the order FIFO or still with the
  // busy recorder when that block's record can first leave; holding block records
  // while either is the case makes the order leave first, so the replay side never
  // starts a block before it holds the orders that target it. The other sources share
  // the rest round-robin.
  logic [SW-1:0] rr, sel;
  logic          any;
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = NS - 2; k >= 0; k--) begin
      int s;
      s = (int'(rr) + k) % (NS - 1);
      if (!empty[s] && !(s < int'(N_CORES) && ord_busy)) begin any = 1'b1; sel = SW'(s); end
    end
    if (!empty[NS-1]) begin any = 1'b1; sel = SW'(NS - 1); end
  end

  assign out_valid = any;
  always_comb begin
    out_rec = '0;
    if (int'(sel) == NS - 1) begin
      out_rec = ord_head;
    end else if (int'(sel) >= N_CORES) begin
      out_rec.kind = LOG_CHECKSUM;
      out_rec.core = CORE_W'(int'(sel) - N_CORES);
      out_rec.data = pay[sel];
    end else begin
      out_rec.kind = LOG_BLOCK;
      out_rec.core = CORE_W'(sel);
      out_rec.data = pay[sel];
    end
  end

  always_comb begin
    pop = '0;
    if (any && out_ready) pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr       <= '0;
      overflow <= 1'b0;
    end else begin
      if (any && out_ready && int'(sel) < NS - 1)
        rr <= (int'(sel) == NS - 2) ? '0 : sel + 1'b1;
      if (((blk_valid & full[N_CORES-1:0]) != '0) ||
          ((cs_valid & full[2*N_CORES-1:N_CORES]) != '0))
        overflow <= 1'b1;
    end
  end

  a_ord_push: assert property (@(posedge clk) disable iff (!rst_n)
                               ord_valid && ord_ready |-> !full[NS-1]);
endmodule
