// replay_unit: replay control of one redundant core.
//
// The redundant core re-executes the program of its checked partner. Its memory
// instructions must meet each other in the same order as in the first-run; this unit
// enforces that with one signal, the pause bit. The core raises mem_req when it wants
// to perform its next memory instruction; the instruction is performed in that cycle
// unless pause is high. Memory instructions are numbered from 0 in program order and
// my_count is the number performed so far.
//
// Physical time orders (published replay algorithm). The imported determinism-log gives
// the size of every block, in order. Block b has pending period [b, b+2] in sampling
// numbers. Three registers track the position: next_start (start of the next block's
// pending period), curr_end (end of the current block's) and next_end (end of the next
// block's). A block may start only when grant[next_start] equals p; when it starts,
// next_start advances. When its last memory instruction is performed the block ends:
// grant entries curr_end .. next_end-1 are incremented (one entry, since blocks are
// contiguous), then curr_end <= next_end and next_end advances. Starting needs no extra
// cycle: the first instruction of a block is performed in the cycle the grant is seen.
// Empty blocks still wait for their grant and end in the cycle they start.
//
// Execution orders. Up to ORD_DEPTH (16) imported records "v on core j, number n, before
// my instruction m" wait in the order buffer. When the head names the next instruction
// (m == my_count) the core is paused; the head leaves once core j has performed more
// than n memory instructions (peer_count[j] > n), and the instruction goes one cycle
// later. The shared performed counts serve as the acknowledgement from core j.
//
// Statistics: blocks that had to wait for their grant while the core was ready, the
// cycles lost that way, cycles lost to execution orders, and orders enforced.
// Registers, grant test and buffer size follow the design description; the handshake
// with the core, the counts used as acknowledgement and the statistics are this
// design's own.
module replay_unit
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES   = 8,
  parameter int unsigned ORD_DEPTH = 16,
  parameter int unsigned BLK_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // imported determinism-log
  input  logic               blk_valid,
  output logic               blk_ready,
  input  logic [31:0]        blk_data,     // [BLK_W-1:0] size, [23:16] end index
  input  logic               ord_valid,
  output logic               ord_ready,
  input  log_rec_t           ord_rec,
  // core
  input  logic               mem_req,
  output logic               pause,
  output logic [SEQ_W-1:0]   my_count,
  input  logic [SEQ_W-1:0]   peer_count [N_CORES],
  // grant array
  output logic               grant_inc,
  output logic [IDX_W-1:0]   grant_inc_idx,
  output logic [IDX_W-1:0]   grant_rd_idx,
  input  logic               grant_full,
  // status
  output logic               blk_mismatch,
  output logic [31:0]        blocks_done,
  output logic [31:0]        stall_blocks,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        order_stall_cycles,
  output logic [31:0]        orders_enforced
);
  typedef struct packed {
    logic [CORE_W-1:0] peer;
    logic [SEQ_W-1:0]  peer_seq;
    logic [SEQ_W-1:0]  seq;
  } ord_ent_t;

  // ---- queues ---------------------------------------------------------------------
  logic [31:0] bhead;
  logic        b_full, b_empty, b_pop;
  sync_fifo #(.WIDTH(32), .DEPTH(BLK_DEPTH)) u_blkq (
    .clk, .rst_n, .push(blk_valid), .wdata(blk_data), .pop(b_pop),
    .rdata(bhead), .full(b_full), .empty(b_empty));
  assign blk_ready = !b_full;

  ord_ent_t ohead, oin;
  logic     o_full, o_empty, o_pop;
  assign oin = '{peer: ord_rec.peer, peer_seq: ord_rec.peer_seq, seq: ord_rec.seq};
  sync_fifo #(.WIDTH($bits(ord_ent_t)), .DEPTH(ORD_DEPTH)) u_ordq (
    .clk, .rst_n, .push(ord_valid), .wdata(oin), .pop(o_pop),
    .rdata(ohead), .full(o_full), .empty(o_empty));
  assign ord_ready = !o_full;

  // ---- the three registers of the replay algorithm ---------------------------------
  logic [IDX_W-1:0] next_start, curr_end, next_end;
  logic             in_block;
  logic [BLK_W-1:0] remaining;

  wire [BLK_W-1:0] bsize = bhead[BLK_W-1:0];
  wire [IDX_W-1:0] bend  = bhead[16 +: IDX_W];

  logic starting, active, ending, perform, ord_match, ord_ok;
  logic [BLK_W-1:0] rem_now;

  assign grant_rd_idx  = next_start;
  assign grant_inc_idx = curr_end;

  always_comb begin
    starting  = !in_block && !b_empty && grant_full;
    active    = in_block || (starting && bsize != '0);
    rem_now   = in_block ? remaining : bsize;
    ord_match = !o_empty && (ohead.seq <= my_count);
    ord_ok    = (int'(ohead.peer) < N_CORES) && (peer_count[ohead.peer] > ohead.peer_seq);
    pause     = !active || ord_match;
    perform   = mem_req && !pause;
    ending    = (perform && rem_now == BLK_W'(1)) || (starting && bsize == '0);
    b_pop     = starting;
    o_pop     = ord_match && (ord_ok || ohead.seq < my_count);  // stale entries leave
    grant_inc = ending;
  end

  // ---- statistics -------------------------------------------------------------------
  wire grant_wait = mem_req && !in_block && !b_empty && !grant_full;
  logic counted;   // this block has already been counted as stalled

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_start         <= IDX_W'(0);
      curr_end           <= IDX_W'(2);
      next_end           <= IDX_W'(3);
      in_block           <= 1'b0;
      remaining          <= '0;
      my_count           <= '0;
      blk_mismatch       <= 1'b0;
      blocks_done        <= '0;
      stall_blocks       <= '0;
      stall_cycles       <= '0;
      order_stall_cycles <= '0;
      orders_enforced    <= '0;
      counted            <= 1'b0;
    end else begin
      if (perform) my_count <= my_count + 1'b1;
      if (starting) begin
        next_start <= next_start + 1'b1;                   // next_start_new
        if (bend != next_start + IDX_W'(2)) blk_mismatch <= 1'b1;
      end
      if (ending) begin
        curr_end    <= next_end;
        next_end    <= next_end + 1'b1;                    // next_end_new
        in_block    <= 1'b0;
        blocks_done <= blocks_done + 1'b1;
      end else if (starting) begin
        in_block <= 1'b1;
      end
      if (perform)       remaining <= rem_now - 1'b1;
      else if (starting) remaining <= bsize;

      if (grant_wait) begin
        stall_cycles <= stall_cycles + 1'b1;
        if (!counted) stall_blocks <= stall_blocks + 1'b1;
      end
      if (starting)        counted <= 1'b0;
      else if (grant_wait) counted <= 1'b1;

      if (mem_req && active && ord_match) order_stall_cycles <= order_stall_cycles + 1'b1;
      if (o_pop && ord_ok) orders_enforced <= orders_enforced + 1'b1;
    end
  end

  a_no_perform_paused: assert property (@(posedge clk) disable iff (!rst_n)
                                        perform |-> active && !ord_match);
  a_block_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_block |-> remaining != '0);
endmodule
