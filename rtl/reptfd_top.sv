// reptfd_top: RepTFD transient-fault detection hardware for 2 x N_CORES cores.
//
// Half of the cores (the checked group, index 0..N-1 here) run a parallel program; the
// other half (the redundant group) re-execute the same program from the logs the first
// group leaves behind, and the results of the two runs are compared. The groups share
// no data, so a fault anywhere, cores or uncore, can corrupt only one run.
//
// Checked side, per core: a block_counter that records the size of every 512-cycle
// instruction block (the pending-period information), an access_cam of the last two
// blocks' memory accesses, and a checksum_unit over instruction results. Shared: the
// sampling_timer (global clock), the order_recorder that searches the other cores' CAMs
// on every L1 miss and logs non-inferrable execution orders, and log_export, which
// streams all records off chip (log_out_*).
// Redundant side: log_import takes the records back (log_in_*) and hands them to the
// per-core replay_unit (block sizes and orders) and result_compare (checksums); the
// replay units share the grant_array and each other's progress counts; each core's
// checksum_unit feeds its comparator, whose mismatch is fault_detected.
//
// The cores, the uncore, the off-chip log storage and the checkpoint/rollback mechanism
// are not part of this module: their connections are the ports. Checked core c is
// replayed by redundant core c. Checked-core interface per core c:
//   chk_mem_commit/_store/_addr/_l1hit : a memory instruction commits (at most 1/cycle)
//   chk_mem_count                      : memory instructions committed so far; the
//                                        committing instruction's number is this value
//   chk_miss_*                          : L1-miss search request, valid/ready
//   chk_commit/_result/_count           : instruction commit for the checksum
// Redundant-core interface: rep_mem_req/rep_pause (perform when req && !pause),
// rep_mem_count, and rep_commit/_result/_count for the checksum.
// N_CORES = 8 follows the evaluated 16-core system; the block diagram draws 4 + 4.
module reptfd_top
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // ---- checked group ----
  input  logic [N_CORES-1:0] chk_mem_commit,
  input  logic [N_CORES-1:0] chk_mem_store,
  input  logic [PADDR_W-1:0] chk_mem_addr     [N_CORES],
  input  logic [N_CORES-1:0] chk_mem_l1hit,
  output logic [SEQ_W-1:0]   chk_mem_count    [N_CORES],
  input  logic [N_CORES-1:0] chk_miss_valid,
  output logic [N_CORES-1:0] chk_miss_ready,
  input  logic [PADDR_W-1:0] chk_miss_addr    [N_CORES],
  input  logic [N_CORES-1:0] chk_miss_store,
  input  logic [SEQ_W-1:0]   chk_miss_seq     [N_CORES],
  input  logic [N_CORES-1:0] chk_commit,
  input  logic [31:0]        chk_result       [N_CORES],
  input  logic [63:0]        chk_commit_count [N_CORES],
  // ---- log export ----
  output logic               log_out_valid,
  input  logic               log_out_ready,
  output log_rec_t           log_out_rec,
  output logic               log_overflow,
  // ---- log import ----
  input  logic               log_in_valid,
  output logic               log_in_ready,
  input  log_rec_t           log_in_rec,
  output logic               log_bad_record,
  output logic [N_CORES-1:0] log_in_room_blk,   // a record of this kind for core c
  output logic [N_CORES-1:0] log_in_room_ord,   //   offered now is delivered in the
  output logic [N_CORES-1:0] log_in_room_cs,    //   next cycle
  // ---- redundant group ----
  input  logic [N_CORES-1:0] rep_mem_req,
  output logic [N_CORES-1:0] rep_pause,
  output logic [SEQ_W-1:0]   rep_mem_count    [N_CORES],
  input  logic [N_CORES-1:0] rep_commit,
  input  logic [31:0]        rep_result       [N_CORES],
  input  logic [63:0]        rep_commit_count [N_CORES],
  // ---- detection and statistics ----
  output logic [N_CORES-1:0] fault_detected,
  output logic               fault_any,
  output logic [N_CORES-1:0] replay_error,     // block log out of step or checksum lost
  output logic [31:0]        stall_blocks     [N_CORES],
  output logic [31:0]        stall_cycles     [N_CORES],
  output logic [31:0]        orders_enforced  [N_CORES],
  output logic [31:0]        checks_done      [N_CORES]
);
  // =================================================================== first-run side
  logic             tick;
  logic [IDX_W-1:0] sample_idx;

  sampling_timer u_timer (.clk, .rst_n, .tick, .sample_idx);

  logic [N_CORES-1:0] blk_valid, cs_valid, cam_hit;
  logic [BLK_W-1:0]   blk_size [N_CORES];
  logic [IDX_W-1:0]   blk_end  [N_CORES];
  logic [31:0]        cs_value [N_CORES];
  cam_entry_t         cam_entry [N_CORES];
  logic [PADDR_W-1:0] srch_addr;
  logic               srch_store;

  for (genvar c = 0; c < int'(N_CORES); c++) begin : g_chk
    block_counter u_bc (
      .clk, .rst_n, .mem_commit(chk_mem_commit[c]), .tick,
      .mem_count(chk_mem_count[c]), .blk_valid(blk_valid[c]),
      .blk_size(blk_size[c]), .blk_end(blk_end[c]));

    access_cam u_cam (
      .clk, .rst_n,
      .wr_en(chk_mem_commit[c]), .wr_store(chk_mem_store[c]), .wr_l1hit(chk_mem_l1hit[c]),
      .wr_addr(chk_mem_addr[c]), .wr_cnt(chk_mem_count[c][CAM_CNT_W-1:0]), .tick,
      .srch_addr, .srch_store, .hit(cam_hit[c]), .hit_entry(cam_entry[c]));

    checksum_unit u_cs (
      .clk, .rst_n, .result(chk_result[c]), .new_commit(chk_commit[c]),
      .commit_instructions(chk_commit_count[c]),
      .checksum(cs_value[c]), .out_valid(cs_valid[c]));
  end

  logic     ord_valid, ord_ready, ord_busy;
  log_rec_t ord;

  order_recorder #(.N_CORES(N_CORES)) u_rec (
    .clk, .rst_n,
    .miss_valid(chk_miss_valid), .miss_ready(chk_miss_ready), .miss_addr(chk_miss_addr),
    .miss_store(chk_miss_store), .miss_seq(chk_miss_seq), .mem_count(chk_mem_count),
    .srch_addr, .srch_store, .cam_hit, .cam_entry,
    .ord_valid, .busy(ord_busy), .ord_ready, .ord);

  log_export #(.N_CORES(N_CORES)) u_export (
    .clk, .rst_n, .blk_valid, .blk_size, .blk_end, .cs_valid, .cs_value,
    .ord_valid, .ord_busy, .ord_ready, .ord,
    .out_valid(log_out_valid), .out_ready(log_out_ready), .out_rec(log_out_rec),
    .overflow(log_overflow));

  // =================================================================== replay-run side
  logic [N_CORES-1:0] ib_valid, ib_ready, io_valid, io_ready, ic_valid, ic_ready;
  log_rec_t           irec;
  logic [31:0]        n_imported;

  log_import #(.N_CORES(N_CORES)) u_import (
    .clk, .rst_n, .in_valid(log_in_valid), .in_ready(log_in_ready), .in_rec(log_in_rec),
    .blk_valid(ib_valid), .blk_ready(ib_ready), .ord_valid(io_valid), .ord_ready(io_ready),
    .cs_valid(ic_valid), .cs_ready(ic_ready), .rec(irec), 
    .room_blk(log_in_room_blk), .room_ord(log_in_room_ord), .room_cs(log_in_room_cs),
    .bad_record(log_bad_record), .n_records(n_imported));

  logic [N_CORES-1:0] g_inc, g_full;
  logic [IDX_W-1:0]   g_inc_idx [N_CORES];
  logic [IDX_W-1:0]   g_rd_idx  [N_CORES];

  grant_array #(.N_CORES(N_CORES)) u_grant (
    .clk, .rst_n, .inc_valid(g_inc), .inc_idx(g_inc_idx), .rd_idx(g_rd_idx),
    .rd_full(g_full));

  for (genvar c = 0; c < int'(N_CORES); c++) begin : g_rep
    logic        blk_mis, cmp_ovf, act_valid, mism;
    logic [31:0] act_value, blocks_done, ord_stall;

    replay_unit #(.N_CORES(N_CORES)) u_replay (
      .clk, .rst_n,
      .blk_valid(ib_valid[c]), .blk_ready(ib_ready[c]), .blk_data(irec.data),
      .ord_valid(io_valid[c]), .ord_ready(io_ready[c]), .ord_rec(irec),
      .mem_req(rep_mem_req[c]), .pause(rep_pause[c]), .my_count(rep_mem_count[c]),
      .peer_count(rep_mem_count),
      .grant_inc(g_inc[c]), .grant_inc_idx(g_inc_idx[c]), .grant_rd_idx(g_rd_idx[c]),
      .grant_full(g_full[c]),
      .blk_mismatch(blk_mis), .blocks_done, .stall_blocks(stall_blocks[c]),
      .stall_cycles(stall_cycles[c]), .order_stall_cycles(ord_stall),
      .orders_enforced(orders_enforced[c]));

    checksum_unit u_cs (
      .clk, .rst_n, .result(rep_result[c]), .new_commit(rep_commit[c]),
      .commit_instructions(rep_commit_count[c]),
      .checksum(act_value), .out_valid(act_valid));

    result_compare u_cmp (
      .clk, .rst_n, .exp_valid(ic_valid[c]), .exp_ready(ic_ready[c]), .exp_value(irec.data),
      .act_valid, .act_value, .mismatch(mism), .fault(fault_detected[c]),
      .overflow(cmp_ovf), .n_compared(checks_done[c]));

    assign replay_error[c] = blk_mis || cmp_ovf;
  end

  assign fault_any = |fault_detected;
endmodule
