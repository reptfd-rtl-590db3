// order_recorder: records the execution orders that pending periods cannot imply.
//
// Two accesses whose blocks have overlapping pending periods have no physical time
// order, so a conflict between them must be logged explicitly. When a checked core takes
// an L1 miss on instruction u it asks this unit to search the access CAMs of all other
// checked cores. Every CAM that holds a conflicting access v yields one record "v before
// u" carrying both core numbers and both memory-instruction numbers.
//
// Requests use a valid/ready handshake per core and are taken one at a time in
// round-robin order (miss_ready is high in the cycle a request is accepted). The request
// on offer drives srch_addr/srch_store to every CAM, and at the accepting edge the hit
// flags and hit entries of all CAMs are captured: the requester's access is taken to be
// performed at that edge, so exactly the accesses already in the CAMs are older than it.
// The captured hits of all cores except the requester are then worked through lowest
// core first, one record per cycle on the ord_valid/ord_ready stream. When none is left
// the unit accepts again, so one request occupies it for the accept cycle, one cycle per
// record and one closing cycle.
//
// A CAM entry keeps only the low 10 bits of v's number. Since v is one of the last 1024
// memory instructions of its core, the full number is rebuilt from that core's
// committed count C as (C-1) - ((C-1) - cnt) mod 1024.
// Searching on an L1 miss and recording core numbers and counters follow the design
// description; the arbitration and the one-record-per-cycle stream are this design's.
module order_recorder
  import reptfd_pkg::*;
#(
  parameter int unsigned N_CORES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // L1-miss search requests
  input  logic [N_CORES-1:0]   miss_valid,
  output logic [N_CORES-1:0]   miss_ready,
  input  logic [PADDR_W-1:0]   miss_addr  [N_CORES],
  input  logic [N_CORES-1:0]   miss_store,
  input  logic [SEQ_W-1:0]     miss_seq   [N_CORES],
  // committed memory-instruction counts of the checked cores
  input  logic [SEQ_W-1:0]     mem_count  [N_CORES],
  // broadcast search into all CAMs
  output logic [PADDR_W-1:0]   srch_addr,
  output logic                 srch_store,
  input  logic [N_CORES-1:0]   cam_hit,
  input  cam_entry_t           cam_entry  [N_CORES],
  // order records
  output logic                 ord_valid,
  output logic                 busy,        // a request is being served
  input  logic                 ord_ready,
  output log_rec_t             ord
);
  localparam int unsigned CI = (N_CORES > 1) ? $clog2(N_CORES) : 1;

  logic [CI-1:0]      u_core;
  logic [SEQ_W-1:0]   u_seq;
  logic [N_CORES-1:0] done;
  logic [N_CORES-1:0] hits;        // CAM hits captured when the request was accepted
  cam_entry_t         ents [N_CORES];
  logic [CI-1:0]      rr;          // round-robin start

  // ---- request arbitration --------------------------------------------------------
  logic          req_any;
  logic [CI-1:0] req_sel;
  always_comb begin
    req_any = 1'b0;
    req_sel = '0;
    for (int k = N_CORES - 1; k >= 0; k--) begin
      int c;
      c = (int'(rr) + k) % N_CORES;
      if (miss_valid[c]) begin req_any = 1'b1; req_sel = CI'(c); end
    end
  end

  always_comb begin
    miss_ready = '0;
    if (!busy && req_any) miss_ready[req_sel] = 1'b1;
  end

  // the search runs in the accept cycle, against the CAM contents of that moment
  assign srch_addr  = miss_addr[req_sel];
  assign srch_store = miss_store[req_sel];

  // ---- pending hits of the request being served -----------------------------------
  logic [N_CORES-1:0] pend;
  logic [CI-1:0]      v_core;
  always_comb begin
    pend = hits & ~done;
    pend[u_core] = 1'b0;
    v_core = '0;
    for (int c = N_CORES - 1; c >= 0; c--) if (pend[c]) v_core = CI'(c);
  end

  cam_entry_t       v_ent;
  logic [SEQ_W-1:0] v_last, v_seq;
  always_comb begin
    v_ent  = ents[v_core];
    v_last = mem_count[v_core] - 1'b1;
    v_seq  = v_last - SEQ_W'(CAM_CNT_W'(v_last[CAM_CNT_W-1:0] - v_ent.cnt));
  end

  assign ord_valid = busy && (pend != '0);
  always_comb begin
    ord          = '0;
    ord.kind     = LOG_ORDER;
    ord.core     = CORE_W'(u_core);
    ord.peer     = CORE_W'(v_core);
    ord.seq      = u_seq;
    ord.peer_seq = v_seq;
    ord.data     = {30'd0, v_ent.is_store, v_ent.l1_hit};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      u_core     <= '0;
      u_seq      <= '0;
      done       <= '0;
      hits       <= '0;
      ents       <= '{default: '0};
      rr         <= '0;
    end else if (!busy) begin
      if (req_any) begin
        busy       <= 1'b1;
        u_core     <= req_sel;
        u_seq      <= miss_seq[req_sel];
        done       <= '0;
        hits       <= cam_hit;
        ents       <= cam_entry;
        rr         <= (int'(req_sel) == N_CORES - 1) ? '0 : req_sel + 1'b1;
      end
    end else if (pend == '0) begin
      busy <= 1'b0;
    end else if (ord_ready) begin
      done[v_core] <= 1'b1;
    end
  end

  a_ord_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 ord_valid && !ord_ready |=> busy);
endmodule
