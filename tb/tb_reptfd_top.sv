// tb_reptfd_top: end-to-end run of the complete RepTFD hardware at its default size
// (8 checked + 8 redundant cores, 512-cycle span, 1024-entry CAMs).
//
// The testbench plays the parts that are not in the RTL: the cores, a coherent L1 per
// checked core (MSI states, no evictions), the shared memory of each group, and the
// off-chip log storage. Each thread runs a generated program of ALU and memory
// instructions; most accesses go to lines private to the thread, the rest to a small
// shared pool, and every result depends on the values loaded before, so a wrong
// interleaving in the replay changes results.
//
// Segment 1 (fault-free): the checked cores run the programs (first-run) while the log
// leaves through the export port into a queue; an L1 miss is performed when the order
// recorder accepts its search. The queue is then played into the import port while the
// redundant cores run the same programs (replay-run) on their own memory copy, pausing
// when told. Checked: every load of the replay returns the value it returned in the
// first-run, every checksum period is compared and none differs, no log record is lost
// or malformed, and each mechanism occurred at least once: L1-miss searches, recorded
// and enforced execution orders, a replay core paused by an order, blocks stalled on
// the grant array, empty blocks, and checksum comparisons.
// Segment 2: the same with one word of the first-run memory flipped half-way (a fault
// in the shared uncore, invisible to per-core redundancy): fault_any must rise.
module tb_reptfd_top;
  import reptfd_pkg::*;
  localparam int N      = 8;
  localparam int LEN    = 3072;        // instructions per thread
  localparam int PRIV   = 8;           // private lines per thread
  localparam int SHARED = 6;           // shared lines
  localparam int NLINES = N * PRIV + SHARED;
  localparam int WORDS  = NLINES * 8;  // 8 words per 32-byte line

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] chk_mem_commit, chk_mem_store, chk_mem_l1hit, chk_miss_valid, chk_miss_ready;
  logic [N-1:0] chk_miss_store, chk_commit, rep_mem_req, rep_pause, rep_commit;
  logic [PADDR_W-1:0] chk_mem_addr [N], chk_miss_addr [N];
  logic [SEQ_W-1:0] chk_mem_count [N], chk_miss_seq [N], rep_mem_count [N];
  logic [31:0] chk_result [N], rep_result [N];
  logic [63:0] chk_commit_count [N], rep_commit_count [N];
  logic log_out_valid, log_out_ready, log_overflow, log_in_valid, log_in_ready, log_bad_record;
  logic [N-1:0] log_in_room_blk, log_in_room_ord, log_in_room_cs;
  log_rec_t log_out_rec, log_in_rec;
  logic [N-1:0] fault_detected, replay_error;
  logic fault_any;
  logic [31:0] stall_blocks [N], stall_cycles [N], orders_enforced [N], checks_done [N];
  int checks = 0, failures = 0;

  reptfd_top dut (.*);

  // observe whether each replay core is inside a block (a pause there is an order wait)
  logic [N-1:0] rep_in_block;
  for (genvar g = 0; g < N; g++) begin : g_obs
    assign rep_in_block[g] = dut.g_rep[g].u_replay.in_block;
  end

  always #5 clk = !clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- programs ---------------------------------------------------------------------
  typedef enum logic [1:0] {OP_ALU, OP_LD, OP_ST} op_e;
  op_e          p_op   [N][LEN];
  int unsigned  p_word [N][LEN];
  logic [31:0]  p_k    [N][LEN];

  function automatic logic [31:0] mix(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x;
    x = a ^ (b * 32'h9E37_79B1);
    x = x ^ (x >> 15);
    return x * 32'h85EB_CA6B + 32'h1;
  endfunction

  task automatic gen_programs();
    for (int t = 0; t < N; t++)
      for (int i = 0; i < LEN; i++) begin
        int r, line;
        r = int'($urandom_range(0, 99));
        p_op[t][i] = (r < 60) ? OP_ALU : (r < 82) ? OP_LD : OP_ST;
        line = ($urandom_range(0, 99) < 97) ? t * PRIV + int'($urandom_range(0, PRIV - 1))
                                            : N * PRIV + int'($urandom_range(0, SHARED - 1));
        p_word[t][i] = line * 8 + $urandom_range(0, 7);
        p_k[t][i]    = $urandom;
      end
  endtask

  // ---- first-run state -----------------------------------------------------------
  logic [31:0] mem1 [WORDS];
  logic [31:0] mem2 [WORDS];
  logic [1:0]  l1 [N][NLINES];       // 0 I, 1 S, 2 M
  int          pc1 [N], pc2 [N];
  logic [31:0] acc1 [N], acc2 [N];
  logic [31:0] ld1 [N][LEN];         // first-run load values
  logic [31:0] wr1 [WORDS], wr2 [WORDS], src1 [N][LEN];   // writer {core, memory op}
  log_rec_t    logq[$];
  log_rec_t    coreq[2*N][$];      // log areas: per core, determinism log then checksums
  int n_miss, n_hits, n_blk_rec, n_ord_rec, n_cs_rec, n_empty_blk;
  int ld_mismatch, rep_pause_order, n_held;
  logic [N-1:0] acc_now;

  task automatic reset_dut();
    rst_n = 0;
    chk_mem_commit = '0; chk_mem_store = '0; chk_mem_l1hit = '0; chk_miss_valid = '0;
    chk_miss_store = '0; chk_commit = '0; rep_mem_req = '0; rep_commit = '0;
    log_out_ready = 1'b1; log_in_valid = 1'b0; log_in_rec = '0;
    for (int c = 0; c < N; c++) begin
      chk_mem_addr[c] = '0; chk_miss_addr[c] = '0; chk_miss_seq[c] = '0;
      chk_result[c] = '0; rep_result[c] = '0; chk_commit_count[c] = '0; rep_commit_count[c] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
  endtask

  // Collect exported records (sampled just before each rising edge).
  always @(posedge clk)
    if (rst_n && log_out_valid && log_out_ready) begin
      logq.push_back(log_out_rec);
      case (log_out_rec.kind)
        LOG_BLOCK:    begin n_blk_rec++; if (log_out_rec.data[BLK_W-1:0] == '0) n_empty_blk++; end
        LOG_ORDER:    n_ord_rec++;
        LOG_CHECKSUM: n_cs_rec++;
        default: ;
      endcase
    end

  task automatic first_run(input bit inject);
    bit all_done;
    int cyc, fault_at;
    for (int c = 0; c < N; c++) begin pc1[c] = 0; acc1[c] = 32'(c); end
    for (int w = 0; w < WORDS; w++) begin mem1[w] = 32'(w) * 32'h0101_0101; wr1[w] = '1; end
    for (int c = 0; c < N; c++) for (int l = 0; l < NLINES; l++) l1[c][l] = 2'd0;
    fault_at = inject ? LEN / 2 : -1;
    acc_now = '0;
    cyc = 0;
    all_done = 0;
    while (!all_done) begin
      @(negedge clk);
      cyc++;
      chk_mem_commit = '0; chk_commit = '0;
      chk_miss_valid = chk_miss_valid & ~acc_now;   // accepted at the last edge
      acc_now = '0;
      // keep a pending miss request; otherwise pick the next instruction
      for (int c = 0; c < N; c++) begin
        if (!chk_miss_valid[c] && pc1[c] < LEN && $urandom_range(0, 99) < 75) begin
          int w, line;
          w = int'(p_word[c][pc1[c]]); line = w / 8;
          if (p_op[c][pc1[c]] == OP_ALU) begin
            chk_commit[c] = 1;
            chk_result[c] = mix(acc1[c], p_k[c][pc1[c]]);
            acc1[c] = chk_result[c];
          end else begin
            bit st, hit;
            st  = (p_op[c][pc1[c]] == OP_ST);
            hit = st ? (l1[c][line] == 2'd2) : (l1[c][line] != 2'd0);
            chk_mem_addr[c]  = PADDR_W'(w * 4);
            chk_mem_store[c] = st;
            if (hit) begin
              chk_mem_l1hit[c]  = 1;
              chk_mem_commit[c] = 1;   // performed below, at this edge
              n_hits++;
            end else begin
              chk_mem_l1hit[c]  = 0;
              chk_miss_valid[c] = 1;
              chk_miss_addr[c]  = PADDR_W'(w * 4);
              chk_miss_store[c] = st;
              chk_miss_seq[c]   = chk_mem_count[c];
            end
          end
        end
      end
      #1;
      // the accepted miss is performed in this cycle too; the coherence action it starts
      // holds back, for this cycle, a conflicting hit by another core on the same line
      for (int c = 0; c < N; c++)
        if (chk_miss_valid[c] && chk_miss_ready[c]) begin
          int ml;
          ml = int'(p_word[c][pc1[c]]) / 8;
          chk_mem_commit[c] = 1;
          for (int o = 0; o < N; o++)
            if (o != c && chk_mem_commit[o] && chk_mem_l1hit[o] &&
                int'(p_word[o][pc1[o]]) / 8 == ml &&
                (chk_miss_store[c] || p_op[o][pc1[o]] == OP_ST)) begin
              chk_mem_commit[o] = 0;
              n_held++;
            end
        end
      // apply: hits first, then the accepted miss (which may downgrade others)
      for (int pass = 0; pass < 2; pass++)
        for (int c = 0; c < N; c++) begin
          bit is_miss;
          is_miss = chk_miss_valid[c] && chk_miss_ready[c];
          if (chk_mem_commit[c] && (pass == 1) == is_miss) begin
            int w, line;
            logic [31:0] v;
            w = int'(p_word[c][pc1[c]]); line = w / 8;
            if (p_op[c][pc1[c]] == OP_ST) begin
              v = mix(acc1[c], p_k[c][pc1[c]]);
              mem1[w] = v;
              wr1[w] = {16'(c), 16'(chk_mem_count[c])};
              if (is_miss) begin
                for (int o = 0; o < N; o++) if (o != c) l1[o][line] = 2'd0;
                l1[c][line] = 2'd2;
                n_miss++;
              end
            end else begin
              v = mem1[w];
              src1[c][pc1[c]] = wr1[w];
              ld1[c][pc1[c]] = v;
              acc1[c] = mix(acc1[c], v);
              if (is_miss) begin
                for (int o = 0; o < N; o++) if (o != c && l1[o][line] == 2'd2) l1[o][line] = 2'd1;
                l1[c][line] = 2'd1;
                n_miss++;
              end
            end
            chk_commit[c] = 1;
            chk_result[c] = v;
          end
        end
      for (int c = 0; c < N; c++) begin
        acc_now[c] = chk_miss_valid[c] && chk_miss_ready[c];
        if (chk_commit[c]) begin
          pc1[c]++;
          chk_commit_count[c] = 64'(pc1[c]);
        end
        // a transient fault in the shared memory: one word of a shared line flips
        if (c == 0 && pc1[c] == fault_at) begin
          mem1[(N * PRIV) * 8 + 3] ^= 32'h0000_0010;
          fault_at = -1;
        end
      end
      all_done = 1;
      for (int c = 0; c < N; c++) if (pc1[c] < LEN || chk_miss_valid[c]) all_done = 0;
    end
    @(negedge clk);
    chk_mem_commit = '0; chk_commit = '0;
    // let the last blocks close and the log drain
    repeat (3 * SPAN) @(negedge clk);
    $display("first-run: %0d cycles, %0d L1 misses searched, %0d hits, %0d hits held by a miss",
             cyc, n_miss, n_hits, n_held);
  endtask

  task automatic replay_run(output int cycles);
    int cyc, sel;
    bit all_done;
    for (int c = 0; c < N; c++) begin pc2[c] = 0; acc2[c] = 32'(c); end
    for (int w = 0; w < WORDS; w++) begin mem2[w] = 32'(w) * 32'h0101_0101; wr2[w] = '1; end
    // the exported stream, stored as one log area per core
    for (int c = 0; c < 2 * N; c++) coreq[c] = {};
    for (int i = 0; i < logq.size(); i++) begin
      int a;
      a = int'(logq[i].core);
      if (logq[i].kind == LOG_CHECKSUM) a += N;
      coreq[a].push_back(logq[i]);
    end
    cyc = 0;
    all_done = 0;
    while (!all_done && cyc < 200000) begin
      @(negedge clk);
      cyc++;
      rep_commit = '0; rep_mem_req = '0;
      // log storage: serve one core whose targets can take a record (rotating start)
      log_in_valid = 1'b0;
      log_in_rec   = '0;
      for (int k = 0; k < 2 * N; k++) begin
        int c;
        bit room;
        c = (cyc + k) % (2 * N);
        room = 0;
        if (coreq[c].size() > 0) begin
          log_rec_t h;
          h = coreq[c][0];
          if (c >= N)                   room = log_in_room_cs[c - N];
          else if (h.kind == LOG_BLOCK) room = log_in_room_blk[c];
          else                          room = log_in_room_ord[c];
        end
        if (!log_in_valid && room) begin
          log_in_valid = 1'b1;
          log_in_rec   = coreq[c][0];
          sel = c;
        end
      end
      for (int c = 0; c < N; c++)
        if (pc2[c] < LEN && $urandom_range(0, 99) < 70) begin
          if (p_op[c][pc2[c]] == OP_ALU) begin
            rep_commit[c] = 1;
            rep_result[c] = mix(acc2[c], p_k[c][pc2[c]]);
            acc2[c] = rep_result[c];
          end else rep_mem_req[c] = 1;
        end
      #1;
      if (log_in_valid && log_in_ready) void'(coreq[sel].pop_front());
      for (int c = 0; c < N; c++) begin
        if (rep_mem_req[c] && rep_pause[c]) begin
          // was it an order that held the core? (its block is running)
          if (rep_in_block[c]) rep_pause_order++;
        end
        if (rep_mem_req[c] && !rep_pause[c]) begin
          int w;
          logic [31:0] v;
          w = int'(p_word[c][pc2[c]]);
          if (p_op[c][pc2[c]] == OP_ST) begin
            v = mix(acc2[c], p_k[c][pc2[c]]);
            mem2[w] = v;
            wr2[w] = {16'(c), 16'(rep_mem_count[c])};
          end else begin
            v = mem2[w];
            if (v !== ld1[c][pc2[c]]) begin
              // report the first difference with the writers seen by both runs
              if (ld_mismatch == 0)
                $display("first differing load: core %0d load %0d word %0d, first-run writer %0d/%0d, replay writer %0d/%0d",
                         c, rep_mem_count[c], w, src1[c][pc2[c]][31:16], src1[c][pc2[c]][15:0],
                         wr2[w][31:16], wr2[w][15:0]);
              ld_mismatch++;
            end
            acc2[c] = mix(acc2[c], v);
          end
          rep_commit[c] = 1;
          rep_result[c] = v;
        end
        if (rep_commit[c]) begin
          pc2[c]++;
          rep_commit_count[c] = 64'(pc2[c]);
        end
      end
      all_done = 1;
      for (int c = 0; c < N; c++) if (pc2[c] < LEN) all_done = 0;
      for (int c = 0; c < 2 * N; c++) if (coreq[c].size() > 0) all_done = 0;
    end
    @(negedge clk);
    rep_commit = '0; rep_mem_req = '0; log_in_valid = 0;
    repeat (20) @(negedge clk);
    cycles = cyc;
  endtask

  initial begin
    int rcyc, sb, sc, oe, cd;
    gen_programs();
    // =========================== segment 1: fault-free
    n_miss = 0; n_hits = 0; n_held = 0; n_blk_rec = 0; n_ord_rec = 0; n_cs_rec = 0; n_empty_blk = 0;
    ld_mismatch = 0; rep_pause_order = 0;
    reset_dut();
    first_run(0);
    $display("log: %0d block, %0d order, %0d checksum records (%0d empty blocks)",
             n_blk_rec, n_ord_rec, n_cs_rec, n_empty_blk);
    replay_run(rcyc);
    foreach (logq[i]) if (logq[i].kind == LOG_ORDER && ((logq[i].core == 5 && logq[i].peer==6) || (logq[i].core == 6 && logq[i].peer==5)) && logq[i].seq < 60)
    sb = 0; sc = 0; oe = 0; cd = 0;
    for (int c = 0; c < N; c++) begin
      sb += int'(stall_blocks[c]); sc += int'(stall_cycles[c]);
      oe += int'(orders_enforced[c]); cd += int'(checks_done[c]);
    end
    $display("replay-run: %0d cycles, %0d blocks stalled on grant (%0d cycles), %0d orders enforced, %0d order pauses, %0d checksums compared",
             rcyc, sb, sc, oe, rep_pause_order, cd);
    chk(pc2[0] == LEN, "replay did not finish");
    chk(ld_mismatch == 0, $sformatf("%0d replay loads differ from the first-run", ld_mismatch));
    chk(!fault_any, "false fault detected");
    chk(cd == N * (LEN / CS_PERIOD), $sformatf("checksums compared %0d exp %0d", cd, N * (LEN / CS_PERIOD)));
    chk(n_cs_rec == N * (LEN / CS_PERIOD), "checksum records");
    chk(!log_overflow && !log_bad_record && replay_error == '0, "log integrity");
    // every mechanism at least once
    chk(n_miss > 0,          "mechanism: L1-miss CAM search");
    chk(n_ord_rec > 0,       "mechanism: non-inferrable order recorded");
    chk(oe > 0,              "mechanism: order enforced in replay");
    chk(rep_pause_order > 0, "mechanism: replay core paused by an order");
    chk(sb > 0,              "mechanism: block stalled on grant");
    chk(n_empty_blk > 0,     "mechanism: empty block");
    chk(cd > 0,              "mechanism: checksum comparison");

    // =========================== segment 2: uncore fault
    n_miss = 0; n_hits = 0; n_held = 0; n_blk_rec = 0; n_ord_rec = 0; n_cs_rec = 0; n_empty_blk = 0;
    ld_mismatch = 0; rep_pause_order = 0;
    logq = {};
    reset_dut();
    chk(!fault_any, "fault flag not cleared by reset");
    first_run(1);
    replay_run(rcyc);
    chk(fault_any, "uncore fault not detected");
    $display("fault segment: detected by cores %b, %0d loads differed", fault_detected, ld_mismatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
