// tb_replay_unit: one replay unit with a model of the rest of the redundant group.
// The grant array is modelled per entry: entry s turns full at a chosen time after this
// core has passed it (the other cores are "slower" by that much); entries 0 and 1 start
// full. The peers' performed counts are driven directly.
//  A: directed. Blocks of 3 and 2 instructions with their grants ready: five memory
//     instructions must go in five consecutive cycles, no pause at the block boundary.
//     Then a block whose grant arrives 10 cycles late: exactly 10 stall cycles, 1 stalled
//     block.
//  B: random. 150 blocks of 0..12 instructions, random grant delays, random mem_req.
//     Every performed instruction must find the grant of its block full, every block
//     must increment grant entry b+2 once, in order, in the cycle its last instruction
//     is performed (or it starts, when empty), and the counts must add up.
//  C: execution orders. Instruction 4 must wait for peer core 1 to pass 10 performed
//     instructions, instruction 6 for peer 2 to pass 3 (already true): 4 is held until
//     the peer count moves and goes after it, 6 is delayed by one cycle only.
//  D: a block record whose end index is wrong sets blk_mismatch.
module tb_replay_unit;
  import reptfd_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic blk_valid = 0, blk_ready, ord_valid = 0, ord_ready, mem_req = 0, pause;
  logic [31:0] blk_data = '0;
  log_rec_t ord_rec = '0;
  logic [SEQ_W-1:0] my_count, peer_count [N];
  logic grant_inc, grant_full;
  logic [IDX_W-1:0] grant_inc_idx, grant_rd_idx;
  logic blk_mismatch;
  logic [31:0] blocks_done, stall_blocks, stall_cycles, order_stall_cycles, orders_enforced;
  int checks = 0, failures = 0;

  replay_unit #(.N_CORES(N)) dut (.clk, .rst_n, .blk_valid, .blk_ready, .blk_data,
    .ord_valid, .ord_ready, .ord_rec, .mem_req, .pause, .my_count, .peer_count, .grant_inc,
    .grant_inc_idx, .grant_rd_idx, .grant_full, .blk_mismatch, .blocks_done, .stall_blocks,
    .stall_cycles, .order_stall_cycles, .orders_enforced);

  always #5 clk = !clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- grant model -------------------------------------------------------------------
  bit  gfull [256];
  int  gdelay [256];   // cycles after our increment until the entry is full
  int  gcount [256];   // countdown, -1 = not armed
  assign grant_full = gfull[grant_rd_idx];

  always @(posedge clk) begin
    for (int s = 0; s < 256; s++)
      if (gcount[s] == 0) begin gfull[s] <= 1'b1; gcount[s] <= -1; end
      else if (gcount[s] > 0) gcount[s] <= gcount[s] - 1;
    if (rst_n && grant_inc) begin
      if (gdelay[grant_inc_idx] == 0) gfull[grant_inc_idx] <= 1'b1;
      else gcount[grant_inc_idx] <= gdelay[grant_inc_idx] - 1;
    end
  end

  task automatic reset_all();
    rst_n = 0; blk_valid = 0; ord_valid = 0; mem_req = 0;
    for (int c = 0; c < N; c++) peer_count[c] = '0;
    for (int s = 0; s < 256; s++) begin gfull[s] = (s < 2); gdelay[s] = 0; gcount[s] = -1; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
  endtask

  // block record queue fed in the background
  int bq_size[$], bq_end[$];
  always @(negedge clk) begin
    if (rst_n && bq_size.size() > 0) begin
      blk_valid = 1;
      blk_data = '0;
      blk_data[BLK_W-1:0] = BLK_W'(bq_size[0]);
      blk_data[23:16] = 8'(bq_end[0]);
    end else blk_valid = 0;
    #1;
    if (blk_valid && blk_ready) begin void'(bq_size.pop_front()); void'(bq_end.pop_front()); end
  end

  task automatic push_blocks(input int sizes[$]);
    foreach (sizes[i]) begin bq_size.push_back(sizes[i]); bq_end.push_back(i + 2); end
  endtask

  // ---- scenarios ------------------------------------------------------------------
  initial begin
    int perf_t[$];
    int t;
    // ---------------- A
    reset_all();
    push_blocks('{3, 2, 4});
    gdelay[2] = 0; gdelay[3] = 10;     // grant 3 (start of block 3) ... block 2 waits on 2
    // block 0 starts at 0 (full), block 1 at 1 (full), block 2 at 2: full when block 0 ends
    gdelay[2] = 12;                    // block 2 finds entry 2 full 12 cycles after block 0
    repeat (3) @(negedge clk);         // let the records reach the queue
    mem_req = 1;
    t = 0;
    while (int'(my_count) < 9 && t < 100) begin
      @(negedge clk); t++;
      perf_t.push_back(int'(my_count));
    end
    // instructions 0..4 in cycles 1..5
    for (int k = 0; k < 5; k++) chk(perf_t[k] == k + 1, $sformatf("A: count %0d at %0d", perf_t[k], k + 1));
    chk(int'(stall_blocks) == 1, $sformatf("A: stall_blocks %0d", stall_blocks));
    // block 0 ends in cycle 3 -> entry 2 full 12 cycles later; block 2 waited 12-2 = 10 cycles
    chk(int'(stall_cycles) == 10, $sformatf("A: stall_cycles %0d", stall_cycles));
    chk(int'(blocks_done) == 3, "A: blocks_done");
    chk(!blk_mismatch, "A: mismatch");
    mem_req = 0;

    // ---------------- B
    reset_all();
    begin
      int sizes[$], cum[$], total, nb, inc_seen, bad_grant, cyc;
      nb = 150; total = 0;
      for (int b = 0; b < nb; b++) begin
        int s;
        s = ($urandom_range(0, 4) == 0) ? 0 : int'($urandom_range(1, 12));
        sizes.push_back(s); total += s; cum.push_back(total);
        gdelay[b + 2] = ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(1, 30));
      end
      push_blocks(sizes);
      inc_seen = 0; bad_grant = 0; cyc = 0;
      while ((int'(my_count) < total || inc_seen < nb) && cyc < 20000) begin
        @(negedge clk); cyc++;
        mem_req = ($urandom_range(0, 3) != 0);
        #1;
        if (mem_req && !pause) begin
          // block of instruction my_count
          int b;
          b = 0;
          while (cum[b] <= int'(my_count)) b++;
          // grant of that block (entry b) must be full: the block started
          if (!gfull[b]) bad_grant++;
        end
        if (grant_inc) begin
          int exp_after;
          chk(int'(grant_inc_idx) == inc_seen + 2, $sformatf("B: inc idx %0d exp %0d", grant_inc_idx, inc_seen + 2));
          exp_after = cum[inc_seen];
          chk(int'(my_count) + int'(mem_req && !pause) == exp_after,
              $sformatf("B: block %0d ended at count %0d exp %0d", inc_seen, my_count, exp_after));
          inc_seen++;
        end
      end
      mem_req = 0;
      chk(bad_grant == 0, $sformatf("B: %0d instructions ran without grant", bad_grant));
      chk(int'(my_count) == total && inc_seen == nb, $sformatf("B: count %0d/%0d blocks %0d", my_count, total, inc_seen));
      chk(int'(blocks_done) == nb, "B: blocks_done");
      chk(stall_blocks > 0, "B: no grant stall seen");
      $display("B: %0d blocks, %0d stalled, %0d stall cycles, %0d cycles", nb, stall_blocks, stall_cycles, cyc);
    end

    // ---------------- C
    reset_all();
    push_blocks('{20});
    peer_count[1] = 64'd10; peer_count[2] = 64'd5;
    @(negedge clk);
    ord_valid = 1; ord_rec = '0; ord_rec.kind = LOG_ORDER; ord_rec.core = 0;
    ord_rec.peer = 1; ord_rec.peer_seq = 64'd10; ord_rec.seq = 64'd4;
    @(negedge clk);
    ord_rec.peer = 2; ord_rec.peer_seq = 64'd3; ord_rec.seq = 64'd6;
    @(negedge clk);
    ord_valid = 0;
    repeat (2) @(negedge clk);
    mem_req = 1;
    repeat (15) @(negedge clk);
    chk(int'(my_count) == 4, $sformatf("C: count %0d, must hold at 4", my_count));
    chk(pause, "C: pause bit not set");
    peer_count[1] = 64'd11;
    t = 0;
    while (int'(my_count) < 8 && t < 20) begin @(negedge clk); t++; end
    // one cycle to see the count and pop, then 4 and 5; 6 waits one cycle; then 6, 7
    chk(t == 6, $sformatf("C: took %0d cycles, exp 6", t));
    chk(int'(orders_enforced) == 2, $sformatf("C: orders %0d", orders_enforced));
    chk(order_stall_cycles > 10, "C: order stall cycles");
    mem_req = 0;

    // ---------------- D
    reset_all();
    bq_size.push_back(1); bq_end.push_back(7);
    mem_req = 1;
    repeat (5) @(negedge clk);
    chk(blk_mismatch, "D: wrong end index not flagged");
    mem_req = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
