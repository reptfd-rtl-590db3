// tb_access_cam: fills the 1024-entry CAM with random accesses from a small address pool
// across many blocks (including full 512-access blocks) and searches it every cycle.
// A reference model keeps the entries of the last and current block and predicts the
// hit flag and the most recent conflicting entry (same line tag, at least one store).
module tb_access_cam;
  import reptfd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 0, wr_store = 0, wr_l1hit = 0, tick = 0, srch_store = 0;
  logic [PADDR_W-1:0] wr_addr = '0, srch_addr = '0;
  logic [CAM_CNT_W-1:0] wr_cnt = '0;
  logic hit;
  cam_entry_t hit_entry;
  int checks = 0, failures = 0;

  access_cam dut (.clk, .rst_n, .wr_en, .wr_store, .wr_l1hit, .wr_addr, .wr_cnt, .tick,
                  .srch_addr, .srch_store, .hit, .hit_entry);

  always #5 clk = !clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: entries of the current and of the last block, in insertion order
  cam_entry_t cur_q[$], last_q[$];

  function automatic logic [PADDR_W-1:0] rand_addr();
    // 24 lines; bit 20 and above alias onto the same tag
    return PADDR_W'({$urandom_range(0, 3), 15'd0, 5'd0}) << 1 |
           PADDR_W'({$urandom_range(0, 23), 5'(0)}) | PADDR_W'($urandom_range(0, 31));
  endfunction

  initial begin
    int nw, blk_len, hits, full_blocks;
    bit e_hit;
    cam_entry_t e_ent;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    nw = 0; hits = 0; full_blocks = 0;
    blk_len = 0;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      wr_en      = ($urandom_range(0, 2) != 0) || (cyc >= 4000 && cyc < 4600);
      wr_store   = $urandom_range(0, 1);
      wr_l1hit   = $urandom_range(0, 1);
      wr_addr    = rand_addr();
      wr_cnt     = CAM_CNT_W'(nw);
      srch_addr  = rand_addr();
      srch_store = $urandom_range(0, 1);
      tick       = (blk_len + int'(wr_en) == SPAN) || ($urandom_range(0, 299) == 0);
      #1;
      e_hit = 0; e_ent = '0;
      foreach (last_q[i])
        if (last_q[i].tag == addr_tag(srch_addr) && (last_q[i].is_store || srch_store)) begin
          e_hit = 1; e_ent = last_q[i];
        end
      foreach (cur_q[i])
        if (cur_q[i].tag == addr_tag(srch_addr) && (cur_q[i].is_store || srch_store)) begin
          e_hit = 1; e_ent = cur_q[i];
        end
      checks++;
      if (hit !== e_hit) begin failures++; $display("hit %0b exp %0b cyc %0d", hit, e_hit, cyc); end
      if (e_hit) begin
        hits++;
        checks++;
        if (hit_entry !== e_ent) begin
          failures++; $display("entry %h exp %h cyc %0d", hit_entry, e_ent, cyc);
        end
      end
      // model update for the coming edge
      if (wr_en) begin
        cur_q.push_back('{is_store: wr_store, l1_hit: wr_l1hit, cnt: wr_cnt,
                          tag: addr_tag(wr_addr)});
        nw++; blk_len++;
      end
      if (tick) begin
        if (blk_len == SPAN) full_blocks++;
        last_q = cur_q; cur_q = {}; blk_len = 0;
      end
    end
    checks++;
    if (full_blocks == 0 || hits < 1000) begin
      failures++; $display("coverage: full blocks %0d hits %0d", full_blocks, hits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
