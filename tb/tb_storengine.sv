// tb_storengine: Storengine with the page table, reverse map and allocator of a small flash
// (four blocks of eight groups, two metadata groups each). The testbench plays Flashvisor: it
// allocates groups and writes the page table and reverse map through their port A, and grants
// the hand-over (se_gnt) one cycle after se_req. Channel responders complete requests 5..30
// cycles after accepting them.
// Sequence: logical groups 0..5 fill block 0, 6..11 block 1, 0..3 are rewritten (now stale in
// block 0) and 12..13 fill block 2. Only the reserve block is then left and the open block is
// full, so a reclaim must start. Checks: victim is block 0 (round-robin over used blocks);
// exactly its two valid groups (logical 4 and 5) are migrated, each as NUM_CH reads then NUM_CH
// programs with Storengine's tag bit set; the page table and reverse map point at the new
// groups in the reserve block; stale groups are not copied; every channel erases block 0
// while the hand-over is held; the block returns to the allocator.
module tb_storengine;
  import fa_pkg::*;
  localparam int PTE = 32, NB = 4, G = 8, M = 2;
  logic clk = 0, rst_n = 0;
  logic reclaim_req, open_valid, blk_opened, gc_req, alloc_grant, free_valid, se_req, se_gnt, busy;
  logic [1:0] open_blk, free_blk;
  logic [PG_W-1:0] alloc_ppg;
  logic pt_en, pt_we, pt_rvalid, pt_rmapped, rm_en, rm_we, rm_rvalid, rm_rmapped;
  logic [PG_W-1:0] pt_addr, pt_wdata, pt_rdata, rm_addr, rm_wdata, rm_rdata;
  logic [NUM_CH-1:0] fr_valid, fr_ready, fc_valid;
  flash_req_t fr;
  logic [31:0] cnt_reclaims, cnt_migrated;
  int checks = 0, failures = 0;

  storengine #(.NBLK(NB), .GPB(G), .META(M), .STAGE_DDR(DDR_W'(32'h3FFF_0000))) dut (.*);

  // tables and allocator; port A belongs to the testbench (Flashvisor's side)
  logic ta_en, ta_we, ra_en;
  logic [4:0] ta_addr, ra_addr;
  logic [PG_W-1:0] ta_wdata, ra_wdata;
  logic pti, rmi, ta_rv, ta_rm, ra_rv, ra_rm;
  logic [PG_W-1:0] ta_rd, ra_rd;
  logic tb_req, al_grant;
  logic [4:0] al_ppg;
  logic [2:0] avail;
  page_table #(.ENTRIES(PTE), .DATA_W(PG_W)) u_pt (.clk, .rst_n, .init_done(pti),
    .a_en(ta_en), .a_we(ta_we), .a_addr(ta_addr), .a_wvalid(1'b1), .a_wdata(ta_wdata),
    .a_rvalid(ta_rv), .a_rmapped(ta_rm), .a_rdata(ta_rd),
    .b_en(pt_en), .b_we(pt_we), .b_addr(pt_addr[4:0]), .b_wvalid(1'b1), .b_wdata(pt_wdata),
    .b_rvalid(pt_rvalid), .b_rmapped(pt_rmapped), .b_rdata(pt_rdata));
  page_table #(.ENTRIES(PTE), .DATA_W(PG_W)) u_rm (.clk, .rst_n, .init_done(rmi),
    .a_en(ra_en), .a_we(ra_en), .a_addr(ra_addr), .a_wvalid(1'b1), .a_wdata(ra_wdata),
    .a_rvalid(ra_rv), .a_rmapped(ra_rm), .a_rdata(ra_rd),
    .b_en(rm_en), .b_we(rm_we), .b_addr(rm_addr[4:0]), .b_wvalid(1'b1), .b_wdata(rm_wdata),
    .b_rvalid(rm_rvalid), .b_rmapped(rm_rmapped), .b_rdata(rm_rdata));
  page_allocator #(.NBLK(NB), .GPB(G), .META(M)) u_al (.clk, .rst_n, .req(tb_req || gc_req), .req_gc(gc_req),
    .grant(al_grant), .ppg(al_ppg), .reclaim_req, .open_valid, .open_blk, .blk_opened,
    .free_valid, .free_blk, .avail_blocks(avail));
  assign alloc_grant = al_grant && gc_req;
  assign alloc_ppg   = PG_W'(al_ppg);

  always #5 clk = ~clk;
  always_ff @(posedge clk) se_gnt <= rst_n && se_req;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // channel responders and request log
  flash_req_t log_q [$];
  int log_ch [$];
  bit log_gnt [$];
  int pend [NUM_CH][$];
  always @(negedge clk) for (int c = 0; c < NUM_CH; c++) fr_ready[c] = ($urandom_range(0, 2) != 0);
  always @(posedge clk)
    for (int c = 0; c < NUM_CH; c++)
      if (fr_valid[c] && fr_ready[c]) begin
        log_q.push_back(fr); log_ch.push_back(c); log_gnt.push_back(se_gnt);
        pend[c].push_back($urandom_range(5, 30));
      end
  always @(negedge clk)
    for (int c = 0; c < NUM_CH; c++) begin
      fc_valid[c] = 0;
      foreach (pend[c][i]) pend[c][i]--;
      if (pend[c].size() > 0 && pend[c][0] <= 0) begin fc_valid[c] = 1; void'(pend[c].pop_front()); end
    end

  // Flashvisor's write of one logical group
  task automatic fv_write(input int lpg);
    int p;
    @(negedge clk) tb_req = 1;
    @(posedge clk);
    while (!al_grant || gc_req) @(posedge clk);
    p = int'(al_ppg);
    @(negedge clk) tb_req = 0;
    ta_en = 1; ta_we = 1; ta_addr = 5'(lpg); ta_wdata = PG_W'(p);
    ra_en = 1; ra_addr = 5'(p); ra_wdata = PG_W'(lpg);
    @(negedge clk) ta_en = 0; ta_we = 0; ra_en = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PG_W:0] e;
    int nrd, nwr, ner;
    tb_req = 0; ta_en = 0; ta_we = 0; ta_addr = 0; ta_wdata = 0; ra_en = 0; ra_addr = 0; ra_wdata = 0;
    fc_valid = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (pti && rmi);
    for (int l = 0; l < 12; l++) fv_write(l);
    for (int l = 0; l < 4; l++) fv_write(l);
    check(!busy, "no reclaim while free blocks remain");
    fv_write(12); fv_write(13);
    wait (cnt_reclaims == 1);
    repeat (5) @(posedge clk);
    check(dut.victim == 0, "victim is block 0");
    check(cnt_migrated == 2, $sformatf("two valid groups migrated (%0d)", cnt_migrated));
    e = u_pt.mem[4]; check(e == {1'b1, 19'd26}, $sformatf("logical 4 moved to group 26 (%0d)", e[PG_W-1:0]));
    e = u_pt.mem[5]; check(e == {1'b1, 19'd27}, $sformatf("logical 5 moved to group 27 (%0d)", e[PG_W-1:0]));
    e = u_rm.mem[26]; check(e == {1'b1, 19'd4}, "reverse map of group 26");
    e = u_rm.mem[27]; check(e == {1'b1, 19'd5}, "reverse map of group 27");
    e = u_pt.mem[0]; check(e == {1'b1, 19'd18}, "rewritten group left in place");
    nrd = 0; nwr = 0; ner = 0;
    foreach (log_q[i]) begin
      check(log_q[i].tag[TAG_W-1] == 1'b1, "Storengine tag bit");
      unique case (log_q[i].op)
        FOP_READ:  begin nrd++; check(log_q[i].page == PPAGE_W'(nrd <= 4 ? 6 : 7), "read of the valid old group"); end
        FOP_PROG:  begin nwr++; check(log_q[i].page == PPAGE_W'(nwr <= 4 ? 26 : 27), "program of the new group"); end
        default:   begin ner++; check(log_q[i].page == 0 && log_gnt[i], "erase of block 0 under the hand-over"); end
      endcase
    end
    check(nrd == 8 && nwr == 8 && ner == 4, $sformatf("request counts %0d/%0d/%0d", nrd, nwr, ner));
    check(avail == 1 && !dut.used[0], "block 0 returned to the allocator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
