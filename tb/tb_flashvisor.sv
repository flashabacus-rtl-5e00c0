// tb_flashvisor: Flashvisor with its page table, reverse map and allocator (64 page groups:
// eight blocks of eight groups, two of them metadata), and testbench channel responders that
// accept a request when ready is randomly high and complete it 5..40 cycles later.
// Directed sequence, each step checked against the expected responses and flash requests:
//   - read of a section that was never written: DONE, no flash request;
//   - write of 8 channel pages: two fresh groups in increasing order (metadata groups skipped),
//     one program per channel page with channel = addr mod 4, page = group, DDR3L address =
//     pointer + i x 16 KB, page table and reverse map updated, DONE only after the last
//     completion;
//   - an overlapping write by another kernel while the lock is held: BLOCKED, no request;
//   - unmap with a wrong lock id: ERROR; with the right id: DONE; the retried write then
//     succeeds and moves the groups to new physical groups;
//   - read of the section: one read per channel page at the new physical groups;
//   - Storengine hand-over: with se_req high Flashvisor grants and stops taking messages.
module tb_flashvisor;
  import fa_pkg::*;
  localparam int PTE = 64, NB = 8, G = 8, M = 2;
  logic clk = 0, rst_n = 0;
  logic msg_valid, msg_ready, rsp_valid, rsp_ready;
  fv_msg_t msg;
  fv_rsp_t rsp;
  logic pt_init_done, pt_en, pt_we, pt_rvalid, pt_rmapped, rm_we, alloc_req, alloc_grant, se_req, se_gnt;
  logic [PG_W-1:0] pt_addr, pt_wdata, pt_rdata, rm_addr, rm_wdata, alloc_ppg;
  logic [NUM_CH-1:0] fr_valid, fr_ready, fc_valid;
  flash_req_t fr;
  logic [31:0] cnt_msgs, cnt_blocked, cnt_reads, cnt_progs, cnt_alloc_wait;
  int checks = 0, failures = 0;

  flashvisor dut (.*);

  // tables and allocator
  logic rm_init_done, rm_rvalid, rm_rmapped, b_rvalid, b_rmapped, c_rvalid, c_rmapped;
  logic [PG_W-1:0] rm_rdata, b_rdata, c_rdata;
  logic [5:0] al_ppg;
  logic rq_c, open_valid, blk_opened;
  logic [2:0] open_blk;
  logic [3:0] avail;
  page_table #(.ENTRIES(PTE), .DATA_W(PG_W)) u_pt (.clk, .rst_n, .init_done(pt_init_done),
    .a_en(pt_en), .a_we(pt_we), .a_addr(pt_addr[5:0]), .a_wvalid(1'b1), .a_wdata(pt_wdata),
    .a_rvalid(pt_rvalid), .a_rmapped(pt_rmapped), .a_rdata(pt_rdata),
    .b_en(1'b0), .b_we(1'b0), .b_addr(6'd0), .b_wvalid(1'b0), .b_wdata('0),
    .b_rvalid(b_rvalid), .b_rmapped(b_rmapped), .b_rdata(b_rdata));
  page_table #(.ENTRIES(PTE), .DATA_W(PG_W)) u_rm (.clk, .rst_n, .init_done(rm_init_done),
    .a_en(rm_we), .a_we(rm_we), .a_addr(rm_addr[5:0]), .a_wvalid(1'b1), .a_wdata(rm_wdata),
    .a_rvalid(rm_rvalid), .a_rmapped(rm_rmapped), .a_rdata(rm_rdata),
    .b_en(1'b0), .b_we(1'b0), .b_addr(6'd0), .b_wvalid(1'b0), .b_wdata('0),
    .b_rvalid(c_rvalid), .b_rmapped(c_rmapped), .b_rdata(c_rdata));
  page_allocator #(.NBLK(NB), .GPB(G), .META(M)) u_al (.clk, .rst_n, .req(alloc_req), .req_gc(1'b0),
    .grant(alloc_grant), .ppg(al_ppg), .reclaim_req(rq_c), .open_valid, .open_blk, .blk_opened,
    .free_valid(1'b0), .free_blk(3'd0), .avail_blocks(avail));
  assign alloc_ppg = PG_W'(al_ppg);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // channel responders and request log
  flash_req_t log_q [$];
  int log_ch [$];
  int pend [NUM_CH][$];
  always @(negedge clk) begin
    for (int c = 0; c < NUM_CH; c++) fr_ready[c] = ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) begin
    for (int c = 0; c < NUM_CH; c++) begin
      if (fr_valid[c] && fr_ready[c]) begin
        log_q.push_back(fr); log_ch.push_back(c);
        pend[c].push_back($urandom_range(5, 40));
      end
    end
  end
  always @(negedge clk) begin
    for (int c = 0; c < NUM_CH; c++) begin
      fc_valid[c] = 0;
      foreach (pend[c][i]) pend[c][i]--;
      if (pend[c].size() > 0 && pend[c][0] <= 0) begin
        fc_valid[c] = 1; void'(pend[c].pop_front());
      end
    end
  end

  task automatic send(input int src, input fv_kind_e k, input int ddr, input int fa, input int n, input int lid,
                      output fv_rsp_t r);
    @(negedge clk);
    msg_valid = 1;
    msg = '{src: LWP_W'(src), kind: k, ddr_ptr: DDR_W'(ddr), flash_addr: FA_W'(fa), npages: LEN_W'(n), lock_id: LOCK_W'(lid)};
    @(posedge clk);
    while (!msg_ready) @(posedge clk);
    @(negedge clk) msg_valid = 0;
    while (!rsp_valid) @(posedge clk);
    r = rsp;
    check(pend[0].size() + pend[1].size() + pend[2].size() + pend[3].size() == 0, "response after the last completion");
    @(negedge clk);
  endtask

  function automatic logic [PG_W:0] pt_entry(int l); return u_pt.mem[l]; endfunction
  function automatic logic [PG_W:0] rm_entry(int p); return u_rm.mem[p]; endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fv_rsp_t r;
    int lid_a;
    msg_valid = 0; msg = '0; rsp_ready = 1; se_req = 0; fc_valid = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (pt_init_done && rm_init_done);
    // 1. read of an unwritten section
    send(1, MSG_MAP_RD, 32'h10_0000, 0, 8, 0, r);
    check(r.status == RSP_DONE && r.dst == 1 && log_q.size() == 0, "read of unwritten section: DONE, no request");
    send(1, MSG_UNMAP, 0, 0, 0, r.lock_id, r);
    check(r.status == RSP_DONE, "unmap of the read");
    // 2. write 8 channel pages at flash address 8 (logical groups 2 and 3)
    send(2, MSG_MAP_WR, 32'h20_0000, 8, 8, 0, r);
    check(r.status == RSP_DONE && r.dst == 2, "write DONE");
    lid_a = int'(r.lock_id);
    check(log_q.size() == 8, $sformatf("8 programs issued (%0d)", log_q.size()));
    foreach (log_q[i]) begin
      automatic int exp_ppg = (i < 4) ? 2 : 3;
      check(log_q[i].op == FOP_PROG && log_ch[i] == (8 + i) % 4 && log_q[i].page == PPAGE_W'(exp_ppg)
            && log_q[i].pkg == 0 && log_q[i].ddr_addr == DDR_W'(32'h20_0000 + i * 16384)
            && log_q[i].tag[TAG_W-1] == 1'b0, $sformatf("program %0d fields", i));
    end
    check(pt_entry(2) == {1'b1, 19'd2} && pt_entry(3) == {1'b1, 19'd3}, "page table updated");
    check(rm_entry(2) == {1'b1, 19'd2} && rm_entry(3) == {1'b1, 19'd3}, "reverse map updated");
    log_q.delete(); log_ch.delete();
    // 3. overlapping write by kernel 3
    send(3, MSG_MAP_WR, 32'h30_0000, 12, 4, 0, r);
    check(r.status == RSP_BLOCKED && r.dst == 3 && log_q.size() == 0, "overlapping write BLOCKED");
    check(cnt_blocked == 1, "blocked counter");
    // 4. unmap with a wrong id, then the right one; retry
    send(2, MSG_UNMAP, 0, 0, 0, lid_a + 1, r);
    check(r.status == RSP_ERROR, "unmap of a lock not held: ERROR");
    send(2, MSG_UNMAP, 0, 0, 0, lid_a, r);
    check(r.status == RSP_DONE, "unmap DONE");
    send(3, MSG_MAP_WR, 32'h30_0000, 8, 8, 0, r);
    check(r.status == RSP_DONE && log_q.size() == 8, "retried write DONE");
    check(pt_entry(2) == {1'b1, 19'd4} && pt_entry(3) == {1'b1, 19'd5}, "groups moved to fresh physical groups");
    send(3, MSG_UNMAP, 0, 0, 0, r.lock_id, r);
    log_q.delete(); log_ch.delete();
    // 5. read back
    send(4, MSG_MAP_RD, 32'h40_0000, 8, 8, 0, r);
    check(r.status == RSP_DONE && log_q.size() == 8, "read DONE with 8 requests");
    foreach (log_q[i])
      check(log_q[i].op == FOP_READ && log_q[i].page == PPAGE_W'((i < 4) ? 4 : 5) && log_ch[i] == i % 4
            && log_q[i].ddr_addr == DDR_W'(32'h40_0000 + i * 16384), $sformatf("read %0d fields", i));
    check(cnt_reads == 8 && cnt_progs == 16, "read/program counters");
    // 6. Storengine hand-over
    @(negedge clk) se_req = 1;
    repeat (3) @(negedge clk);
    check(se_gnt && !msg_ready, "granted to Storengine while idle, messages held");
    se_req = 0;
    repeat (3) @(negedge clk);
    check(!se_gnt && msg_ready, "released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
