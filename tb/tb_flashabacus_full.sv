// tb_flashabacus_full: the control plane at full size, with no parameter overridden:
// 524288-entry page table and reverse map, 2048 erase blocks, six workers, four channels of
// four packages. The same PSC, flash channel and worker models as the scaled end-to-end test
// run ten kernels of three microblocks (a serial read microblock, then writes on overlapping
// ranges). Checks: the tables finish their clearing walk after 524288 cycles, every kernel
// completes once, reads, programs, range-lock blocking and out-of-order borrowing happen, no
// flash package is sent a command while busy, and the page table and reverse map agree for
// the groups written. Block reclaim is not reached at this size (it needs 2047 full blocks) and
// is covered by the scaled test.
module tb_flashabacus_full;
  import fa_pkg::*;
  localparam int NW = NUM_WORKERS, PTE = PAGE_GROUPS, NK = 10;

  logic clk = 0, fl_clk = 0, rst_n = 0, fl_rst_n = 0;
  logic sub_valid, sub_ready, kdone_valid;
  kernel_desc_t sub;
  logic [KID_W-1:0] kdone_kid;
  logic psc_req, psc_sleep, psc_ack, boot_we, ipi_valid;
  logic [2:0] psc_lwp, boot_lwp, ipi_lwp;
  logic [BOOT_W-1:0] boot_addr;
  screen_arg_t ipi_arg;
  logic [NW-1:0] wk_done_valid, wk_done_ready, wk_msg_valid, wk_msg_ready;
  fv_msg_t [NW-1:0] wk_msg;
  logic fv_rsp_valid, fv_rsp_ready;
  fv_rsp_t fv_rsp;
  logic [NUM_CH-1:0] fl_cmd_valid;
  logic [NUM_CH-1:0][PKGS_PER_CH-1:0] fl_ce, fl_rb_n, fl_fail;
  flash_op_e [NUM_CH-1:0] fl_cmd_op;
  logic [NUM_CH-1:0][PPAGE_W-1:0] fl_cmd_page;
  logic [NUM_CH-1:0][DDR_W-1:0] fl_cmd_ddr;
  logic [NW-1:0] worker_busy;
  logic [31:0] cnt_dispatch, cnt_borrow, cnt_fv_msgs, cnt_fv_blocked, cnt_fv_reads, cnt_fv_progs,
               cnt_alloc_wait, cnt_reclaims, cnt_migrated;
  logic tables_ready;
  int checks = 0, failures = 0;

  flashabacus_top dut (.*);

  always #1 clk = ~clk;        // 500 MHz network side
  always #2.5 fl_clk = ~fl_clk; // 200 MHz flash side

  for (genvar c = 0; c < NUM_CH; c++) begin : g_fl
    flash_chan_model #(.NPKG(PKGS_PER_CH), .PAGE_W(PPAGE_W), .T_READ(10), .T_PROG(40), .T_ERASE(60)) u_m (
      .clk(fl_clk), .rst_n(fl_rst_n), .cmd_valid(fl_cmd_valid[c]), .ce(fl_ce[c]), .op(fl_cmd_op[c]),
      .page(fl_cmd_page[c]), .rb_n(fl_rb_n[c]), .fail(fl_fail[c]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  assign psc_ack = psc_req;

  // ---------------- worker models ----------------
  typedef enum int {W_IDLE, W_MAP, W_MAP_WAIT, W_RETRY, W_COMPUTE, W_UNMAP, W_UNMAP_WAIT, W_DONE} wst_e;
  wst_e wst [NW];
  int   wdelay [NW];
  screen_arg_t warg [NW];
  logic [BOOT_W-1:0] wboot [NW];
  logic [LOCK_W-1:0] wlock [NW];
  int kid_of_slot [MAX_APPS];
  int kdone_cnt [NK];
  int n_kdone = 0, n_launch = 0;

  assign fv_rsp_ready = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int w = 0; w < NW; w++) begin
        wst[w] <= W_IDLE; wk_msg_valid[w] <= 0; wk_done_valid[w] <= 0; wk_msg[w] <= '0;
      end
    end else begin
      if (boot_we) wboot[boot_lwp] <= boot_addr;
      if (ipi_valid) begin
        check(wst[ipi_lwp] == W_IDLE, "interrupt goes to an idle worker");
        wst[ipi_lwp] <= W_MAP;
        warg[ipi_lwp] <= ipi_arg;
        n_launch++;
      end
      if (fv_rsp_valid) begin
        automatic int d = int'(fv_rsp.dst);
        check(d < NW && (wst[d] == W_MAP_WAIT || wst[d] == W_UNMAP_WAIT), "response to a waiting worker");
        if (wst[d] == W_MAP_WAIT) begin
          if (fv_rsp.status == RSP_DONE) begin
            wlock[d] <= fv_rsp.lock_id; wst[d] <= W_COMPUTE; wdelay[d] <= $urandom_range(50, 400);
          end else begin
            wst[d] <= W_RETRY; wdelay[d] <= $urandom_range(20, 200);
          end
        end else begin
          check(fv_rsp.status == RSP_DONE, "unmap accepted");
          wst[d] <= W_DONE;
        end
      end
      for (int w = 0; w < NW; w++) begin
        automatic int k = kid_of_slot[warg[w].slot];
        unique case (wst[w])
          W_MAP: begin
            wk_msg_valid[w]       <= 1;
            wk_msg[w].src         <= LWP_W'(w);
            wk_msg[w].kind        <= (warg[w].mblk == 0) ? MSG_MAP_RD : MSG_MAP_WR;
            wk_msg[w].ddr_ptr     <= DDR_W'(32'h0100_0000 + w * 32'h10_0000);
            // the first kernels' last microblock writes a range nobody rewrites (cold data)
            if (warg[w].mblk == 2 && k < 3)
              wk_msg[w].flash_addr <= FA_W'(1024 + k * 256 + warg[w].screen * 48);
            else
              wk_msg[w].flash_addr <= FA_W'((k % 2) * 32 + (warg[w].screen % 2) * 16);
            wk_msg[w].npages      <= LEN_W'(48);
            wk_msg[w].lock_id     <= '0;
            wst[w] <= W_MAP_WAIT;
          end
          W_UNMAP: begin
            wk_msg_valid[w]   <= 1;
            wk_msg[w].kind    <= MSG_UNMAP;
            wk_msg[w].lock_id <= wlock[w];
            wst[w] <= W_UNMAP_WAIT;
          end
          W_RETRY:   if (wdelay[w] == 0) wst[w] <= W_MAP;    else wdelay[w] <= wdelay[w] - 1;
          W_COMPUTE: if (wdelay[w] == 0) wst[w] <= W_UNMAP;  else wdelay[w] <= wdelay[w] - 1;
          W_DONE: begin
            if (!wk_done_valid[w]) wk_done_valid[w] <= 1;
            else if (wk_done_ready[w]) begin wk_done_valid[w] <= 0; wst[w] <= W_IDLE; end
          end
          default: ;
        endcase
        if (wk_msg_valid[w] && wk_msg_ready[w]) wk_msg_valid[w] <= 0;
      end
      if (kdone_valid) begin
        kdone_cnt[kdone_kid]++;
        n_kdone++;
      end
    end
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (kernels done %0d)", n_kdone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_erase, n_read, n_prog, n_overrun;
  initial begin
    kernel_desc_t d;
    sub_valid = 0; sub = '0;
    foreach (kdone_cnt[k]) kdone_cnt[k] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1; fl_rst_n = 1;
    wait (tables_ready);
    check($realtime >= 1048.0e3 && $realtime < 1060.0e3, $sformatf("clearing walk of the tables took %0t", $realtime));
    for (int k = 0; k < NK; k++) begin
      d = '0;
      d.kid = KID_W'(k);
      d.n_mblks = 3;
      d.n_screens[0] = 1;                                  // serial read microblock
      d.n_screens[1] = (SC_W+1)'($urandom_range(2, 4));
      d.n_screens[2] = (SC_W+1)'($urandom_range(1, 4));
      for (int b = 0; b < MAX_MBLKS; b++) d.boot_addr[b] = BOOT_W'(32'h0800_0000 + k * 32'h1000 + b * 32'h100);
      @(negedge clk);
      sub_valid = 1; sub = d;
      kid_of_slot[dut.u_sched.free_slot] = k;
      @(negedge clk);
      sub_valid = 0;
    end
    wait (n_kdone == NK);
    repeat (200) @(posedge clk);
    n_erase = 0; n_read = 0; n_prog = 0; n_overrun = 0;
    n_erase += g_fl[0].u_m.n_erase; n_read += g_fl[0].u_m.n_read; n_prog += g_fl[0].u_m.n_prog; n_overrun += g_fl[0].u_m.n_overrun;
    n_erase += g_fl[1].u_m.n_erase; n_read += g_fl[1].u_m.n_read; n_prog += g_fl[1].u_m.n_prog; n_overrun += g_fl[1].u_m.n_overrun;
    n_erase += g_fl[2].u_m.n_erase; n_read += g_fl[2].u_m.n_read; n_prog += g_fl[2].u_m.n_prog; n_overrun += g_fl[2].u_m.n_overrun;
    n_erase += g_fl[3].u_m.n_erase; n_read += g_fl[3].u_m.n_read; n_prog += g_fl[3].u_m.n_prog; n_overrun += g_fl[3].u_m.n_overrun;
    for (int k = 0; k < NK; k++) check(kdone_cnt[k] == 1, $sformatf("kernel %0d completed once", k));
    check(n_overrun == 0, "no command to a busy package");
    // mechanisms
    check(cnt_dispatch > 0,   "mechanism: screen dispatch");
    check(cnt_borrow > 0,     "mechanism: out-of-order borrowing across kernels");
    check(n_launch == int'(cnt_dispatch), "mechanism: every dispatch launched a worker");
    check(cnt_fv_reads > 0,   "mechanism: page reads");
    check(cnt_fv_progs > 0,   "mechanism: page programs");
    check(cnt_fv_blocked > 0, "mechanism: range-lock blocking");
    check(n_prog >= int'(cnt_fv_progs), "every program reached a package");
    // mapping consistency
    begin
      bit seen [int];
      for (int l = 0; l < 1024; l++) begin
        automatic logic [PG_W:0] e = dut.u_pt.mem[l];
        if (e[PG_W]) begin
          automatic int p = int'(e[PG_W-1:0]);
          automatic logic [PG_W:0] r = dut.u_rmap.mem[p];
          check(!seen.exists(p), $sformatf("physical group %0d mapped once", p));
          check(r[PG_W] && int'(r[PG_W-1:0]) == l, $sformatf("reverse map of group %0d", p));
          seen[p] = 1;
        end
      end
    end
    $display("finished at cycle %0d", $time / 2);
    $display("dispatch=%0d borrow=%0d msgs=%0d blocked=%0d reads=%0d progs=%0d alloc_wait=%0d reclaims=%0d migrated=%0d erases=%0d",
             cnt_dispatch, cnt_borrow, cnt_fv_msgs, cnt_fv_blocked, cnt_fv_reads, cnt_fv_progs, cnt_alloc_wait,
             cnt_reclaims, cnt_migrated, n_erase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
