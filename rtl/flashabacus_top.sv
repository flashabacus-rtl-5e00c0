// flashabacus_top: the self-governing control plane of the FlashAbacus accelerator.
//
// FlashAbacus puts a flash backbone (4 channels x 4 packages) inside a low-power multicore
// accelerator, so kernels read and write flash directly instead of going through the host's
// storage stack. Of its eight processors, six run kernels (workers), one runs Flashvisor and
// one runs Storengine. This top holds the logic those two roles and the flash side need:
//
//   host submit --> o3_scheduler --> lwp_launcher --> PSC / boot-address / IPI ports (workers)
//   worker done --> completion hw_queue --> o3_scheduler --> kernel done to host
//   worker map messages --> message hw_queue --> flashvisor --> response hw_queue --> workers
//   flashvisor  <--> range_lock (inside), page_table, reverse map, page_allocator
//   storengine  <--> page_table, reverse map, page_allocator (block reclaim)
//   flashvisor + storengine --> per-channel arbiter --> 4 x flash_ctrl --> flash package pins
//
// The processors themselves, their caches, the on-chip crossbars, DDR3L, the PSC, PCIe and the
// serial links to the flash cards are parts of the commercial platform and stay outside; their
// side of every connection is a port here. Two clocks: clk for the network/processor side,
// fl_clk for the flash side of the channel controllers.
//
// Port conventions: valid/ready handshakes; arrays are indexed by worker or by channel.
// Workers put their own processor number in a message's src field; a response is returned with
// that number in dst. On each channel Flashvisor has priority over Storengine; completions go
// back by the top tag bit (0 Flashvisor, 1 Storengine). Allocation requests from Storengine
// win over Flashvisor's.
module flashabacus_top
  import fa_pkg::*;
#(
  parameter int unsigned NW       = NUM_WORKERS,
  parameter int unsigned QDEPTH   = 16,       // message / completion queue depth
  parameter int unsigned TQDEPTH  = 16,       // flash tag queue depth
  parameter int unsigned PT_ENTRIES = PAGE_GROUPS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          fl_clk,
  input  logic                          fl_rst_n,
  // host
  input  logic                          sub_valid,
  output logic                          sub_ready,
  input  kernel_desc_t                  sub,
  output logic                          kdone_valid,
  output logic [KID_W-1:0]              kdone_kid,
  // power/sleep controller, boot address and IPI registers of the workers
  output logic                          psc_req,
  output logic                          psc_sleep,
  output logic [$clog2(NW)-1:0]         psc_lwp,
  input  logic                          psc_ack,
  output logic                          boot_we,
  output logic [$clog2(NW)-1:0]         boot_lwp,
  output logic [BOOT_W-1:0]             boot_addr,
  output logic                          ipi_valid,
  output logic [$clog2(NW)-1:0]         ipi_lwp,
  output screen_arg_t                   ipi_arg,
  // workers: screen completions and Flashvisor messages
  input  logic [NW-1:0]                 wk_done_valid,
  output logic [NW-1:0]                 wk_done_ready,
  input  logic [NW-1:0]                 wk_msg_valid,
  output logic [NW-1:0]                 wk_msg_ready,
  input  fv_msg_t [NW-1:0]              wk_msg,
  output logic                          fv_rsp_valid,
  input  logic                          fv_rsp_ready,
  output fv_rsp_t                       fv_rsp,
  // flash packages, per channel (fl_clk domain)
  output logic [NUM_CH-1:0]             fl_cmd_valid,
  output logic [NUM_CH-1:0][PKGS_PER_CH-1:0] fl_ce,
  output flash_op_e [NUM_CH-1:0]        fl_cmd_op,
  output logic [NUM_CH-1:0][PPAGE_W-1:0] fl_cmd_page,
  output logic [NUM_CH-1:0][DDR_W-1:0]  fl_cmd_ddr,
  input  logic [NUM_CH-1:0][PKGS_PER_CH-1:0] fl_rb_n,
  input  logic [NUM_CH-1:0][PKGS_PER_CH-1:0] fl_fail,
  // status and event counters
  output logic [NW-1:0]                 worker_busy,
  output logic [31:0]                   cnt_dispatch,
  output logic [31:0]                   cnt_borrow,
  output logic [31:0]                   cnt_fv_msgs,
  output logic [31:0]                   cnt_fv_blocked,
  output logic [31:0]                   cnt_fv_reads,
  output logic [31:0]                   cnt_fv_progs,
  output logic [31:0]                   cnt_alloc_wait,
  output logic [31:0]                   cnt_reclaims,
  output logic [31:0]                   cnt_migrated,
  output logic                          tables_ready
);
  localparam int unsigned WW = $clog2(NW);

  // =====================================================================
  // Scheduling: completion queue, scheduler, launcher
  // =====================================================================
  logic          cq_wr_valid, cq_wr_ready, cq_rd_valid;
  logic [WW-1:0] cq_wr_data, cq_rd_data;
  logic [$clog2(QDEPTH+1)-1:0] cq_count;

  // lowest-numbered worker with a completion goes first
  always_comb begin
    cq_wr_valid   = 1'b0;
    cq_wr_data    = '0;
    wk_done_ready = '0;
    for (int w = NW - 1; w >= 0; w--) begin
      if (wk_done_valid[w]) begin
        cq_wr_valid = 1'b1;
        cq_wr_data  = WW'(w);
      end
    end
    if (cq_wr_valid) wk_done_ready[cq_wr_data] = cq_wr_ready;
  end

  hw_queue #(.WIDTH(WW), .DEPTH(QDEPTH)) u_done_q (
    .clk, .rst_n,
    .wr_valid(cq_wr_valid), .wr_ready(cq_wr_ready), .wr_data(cq_wr_data),
    .rd_valid(cq_rd_valid), .rd_ready(1'b1), .rd_data(cq_rd_data), .count(cq_count)
  );

  logic          l_valid, l_ready;
  logic [WW-1:0] l_worker;
  logic [BOOT_W-1:0] l_boot;
  screen_arg_t   l_arg;
  logic [SLOT_W:0] resident;
  logic [31:0]   cnt_launch;

  o3_scheduler #(.NW(NW)) u_sched (
    .clk, .rst_n,
    .sub_valid, .sub_ready, .sub,
    .launch_valid(l_valid), .launch_ready(l_ready), .launch_worker(l_worker),
    .launch_boot(l_boot), .launch_arg(l_arg),
    .done_valid(cq_rd_valid), .done_worker(cq_rd_data),
    .kdone_valid, .kdone_kid,
    .worker_busy, .resident, .cnt_dispatch, .cnt_borrow
  );

  lwp_launcher #(.NW(NW)) u_launch (
    .clk, .rst_n,
    .start_valid(l_valid), .start_ready(l_ready), .start_worker(l_worker),
    .start_boot(l_boot), .start_arg(l_arg),
    .psc_req, .psc_sleep, .psc_lwp, .psc_ack,
    .boot_we, .boot_lwp, .boot_addr, .ipi_valid, .ipi_lwp, .ipi_arg,
    .cnt_launch
  );

  // =====================================================================
  // Flash virtualisation: message queues, Flashvisor, tables, allocator, Storengine
  // =====================================================================
  logic    mq_wr_valid, mq_wr_ready, mq_rd_valid, mq_rd_ready;
  fv_msg_t mq_wr_data, mq_rd_data;
  logic [$clog2(QDEPTH+1)-1:0] mq_count, rq_count;
  logic [WW-1:0] mq_src;

  always_comb begin
    mq_wr_valid  = 1'b0;
    mq_src       = '0;
    wk_msg_ready = '0;
    for (int w = NW - 1; w >= 0; w--) begin
      if (wk_msg_valid[w]) begin
        mq_wr_valid = 1'b1;
        mq_src      = WW'(w);
      end
    end
    mq_wr_data = wk_msg[mq_src];
    if (mq_wr_valid) wk_msg_ready[mq_src] = mq_wr_ready;
  end

  hw_queue #(.WIDTH($bits(fv_msg_t)), .DEPTH(QDEPTH)) u_msg_q (
    .clk, .rst_n,
    .wr_valid(mq_wr_valid), .wr_ready(mq_wr_ready), .wr_data(mq_wr_data),
    .rd_valid(mq_rd_valid), .rd_ready(mq_rd_ready), .rd_data(mq_rd_data), .count(mq_count)
  );

  logic    fvr_valid, fvr_ready;
  fv_rsp_t fvr;

  hw_queue #(.WIDTH($bits(fv_rsp_t)), .DEPTH(QDEPTH)) u_rsp_q (
    .clk, .rst_n,
    .wr_valid(fvr_valid), .wr_ready(fvr_ready), .wr_data(fvr),
    .rd_valid(fv_rsp_valid), .rd_ready(fv_rsp_ready), .rd_data(fv_rsp), .count(rq_count)
  );

  // page table (logical -> physical) and reverse map (physical -> logical)
  logic pt_init_done, rm_init_done;
  logic fv_pt_en, fv_pt_we, fv_pt_rvalid, fv_pt_rmapped;
  logic [PG_W-1:0] fv_pt_addr, fv_pt_wdata, fv_pt_rdata;
  logic se_pt_en, se_pt_we, se_pt_rvalid, se_pt_rmapped;
  logic [PG_W-1:0] se_pt_addr, se_pt_wdata, se_pt_rdata;
  logic fv_rm_we;
  logic [PG_W-1:0] fv_rm_addr, fv_rm_wdata;
  logic fv_rm_rvalid_nc, fv_rm_rmapped_nc;
  logic [PG_W-1:0] fv_rm_rdata_nc;
  logic se_rm_en, se_rm_we, se_rm_rvalid, se_rm_rmapped;
  logic [PG_W-1:0] se_rm_addr, se_rm_wdata, se_rm_rdata;

  page_table #(.ENTRIES(PT_ENTRIES), .DATA_W(PG_W)) u_pt (
    .clk, .rst_n, .init_done(pt_init_done),
    .a_en(fv_pt_en), .a_we(fv_pt_we), .a_addr(fv_pt_addr[$clog2(PT_ENTRIES)-1:0]), .a_wvalid(1'b1),
    .a_wdata(fv_pt_wdata), .a_rvalid(fv_pt_rvalid), .a_rmapped(fv_pt_rmapped), .a_rdata(fv_pt_rdata),
    .b_en(se_pt_en), .b_we(se_pt_we), .b_addr(se_pt_addr[$clog2(PT_ENTRIES)-1:0]), .b_wvalid(1'b1),
    .b_wdata(se_pt_wdata), .b_rvalid(se_pt_rvalid), .b_rmapped(se_pt_rmapped), .b_rdata(se_pt_rdata)
  );

  page_table #(.ENTRIES(PT_ENTRIES), .DATA_W(PG_W)) u_rmap (
    .clk, .rst_n, .init_done(rm_init_done),
    .a_en(fv_rm_we), .a_we(fv_rm_we), .a_addr(fv_rm_addr[$clog2(PT_ENTRIES)-1:0]), .a_wvalid(1'b1),
    .a_wdata(fv_rm_wdata), .a_rvalid(fv_rm_rvalid_nc), .a_rmapped(fv_rm_rmapped_nc), .a_rdata(fv_rm_rdata_nc),
    .b_en(se_rm_en), .b_we(se_rm_we), .b_addr(se_rm_addr[$clog2(PT_ENTRIES)-1:0]), .b_wvalid(1'b1),
    .b_wdata(se_rm_wdata), .b_rvalid(se_rm_rvalid), .b_rmapped(se_rm_rmapped), .b_rdata(se_rm_rdata)
  );

  assign tables_ready = pt_init_done && rm_init_done;

  // page group allocator, shared by Flashvisor (writes) and Storengine (migrations)
  localparam int unsigned NBLK = PT_ENTRIES / GROUPS_PER_BLOCK;
  logic fv_alloc_req, se_alloc_req, al_grant, reclaim_req, open_valid, blk_opened, free_valid;
  logic [$clog2(NBLK*GROUPS_PER_BLOCK)-1:0] al_ppg;
  logic [$clog2(NBLK)-1:0] open_blk, free_blk;
  logic [$clog2(NBLK+1)-1:0] avail_blocks;

  page_allocator #(.NBLK(NBLK)) u_alloc (
    .clk, .rst_n,
    .req(fv_alloc_req || se_alloc_req), .req_gc(se_alloc_req), .grant(al_grant), .ppg(al_ppg),
    .reclaim_req, .open_valid, .open_blk, .blk_opened,
    .free_valid, .free_blk, .avail_blocks
  );

  // flash request paths of Flashvisor and Storengine
  logic [NUM_CH-1:0] fv_fr_valid, fv_fr_ready, fv_fc_valid;
  logic [NUM_CH-1:0] se_fr_valid, se_fr_ready, se_fc_valid;
  flash_req_t        fv_fr, se_fr;
  logic              se_req, se_gnt, se_busy;

  flashvisor u_fv (
    .clk, .rst_n,
    .msg_valid(mq_rd_valid), .msg_ready(mq_rd_ready), .msg(mq_rd_data),
    .rsp_valid(fvr_valid), .rsp_ready(fvr_ready), .rsp(fvr),
    .pt_init_done(tables_ready),
    .pt_en(fv_pt_en), .pt_we(fv_pt_we), .pt_addr(fv_pt_addr), .pt_wdata(fv_pt_wdata),
    .pt_rvalid(fv_pt_rvalid), .pt_rmapped(fv_pt_rmapped), .pt_rdata(fv_pt_rdata),
    .rm_we(fv_rm_we), .rm_addr(fv_rm_addr), .rm_wdata(fv_rm_wdata),
    .alloc_req(fv_alloc_req), .alloc_grant(al_grant && !se_alloc_req), .alloc_ppg(PG_W'(al_ppg)),
    .fr_valid(fv_fr_valid), .fr_ready(fv_fr_ready), .fr(fv_fr), .fc_valid(fv_fc_valid),
    .se_req, .se_gnt,
    .cnt_msgs(cnt_fv_msgs), .cnt_blocked(cnt_fv_blocked), .cnt_reads(cnt_fv_reads),
    .cnt_progs(cnt_fv_progs), .cnt_alloc_wait
  );

  storengine #(.NBLK(NBLK)) u_se (
    .clk, .rst_n,
    .reclaim_req, .open_valid, .open_blk, .blk_opened,
    .gc_req(se_alloc_req), .alloc_grant(al_grant && se_alloc_req), .alloc_ppg(PG_W'(al_ppg)),
    .free_valid, .free_blk,
    .se_req, .se_gnt,
    .pt_en(se_pt_en), .pt_we(se_pt_we), .pt_addr(se_pt_addr), .pt_wdata(se_pt_wdata),
    .pt_rvalid(se_pt_rvalid), .pt_rmapped(se_pt_rmapped), .pt_rdata(se_pt_rdata),
    .rm_en(se_rm_en), .rm_we(se_rm_we), .rm_addr(se_rm_addr), .rm_wdata(se_rm_wdata),
    .rm_rvalid(se_rm_rvalid), .rm_rmapped(se_rm_rmapped), .rm_rdata(se_rm_rdata),
    .fr_valid(se_fr_valid), .fr_ready(se_fr_ready), .fr(se_fr), .fc_valid(se_fc_valid),
    .busy(se_busy), .cnt_reclaims, .cnt_migrated
  );

  // =====================================================================
  // Flash backbone: one controller per channel
  // =====================================================================
  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic       rq_valid, rq_ready, cp_valid;
    flash_req_t rq;
    flash_cpl_t cp;
    logic [PKGS_PER_CH-1:0] pkg_busy;

    assign rq_valid       = fv_fr_valid[c] || se_fr_valid[c];
    assign rq             = fv_fr_valid[c] ? fv_fr : se_fr;
    assign fv_fr_ready[c] = rq_ready;
    assign se_fr_ready[c] = rq_ready && !fv_fr_valid[c];
    assign fv_fc_valid[c] = cp_valid && !cp.tag[TAG_W-1];
    assign se_fc_valid[c] = cp_valid &&  cp.tag[TAG_W-1];

    flash_ctrl #(.QDEPTH(TQDEPTH)) u_fc (
      .net_clk(clk), .net_rst_n(rst_n),
      .req_valid(rq_valid), .req_ready(rq_ready), .req(rq),
      .cpl_valid(cp_valid), .cpl_ready(1'b1), .cpl(cp),
      .fl_clk, .fl_rst_n,
      .fl_cmd_valid(fl_cmd_valid[c]), .fl_ce(fl_ce[c]), .fl_cmd_op(fl_cmd_op[c]),
      .fl_cmd_page(fl_cmd_page[c]), .fl_cmd_ddr(fl_cmd_ddr[c]),
      .fl_rb_n(fl_rb_n[c]), .fl_fail(fl_fail[c]), .pkg_busy(pkg_busy)
    );
  end
endmodule
