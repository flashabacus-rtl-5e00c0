// o3_scheduler: out-of-order intra-kernel scheduler over the multi-app execution chain.
//
// A kernel is a sequence of microblocks that must run one after the other; a microblock is
// split into screens that work on disjoint parts of the data and may run on different worker
// processors at once. The scheduler keeps every resident kernel in the execution chain: per
// kernel slot, the microblock list in order, and per screen the worker that runs it and its
// status (waiting, running, done). Its one rule is that no screen of a microblock starts
// before every screen of the previous microblock of the same kernel has finished. Within that
// rule it is out of order: whenever a worker is idle it takes the oldest kernel that has a
// screen ready to start, and if the oldest has none (its current microblock is fully issued
// and still running, for instance a serial microblock of one screen) it borrows a screen from a
// younger kernel, across kernel and application boundaries. cnt_borrow counts such dispatches.
//
// Interface: the host submits a kernel descriptor (sub_*; one cycle, accepted while a slot is
// free). A dispatch is offered on launch_* (worker, microblock boot address, screen identity)
// and taken when the launcher is ready. Workers report a finished screen on done_* (one per
// cycle, from the completion queue). When the last screen of the last microblock finishes,
// kdone pulses with the kernel's id and its slot is freed.
// Timing: one dispatch and one completion per cycle; a completion frees its worker for a
// dispatch in the next cycle; a finished microblock releases the next one in the next cycle.
//
// Follows the description: microblocks, screens, the dependency rule, the chain's per-screen
// LWP number and status, borrowing screens from other kernels for idle workers, completion
// reports through a hardware queue. Own choices: oldest-first priority among kernels, lowest
// numbered idle worker first, and the chain being a fixed array of MAX_APPS slots.
module o3_scheduler
  import fa_pkg::*;
#(
  parameter int unsigned NW = NUM_WORKERS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host kernel submission
  input  logic                 sub_valid,
  output logic                 sub_ready,
  input  kernel_desc_t         sub,
  // dispatch to the launcher
  output logic                 launch_valid,
  input  logic                 launch_ready,
  output logic [$clog2(NW)-1:0] launch_worker,
  output logic [BOOT_W-1:0]    launch_boot,
  output screen_arg_t          launch_arg,
  // screen completions from workers
  input  logic                 done_valid,
  input  logic [$clog2(NW)-1:0] done_worker,
  // kernel completion to the host
  output logic                 kdone_valid,
  output logic [KID_W-1:0]     kdone_kid,
  // status
  output logic [NW-1:0]        worker_busy,
  output logic [SLOT_W:0]      resident,
  output logic [31:0]          cnt_dispatch,
  output logic [31:0]          cnt_borrow
);
  localparam int unsigned WW = $clog2(NW);

  // ---------------- execution chain ----------------
  logic         [MAX_APPS-1:0] sl_valid;
  kernel_desc_t                sl_desc   [MAX_APPS];
  logic [31:0]                 sl_seq    [MAX_APPS];
  logic [MB_W-1:0]             sl_cur    [MAX_APPS];
  logic [SC_W:0]               sl_issued [MAX_APPS];
  logic [SC_W:0]               sl_done   [MAX_APPS];
  scr_status_e                 scr_st    [MAX_APPS][MAX_MBLKS][MAX_SCREENS];
  logic [WW-1:0]               scr_lwp   [MAX_APPS][MAX_MBLKS][MAX_SCREENS];
  logic [31:0]                 seq_ctr;

  // per-worker assignment
  logic [SLOT_W-1:0] wk_slot [NW];
  logic [MB_W-1:0]   wk_mblk [NW];
  logic [SC_W-1:0]   wk_scr  [NW];

  // ---------------- free slot for submission ----------------
  logic              have_free;
  logic [SLOT_W-1:0] free_slot;
  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    for (int s = MAX_APPS - 1; s >= 0; s--) begin
      if (!sl_valid[s]) begin
        have_free = 1'b1;
        free_slot = SLOT_W'(s);
      end
    end
  end
  assign sub_ready = have_free;

  // ---------------- pick: oldest kernel with a ready screen ----------------
  logic              found, any_valid;
  logic [SLOT_W-1:0] pick, oldest;
  logic [31:0]       pick_seq, oldest_seq;
  always_comb begin
    found      = 1'b0;
    any_valid  = 1'b0;
    pick       = '0;
    oldest     = '0;
    pick_seq   = '0;
    oldest_seq = '0;
    for (int s = 0; s < MAX_APPS; s++) begin
      if (sl_valid[s]) begin
        if (!any_valid || sl_seq[s] < oldest_seq) begin
          any_valid  = 1'b1;
          oldest     = SLOT_W'(s);
          oldest_seq = sl_seq[s];
        end
        if (sl_issued[s] < sl_desc[s].n_screens[sl_cur[s]]
            && (!found || sl_seq[s] < pick_seq)) begin
          found    = 1'b1;
          pick     = SLOT_W'(s);
          pick_seq = sl_seq[s];
        end
      end
    end
  end

  // ---------------- pick: lowest idle worker ----------------
  logic          have_idle;
  logic [WW-1:0] idle_w;
  always_comb begin
    have_idle = 1'b0;
    idle_w    = '0;
    for (int w = NW - 1; w >= 0; w--) begin
      if (!worker_busy[w]) begin
        have_idle = 1'b1;
        idle_w    = WW'(w);
      end
    end
  end

  assign launch_valid      = found && have_idle;
  assign launch_worker     = idle_w;
  assign launch_boot       = sl_desc[pick].boot_addr[sl_cur[pick]];
  assign launch_arg.slot   = pick;
  assign launch_arg.mblk   = sl_cur[pick];
  assign launch_arg.screen = SC_W'(sl_issued[pick]);

  logic dispatch;
  assign dispatch = launch_valid && launch_ready;

  always_comb begin
    resident = '0;
    for (int s = 0; s < MAX_APPS; s++) resident = resident + (SLOT_W+1)'(sl_valid[s]);
  end

  // ---------------- state update ----------------
  logic [SLOT_W-1:0] ds;
  logic [MB_W-1:0]   dm;
  logic [SC_W-1:0]   dc;
  assign ds = wk_slot[done_worker];
  assign dm = wk_mblk[done_worker];
  assign dc = wk_scr[done_worker];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sl_valid     <= '0;
      seq_ctr      <= '0;
      worker_busy  <= '0;
      kdone_valid  <= 1'b0;
      kdone_kid    <= '0;
      cnt_dispatch <= '0;
      cnt_borrow   <= '0;
      for (int s = 0; s < MAX_APPS; s++) begin
        sl_desc[s]   <= '0;
        sl_seq[s]    <= '0;
        sl_cur[s]    <= '0;
        sl_issued[s] <= '0;
        sl_done[s]   <= '0;
        for (int b = 0; b < MAX_MBLKS; b++)
          for (int k = 0; k < MAX_SCREENS; k++) begin
            scr_st[s][b][k]  <= SCR_WAIT;
            scr_lwp[s][b][k] <= '0;
          end
      end
      for (int w = 0; w < NW; w++) begin
        wk_slot[w] <= '0;
        wk_mblk[w] <= '0;
        wk_scr[w]  <= '0;
      end
    end else begin
      kdone_valid <= 1'b0;

      // submission: a new kernel enters the chain
      if (sub_valid && sub_ready) begin
        sl_valid[free_slot]  <= 1'b1;
        sl_desc[free_slot]   <= sub;
        sl_seq[free_slot]    <= seq_ctr;
        sl_cur[free_slot]    <= '0;
        sl_issued[free_slot] <= '0;
        sl_done[free_slot]   <= '0;
        for (int b = 0; b < MAX_MBLKS; b++)
          for (int k = 0; k < MAX_SCREENS; k++) scr_st[free_slot][b][k] <= SCR_WAIT;
        seq_ctr <= seq_ctr + 1'b1;
      end

      // dispatch one screen
      if (dispatch) begin
        worker_busy[idle_w]                                <= 1'b1;
        wk_slot[idle_w]                                    <= pick;
        wk_mblk[idle_w]                                    <= sl_cur[pick];
        wk_scr[idle_w]                                     <= SC_W'(sl_issued[pick]);
        scr_st[pick][sl_cur[pick]][SC_W'(sl_issued[pick])]  <= SCR_RUN;
        scr_lwp[pick][sl_cur[pick]][SC_W'(sl_issued[pick])] <= idle_w;
        sl_issued[pick]                                    <= sl_issued[pick] + 1'b1;
        cnt_dispatch                                       <= cnt_dispatch + 1'b1;
        if (pick != oldest) cnt_borrow <= cnt_borrow + 1'b1;
      end

      // completion of one screen
      if (done_valid && worker_busy[done_worker]) begin
        worker_busy[done_worker] <= 1'b0;
        scr_st[ds][dm][dc]       <= SCR_DONE;
        if (sl_done[ds] + 1'b1 == sl_desc[ds].n_screens[dm]) begin
          if ((MB_W+1)'(dm) + 1'b1 == sl_desc[ds].n_mblks) begin
            sl_valid[ds] <= 1'b0;               // kernel finished
            kdone_valid  <= 1'b1;
            kdone_kid    <= sl_desc[ds].kid;
          end else begin
            sl_cur[ds]    <= dm + 1'b1;          // release the next microblock
            sl_issued[ds] <= '0;
            sl_done[ds]   <= '0;
          end
        end else begin
          sl_done[ds] <= sl_done[ds] + 1'b1;
        end
      end
    end
  end

  // A screen may only start when every screen of the previous microblock has finished.
  a_dependency: assert property (@(posedge clk) disable iff (!rst_n)
    dispatch && sl_cur[pick] != '0 |-> scr_st[pick][sl_cur[pick] - 1'b1][0] == SCR_DONE);
  a_done_from_busy: assert property (@(posedge clk) disable iff (!rst_n)
    done_valid |-> worker_busy[done_worker]);
  a_sub_sane: assert property (@(posedge clk) disable iff (!rst_n)
    sub_valid |-> sub.n_mblks != '0 && sub.n_mblks <= (MB_W+1)'(MAX_MBLKS));
endmodule
