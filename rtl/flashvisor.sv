// flashvisor: flash virtualisation engine serving the kernels' mapping messages.
//
// A kernel maps a data section of DDR3L onto flash by sending one message: the request type,
// the DDR3L pointer of the section, the flash-backbone address and the length (in channel
// pages of 16 KB). Flashvisor handles one message at a time:
//   1. range-lock inquiry: the page range [addr, addr+len-1] is locked for reading or writing
//      (range_lock, instantiated here); a conflicting request is answered BLOCKED at once;
//   2. for each channel page i: address a = addr+i, channel = a mod NUM_CH, logical page group
//      lpg = a div NUM_CH;
//      - read: look the group up in the page table; the physical group is split into
//        package = ppg div PAGES_PER_PKG and page = ppg mod PAGES_PER_PKG, and a read request
//        goes to that channel's controller with DDR3L address ptr + i*16 KB. A group that was
//        never written has no flash copy and is skipped;
//      - write: the first page of every new logical group asks the allocator for a fresh
//        physical group (log-structured: the next one after the last write), and the page
//        table and reverse map are updated before the program requests are issued;
//   3. once every issued request has completed, the kernel gets DONE with its lock id.
// An UNMAP message releases the lock. Responses go to rsp (the kernel's reply queue).
//
// Flashvisor also lets Storengine in: when Storengine raises se_req, Flashvisor finishes or
// parks at a safe point (idle, or waiting for a free page group) and answers se_gnt; while
// se_gnt is high it touches neither the mapping tables nor the allocator. Requests Flashvisor
// issues carry tag bit TAG_W-1 = 0; completions are only counted, one per channel per cycle.
//
// Follows the description: message contents, the divide-by-channels and divide-by-pages-per-
// package translation, the increasing allocation, the lock inquiry before translation.
// Own choices: the address unit, one message at a time, skipping unwritten groups, and that a
// write covering only part of a group leaves the group's other channel pages unwritten.
module flashvisor
  import fa_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // kernel messages and responses
  input  logic                    msg_valid,
  output logic                    msg_ready,
  input  fv_msg_t                 msg,
  output logic                    rsp_valid,
  input  logic                    rsp_ready,
  output fv_rsp_t                 rsp,
  // page table, port A
  input  logic                    pt_init_done,
  output logic                    pt_en,
  output logic                    pt_we,
  output logic [PG_W-1:0]         pt_addr,
  output logic [PG_W-1:0]         pt_wdata,
  input  logic                    pt_rvalid,
  input  logic                    pt_rmapped,
  input  logic [PG_W-1:0]         pt_rdata,
  // reverse map (physical -> logical), port A, written only
  output logic                    rm_we,
  output logic [PG_W-1:0]         rm_addr,
  output logic [PG_W-1:0]         rm_wdata,
  // page group allocator
  output logic                    alloc_req,
  input  logic                    alloc_grant,
  input  logic [PG_W-1:0]         alloc_ppg,
  // flash channel controllers
  output logic [NUM_CH-1:0]       fr_valid,
  input  logic [NUM_CH-1:0]       fr_ready,
  output flash_req_t              fr,
  input  logic [NUM_CH-1:0]       fc_valid,
  // Storengine hand-over
  input  logic                    se_req,
  output logic                    se_gnt,
  // event counters
  output logic [31:0]             cnt_msgs,
  output logic [31:0]             cnt_blocked,
  output logic [31:0]             cnt_reads,
  output logic [31:0]             cnt_progs,
  output logic [31:0]             cnt_alloc_wait
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOCK, S_LOCK_WAIT, S_PAGE, S_PT_WAIT, S_ALLOC, S_MAP_UPD,
    S_ISSUE, S_DRAIN, S_UNLOCK, S_UNLOCK_WAIT, S_RESP
  } state_e;

  state_e            state;
  fv_msg_t           m;
  logic [LEN_W-1:0]  idx;
  logic [15:0]       outstanding;
  logic [LOCK_W-1:0] lock_id;
  logic [PG_W-1:0]   cur_lpg, cur_ppg;
  logic              have_group;
  logic [TAG_W-2:0]  tag_ctr;

  logic [FA_W-1:0]   a;
  logic [CH_W-1:0]   ch;
  logic [PG_W-1:0]   lpg;
  assign a   = m.flash_addr + FA_W'(idx);
  assign ch  = CH_W'(a % FA_W'(NUM_CH));
  assign lpg = PG_W'(a / FA_W'(NUM_CH));

  // ---------------- range lock ----------------
  logic             rl_acq, rl_rel, rl_rsp_valid, rl_grant, rl_conflict, rl_full;
  logic [LOCK_W-1:0] rl_id;
  logic [$clog2(LOCK_ENTRIES+1)-1:0] rl_held;

  assign rl_acq = (state == S_LOCK);
  assign rl_rel = (state == S_UNLOCK);

  range_lock u_lock (
    .clk, .rst_n,
    .acq_valid(rl_acq), .acq_start(m.flash_addr), .acq_last(m.flash_addr + m.npages - 1'b1),
    .acq_write(m.kind == MSG_MAP_WR), .acq_owner(m.src),
    .rel_valid(rl_rel), .rel_id(m.lock_id), .rel_owner(m.src),
    .rsp_valid(rl_rsp_valid), .rsp_grant(rl_grant), .rsp_conflict(rl_conflict),
    .rsp_full(rl_full), .rsp_id(rl_id), .held(rl_held)
  );

  // ---------------- outputs ----------------
  assign msg_ready = (state == S_IDLE) && !se_req && !se_gnt && pt_init_done;
  assign alloc_req = (state == S_ALLOC) && !se_req && !se_gnt;

  assign pt_en    = (state == S_PAGE && idx != m.npages && m.kind == MSG_MAP_RD) || (state == S_MAP_UPD);
  assign pt_we    = (state == S_MAP_UPD);
  assign pt_addr  = (state == S_MAP_UPD) ? cur_lpg : lpg;
  assign pt_wdata = cur_ppg;
  assign rm_we    = (state == S_MAP_UPD);
  assign rm_addr  = cur_ppg;
  assign rm_wdata = cur_lpg;

  assign fr.tag      = {1'b0, tag_ctr};
  assign fr.op       = (m.kind == MSG_MAP_WR) ? FOP_PROG : FOP_READ;
  assign fr.pkg      = ppg_pkg(cur_ppg);
  assign fr.page     = ppg_page(cur_ppg);
  assign fr.ddr_addr = m.ddr_ptr + DDR_W'(idx) * DDR_W'(CH_PAGE_BYTES);
  always_comb begin
    fr_valid = '0;
    if (state == S_ISSUE) fr_valid[ch] = 1'b1;
  end

  logic [2:0] ncpl;
  always_comb begin
    ncpl = '0;
    for (int c = 0; c < NUM_CH; c++) ncpl = ncpl + (fc_valid[c] ? 3'd1 : 3'd0);
  end

  logic issued;
  assign issued = (state == S_ISSUE) && fr_ready[ch];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      m              <= '0;
      idx            <= '0;
      outstanding    <= '0;
      lock_id        <= '0;
      cur_lpg        <= '0;
      cur_ppg        <= '0;
      have_group     <= 1'b0;
      tag_ctr        <= '0;
      rsp_valid      <= 1'b0;
      rsp            <= '0;
      se_gnt         <= 1'b0;
      cnt_msgs       <= '0;
      cnt_blocked    <= '0;
      cnt_reads      <= '0;
      cnt_progs      <= '0;
      cnt_alloc_wait <= '0;
    end else begin
      outstanding <= outstanding + (issued ? 16'd1 : 16'd0) - 16'(ncpl);
      if (issued) tag_ctr <= tag_ctr + 1'b1;

      // Storengine hand-over at safe points only.
      if (se_gnt) se_gnt <= se_req;
      else if (se_req && (state == S_IDLE || state == S_ALLOC)) se_gnt <= 1'b1;

      unique case (state)
        S_IDLE: if (msg_valid && msg_ready) begin
          m        <= msg;
          cnt_msgs <= cnt_msgs + 1'b1;
          state    <= (msg.kind == MSG_UNMAP) ? S_UNLOCK : S_LOCK;
        end
        S_LOCK:      state <= S_LOCK_WAIT;
        S_LOCK_WAIT: if (rl_rsp_valid) begin
          rsp.dst     <= m.src;
          rsp.lock_id <= rl_id;
          if (rl_grant) begin
            lock_id    <= rl_id;
            idx        <= '0;
            have_group <= 1'b0;
            state      <= S_PAGE;
          end else begin
            rsp.status  <= rl_conflict ? RSP_BLOCKED : RSP_ERROR;
            cnt_blocked <= cnt_blocked + (rl_conflict ? 32'd1 : 32'd0);
            rsp_valid   <= 1'b1;
            state       <= S_RESP;
          end
        end
        S_PAGE: begin
          if (idx == m.npages) begin
            state <= S_DRAIN;
          end else if (m.kind == MSG_MAP_RD) begin
            state <= S_PT_WAIT;
          end else if (!have_group || lpg != cur_lpg) begin
            cur_lpg <= lpg;
            state   <= S_ALLOC;
          end else begin
            state <= S_ISSUE;
          end
        end
        S_PT_WAIT: if (pt_rvalid) begin
          if (pt_rmapped) begin
            cur_ppg <= pt_rdata;
            state   <= S_ISSUE;
          end else begin
            idx   <= idx + 1'b1;         // never written: nothing to fetch
            state <= S_PAGE;
          end
        end
        S_ALLOC: begin
          if (alloc_req && alloc_grant) begin
            cur_ppg    <= alloc_ppg;
            have_group <= 1'b1;
            state      <= S_MAP_UPD;
          end else begin
            cnt_alloc_wait <= cnt_alloc_wait + 1'b1;
          end
        end
        S_MAP_UPD: state <= S_ISSUE;
        S_ISSUE: if (issued) begin
          idx <= idx + 1'b1;
          if (m.kind == MSG_MAP_RD) cnt_reads <= cnt_reads + 1'b1;
          else                      cnt_progs <= cnt_progs + 1'b1;
          state <= S_PAGE;
        end
        S_DRAIN: if (outstanding == '0 && !(|fc_valid)) begin
          rsp.dst     <= m.src;
          rsp.status  <= RSP_DONE;
          rsp.lock_id <= lock_id;
          rsp_valid   <= 1'b1;
          state       <= S_RESP;
        end
        S_UNLOCK:      state <= S_UNLOCK_WAIT;
        S_UNLOCK_WAIT: if (rl_rsp_valid) begin
          rsp.dst     <= m.src;
          rsp.lock_id <= m.lock_id;
          rsp.status  <= rl_grant ? RSP_DONE : RSP_ERROR;
          rsp_valid   <= 1'b1;
          state       <= S_RESP;
        end
        S_RESP: if (rsp_ready) begin
          rsp_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   outstanding == '0 |-> !(|fc_valid) || issued);
endmodule
