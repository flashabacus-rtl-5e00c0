// storengine: background block reclaim for the flash backbone.
//
// Flashvisor only ever appends: every write takes a fresh physical page group and leaves the
// old copy stale. When the allocator runs short of erased blocks it raises reclaim_req and
// Storengine frees one block:
//   1. victim selection without any search: a round-robin pointer walks the block numbers
//      from the start of the flash address space to the end and takes the next block that is
//      in use and is not the allocator's open block;
//   2. for every data group of the victim (the first META groups hold metadata), the reverse
//      map gives the logical group that was written there, and the page table tells whether
//      that logical group still points to this physical group (valid) or has moved (stale);
//   3. a valid group is migrated: a new group is allocated (migrations may use the allocator's
//      reserve), the NUM_CH channel pages are read into a 64 KB staging area of DDR3L and
//      programmed into the new group; then, holding Flashvisor off (se_req/se_gnt), the page
//      table entry is re-read and switched to the new group only if it still points to the old
//      one, so a write that Flashvisor made meanwhile is never undone;
//   4. the victim is erased on every channel (issued while holding Flashvisor off, so that it
//      is queued behind any read Flashvisor issued before) and returned to the allocator.
// Flash requests carry tag bit TAG_W-1 = 1. One flash operation set is in flight at a time.
//
// Follows the description: reclaim on demand, round-robin victim from the used blocks,
// migration of valid pages, return of the victim to the free pool. Own choices: the reverse
// map used to find each group's owner (the description reads mapping entries back from the
// block's first pages), the compare-before-commit hand-over, the staging area. The periodic
// dump of the scratchpad tables to flash is not part of this module.
module storengine
  import fa_pkg::*;
#(
  parameter int unsigned NBLK      = NUM_BLOCKS,
  parameter int unsigned GPB       = GROUPS_PER_BLOCK,
  parameter int unsigned META      = META_GROUPS,
  parameter logic [DDR_W-1:0] STAGE_DDR = DDR_W'(32'h3FFF_0000)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // allocator
  input  logic                    reclaim_req,
  input  logic                    open_valid,
  input  logic [$clog2(NBLK)-1:0] open_blk,
  input  logic                    blk_opened,
  output logic                    gc_req,
  input  logic                    alloc_grant,
  input  logic [PG_W-1:0]         alloc_ppg,
  output logic                    free_valid,
  output logic [$clog2(NBLK)-1:0] free_blk,
  // Flashvisor hand-over
  output logic                    se_req,
  input  logic                    se_gnt,
  // page table, port B
  output logic                    pt_en,
  output logic                    pt_we,
  output logic [PG_W-1:0]         pt_addr,
  output logic [PG_W-1:0]         pt_wdata,
  input  logic                    pt_rvalid,
  input  logic                    pt_rmapped,
  input  logic [PG_W-1:0]         pt_rdata,
  // reverse map, port B
  output logic                    rm_en,
  output logic                    rm_we,
  output logic [PG_W-1:0]         rm_addr,
  output logic [PG_W-1:0]         rm_wdata,
  input  logic                    rm_rvalid,
  input  logic                    rm_rmapped,
  input  logic [PG_W-1:0]         rm_rdata,
  // flash channel controllers
  output logic [NUM_CH-1:0]       fr_valid,
  input  logic [NUM_CH-1:0]       fr_ready,
  output flash_req_t              fr,
  input  logic [NUM_CH-1:0]       fc_valid,
  // status
  output logic                    busy,
  output logic [31:0]             cnt_reclaims,
  output logic [31:0]             cnt_migrated
);
  localparam int unsigned BW = $clog2(NBLK);
  localparam int unsigned OW = $clog2(GPB);

  typedef enum logic [4:0] {
    S_IDLE, S_PICK, S_RM_RD, S_RM_WAIT, S_PT_RD, S_PT_WAIT, S_ALLOC,
    S_RD_ISSUE, S_RD_WAIT, S_WR_ISSUE, S_WR_WAIT, S_LOCK, S_CAS_WAIT,
    S_COMMIT, S_NEXT, S_ER_LOCK, S_ER_ISSUE, S_ER_WAIT, S_FREE
  } state_e;

  state_e          state;
  logic [NBLK-1:0] used;
  logic [BW-1:0]   rr, victim;
  logic [OW-1:0]   off;
  logic [PG_W-1:0] old_ppg, new_ppg, lpg;
  logic [CH_W:0]   c;
  logic [7:0]      outstanding;

  assign old_ppg = {victim, off};
  assign busy    = (state != S_IDLE);

  // ---------------- flash requests ----------------
  logic [PG_W-1:0] tgt_ppg;
  always_comb begin
    unique case (state)
      S_WR_ISSUE: tgt_ppg = new_ppg;
      S_ER_ISSUE: tgt_ppg = {victim, OW'(0)};
      default:    tgt_ppg = old_ppg;
    endcase
  end
  assign fr.tag      = {1'b1, (TAG_W-1)'(c)};
  assign fr.op       = (state == S_WR_ISSUE) ? FOP_PROG : (state == S_ER_ISSUE) ? FOP_ERASE : FOP_READ;
  assign fr.pkg      = ppg_pkg(tgt_ppg);
  assign fr.page     = ppg_page(tgt_ppg);
  assign fr.ddr_addr = STAGE_DDR + DDR_W'(c[CH_W-1:0]) * DDR_W'(CH_PAGE_BYTES);

  logic issuing, issued;
  assign issuing = (state == S_RD_ISSUE || state == S_WR_ISSUE || state == S_ER_ISSUE)
                   && c != (CH_W+1)'(NUM_CH);
  always_comb begin
    fr_valid = '0;
    if (issuing) fr_valid[c[CH_W-1:0]] = 1'b1;
  end
  assign issued = issuing && fr_ready[c[CH_W-1:0]];

  logic [2:0] ncpl;
  always_comb begin
    ncpl = '0;
    for (int k = 0; k < NUM_CH; k++) ncpl = ncpl + (fc_valid[k] ? 3'd1 : 3'd0);
  end

  // ---------------- tables ----------------
  assign gc_req   = (state == S_ALLOC);
  assign se_req   = (state == S_LOCK || state == S_CAS_WAIT || state == S_COMMIT
                     || state == S_ER_LOCK || state == S_ER_ISSUE);
  assign rm_en    = (state == S_RM_RD) || (state == S_COMMIT);
  assign rm_we    = (state == S_COMMIT);
  assign rm_addr  = (state == S_COMMIT) ? new_ppg : old_ppg;
  assign rm_wdata = lpg;
  assign pt_en    = (state == S_PT_RD) || (state == S_LOCK && se_gnt) || (state == S_COMMIT);
  assign pt_we    = (state == S_COMMIT);
  assign pt_addr  = lpg;
  assign pt_wdata = new_ppg;

  assign free_blk = victim;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      used         <= '0;
      rr           <= '0;
      victim       <= '0;
      off          <= '0;
      new_ppg      <= '0;
      lpg          <= '0;
      c            <= '0;
      outstanding  <= '0;
      free_valid   <= 1'b0;
      cnt_reclaims <= '0;
      cnt_migrated <= '0;
    end else begin
      free_valid  <= 1'b0;
      outstanding <= outstanding + (issued ? 8'd1 : 8'd0) - 8'(ncpl);
      if (issued) c <= c + 1'b1;
      if (blk_opened) used[open_blk] <= 1'b1;

      unique case (state)
        S_IDLE: if (reclaim_req && !free_valid) state <= S_PICK;
        S_PICK: begin
          rr <= (rr == BW'(NBLK - 1)) ? '0 : rr + 1'b1;
          if (used[rr] && !(open_valid && open_blk == rr)) begin
            victim <= rr;
            off    <= OW'(META);
            state  <= S_RM_RD;
          end else if (!reclaim_req) begin
            state <= S_IDLE;
          end
        end
        S_RM_RD:   state <= S_RM_WAIT;
        S_RM_WAIT: if (rm_rvalid) begin
          lpg   <= rm_rdata;
          state <= rm_rmapped ? S_PT_RD : S_NEXT;
        end
        S_PT_RD:   state <= S_PT_WAIT;
        S_PT_WAIT: if (pt_rvalid) state <= (pt_rmapped && pt_rdata == old_ppg) ? S_ALLOC : S_NEXT;
        S_ALLOC: if (alloc_grant) begin
          new_ppg <= alloc_ppg;
          c       <= '0;
          state   <= S_RD_ISSUE;
        end
        S_RD_ISSUE: if (c == (CH_W+1)'(NUM_CH)) state <= S_RD_WAIT;
        S_RD_WAIT:  if (outstanding == '0) begin
          c     <= '0;
          state <= S_WR_ISSUE;
        end
        S_WR_ISSUE: if (c == (CH_W+1)'(NUM_CH)) state <= S_WR_WAIT;
        S_WR_WAIT:  if (outstanding == '0) state <= S_LOCK;
        S_LOCK:     if (se_gnt) state <= S_CAS_WAIT;          // page-table re-read issued
        S_CAS_WAIT: if (pt_rvalid) begin
          if (pt_rmapped && pt_rdata == old_ppg) begin
            state <= S_COMMIT;
          end else begin
            state <= S_NEXT;                                  // rewritten meanwhile
          end
        end
        S_COMMIT: begin
          cnt_migrated <= cnt_migrated + 1'b1;
          state        <= S_NEXT;
        end
        S_NEXT: begin
          if (off == OW'(GPB - 1)) begin
            state <= S_ER_LOCK;
          end else begin
            off   <= off + 1'b1;
            state <= S_RM_RD;
          end
        end
        S_ER_LOCK: if (se_gnt) begin
          c     <= '0;
          state <= S_ER_ISSUE;
        end
        S_ER_ISSUE: if (c == (CH_W+1)'(NUM_CH)) state <= S_ER_WAIT;
        S_ER_WAIT:  if (outstanding == '0) state <= S_FREE;
        S_FREE: begin
          free_valid   <= 1'b1;
          used[victim] <= 1'b0;
          cnt_reclaims <= cnt_reclaims + 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_tables_only_with_grant: assert property (@(posedge clk) disable iff (!rst_n)
                                             pt_we |-> se_gnt);
endmodule
