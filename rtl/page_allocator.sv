// page_allocator: log-structured allocation of physical page groups for flash writes.
//
// A write never updates flash in place: each written logical page group gets a new physical
// group, the one after the group used by the previous write. This module hands those numbers
// out. Groups are taken from an open erase block in increasing order; the first META groups
// of every block are skipped because they are kept for the block's mapping metadata. When the
// open block is full the next block is opened: first the never-used blocks in increasing
// order, and once those are gone the blocks that block reclaim has returned (a FIFO).
// When only RESERVE blocks are left and the open block is full, ordinary requests stall and
// reclaim_req asks Storengine to reclaim a block (it stays low while the open block still has
// room, so a reclaim that freed space is not followed by another before that space is used); Storengine's own migration requests (req_gc) may still use the reserve,
// so reclaim can always make progress. A reserve block opened that way serves only Storengine
// until the reclaimed block comes back (free_valid); otherwise ordinary writes could use up the
// reserve before the victim is freed and leave the reclaim without space.
//
// Interface: hold req high until grant (one-cycle pulse with ppg); a grant takes one cycle
// when the open block has room and two when a block has to be opened. blk_opened pulses with
// the number of every block opened. free_valid/free_blk returns an erased block.
// The increasing allocation and the reclaim request follow the description; the block size,
// the reserve and the reuse order of reclaimed blocks are this design's choice.
module page_allocator
  import fa_pkg::*;
#(
  parameter int unsigned NBLK    = NUM_BLOCKS,
  parameter int unsigned GPB     = GROUPS_PER_BLOCK,
  parameter int unsigned META    = META_GROUPS,
  parameter int unsigned RESERVE = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          req,
  input  logic                          req_gc,
  output logic                          grant,
  output logic [$clog2(NBLK*GPB)-1:0]   ppg,
  output logic                          reclaim_req,
  output logic                          open_valid,
  output logic [$clog2(NBLK)-1:0]       open_blk,
  output logic                          blk_opened,
  input  logic                          free_valid,
  input  logic [$clog2(NBLK)-1:0]       free_blk,
  output logic [$clog2(NBLK+1)-1:0]     avail_blocks
);
  localparam int unsigned BW = $clog2(NBLK);
  localparam int unsigned OW = $clog2(GPB);
  localparam int unsigned CW = $clog2(NBLK + 1);

  logic [OW-1:0] open_off;
  logic [CW-1:0] fresh_next;        // next never-used block
  logic          fq_valid, fq_pop, fq_ready;
  logic [BW-1:0] fq_blk;
  logic [CW-1:0] fq_count;
  logic          may_open, do_open;
  logic          open_gc;           // open block is the reserve, opened for a reclaim

  hw_queue #(.WIDTH(BW), .DEPTH(NBLK)) u_freeq (
    .clk, .rst_n,
    .wr_valid(free_valid), .wr_ready(fq_ready), .wr_data(free_blk),
    .rd_valid(fq_valid), .rd_ready(fq_pop), .rd_data(fq_blk), .count(fq_count)
  );

  assign avail_blocks = CW'(NBLK) - fresh_next + fq_count;
  assign may_open     = req_gc ? (avail_blocks != '0) : (avail_blocks > CW'(RESERVE));
  assign do_open      = req && !open_valid && may_open;
  assign fq_pop       = do_open && (fresh_next == CW'(NBLK));
  assign reclaim_req  = (avail_blocks <= CW'(RESERVE)) && !open_valid;
  assign grant        = req && open_valid && (req_gc || !open_gc);
  assign ppg          = {open_blk, open_off};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_valid <= 1'b0;
      open_blk   <= '0;
      open_off   <= '0;
      fresh_next <= '0;
      blk_opened <= 1'b0;
      open_gc    <= 1'b0;
    end else begin
      blk_opened <= do_open;
      if (free_valid) open_gc <= 1'b0;
      if (do_open) begin
        open_valid <= 1'b1;
        open_gc    <= req_gc && (avail_blocks <= CW'(RESERVE));
        open_off   <= OW'(META);
        if (fresh_next != CW'(NBLK)) begin
          open_blk   <= fresh_next[BW-1:0];
          fresh_next <= fresh_next + 1'b1;
        end else begin
          open_blk   <= fq_blk;
        end
      end else if (grant) begin
        open_off <= open_off + 1'b1;
        if (open_off == OW'(GPB - 1)) open_valid <= 1'b0;
      end
    end
  end

  a_free_not_full: assert property (@(posedge clk) disable iff (!rst_n) free_valid |-> fq_ready);
endmodule
