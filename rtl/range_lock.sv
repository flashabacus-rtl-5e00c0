// range_lock: protects flash-mapped data sections of concurrently running kernels.
//
// Before a kernel's data section is mapped to flash, its page range [start, last] is checked
// against every section currently mapped by other kernels. A read mapping is refused if it
// overlaps a range mapped for writing, and a write mapping is refused if it overlaps a range
// mapped for reading; this design also refuses a write that overlaps another kernel's write,
// since two writers to one range are no safer than a reader and a writer. Overlaps with a
// range held by the same kernel are allowed. An accepted mapping is recorded as
// {start, last, write, owner}; releasing it by its id (checked against the owner) frees it.
//
// The rule comes from the description; the description keeps the ranges in a red-black tree
// keyed by start page, searched in software. Here the same records sit in ENTRIES registers
// that are all compared in parallel, so a lookup takes one cycle instead of a tree walk and
// the number of simultaneously mapped sections is bounded by ENTRIES (own choice: 32).
//
// Timing: acq_valid or rel_valid (not both in one cycle) is answered one cycle later by
// rsp_valid with rsp_grant / rsp_conflict / rsp_full and the entry id.
module range_lock
  import fa_pkg::*;
#(
  parameter int unsigned ENTRIES = LOCK_ENTRIES,
  parameter int unsigned ADDR_W  = FA_W,
  parameter int unsigned OWN_W   = LWP_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        acq_valid,
  input  logic [ADDR_W-1:0]           acq_start,
  input  logic [ADDR_W-1:0]           acq_last,
  input  logic                        acq_write,
  input  logic [OWN_W-1:0]            acq_owner,
  input  logic                        rel_valid,
  input  logic [$clog2(ENTRIES)-1:0]  rel_id,
  input  logic [OWN_W-1:0]            rel_owner,
  output logic                        rsp_valid,
  output logic                        rsp_grant,     // acquire accepted / release done
  output logic                        rsp_conflict,  // acquire refused: overlapping range
  output logic                        rsp_full,      // acquire refused: no free entry; or bad release
  output logic [$clog2(ENTRIES)-1:0]  rsp_id,
  output logic [$clog2(ENTRIES+1)-1:0] held
);
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] start;
    logic [ADDR_W-1:0] last;
    logic              write;
    logic [OWN_W-1:0]  owner;
  } lock_t;

  lock_t tbl [ENTRIES];

  logic [ENTRIES-1:0] hit;
  logic               conflict, have_free;
  logic [IW-1:0]      free_id;

  always_comb begin
    conflict  = 1'b0;
    have_free = 1'b0;
    free_id   = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      hit[i] = tbl[i].valid && (tbl[i].owner != acq_owner)
               && (acq_start <= tbl[i].last) && (tbl[i].start <= acq_last)
               && (tbl[i].write || acq_write);
      conflict = conflict | hit[i];
    end
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!tbl[i].valid) begin
        have_free = 1'b1;
        free_id   = IW'(i);
      end
    end
  end

  always_comb begin
    held = '0;
    for (int i = 0; i < ENTRIES; i++) held = held + ($clog2(ENTRIES+1))'(tbl[i].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
      rsp_valid    <= 1'b0;
      rsp_grant    <= 1'b0;
      rsp_conflict <= 1'b0;
      rsp_full     <= 1'b0;
      rsp_id       <= '0;
    end else begin
      rsp_valid    <= acq_valid || rel_valid;
      rsp_grant    <= 1'b0;
      rsp_conflict <= 1'b0;
      rsp_full     <= 1'b0;
      if (acq_valid) begin
        if (conflict) begin
          rsp_conflict <= 1'b1;
        end else if (!have_free) begin
          rsp_full <= 1'b1;
        end else begin
          rsp_grant     <= 1'b1;
          rsp_id        <= free_id;
          tbl[free_id]  <= '{valid: 1'b1, start: acq_start, last: acq_last,
                             write: acq_write, owner: acq_owner};
        end
      end else if (rel_valid) begin
        rsp_id <= rel_id;
        if (tbl[rel_id].valid && tbl[rel_id].owner == rel_owner) begin
          rsp_grant          <= 1'b1;
          tbl[rel_id].valid  <= 1'b0;
        end else begin
          rsp_full <= 1'b1;
        end
      end
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(acq_valid && rel_valid));
  a_ordered: assert property (@(posedge clk) disable iff (!rst_n) acq_valid |-> acq_start <= acq_last);
endmodule
