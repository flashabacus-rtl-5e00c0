// page_table: mapping table held in the scratchpad, as a dual-port memory array.
//
// Flashvisor keeps its whole page mapping table in the on-chip scratchpad so that a lookup
// or an update costs no flash access: one entry per logical page group, holding the physical
// page group it currently lives in (2 MB for 32 GB of flash with 64 KB groups). The same module,
// with the roles of the two numbers swapped, holds the reverse map that block reclaim uses to
// find which logical group owns a physical one.
//
// Each entry is a valid bit and a DATA_W-bit value. Two independent ports (A for Flashvisor,
// B for Storengine) can each read or write one entry per cycle; a read returns its data one
// cycle later (rd_valid), like a synchronous SRAM. If both ports write the same entry in one
// cycle, port A wins. After reset an initialisation engine walks the array and clears every
// valid bit, one entry per cycle; init_done rises when it has finished and requests must wait
// for it. The table contents and the one-entry-per-group layout follow the description; the
// valid bit, the two ports and the clearing walk are this design's choice.
module page_table #(
  parameter int unsigned ENTRIES = fa_pkg::PAGE_GROUPS,
  parameter int unsigned DATA_W  = fa_pkg::PG_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       init_done,
  // port A
  input  logic                       a_en,
  input  logic                       a_we,
  input  logic [$clog2(ENTRIES)-1:0] a_addr,
  input  logic                       a_wvalid,
  input  logic [DATA_W-1:0]          a_wdata,
  output logic                       a_rvalid,   // read data valid (one cycle after a read)
  output logic                       a_rmapped,  // entry's valid bit
  output logic [DATA_W-1:0]          a_rdata,
  // port B
  input  logic                       b_en,
  input  logic                       b_we,
  input  logic [$clog2(ENTRIES)-1:0] b_addr,
  input  logic                       b_wvalid,
  input  logic [DATA_W-1:0]          b_wdata,
  output logic                       b_rvalid,
  output logic                       b_rmapped,
  output logic [DATA_W-1:0]          b_rdata
);
  localparam int unsigned AW = $clog2(ENTRIES);

  logic [DATA_W:0] mem [ENTRIES];   // {valid, value}
  logic [AW-1:0]   init_addr;
  logic            initing;

  assign init_done = !initing;

  // Initialisation walk, then normal two-port operation.
  always_ff @(posedge clk) begin
    if (initing) begin
      mem[init_addr] <= '0;
    end else begin
      if (b_en && b_we && !(a_en && a_we && a_addr == b_addr)) mem[b_addr] <= {b_wvalid, b_wdata};
      if (a_en && a_we) mem[a_addr] <= {a_wvalid, a_wdata};
    end
  end

  always_ff @(posedge clk) begin
    {a_rmapped, a_rdata} <= mem[a_addr];
    {b_rmapped, b_rdata} <= mem[b_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      initing   <= 1'b1;
      init_addr <= '0;
      a_rvalid  <= 1'b0;
      b_rvalid  <= 1'b0;
    end else begin
      if (initing) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == AW'(ENTRIES - 1)) initing <= 1'b0;
      end
      a_rvalid <= !initing && a_en && !a_we;
      b_rvalid <= !initing && b_en && !b_we;
    end
  end

  a_no_access_during_init: assert property (@(posedge clk) disable iff (!rst_n)
                                            initing |-> !(a_en || b_en));
endmodule
