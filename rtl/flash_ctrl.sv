// flash_ctrl: controller of one flash channel (the FPGA side of the flash backbone).
//
// One controller sits on each of the four channels and serves that channel's four packages.
// Requests arrive from the processor network tagged, are buffered in an inbound tag queue that
// carries them into the flash clock domain, are issued to the addressed package, and when the
// package finishes its tag returns through an outbound tag queue to the network clock. The
// tagged inbound/outbound queues and the clock-domain role follow the description of the
// controllers; everything inside the flash domain is this design's own, simplest choice:
//
//  * Dispatch is in order: the head request waits until its package is idle (head-of-line
//    blocking), while the other packages keep working on what they were given earlier.
//  * The package interface is abstract: a one-cycle command strobe (fl_cmd_valid) with the
//    package selected by the one-hot fl_ce, the operation, plane-pair page and DDR3L DMA address,
//    and one ready/busy line per package (fl_rb_n, low while busy) plus a fail flag sampled
//    when it returns high. The NV-DDR2 signalling and the data transfer itself are not modelled;
//    fl_cmd_ddr tells the DMA engine where the page data goes to or comes from.
//  * A package is finished when, after the command, fl_rb_n has gone low and then high again.
//    At most one completion enters the outbound queue per flash clock, lowest package first.
//
// Timing: a request needs about three flash clocks to cross the inbound queue, one to issue,
// the package's busy time, one to be queued outbound and about three network clocks to cross.
module flash_ctrl
  import fa_pkg::*;
#(
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned NPKG   = PKGS_PER_CH
) (
  // network side
  input  logic               net_clk,
  input  logic               net_rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  flash_req_t         req,
  output logic               cpl_valid,
  input  logic               cpl_ready,
  output flash_cpl_t         cpl,
  // flash side
  input  logic               fl_clk,
  input  logic               fl_rst_n,
  output logic               fl_cmd_valid,
  output logic [NPKG-1:0]    fl_ce,
  output flash_op_e          fl_cmd_op,
  output logic [PPAGE_W-1:0] fl_cmd_page,
  output logic [DDR_W-1:0]   fl_cmd_ddr,
  input  logic [NPKG-1:0]    fl_rb_n,
  input  logic [NPKG-1:0]    fl_fail,
  // flash-domain status
  output logic [NPKG-1:0]    pkg_busy
);
  typedef enum logic [1:0] {P_IDLE, P_WAIT_BUSY, P_WAIT_READY, P_DONE} pkg_state_e;

  // ---------------- inbound tag queue ----------------
  flash_req_t in_head;
  logic       in_valid, in_pop;

  tag_queue #(.WIDTH($bits(flash_req_t)), .DEPTH(QDEPTH)) u_inq (
    .wclk(net_clk), .wrst_n(net_rst_n), .wr_valid(req_valid), .wr_ready(req_ready), .wr_data(req),
    .rclk(fl_clk),  .rrst_n(fl_rst_n),  .rd_valid(in_valid),  .rd_ready(in_pop),   .rd_data(in_head)
  );

  // ---------------- outbound tag queue ----------------
  flash_cpl_t out_data;
  logic       out_push, out_ready;

  tag_queue #(.WIDTH($bits(flash_cpl_t)), .DEPTH(QDEPTH)) u_outq (
    .wclk(fl_clk),  .wrst_n(fl_rst_n),  .wr_valid(out_push), .wr_ready(out_ready), .wr_data(out_data),
    .rclk(net_clk), .rrst_n(net_rst_n), .rd_valid(cpl_valid), .rd_ready(cpl_ready), .rd_data(cpl)
  );

  // ---------------- per-package tracking ----------------
  pkg_state_e       st   [NPKG];
  logic [TAG_W-1:0] ptag [NPKG];
  logic [NPKG-1:0]  pfail;

  logic                     issue;
  logic [$clog2(NPKG)-1:0]  head_pkg;
  logic                     done_any;
  logic [$clog2(NPKG)-1:0]  done_pkg;

  assign head_pkg = in_head.pkg[$clog2(NPKG)-1:0];
  assign issue    = in_valid && (st[head_pkg] == P_IDLE);
  assign in_pop   = issue;

  always_comb begin
    done_any = 1'b0;
    done_pkg = '0;
    for (int p = NPKG - 1; p >= 0; p--) begin
      if (st[p] == P_DONE) begin
        done_any = 1'b1;
        done_pkg = ($clog2(NPKG))'(p);
      end
    end
  end

  assign out_push     = done_any && out_ready;
  assign out_data.tag = ptag[done_pkg];
  assign out_data.ok  = !pfail[done_pkg];

  always_comb begin
    for (int p = 0; p < NPKG; p++) pkg_busy[p] = (st[p] != P_IDLE);
  end

  always_ff @(posedge fl_clk or negedge fl_rst_n) begin
    if (!fl_rst_n) begin
      for (int p = 0; p < NPKG; p++) begin
        st[p]   <= P_IDLE;
        ptag[p] <= '0;
      end
      pfail        <= '0;
      fl_cmd_valid <= 1'b0;
      fl_ce        <= '0;
      fl_cmd_op    <= FOP_READ;
      fl_cmd_page  <= '0;
      fl_cmd_ddr   <= '0;
    end else begin
      fl_cmd_valid <= issue;
      if (issue) begin
        fl_ce       <= NPKG'(1) << head_pkg;
        fl_cmd_op   <= in_head.op;
        fl_cmd_page <= in_head.page;
        fl_cmd_ddr  <= in_head.ddr_addr;
      end else begin
        fl_ce <= '0;
      end
      for (int p = 0; p < NPKG; p++) begin
        unique case (st[p])
          P_IDLE:       if (issue && head_pkg == ($clog2(NPKG))'(p)) begin
                          st[p]   <= P_WAIT_BUSY;
                          ptag[p] <= in_head.tag;
                        end
          P_WAIT_BUSY:  if (!fl_rb_n[p]) st[p] <= P_WAIT_READY;
          P_WAIT_READY: if (fl_rb_n[p]) begin
                          st[p]    <= P_DONE;
                          pfail[p] <= fl_fail[p];
                        end
          P_DONE:       if (out_push && done_pkg == ($clog2(NPKG))'(p)) st[p] <= P_IDLE;
          default:      st[p] <= P_IDLE;
        endcase
      end
    end
  end

  // Only one package may be selected per command.
  a_ce_onehot: assert property (@(posedge fl_clk) disable iff (!fl_rst_n)
                                fl_cmd_valid |-> $onehot(fl_ce));
endmodule
