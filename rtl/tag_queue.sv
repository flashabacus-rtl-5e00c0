// tag_queue: inbound or outbound "tag" queue of a flash channel controller.
//
// Each channel controller buffers requests coming from the processor network, and the
// completions going back to it, in tag queues that also carry them across from the network
// clock to the flash clock. This module is one such queue: a dual-clock FIFO with Gray-coded
// read and write pointers, each synchronised into the other domain by two flip-flops.
// Write side: wr_valid/wr_ready/wr_data in wclk. Read side: rd_valid/rd_ready/rd_data in rclk,
// first-word fall-through. A pushed word becomes visible at the read side about three rclk
// edges later; a freed slot is seen by the writer about three wclk edges later.
// DEPTH must be a power of two. The queue-with-clock-crossing role comes from the description
// of the controllers; the Gray-pointer structure and the depth are this design's choice.
module tag_queue #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in rclk
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in wclk

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wbin_nx;
  logic        push;
  assign wr_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign push     = wr_valid && wr_ready;
  assign wbin_nx  = wbin + (AW+1)'(push);

  always_ff @(posedge wclk) begin
    if (push) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---------------- read domain ----------------
  logic [AW:0] rbin_nx;
  logic        pop;
  assign rd_valid = (rgray != wgray_r2);
  assign pop      = rd_valid && rd_ready;
  assign rbin_nx  = rbin + (AW+1)'(pop);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("tag_queue: DEPTH must be a power of two, at least 4");
endmodule
