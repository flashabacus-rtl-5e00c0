// lwp_launcher: starts a screen (or kernel) on a worker processor.
//
// Starting code on a worker takes four steps, always in this order:
//   1. ask the power/sleep controller (PSC) to put the worker to sleep, and wait for its ack;
//   2. write the DDR3L address of the code into the worker's boot address register;
//   3. write the worker's inter-processor interrupt register, which makes it jump to the boot
//      address once it runs (the screen identity travels with it as the interrupt argument);
//   4. ask the PSC to wake the worker, and wait for its ack.
// The sequence follows the description; the one-cycle register writes, the req/ack handshake
// with the PSC and passing the screen identity as an argument are this design's choices.
//
// Interface: a launch is accepted (start_valid && start_ready) only while idle; start_ready
// returns after the wake is acknowledged. With a PSC that acks in the cycle it is asked, a
// launch takes five cycles from acceptance to start_ready. boot_we and ipi_valid are one-cycle strobes qualified by boot_lwp / ipi_lwp.
module lwp_launcher
  import fa_pkg::*;
#(
  parameter int unsigned NW = NUM_WORKERS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start_valid,
  output logic                   start_ready,
  input  logic [$clog2(NW)-1:0]  start_worker,
  input  logic [BOOT_W-1:0]      start_boot,
  input  screen_arg_t            start_arg,
  // power/sleep controller
  output logic                   psc_req,
  output logic                   psc_sleep,      // 1: put to sleep, 0: wake up
  output logic [$clog2(NW)-1:0]  psc_lwp,
  input  logic                   psc_ack,
  // boot address register and IPI register of the workers
  output logic                   boot_we,
  output logic [$clog2(NW)-1:0]  boot_lwp,
  output logic [BOOT_W-1:0]      boot_addr,
  output logic                   ipi_valid,
  output logic [$clog2(NW)-1:0]  ipi_lwp,
  output screen_arg_t            ipi_arg,
  output logic [31:0]            cnt_launch
);
  typedef enum logic [2:0] {L_IDLE, L_SLEEP, L_BOOT, L_IPI, L_WAKE} state_e;

  state_e                 state;
  logic [$clog2(NW)-1:0]  w;
  logic [BOOT_W-1:0]      addr;
  screen_arg_t            arg;

  assign start_ready = (state == L_IDLE);
  assign psc_req     = (state == L_SLEEP) || (state == L_WAKE);
  assign psc_sleep   = (state == L_SLEEP);
  assign psc_lwp     = w;
  assign boot_we     = (state == L_BOOT);
  assign boot_lwp    = w;
  assign boot_addr   = addr;
  assign ipi_valid   = (state == L_IPI);
  assign ipi_lwp     = w;
  assign ipi_arg     = arg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= L_IDLE;
      w          <= '0;
      addr       <= '0;
      arg        <= '0;
      cnt_launch <= '0;
    end else begin
      unique case (state)
        L_IDLE: if (start_valid) begin
          w     <= start_worker;
          addr  <= start_boot;
          arg   <= start_arg;
          state <= L_SLEEP;
        end
        L_SLEEP: if (psc_ack) state <= L_BOOT;
        L_BOOT:  state <= L_IPI;
        L_IPI:   state <= L_WAKE;
        L_WAKE:  if (psc_ack) begin
          cnt_launch <= cnt_launch + 1'b1;
          state      <= L_IDLE;
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  a_ack_only_on_req: assert property (@(posedge clk) disable iff (!rst_n) psc_ack |-> psc_req);
endmodule
