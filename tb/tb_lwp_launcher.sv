// tb_lwp_launcher: checks the launch order (sleep request and ack, boot address write, IPI,
// wake request and ack) with the right worker, address and argument, the five-cycle launch
// with a PSC that acks in the cycle it is asked, that a slow PSC stretches the sequence, and that no
// new launch is accepted while one is in progress.
module tb_lwp_launcher;
  import fa_pkg::*;
  localparam int NW = 6;
  logic clk = 0, rst_n = 0;
  logic start_valid, start_ready, psc_req, psc_sleep, psc_ack, boot_we, ipi_valid;
  logic [2:0] start_worker, psc_lwp, boot_lwp, ipi_lwp;
  logic [BOOT_W-1:0] start_boot, boot_addr;
  screen_arg_t start_arg, ipi_arg;
  logic [31:0] cnt_launch;
  int checks = 0, failures = 0;
  int psc_delay = 0;
  string trace;

  lwp_launcher #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // PSC model: acks a request after psc_delay idle cycles
  int wait_ctr = 0;
  always_ff @(posedge clk) begin
    if (psc_req && !psc_ack) wait_ctr <= wait_ctr + 1;
    else wait_ctr <= 0;
  end
  assign psc_ack = psc_req && (wait_ctr >= psc_delay);

  // event trace
  always @(negedge clk) begin
    if (psc_req && psc_ack) trace = {trace, psc_sleep ? $sformatf("S%0d ", psc_lwp) : $sformatf("W%0d ", psc_lwp)};
    if (boot_we)   trace = {trace, $sformatf("B%0d:%h ", boot_lwp, boot_addr)};
    if (ipi_valid) trace = {trace, $sformatf("I%0d:%0d.%0d.%0d ", ipi_lwp, ipi_arg.slot, ipi_arg.mblk, ipi_arg.screen)};
  end

  task automatic launch(input int w, input int addr, input int s, output int cycles);
    @(negedge clk);
    start_valid = 1; start_worker = 3'(w); start_boot = BOOT_W'(addr);
    start_arg = '{slot: SLOT_W'(s), mblk: MB_W'(1), screen: SC_W'(2)};
    @(posedge clk);
    @(negedge clk); start_valid = 0; start_worker = 0;
    cycles = 1;
    check(!start_ready, "busy during a launch");
    while (!start_ready) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    start_valid = 0; start_worker = 0; start_boot = 0; start_arg = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    trace = "";
    launch(4, 32'h8000_1000, 7, c);
    check(trace == "S4 B4:80001000 I4:7.1.2 W4 ", {"sequence: ", trace});
    check(c == 5, $sformatf("launch took %0d cycles", c));
    psc_delay = 3; trace = "";
    launch(1, 32'h0000_0040, 3, c);
    check(trace == "S1 B1:00000040 I1:3.1.2 W1 ", {"sequence (slow PSC): ", trace});
    check(c == 11, $sformatf("launch with slow PSC took %0d cycles", c));
    check(cnt_launch == 2, "launch counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
