// tb_tag_queue: dual-clock queue with unrelated write (7 ns) and read (5 ns) clocks. Checks
// that every word arrives once and in order, that the queue fills to exactly DEPTH words and
// then stops accepting while the reader is stalled, and the crossing delay.
module tb_tag_queue;
  localparam int W = 12, D = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  int sent = 0, got = 0;
  bit wdone = 0;

  tag_queue #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #3.5 wclk = ~wclk;
  always #2.5 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #40000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    int accepted;
    wr_valid = 0; wr_data = 0; rd_ready = 0;
    #20; wrst_n = 1; rrst_n = 1;
    // phase 1: reader stalled, fill the queue
    accepted = 0;
    for (int i = 0; i < 2 * D; i++) begin
      @(negedge wclk);
      wr_valid = 1; wr_data = W'(sent);
      @(posedge wclk);
      if (wr_ready) begin accepted++; sent++; end
    end
    @(negedge wclk); wr_valid = 0;
    check(accepted == D, $sformatf("accepted %0d words into a %0d-deep queue", accepted, D));
    check(!wr_ready, "write side reports full");
    // phase 2: random traffic
    for (int i = 0; i < 600; i++) begin
      @(negedge wclk);
      wr_valid = ($urandom_range(0, 1) == 1);
      wr_data  = W'(sent);
      @(posedge wclk);
      if (wr_valid && wr_ready) sent++;
    end
    @(negedge wclk); wr_valid = 0;
    wdone = 1;
  end

  // reader
  initial begin
    longint t0;
    @(posedge rrst_n);
    #400;   // let phase 1 fill the queue
    check(rd_valid && rd_data == 0, "first word at the read side");
    forever begin
      @(negedge rclk);
      rd_ready = ($urandom_range(0, 3) != 0);
      @(posedge rclk);
      if (rd_valid && rd_ready) begin
        check(rd_data == W'(got), $sformatf("order: got %0d expected %0d", rd_data, got));
        got++;
      end
      if (wdone && got == sent && !rd_valid) break;
    end
    // crossing delay: one word written into an empty queue
    @(negedge wclk);
    wr_valid = 1; wr_data = W'(sent);
    @(posedge wclk); t0 = $time;
    @(negedge wclk); wr_valid = 0;
    wait (rd_valid);
    check(($time - t0) >= 5 && ($time - t0) <= 30, $sformatf("crossing delay %0t ns", $time - t0));
    check(got == sent && got > 200, $sformatf("traffic moved: %0d of %0d words", got, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
