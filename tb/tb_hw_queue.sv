// tb_hw_queue: checks the message queue against a reference queue: order, full/empty flags,
// count, simultaneous push and pop, and that a pushed word is readable in the next cycle.
module tb_hw_queue;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  hw_queue #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!rd_valid && wr_ready && count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < D; i++) begin
      wr_valid = 1; wr_data = W'(100 + i);
      @(posedge clk); model.push_back(wr_data);
      @(negedge clk);
      if (i == 0) check(rd_valid && rd_data == 100, "first word visible next cycle");
    end
    wr_valid = 0;
    check(!wr_ready && count == D, "full after DEPTH pushes");
    // random traffic
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      wr_valid = ($urandom_range(0, 1) == 1);
      wr_data  = W'($urandom);
      rd_ready = ($urandom_range(0, 2) != 0);
      check(count == model.size(), "count matches");
      if (rd_valid) check(rd_data == model[0], "data order");
      else          check(model.size() == 0, "empty flag");
      check(wr_ready == (model.size() < D), "full flag");
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
