// tb_page_allocator: 4 blocks of 8 groups, 2 metadata groups each, reserve of one block.
// Checks the increasing allocation order (metadata groups skipped), the one-cycle grant within
// a block and two cycles when a block opens, the reclaim request and stall when only the
// reserve is left, that a reclaim (gc) request may still use the reserve, and reuse of a
// freed block.
module tb_page_allocator;
  localparam int NB = 4, G = 8, M = 2;
  logic clk = 0, rst_n = 0;
  logic req, req_gc, grant, reclaim_req, open_valid, blk_opened, free_valid;
  logic [4:0] ppg;
  logic [1:0] open_blk, free_blk;
  logic [2:0] avail_blocks;
  int checks = 0, failures = 0;

  page_allocator #(.NBLK(NB), .GPB(G), .META(M), .RESERVE(1)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // request one group, return it and the cycles it took
  task automatic get(input bit gc, output int got, output int cycles);
    cycles = 0;
    @(negedge clk); req = 1; req_gc = gc;
    forever begin
      @(posedge clk); cycles++;
      if (grant) begin got = int'(ppg); break; end
      if (cycles > 20) begin got = -1; break; end
    end
    @(negedge clk); req = 0; req_gc = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g, c;
    req = 0; req_gc = 0; free_valid = 0; free_blk = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // blocks 0,1,2 can be used by ordinary writes: 3 x 6 groups
    for (int b = 0; b < 3; b++)
      for (int o = M; o < G; o++) begin
        get(0, g, c);
        check(g == b * G + o, $sformatf("allocation order: got %0d expected %0d", g, b * G + o));
        check(c == ((o == M) ? 2 : 1), $sformatf("grant latency %0d at offset %0d", c, o));
      end
    @(negedge clk);
    check(reclaim_req && avail_blocks == 1, "reclaim requested when only the reserve is left");
    get(0, g, c);
    check(g == -1, "ordinary request stalls on the reserve");
    get(1, g, c);
    check(g == 3 * G + M, "reclaim request may use the reserve block");
    // free block 1 and use it after block 3 is full
    @(negedge clk); free_valid = 1; free_blk = 1;
    @(negedge clk); free_valid = 0;
    for (int o = M + 1; o < G; o++) begin get(1, g, c); check(g == 3 * G + o, "reserve block continues"); end
    @(negedge clk);
    check(avail_blocks == 1 && reclaim_req, "one freed block available");
    get(1, g, c);
    check(g == 1 * G + M, $sformatf("freed block reused: got %0d", g));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
