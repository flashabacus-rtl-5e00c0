// tb_page_table: 64-entry table. Checks the clearing walk (init_done after exactly ENTRIES
// cycles, every entry unmapped afterwards), one-cycle reads on both ports, writes from either
// port, port A winning a same-entry write collision, and random traffic against a model.
module tb_page_table;
  localparam int N = 64, DW = 19;
  logic clk = 0, rst_n = 0, init_done;
  logic a_en, a_we, a_wvalid, a_rvalid, a_rmapped, b_en, b_we, b_wvalid, b_rvalid, b_rmapped;
  logic [5:0] a_addr, b_addr;
  logic [DW-1:0] a_wdata, a_rdata, b_wdata, b_rdata;
  int checks = 0, failures = 0;
  logic [DW:0] model [N];

  page_table #(.ENTRIES(N), .DATA_W(DW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    a_en = 0; a_we = 0; a_wvalid = 0; a_addr = 0; a_wdata = 0;
    b_en = 0; b_we = 0; b_wvalid = 0; b_addr = 0; b_wdata = 0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); cyc++; @(negedge clk); end
    check(cyc == N, $sformatf("init walk took %0d cycles", cyc));
    // every entry unmapped
    for (int i = 0; i < N; i++) begin
      @(negedge clk); a_en = 1; a_we = 0; a_addr = 6'(i);
      @(negedge clk); a_en = 0;
      check(a_rvalid && !a_rmapped, $sformatf("entry %0d unmapped after init", i));
    end
    // collision: both ports write entry 9, port A wins
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 9; a_wvalid = 1; a_wdata = 19'h1111;
    b_en = 1; b_we = 1; b_addr = 9; b_wvalid = 1; b_wdata = 19'h2222;
    @(negedge clk);
    a_we = 0; b_we = 0; a_addr = 9; b_addr = 9;
    @(negedge clk);
    a_en = 0; b_en = 0;
    check(a_rvalid && a_rmapped && a_rdata == 19'h1111, "port A wins collision (A read)");
    check(b_rvalid && b_rmapped && b_rdata == 19'h1111, "port A wins collision (B read)");
    model[9] = {1'b1, 19'h1111};
    // random traffic
    for (int k = 0; k < 1500; k++) begin
      logic pa_rd, pb_rd;
      logic [5:0] ra, rb;
      @(negedge clk);
      a_en = 1; a_we = $urandom_range(0, 1); a_addr = 6'($urandom); a_wvalid = $urandom_range(0, 3) != 0; a_wdata = DW'($urandom);
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_addr = 6'($urandom); b_wvalid = 1; b_wdata = DW'($urandom);
      if (b_en && b_we && a_we && a_addr == b_addr) b_addr = b_addr + 1;
      pa_rd = !a_we; pb_rd = b_en && !b_we; ra = a_addr; rb = b_addr;
      @(posedge clk);
      #1;
      if (pa_rd) check(a_rvalid && {a_rmapped, a_rdata} == model[ra], "port A read data");
      if (pb_rd) check(b_rvalid && {b_rmapped, b_rdata} == model[rb], "port B read data");
      if (a_we) model[a_addr] = {a_wvalid, a_wdata};
      if (b_en && b_we) model[b_addr] = {b_wvalid, b_wdata};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
