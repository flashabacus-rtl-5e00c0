// tb_flash_ctrl: one channel controller with a behavioural model of its four packages.
// Network clock 2 ns, flash clock 5 ns. Checks: a read's completion tag and its latency
// (package busy time plus queue crossings), that programs to four packages overlap in time,
// that two programs to one package are serialised, that no command reaches a busy package,
// and that every tag of a random stream returns exactly once.
module tb_flash_ctrl;
  import fa_pkg::*;
  localparam int TR = 40, TP = 200, TE = 300;
  logic net_clk = 0, fl_clk = 0, net_rst_n = 0, fl_rst_n = 0;
  logic req_valid, req_ready, cpl_valid, cpl_ready;
  flash_req_t req;
  flash_cpl_t cpl;
  logic fl_cmd_valid;
  logic [3:0] fl_ce, fl_rb_n, fl_fail, pkg_busy;
  flash_op_e fl_cmd_op;
  logic [PPAGE_W-1:0] fl_cmd_page;
  logic [DDR_W-1:0] fl_cmd_ddr;
  int checks = 0, failures = 0;
  int seen [64];

  flash_ctrl dut (.*);
  flash_chan_model #(.NPKG(4), .PAGE_W(PPAGE_W), .T_READ(TR), .T_PROG(TP), .T_ERASE(TE)) u_flash (
    .clk(fl_clk), .rst_n(fl_rst_n), .cmd_valid(fl_cmd_valid), .ce(fl_ce), .op(fl_cmd_op), .page(fl_cmd_page),
    .rb_n(fl_rb_n), .fail(fl_fail));

  always #1 net_clk = ~net_clk;
  always #2.5 fl_clk = ~fl_clk;
  assign cpl_ready = 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge net_clk) if (cpl_valid) seen[cpl.tag]++;

  task automatic send(input int tag, input flash_op_e op, input int pkg, input int page);
    @(negedge net_clk);
    req_valid = 1;
    req = '{tag: TAG_W'(tag), op: op, pkg: PKG_W'(pkg), page: PPAGE_W'(page), ddr_addr: DDR_W'(tag * 16384)};
    @(posedge net_clk);
    while (!req_ready) @(posedge net_clk);
    @(negedge net_clk); req_valid = 0;
  endtask

  task automatic wait_tag(input int tag);
    while (seen[tag] == 0) @(posedge net_clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, t1;
    int n;
    foreach (seen[i]) seen[i] = 0;
    req_valid = 0; req = '0;
    #20; net_rst_n = 1; fl_rst_n = 1;
    #20;
    // 1. one read
    t0 = $realtime;
    send(5, FOP_READ, 1, 1234);
    wait_tag(5);
    t1 = $realtime;
    check(seen[5] == 1, "read completion tag 5");
    check(u_flash.last_page[1] == PPAGE_W'(1234) && u_flash.last_op[1] == 2'd0, "read reached pkg 1 page 1234");
    check(t1 - t0 >= TR * 5 && t1 - t0 <= TR * 5 + 100, $sformatf("read latency %0t", t1 - t0));
    // 2. four programs on four packages overlap
    t0 = $realtime;
    for (int p = 0; p < 4; p++) send(10 + p, FOP_PROG, p, 100 + p);
    for (int p = 0; p < 4; p++) wait_tag(10 + p);
    t1 = $realtime;
    check(t1 - t0 < 2 * TP * 5, $sformatf("4 programs on 4 packages in %0t (parallel)", t1 - t0));
    for (int p = 0; p < 4; p++) check(u_flash.last_page[p] == PPAGE_W'(100 + p), "program page per package");
    // 3. two programs on one package are serialised
    t0 = $realtime;
    send(20, FOP_PROG, 2, 7);
    send(21, FOP_PROG, 2, 8);
    wait_tag(21);
    t1 = $realtime;
    check(seen[20] == 1 && t1 - t0 >= 2 * TP * 5, $sformatf("same-package programs serialised (%0t)", t1 - t0));
    // 4. erase
    send(22, FOP_ERASE, 3, 256);
    wait_tag(22);
    check(u_flash.n_erase == 1, "erase reached the package");
    // 5. random stream
    for (int i = 0; i < 40; i++)
      send(24 + i, ($urandom_range(0, 3) == 0) ? FOP_PROG : FOP_READ, $urandom_range(0, 3), $urandom_range(0, 1000));
    for (int i = 0; i < 40; i++) wait_tag(24 + i);
    #200;
    n = 0;
    for (int i = 0; i < 64; i++) n += seen[i];
    check(n == 1 + 4 + 2 + 1 + 40, $sformatf("completions %0d", n));
    for (int i = 24; i < 64; i++) check(seen[i] == 1, $sformatf("tag %0d once", i));
    check(u_flash.n_overrun == 0, "no command to a busy package");
    check(u_flash.n_read + u_flash.n_prog + u_flash.n_erase == 48, "commands issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
