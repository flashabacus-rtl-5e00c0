// tb_range_lock: 4-entry lock table. Checks read/write conflicts between kernels, that reads
// share and that one kernel's own ranges never conflict, edge overlaps (touching end pages),
// the table-full refusal, release by id with the owner check, and a random sequence against a
// reference model. Every answer must come exactly one cycle after the request.
module tb_range_lock;
  localparam int E = 4, AW = 21, OW = 3;
  logic clk = 0, rst_n = 0;
  logic acq_valid, acq_write, rel_valid, rsp_valid, rsp_grant, rsp_conflict, rsp_full;
  logic [AW-1:0] acq_start, acq_last;
  logic [OW-1:0] acq_owner, rel_owner;
  logic [1:0] rel_id, rsp_id;
  logic [2:0] held;
  int checks = 0, failures = 0;

  typedef struct { bit v; int s, l; bit w; int o; } ent_t;
  ent_t mdl [E];

  range_lock #(.ENTRIES(E), .ADDR_W(AW), .OWN_W(OW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // returns 0 granted, 1 conflict, 2 full; id
  task automatic acq(input int s, input int l, input bit w, input int o, output int res, output int id);
    @(negedge clk);
    acq_valid = 1; acq_start = AW'(s); acq_last = AW'(l); acq_write = w; acq_owner = OW'(o);
    @(negedge clk);
    acq_valid = 0;
    check(rsp_valid, "answer one cycle after acquire");
    res = rsp_grant ? 0 : rsp_conflict ? 1 : 2;
    id = int'(rsp_id);
  endtask

  task automatic rel(input int id, input int o, output bit ok);
    @(negedge clk);
    rel_valid = 1; rel_id = 2'(id); rel_owner = OW'(o);
    @(negedge clk);
    rel_valid = 0;
    check(rsp_valid, "answer one cycle after release");
    ok = rsp_grant;
  endtask

  function automatic int model_acq(int s, int l, bit w, int o);
    for (int i = 0; i < E; i++)
      if (mdl[i].v && mdl[i].o != o && s <= mdl[i].l && mdl[i].s <= l && (mdl[i].w || w)) return 1;
    for (int i = 0; i < E; i++) if (!mdl[i].v) return 0;
    return 2;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, id, idr, idw;
    bit ok;
    acq_valid = 0; rel_valid = 0; acq_start = 0; acq_last = 0; acq_write = 0; acq_owner = 0; rel_id = 0; rel_owner = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    acq(10, 20, 0, 1, r, idr);  check(r == 0, "read [10,20] by k1 granted");
    acq(15, 25, 1, 2, r, id);   check(r == 1, "write [15,25] by k2 blocked by k1's read");
    acq(20, 20, 1, 2, r, id);   check(r == 1, "write touching the last page blocked");
    acq(21, 30, 1, 2, r, idw);  check(r == 0, "write [21,30] by k2 granted (no overlap)");
    acq(25, 40, 0, 3, r, id);   check(r == 1, "read [25,40] by k3 blocked by k2's write");
    acq(12, 14, 0, 3, r, id);   check(r == 0, "second reader of [12,14] granted");
    acq(12, 30, 1, 1, r, id);   check(r == 1, "k1 write over k2/k3 ranges blocked");
    acq(10, 20, 1, 1, r, id);   check(r == 1, "k1 write over k3's read blocked");
    acq(50, 60, 1, 2, r, id);   check(r == 0, "write [50,60] granted");
    check(held == 4, "four entries held");
    acq(70, 80, 0, 4, r, id);   check(r == 2, "table full refused");
    rel(idw, 3, ok);            check(!ok, "release by the wrong owner refused");
    rel(idw, 2, ok);            check(ok, "release by the owner");
    acq(25, 40, 0, 3, r, id);   check(r == 0, "read [25,40] granted after the write was released");
    // random sequence against the model
    for (int i = 0; i < E; i++) begin rel(i, 0, ok); end
    rst_n = 0; @(negedge clk); rst_n = 1;
    foreach (mdl[i]) mdl[i].v = 0;
    for (int k = 0; k < 400; k++) begin
      if ($urandom_range(0, 2) != 0) begin
        automatic int s = $urandom_range(0, 60);
        automatic int o = $urandom_range(0, 3);
        automatic bit w = $urandom_range(0, 1);
        int l, e;
        l = s + $urandom_range(0, 10);
        e = model_acq(s, l, w, o);
        acq(s, l, w, o, r, id);
        check(r == e, $sformatf("random acquire [%0d,%0d] w=%0d o=%0d: got %0d expected %0d", s, l, w, o, r, e));
        if (r == 0) begin mdl[id].v = 1; mdl[id].s = s; mdl[id].l = l; mdl[id].w = w; mdl[id].o = o; end
      end else begin
        automatic int i = $urandom_range(0, E - 1);
        automatic int o = $urandom_range(0, 3);
        automatic bit exp_ok = mdl[i].v && mdl[i].o == o;
        rel(i, o, ok);
        check(ok == exp_ok, "random release");
        if (exp_ok) mdl[i].v = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
