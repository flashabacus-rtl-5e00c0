// tb_o3_scheduler: six worker models run the screens they are given for a random time and
// report completion one per cycle. A directed case (a kernel whose first microblock is one
// serial screen, next to a kernel with wide microblocks) must make the scheduler borrow screens
// from the younger kernel; then 30 random kernels are pushed through. Checks: every screen of
// every microblock is launched exactly once, no screen starts before every screen of the
// previous microblock of its kernel has been reported finished, a launch only goes to an idle
// worker with the right boot address, every kernel completes once after its last screen, and
// the borrow counter moved.
module tb_o3_scheduler;
  import fa_pkg::*;
  localparam int NW = 6, NK = 32;
  logic clk = 0, rst_n = 0;
  logic sub_valid, sub_ready, launch_valid, launch_ready, done_valid, kdone_valid;
  kernel_desc_t sub;
  logic [2:0] launch_worker, done_worker;
  logic [BOOT_W-1:0] launch_boot;
  screen_arg_t launch_arg;
  logic [KID_W-1:0] kdone_kid;
  logic [NW-1:0] worker_busy;
  logic [SLOT_W:0] resident;
  logic [31:0] cnt_dispatch, cnt_borrow;
  int checks = 0, failures = 0;

  o3_scheduler #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference bookkeeping, indexed by kernel id
  kernel_desc_t kd [NK];
  int slot_of_kid [NK];
  int kid_in_slot [MAX_APPS];
  int launched [NK][MAX_MBLKS];
  int finished [NK][MAX_MBLKS];
  bit scr_seen [NK][MAX_MBLKS][MAX_SCREENS];
  int kdone_cnt [NK];
  int n_kdone = 0;
  // worker models
  int wk_left [NW];
  int wk_kid [NW], wk_mb [NW];
  bit wk_run [NW];

  function automatic kernel_desc_t mk(int kid, int nmb, int s0, int s1, int s2, int s3);
    kernel_desc_t d;
    int s[4] = '{s0, s1, s2, s3};
    d = '0;
    d.kid = KID_W'(kid);
    d.n_mblks = (MB_W+1)'(nmb);
    for (int b = 0; b < MAX_MBLKS; b++) begin
      d.n_screens[b] = (SC_W+1)'(s[b]);
      d.boot_addr[b] = BOOT_W'(32'h1000_0000 + kid * 256 + b * 16);
    end
    return d;
  endfunction

  task automatic submit(input kernel_desc_t d);
    @(negedge clk);
    sub_valid = 1; sub = d;
    while (!sub_ready) @(negedge clk);
    slot_of_kid[d.kid] = int'(dut.free_slot);
    kid_in_slot[dut.free_slot] = int'(d.kid);
    kd[d.kid] = d;
    @(negedge clk);
    sub_valid = 0;
  endtask

  // launch acceptance and worker behaviour
  always @(posedge clk) if (rst_n) begin
    if (launch_valid && launch_ready) begin
      automatic int k = kid_in_slot[launch_arg.slot];
      automatic int m = int'(launch_arg.mblk);
      automatic int s = int'(launch_arg.screen);
      check(!wk_run[launch_worker], "launch to an idle worker");
      check(launch_boot == kd[k].boot_addr[m], "boot address of the microblock");
      check(m < int'(kd[k].n_mblks) && s < int'(kd[k].n_screens[m]), "screen within the descriptor");
      check(!scr_seen[k][m][s], $sformatf("screen k%0d m%0d s%0d launched once", k, m, s));
      if (m > 0) check(finished[k][m-1] == int'(kd[k].n_screens[m-1]),
                       $sformatf("k%0d m%0d started before m%0d finished", k, m, m - 1));
      scr_seen[k][m][s] = 1;
      launched[k][m]++;
      wk_run[launch_worker] <= 1;
      wk_kid[launch_worker] <= k;
      wk_mb[launch_worker]  <= m;
      wk_left[launch_worker] <= (kd[k].n_screens[m] == 1) ? $urandom_range(40, 80) : $urandom_range(3, 25);
    end
    if (kdone_valid) begin
      automatic int k = int'(kdone_kid);
      kdone_cnt[k]++;
      n_kdone++;
      for (int b = 0; b < int'(kd[k].n_mblks); b++)
        check(finished[k][b] == int'(kd[k].n_screens[b]), $sformatf("kernel %0d done after all screens", k));
    end
  end

  // completion queue: at most one report per cycle, driven at negedge
  always @(negedge clk) begin
    done_valid = 0;
    for (int w = 0; w < NW; w++) if (wk_run[w] && wk_left[w] > 0) wk_left[w]--;
    for (int w = 0; w < NW; w++)
      if (!done_valid && wk_run[w] && wk_left[w] == 0) begin
        done_valid = 1; done_worker = 3'(w);
        finished[wk_kid[w]][wk_mb[w]]++;
        wk_run[w] = 0;
      end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    sub_valid = 0; sub = '0; launch_ready = 1; done_valid = 0; done_worker = 0;
    foreach (wk_run[w]) begin wk_run[w] = 0; wk_left[w] = 0; end
    foreach (kdone_cnt[k]) kdone_cnt[k] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // kernel 0: a serial first microblock, then 4 screens; kernel 1: two microblocks of 5
    submit(mk(0, 2, 1, 4, 0, 0));
    submit(mk(1, 2, 5, 5, 0, 0));
    while (n_kdone < 2) @(negedge clk);
    check(cnt_borrow > 0, "screens borrowed from the younger kernel while the serial screen runs");
    // random kernels
    for (int k = 2; k < NK; k++) begin
      automatic int nmb = $urandom_range(1, 4);
      submit(mk(k, nmb, $urandom_range(1, 8), $urandom_range(1, 8), $urandom_range(1, 8), $urandom_range(1, 8)));
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    while (n_kdone < NK) @(negedge clk);
    total = 0;
    for (int k = 0; k < NK; k++) begin
      check(kdone_cnt[k] == 1, $sformatf("kernel %0d completed once", k));
      for (int b = 0; b < int'(kd[k].n_mblks); b++) total += int'(kd[k].n_screens[b]);
    end
    check(cnt_dispatch == 32'(total), $sformatf("dispatch count %0d vs %0d screens", cnt_dispatch, total));
    check(resident == 0, "chain empty at the end");
    $display("borrowed %0d of %0d dispatches", cnt_borrow, cnt_dispatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
