// tb_vsched: drives the Vertex Scheduler with groups that become ready over
// time and modules that stay busy for random times. Checks that every group
// is dispatched once and in order, that a latency-aware dispatch goes to the
// lowest free module and only for a ready group, that an energy-aware
// dispatch covers NMOD ready groups and waits for all modules to be free,
// and that all_sent rises after the last group.
module tb_vsched;
  import hygcn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  pipe_mode_e mode;
  logic start, disp_valid, disp_coop, all_sent;
  logic [VID_W-1:0] n_groups, q_grp, disp_grp;
  logic [NMOD-1:0] q_ready, mod_busy;
  logic [$clog2(NMOD)-1:0] disp_mod;
  vsched u_dut (.clk, .rst_n, .mode, .start, .n_groups, .q_grp, .q_ready, .mod_busy,
                .disp_valid, .disp_coop, .disp_mod, .disp_grp, .all_sent);
  int checks = 0, failures = 0, n_lat = 0, n_coop = 0, n_held = 0;
  int timer [NMOD];
  int n_ready;                 // groups [0, n_ready) are ready
  always_comb begin
    for (int m = 0; m < NMOD; m++)
      mod_busy[m] = (timer[m] > 0) || (disp_valid && (disp_coop || int'(disp_mod) == m));
    for (int p = 0; p < NMOD; p++)
      q_ready[p] = (int'(q_grp) + p < n_ready) || (int'(q_grp) + p >= int'(n_groups));
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("%0t: %s", $time, msg); end
  endtask
  task automatic run(pipe_mode_e md, int ng);
    int expect_grp = 0;
    bit exp_v; int exp_m; bit exp_coop;
    mode = md; n_groups = ng; n_ready = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    exp_v = 0;
    for (int cyc = 0; cyc < 20000 && !(all_sent && !disp_valid && expect_grp >= ng); cyc++) begin
      bit any_free; int fm; bit all_free;
      #0.2;  // let the combinational inputs settle
      // prediction for the coming edge, from the inputs now applied
      any_free = 0; fm = 0;
      for (int m = NMOD-1; m >= 0; m--) if (!mod_busy[m]) begin any_free = 1; fm = m; end
      all_free = (mod_busy == '0);
      if (!all_sent && md == PIPE_LATENCY) begin
        exp_v = q_ready[0] && any_free; exp_m = fm; exp_coop = 0;
      end else if (!all_sent) begin
        exp_v = (&q_ready) && all_free; exp_m = 0; exp_coop = 1;
      end else exp_v = 0;
      if (!all_sent && !exp_v && q_ready[0]) n_held++;
      @(negedge clk);
      for (int m = 0; m < NMOD; m++) if (timer[m] > 0) timer[m]--;
      check(disp_valid == exp_v, $sformatf("dispatch valid mismatch got %0d exp %0d mode %0d busy %b ready %b qg %0d", disp_valid, exp_v, md, mod_busy, q_ready, q_grp));
      if (disp_valid) begin
        check(int'(disp_grp) == expect_grp, "group out of order");
        check(disp_coop == exp_coop, "mode mismatch");
        if (!disp_coop) check(int'(disp_mod) == exp_m, "not the lowest free module");
        expect_grp += disp_coop ? NMOD : 1;
        if (disp_coop) begin n_coop++; for (int m = 0; m < NMOD; m++) timer[m] = 1 + $urandom_range(12); end
        else begin n_lat++; timer[disp_mod] = 1 + $urandom_range(40); end
      end
      if ($urandom_range(3) == 0 && n_ready < ng) n_ready++;
    end
    check(expect_grp >= ng && all_sent, "not all groups sent");
    while (timer.sum() > 0) begin
      @(negedge clk);
      for (int m = 0; m < NMOD; m++) if (timer[m] > 0) timer[m]--;
    end
  endtask
  initial begin
    start = 0; mode = PIPE_LATENCY; n_groups = 0; n_ready = 0;
    foreach (timer[m]) timer[m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(PIPE_LATENCY, 60); run(PIPE_ENERGY, 64); run(PIPE_ENERGY, 13);
    run(PIPE_LATENCY, 1); run(PIPE_LATENCY, 0);
    check(n_lat == 61 && n_coop == 10 && n_held > 0, "mechanism counts");
    $display("latency dispatches %0d, cooperative dispatches %0d", n_lat, n_coop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
