// tb_sparsity_eliminator: marks random, clustered rows and checks that the
// emitted windows are exactly those of the sliding-and-shrinking algorithm,
// for several window heights, including the clear between intervals.
module tb_sparsity_eliminator;
  import hygcn_pkg::*;
  localparam int R = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic [VID_W-1:0] n_rows, win_h, mark_row, ws, we;
  logic clear, mark, scan, busy, wv, wr, sdone;
  sparsity_eliminator #(.MAX_ROWS(1024)) u_dut (.clk, .rst_n, .n_rows, .win_h, .clear, .mark, .mark_row,
    .scan, .busy, .win_valid(wv), .win_ready(wr), .win_start(ws), .win_end(we), .scan_done(sdone));
  int checks = 0, failures = 0, n_slide = 0, n_shrink = 0;
  bit rows [R];
  int ews[$], ewe[$];
  initial begin
    clear = 0; mark = 0; scan = 0; mark_row = 0; wr = 0; n_rows = R; win_h = 8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int pos;
      win_h = 1 + $urandom_range(40);
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      while (busy) @(negedge clk);
      for (int r = 0; r < R; r++) rows[r] = 0;
      for (int c = 0; c < 12; c++) begin
        automatic int b = $urandom_range(R-1);
        for (int k = 0; k < 6; k++) if ($urandom_range(2) == 0) rows[(b + k) % R] = 1;
      end
      if (t == 5) rows[R-1] = 1;
      for (int r = 0; r < R; r++) if (rows[r]) begin
        mark = 1; mark_row = r; @(negedge clk);
      end
      mark = 0;
      // reference windows (GetOneEffectInterval)
      ews.delete(); ewe.delete(); pos = 0;
      forever begin
        int s, e, lim;
        s = pos; while (s < R && !rows[s]) s++;
        if (s >= R) break;
        if (s > pos) n_slide++;
        lim = (s + int'(win_h) - 1 < R) ? s + int'(win_h) - 1 : R - 1;
        e = lim; while (!rows[e]) e--;
        if (e < lim) n_shrink++;
        ews.push_back(s); ewe.push_back(e);
        pos = s + int'(win_h);
      end
      @(negedge clk) scan = 1;
      @(negedge clk) scan = 0;
      begin
        automatic int k = 0;
        automatic bit fin = 0;
        while (!fin) begin
          wr = $urandom_range(1);
          #0.5;
          if (wv && wr) begin
            checks++;
            if (k >= ews.size() || ws != ews[k] || we != ewe[k]) begin
              failures++;
              if (failures < 5) $display("t%0d window %0d: got %0d..%0d h %0d", t, k, ws, we, win_h);
            end
            k++;
          end
          if (sdone) fin = 1;
          @(negedge clk);
        end
        checks++;
        if (k != ews.size()) begin failures++; begin $display("t%0d: %0d windows, expected %0d h %0d", t, k, ews.size(), win_h); foreach (ews[i]) $display("  %0d..%0d", ews[i], ewe[i]); end end
      end
    end
    checks++; if (n_slide == 0 || n_shrink == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
