// tb_systolic_module: full-size (4 x 128) systolic module. Feeds skewed
// aggregated rows from the left and weight columns from the bottom, checks
// every accumulator against A x W, checks that the last result settles
// exactly K + ROWS + COLS - 2 clock edges after the first input is taken, that the
// weights leave the top row unchanged for the next module, and that clear
// zeroes the array.
module tb_systolic_module;
  import hygcn_pkg::*;
  localparam int ROWS = MROWS, COLS = MCOLS;
  logic clk = 1'b0, rst_n = 1'b0, clear;
  always #1 clk = ~clk;
  elem_t a_in [ROWS]; logic a_vin [ROWS];
  elem_t w_in [COLS]; logic w_vin [COLS];
  elem_t w_out [COLS]; logic w_vout [COLS];
  acc_t acc [ROWS][COLS];
  systolic_module u_dut (.clk, .rst_n, .clear, .a_in, .a_vin, .w_in, .w_vin, .w_out, .w_vout, .acc);
  int checks = 0, failures = 0;
  elem_t A [ROWS][];
  elem_t W [][COLS];
  task automatic run(int K);
    int T = K + ROWS + COLS;
    for (int r = 0; r < ROWS; r++) begin
      A[r] = new[K];
      foreach (A[r][k]) A[r][k] = $urandom_range(1) ? elem_t'($urandom) : elem_t'($urandom_range(400)) - 200;
    end
    W = new[K];
    foreach (W[k]) foreach (W[k][c]) W[k][c] = elem_t'($urandom);
    for (int t = 0; t <= T; t++) begin
      @(negedge clk);
      // check the top-row weight output for the previous edge
      for (int c = 0; c < COLS; c++) begin
        int k = t - 1 - c - (ROWS - 1);
        if (k >= 0 && k < K) begin
          checks++;
          if (!w_vout[c] || w_out[c] != W[k][c]) failures++;
        end
      end
      // the last accumulator (row 0, column COLS-1) takes its last product on
      // clock edge K+ROWS+COLS-3 (edges counted from 0): not final before it
      if (t == K + ROWS + COLS - 3 || t == K + ROWS + COLS - 2) begin
        logic signed [63:0] e = 0;
        for (int k = 0; k < K; k++) e += longint'(A[0][k]) * longint'(W[k][COLS-1]);
        checks++;
        if ((acc[0][COLS-1] == e) != (t == K + ROWS + COLS - 2)) begin
          failures++; $display("K=%0d: wrong settling time", K);
        end
      end
      for (int r = 0; r < ROWS; r++) begin
        int k = t - (ROWS - 1 - r);
        a_vin[r] = (k >= 0 && k < K);
        a_in[r]  = a_vin[r] ? A[r][k] : elem_t'($urandom);
      end
      for (int c = 0; c < COLS; c++) begin
        int k = t - c;
        w_vin[c] = (k >= 0 && k < K);
        w_in[c]  = w_vin[c] ? W[k][c] : elem_t'($urandom);
      end
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic signed [63:0] e = 0;
        for (int k = 0; k < K; k++) e += longint'(A[r][k]) * longint'(W[k][c]);
        checks++;
        if (acc[r][c] != e) begin
          failures++;
          if (failures < 5) $display("K=%0d acc[%0d][%0d]=%0d exp %0d", K, r, c, acc[r][c], e);
        end
      end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      checks++; if (acc[r][c] != 0) failures++;
    end
  endtask
  initial begin
    clear = 0;
    foreach (a_in[r]) begin a_in[r] = 0; a_vin[r] = 0; end
    foreach (w_in[c]) begin w_in[c] = 0; w_vin[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1); run(16); run(37); run(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
