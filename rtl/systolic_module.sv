// systolic_module: one systolic module of the Combination Engine
// (paper configuration: 4 rows x 128 columns of PEs).
//
// Each row computes the matrix-vector product of one vertex: the vertex's
// aggregated feature elements enter row r from the left (a_in[r], one element
// per cycle) and the weight matrix enters every column from the bottom
// (w_in[c], one element of row k of W per cycle). Weights climb from the
// bottom row to the top row and leave through w_out, which is what the next
// module up receives in cooperative mode; in independent mode the module's
// bottom input comes straight from the Weight Buffer (the mux sits in the
// Combination Engine). PE(r,c) accumulates sum_k a_r[k] * W[k][c].
//
// Timing: the caller skews the inputs so that a_r[k] and W[k][c] meet at
// PE(r,c): with d(r) the number of PE rows between row r and the weight entry,
// a_r[k] enters at cycle k + d(r) and W[k][c] at cycle k + c. All results are
// final F + MCOLS + d(top) + 1 cycles after the first input.
// Row 0 is the top row; row ROWS-1 is nearest to the Weight Buffer (paper
// Fig. 6). Results are read in parallel from acc.
module systolic_module
  import hygcn_pkg::*;
#(
  parameter int unsigned ROWS = MROWS,
  parameter int unsigned COLS = MCOLS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  elem_t a_in   [ROWS],
  input  logic  a_vin  [ROWS],
  input  elem_t w_in   [COLS],
  input  logic  w_vin  [COLS],
  output elem_t w_out  [COLS],
  output logic  w_vout [COLS],
  output acc_t  acc    [ROWS][COLS]
);

  elem_t a_q  [ROWS][COLS];
  logic  av_q [ROWS][COLS];
  elem_t w_q  [ROWS][COLS];
  logic  wv_q [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      elem_t a_i, w_i;
      logic  av_i, wv_i;
      if (c == 0) begin : g_aleft
        assign a_i = a_in[r];     assign av_i = a_vin[r];
      end else begin : g_ain
        assign a_i = a_q[r][c-1]; assign av_i = av_q[r][c-1];
      end
      if (r == ROWS-1) begin : g_wbot
        assign w_i = w_in[c];     assign wv_i = w_vin[c];
      end else begin : g_win
        assign w_i = w_q[r+1][c]; assign wv_i = wv_q[r+1][c];
      end
      pe u_pe (
        .clk, .rst_n, .clear,
        .a_in(a_i), .a_vin(av_i), .w_in(w_i), .w_vin(wv_i),
        .a_out(a_q[r][c]), .a_vout(av_q[r][c]),
        .w_out(w_q[r][c]), .w_vout(wv_q[r][c]),
        .acc(acc[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_wout
    assign w_out[c]  = w_q[0][c];
    assign w_vout[c] = wv_q[0][c];
  end

endmodule
