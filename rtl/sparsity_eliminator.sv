// sparsity_eliminator: Sparsity Eliminator of the Aggregation Engine.
//
// For the interval of destination vertices being aggregated, it finds the
// "effectual shards": the runs of source rows whose features must actually be
// loaded. The sampled edges of the interval first mark their source rows in a
// row bitmap (mark). A scan then applies the paper's window sliding and
// shrinking (GetOneEffectInterval): from row_pos, slide down to the first row
// that has an edge (window start ws); the window spans win_h rows, and
// row_pos moves past it; then shrink the window's bottom row upward to the
// last row that has an edge (window end we). Each window (ws, we) is emitted
// on a valid/ready port, in increasing row order, until the rows run out.
//
// The bitmap is kept as 64-row words so that empty stretches are skipped a
// word per cycle; a word with a set bit is resolved in the same cycle.
// clear takes one cycle per 64 rows of the graph (n_rows); mark takes one
// row per cycle. The algorithm is the paper's; the bitmap, its word width
// and the row-count bound are this design's choices.
module sparsity_eliminator
  import hygcn_pkg::*;
#(
  parameter int unsigned MAX_ROWS = 262144   // holds the largest graph evaluated (Reddit, 232,965 vertices)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VID_W-1:0] n_rows,      // vertices in the graph
  input  logic [VID_W-1:0] win_h,       // window (shard) height, >= 1
  input  logic             clear,       // pulse: clear the bitmap
  input  logic             mark,
  input  logic [VID_W-1:0] mark_row,
  input  logic             scan,        // pulse: start emitting windows
  output logic             busy,
  output logic             win_valid,
  input  logic             win_ready,
  output logic [VID_W-1:0] win_start,
  output logic [VID_W-1:0] win_end,
  output logic             scan_done    // pulse after the last window
);

  localparam int unsigned NW = (MAX_ROWS + 63) / 64;
  localparam int unsigned WA = (NW > 1) ? $clog2(NW) : 1;

  logic [63:0] bitmap [NW];

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_SLIDE, S_SHRINK, S_EMIT} state_e;
  state_e state;

  logic [VID_W-1:0] pos, ws, we, cw;

  // first set bit at or above bit lo; last set bit at or below bit hi
  function automatic logic [6:0] first_from(logic [63:0] w, logic [5:0] lo);
    for (int i = 0; i < 64; i++)
      if (i >= lo && w[i]) return 7'(i);
    return 7'd64;
  endfunction
  function automatic logic [6:0] last_upto(logic [63:0] w, logic [5:0] hi);
    for (int i = 63; i >= 0; i--)
      if (i <= hi && w[i]) return 7'(i);
    return 7'd64;
  endfunction

  logic [63:0] w_pos, w_we;
  logic [6:0]  f_pos, l_we;
  assign w_pos = bitmap[WA'(pos >> 6)];
  assign w_we  = bitmap[WA'(we >> 6)];
  assign f_pos = first_from(w_pos, pos[5:0]);
  assign l_we  = last_upto(w_we, we[5:0]);

  logic [VID_W-1:0] n_words, cand;
  assign n_words = (n_rows + 63) >> 6;
  assign cand    = {pos[VID_W-1:6], f_pos[5:0]};

  assign busy      = (state != S_IDLE);
  assign win_valid = (state == S_EMIT);
  assign win_start = ws;
  assign win_end   = we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pos <= '0; ws <= '0; we <= '0; cw <= '0; scan_done <= 1'b0;
    end else begin
      scan_done <= 1'b0;
      if (mark) bitmap[WA'(mark_row >> 6)][mark_row[5:0]] <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (clear) begin cw <= '0; state <= S_CLEAR; end
          else if (scan) begin pos <= '0; state <= S_SLIDE; end
        end
        S_CLEAR: begin
          bitmap[WA'(cw)] <= '0;
          cw <= cw + 1;
          if (cw + 1 >= n_words) state <= S_IDLE;
        end
        // window sliding: move down until a row with an edge is on top
        S_SLIDE: begin
          if (pos >= n_rows) begin
            state <= S_IDLE; scan_done <= 1'b1;
          end else if (f_pos != 7'd64 && cand < n_rows) begin
            ws    <= cand;
            we    <= (cand + win_h - 1 < n_rows) ? cand + win_h - 1 : n_rows - 1;
            pos   <= cand + win_h;
            state <= S_SHRINK;
          end else begin
            pos <= {pos[VID_W-1:6] + 1'b1, 6'd0};
          end
        end
        // window shrinking: move the bottom row up until it has an edge
        S_SHRINK: begin
          if (l_we != 7'd64) begin
            we    <= {we[VID_W-1:6], l_we[5:0]};
            state <= S_EMIT;
          end else begin
            we <= {we[VID_W-1:6], 6'd0} - 1;
          end
        end
        S_EMIT: begin
          if (win_ready) state <= S_SLIDE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
