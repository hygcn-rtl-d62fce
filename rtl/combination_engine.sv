// combination_engine: Combination Engine (weight buffer, vSched, systolic
// modules, Activate Unit and Output Buffer).
//
// For every aggregated vertex a_v it computes h_v = ReLU(W a_v + b), with W
// of size flen x MCOLS (MCOLS = 128 outputs, as in all models the paper
// evaluates). Weights and bias are loaded once per layer into the Weight
// Buffer (load_w). Intervals come from the Coordinator; vSched dispatches
// groups of MROWS final vertices either to one free module (latency-aware
// pipeline, modules work independently, each reading W from the Weight Buffer
// itself) or NMOD groups at once to all modules (energy-aware pipeline,
// cooperative mode: only the bottom module reads W, and the weights climb
// through all NMOD*MROWS rows). Finished modules are drained one row (one
// vertex) per cycle through the Activate Unit into the Output Buffer, which
// writes the rows off-chip. The interval's bank is released once all its
// groups are combined and its aggregation is complete.
//
// Weight Buffer layout: column-banked (one bank per output column), so each
// column can read its own, skewed, row k = t - c in the same cycle. Off-chip
// layout of a layer's parameters: W row k at w_base + 8k (8 beats of 16
// elements), followed by the 128-element bias (8 beats).
// Timing per dispatch: flen + MCOLS + d + 2 cycles of compute (d = rows
// between the top row and the weight entry), then MROWS drain cycles per
// module. Module count, size and both working modes follow the paper; the
// schedule, layouts and drain order are this design's choices.
module combination_engine
  import hygcn_pkg::*;
#(
  parameter int unsigned WB_ROWS  = 4096,    // Weight Buffer: 2 MB = 4096 rows of 128 x 32 bit
  parameter int unsigned AG_DEPTH = 131072,
  parameter int unsigned OB_DEPTH = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pipe_mode_e        mode,
  input  logic [VID_W-1:0]  flen,         // input feature length (elements)
  input  logic [VID_W-1:0]  cpv,          // chunks per aggregated vertex
  input  logic              relu_en,
  input  logic [MADDR_W-1:0] w_base,
  input  logic [MADDR_W-1:0] out_base,
  input  logic              load_w,       // pulse: fetch W and b
  output logic              w_loaded,
  output logic              idle,         // nothing in flight, output written
  // Coordinator
  input  logic              comb_valid,
  input  logic [VID_W-1:0]  comb_base,
  input  logic [VID_W-1:0]  comb_iw,
  input  logic              comb_complete,
  output logic [VID_W-1:0]  q_vid,
  input  logic [NMOD*MROWS-1:0] q_ready,
  output logic [$clog2(AG_DEPTH)-1:0] c_raddr [NMOD*MROWS],
  output logic [VID_W-1:0]  c_rvid [NMOD*MROWS],
  input  chunk_t            c_rdata [NMOD*MROWS],
  output logic              comb_release,
  // Weight Buffer client
  output logic              wq_valid,
  input  logic              wq_ready,
  output logic [MADDR_W-1:0] wq_addr,
  output logic [MLEN_W-1:0] wq_len,
  input  logic              wr_valid,
  input  logic [MLEN_W-1:0] wr_idx,
  input  chunk_t            wr_rdata,
  // Output Buffer client
  output logic              oq_valid,
  input  logic              oq_ready,
  output logic [MADDR_W-1:0] oq_addr,
  output logic [MLEN_W-1:0] oq_len,
  output chunk_t            oq_wdata,
  input  logic              oq_pop,
  // statistics
  output logic              disp_valid,
  output logic              disp_coop
);

  localparam int unsigned NR  = NMOD * MROWS;
  localparam int unsigned MW  = $clog2(NMOD);
  localparam int unsigned WBA = $clog2(WB_ROWS);
  localparam int unsigned AGA = $clog2(AG_DEPTH);
  localparam int unsigned BPR = MCOLS / SIMD_W;

  // ---------------- Weight Buffer ------------------------------------------
  elem_t wmem [MCOLS][WB_ROWS];
  elem_t bias [MCOLS];
  logic [MLEN_W-1:0] w_total, w_got;
  logic              w_req;
  assign w_total  = MLEN_W'(flen * BPR + BPR);
  assign wq_valid = w_req;
  assign wq_addr  = w_base;
  assign wq_len   = w_total;

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      if (wr_idx < MLEN_W'(flen * BPR)) begin
        for (int l = 0; l < SIMD_W; l++)
          wmem[32'(wr_idx[2:0]) * SIMD_W + l][WBA'(wr_idx >> 3)] <= wr_rdata[l];
      end else begin
        for (int l = 0; l < SIMD_W; l++)
          bias[(32'(wr_idx - MLEN_W'(flen * BPR)) * SIMD_W + l) % MCOLS] <= wr_rdata[l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_req <= 1'b0; w_got <= '0; w_loaded <= 1'b0;
    end else begin
      if (load_w) begin w_req <= 1'b1; w_got <= '0; w_loaded <= 1'b0; end
      else if (wq_ready) w_req <= 1'b0;
      if (wr_valid) begin
        w_got <= w_got + 1'b1;
        if (w_got + 1'b1 == w_total) w_loaded <= 1'b1;
      end
    end
  end

  // ---------------- interval and vSched ------------------------------------
  logic              ivl;                 // working on the Coordinator's bank
  logic [NMOD-1:0]   mod_busy, g_ready;
  logic [VID_W-1:0]  q_grp, d_grp;
  logic [MW-1:0]     d_mod;
  logic              all_sent, vs_start;

  assign vs_start = comb_valid && !ivl && w_loaded;
  assign q_vid    = q_grp * VID_W'(MROWS);
  for (genvar m = 0; m < NMOD; m++) begin : g_gr
    assign g_ready[m] = &q_ready[m*MROWS +: MROWS];
  end

  vsched u_vsched (
    .clk, .rst_n, .mode, .start(vs_start),
    .n_groups((comb_iw + VID_W'(MROWS) - 1) / VID_W'(MROWS)),
    .q_grp, .q_ready(g_ready), .mod_busy,
    .disp_valid, .disp_coop, .disp_mod(d_mod), .disp_grp(d_grp), .all_sent
  );

  // ---------------- systolic modules ---------------------------------------
  logic              coop;                // cooperative run in progress
  logic [NMOD-1:0]   run, fin;
  logic [VID_W-1:0]  t    [NMOD];
  logic [VID_W-1:0]  grp  [NMOD];
  logic [NMOD-1:0]   mclr;
  logic [VID_W-1:0]  t_end;
  assign t_end = flen + VID_W'(MCOLS) + (coop ? VID_W'(NR) : VID_W'(MROWS)) + 1;

  elem_t a_in  [NMOD][MROWS];
  logic  a_v   [NMOD][MROWS];
  elem_t w_in  [NMOD][MCOLS];
  logic  w_v   [NMOD][MCOLS];
  elem_t w_out [NMOD][MCOLS];
  logic  w_vo  [NMOD][MCOLS];
  acc_t  macc  [NMOD][MROWS][MCOLS];

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    assign mclr[m] = disp_valid && (disp_coop || d_mod == MW'(m));

    // aggregated-feature feeders, skewed by the row's distance to the weight entry
    for (genvar r = 0; r < MROWS; r++) begin : g_feed
      localparam int unsigned P = m * MROWS + r;
      logic [VID_W-1:0] d, k, v;
      assign d = coop ? VID_W'((NMOD-1-m)*MROWS + (MROWS-1-r)) : VID_W'(MROWS-1-r);
      assign k = t[m] - d;
      assign v = grp[m] * VID_W'(MROWS) + VID_W'(r);
      assign c_rvid[P]  = v;
      assign c_raddr[P] = AGA'(v * cpv + (k >> 4));
      assign a_in[m][r] = c_rdata[P][k[3:0]];
      assign a_v[m][r]  = run[m] && (t[m] + 1 > d) && (k < flen) && (v < comb_iw);  // t >= d
    end

    // weight entry: the Weight Buffer, or the module below in cooperative mode
    for (genvar c = 0; c < MCOLS; c++) begin : g_w
      logic [VID_W-1:0] kk;
      assign kk = t[m] - VID_W'(c);
      if (m == NMOD-1) begin : g_bot
        assign w_in[m][c] = wmem[c][WBA'(kk)];
        assign w_v[m][c]  = run[m] && (t[m] + 1 > VID_W'(c)) && (kk < flen);  // t >= c
      end else begin : g_up
        assign w_in[m][c] = coop ? w_out[m+1][c] : wmem[c][WBA'(kk)];
        assign w_v[m][c]  = coop ? w_vo[m+1][c]
                                 : run[m] && (t[m] + 1 > VID_W'(c)) && (kk < flen);
      end
    end

    systolic_module u_mod (
      .clk, .rst_n, .clear(mclr[m]),
      .a_in(a_in[m]), .a_vin(a_v[m]), .w_in(w_in[m]), .w_vin(w_v[m]),
      .w_out(w_out[m]), .w_vout(w_vo[m]), .acc(macc[m])
    );
  end

  // ---------------- drain through the Activate Unit ------------------------
  logic              dr_act;
  logic [MW-1:0]     dr_m;
  logic [$clog2(NR)-1:0] dr_r;           // row within the drained set
  logic [MW-1:0]     dr_mm;               // module of the current row
  logic [$clog2(MROWS)-1:0] dr_rr;
  logic [VID_W-1:0]  dr_v;
  logic              ob_full, ob_empty, au_v;
  logic [VID_W-1:0]  au_tag;
  elem_t             au_out [MCOLS];
  logic              dr_fire, dr_last;

  assign dr_mm   = coop ? MW'(dr_r / MROWS) : dr_m;
  assign dr_rr   = $clog2(MROWS)'(dr_r % MROWS);
  assign dr_v    = grp[dr_mm] * VID_W'(MROWS) + VID_W'(dr_rr);
  assign dr_fire = dr_act && !ob_full;
  assign dr_last = coop ? (dr_r == $clog2(NR)'(NR-1)) : (dr_r == $clog2(NR)'(MROWS-1));

  logic              pick_v;
  logic [MW-1:0]     pick_m;
  always_comb begin
    pick_v = 1'b0; pick_m = '0;
    for (int m = NMOD-1; m >= 0; m--) if (fin[m]) begin pick_v = 1'b1; pick_m = MW'(m); end
  end

  activate_unit u_act (
    .clk, .rst_n, .relu_en,
    .in_valid(dr_fire && dr_v < comb_iw), .in_tag(comb_base + dr_v),
    .in(macc[dr_mm][dr_rr]), .bias,
    .out_valid(au_v), .out_tag(au_tag), .out(au_out)
  );

  output_buffer #(.LANES(MCOLS), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n, .out_base,
    .push(au_v), .push_vid(au_tag), .push_row(au_out),
    .full(ob_full), .empty(ob_empty),
    .req_valid(oq_valid), .req_ready(oq_ready), .req_addr(oq_addr), .req_len(oq_len),
    .wr_data(oq_wdata), .wr_pop(oq_pop)
  );

  assign mod_busy     = run | fin | mclr | (dr_act ? (coop ? '1 : NMOD'(1) << dr_m) : '0);
  assign comb_release = ivl && all_sent && !disp_valid && (mod_busy == '0) && !dr_act
                        && comb_complete;
  assign idle         = !ivl && !comb_valid && (mod_busy == '0) && ob_empty && !au_v
                        && !w_req && (w_loaded || w_got == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ivl <= 1'b0; coop <= 1'b0; run <= '0; fin <= '0;
      dr_act <= 1'b0; dr_m <= '0; dr_r <= '0;
      for (int m = 0; m < NMOD; m++) begin t[m] <= '0; grp[m] <= '0; end
    end else begin
      if (vs_start)     ivl <= 1'b1;
      if (comb_release) ivl <= 1'b0;
      // dispatch
      if (disp_valid) begin
        coop <= disp_coop;
        for (int m = 0; m < NMOD; m++)
          if (disp_coop || d_mod == MW'(m)) begin
            run[m] <= 1'b1; t[m] <= '0;
            grp[m] <= disp_coop ? d_grp + VID_W'(m) : d_grp;
          end
      end
      // compute
      for (int m = 0; m < NMOD; m++)
        if (run[m]) begin
          if (t[m] == t_end) begin run[m] <= 1'b0; fin[m] <= 1'b1; end
          else t[m] <= t[m] + 1'b1;
        end
      // drain
      if (!dr_act) begin
        if (coop ? (fin == '1) : pick_v) begin
          dr_act <= 1'b1; dr_m <= coop ? '0 : pick_m; dr_r <= '0;
          if (coop) fin <= '0; else fin[pick_m] <= 1'b0;
        end
      end else if (dr_fire) begin
        if (dr_last) dr_act <= 1'b0;
        else dr_r <= dr_r + 1'b1;
      end
    end
  end

endmodule
