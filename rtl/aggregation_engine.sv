// aggregation_engine: Aggregation Engine (Edge Buffer, Sampler, Sparsity
// Eliminator, Input Buffer, eSched and the 32 SIMD cores).
//
// Runs the Aggregation phase interval by interval. For each interval of up to
// iw_cfg destination vertices (the shard width) it
//   1. acquires a bank of the Aggregation Buffer from the Coordinator;
//   2. fetches the interval's column pointers and edge list (the graph is read
//      directly in CSC form: col_ptr[v] .. col_ptr[v+1]-1 index the sources of
//      v in row_idx) into the Edge Buffer;
//   3. passes every vertex's edges through the Sampler, keeping the sampled
//      edges in a second half of the Edge Buffer and marking their source rows
//      in the Sparsity Eliminator;
//   4. lets the Sparsity Eliminator emit effectual windows (slide and shrink);
//      for each window the prefetcher loads the source rows' features into one
//      bank of the double-buffered Input Buffer while eSched aggregates the
//      previous window from the other bank;
//   5. reports the interval complete to the Coordinator.
// Off-chip layout (all addresses in 512-bit beats): col_ptr[i] and row_idx[e]
// occupy the low 32 bits of beat cp_base+i and ri_base+e (bit 31 of a row_idx
// word is the predefined-sampling flag); vertex u's feature is the cpv
// consecutive beats at x_base + u*cpv. Sources within a vertex's list must be
// in ascending order, as CSC normally gives them.
// The step order and block roles follow the paper (Sec. 4.2-4.3, Algorithms
// 2-4); the layouts, the per-interval sequencing and the Edge Buffer split are
// this design's choices.
//
// Its assertions are switched off during reset with disable iff (!rst_n), so
// lint reports rst_n as used both asynchronously (flip-flop reset) and
// synchronously (assertion clock domain); the warning is expected and stands.
module aggregation_engine
  import hygcn_pkg::*;
#(
  parameter int unsigned MAX_IW   = 131072,
  parameter int unsigned EB_DEPTH = 524288,   // 2 MB of 32-bit edges, two halves
  parameter int unsigned IN_DEPTH = 1024,     // chunks per Input Buffer bank (2 x 64 KB)
  parameter int unsigned AG_DEPTH = 131072,
  parameter int unsigned MAX_ROWS = 262144
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  logic [VID_W-1:0]  nv,           // vertices in the graph
  input  logic [VID_W-1:0]  cpv,          // beats (chunks) per feature vector
  input  logic [VID_W-1:0]  iw_cfg,       // interval (shard) width
  input  logic [VID_W-1:0]  win_h,        // window (shard) height
  input  agg_op_e           op,
  input  sample_mode_e      s_mode,
  input  logic [15:0]       s_factor,
  input  logic [15:0]       s_max,
  input  logic [15:0]       s_seed,
  input  logic [MADDR_W-1:0] cp_base,
  input  logic [MADDR_W-1:0] ri_base,
  input  logic [MADDR_W-1:0] x_base,
  input  logic              start,
  output logic              busy,
  // Coordinator
  output logic              agg_acq,
  output logic [VID_W-1:0]  agg_base,
  output logic [VID_W-1:0]  agg_iw,
  input  logic              agg_gnt,
  output logic              agg_done,
  output logic [$clog2(AG_DEPTH)-1:0] ag_raddr [NCORES],
  input  chunk_t            ag_rdata [NCORES],
  output logic [NCORES-1:0] ag_we,
  output logic [$clog2(AG_DEPTH)-1:0] ag_waddr [NCORES],
  output logic [VID_W-1:0]  ag_wvid [NCORES],
  output chunk_t            ag_wdata [NCORES],
  output logic [NCORES-1:0] fin_valid,
  output logic [VID_W-1:0]  fin_vid [NCORES],
  // Edge Buffer client
  output logic              eq_valid,
  input  logic              eq_ready,
  output logic [MADDR_W-1:0] eq_addr,
  output logic [MLEN_W-1:0] eq_len,
  input  logic              er_valid,
  input  logic [MLEN_W-1:0] er_idx,
  input  chunk_t            er_data,
  // Input Buffer client
  output logic              iq_valid,
  input  logic              iq_ready,
  output logic [MADDR_W-1:0] iq_addr,
  output logic [MLEN_W-1:0] iq_len,
  input  logic              ir_valid,
  input  logic [MLEN_W-1:0] ir_idx,
  input  chunk_t            ir_data,
  // statistics
  output logic              win_fire,     // a window was taken for loading
  output logic [NCORES-1:0] edge_fire,
  output logic              edge_kept     // an edge survived sampling
);

  localparam int unsigned IWA = $clog2(MAX_IW+1);
  localparam int unsigned HEB = EB_DEPTH / 2;
  localparam int unsigned EBA = $clog2(HEB);
  localparam int unsigned INA = $clog2(IN_DEPTH);

  // ---------------- Edge Buffer ---------------------------------------------
  logic [VID_W-1:0] cp_raw [MAX_IW+1];     // fetched column pointers
  logic [VID_W-1:0] ecp    [MAX_IW+1];     // column pointers of the sampled list
  logic [VID_W-1:0] raw    [HEB];          // fetched edges
  logic [VID_W-1:0] smp    [HEB];          // sampled edges

  typedef enum logic [3:0] {A_IDLE, A_ACQ, A_CPREQ, A_CPWAIT, A_EDREQ, A_EDWAIT,
                            A_VSTART, A_VEDGE, A_SCAN, A_RUN, A_FIN} astate_e;
  astate_e st;

  logic [VID_W-1:0] ivs, niw, cnt, ne, sv, rp, wp, jdeg, j;

  assign busy     = (st != A_IDLE);
  assign agg_acq  = (st == A_ACQ);
  assign agg_base = ivs;
  assign agg_iw   = (nv - ivs < iw_cfg) ? nv - ivs : iw_cfg;
  assign ne       = cp_raw[IWA'(niw)] - cp_raw[0];

  // ---------------- Sampler -------------------------------------------------
  logic       s_keep, s_vstart, s_evalid;
  logic [VID_W-1:0] e_word;
  assign e_word   = raw[EBA'(rp)];
  assign s_vstart = (st == A_VSTART) && (sv < niw);
  assign s_evalid = (st == A_VEDGE);
  assign jdeg     = cp_raw[IWA'(sv + 1)] - cp_raw[IWA'(sv)];

  sampler u_sampler (
    .clk, .rst_n, .mode(s_mode), .factor(s_factor), .max_keep(s_max),
    .seed(s_seed), .seed_load(start && st == A_IDLE),
    .v_start(s_vstart), .v_deg(jdeg),
    .e_valid(s_evalid), .e_flag(e_word[PREDEF_BIT]), .keep(s_keep)
  );
  assign edge_kept = s_evalid && s_keep;

  // ---------------- Sparsity Eliminator -------------------------------------
  logic el_busy, win_valid, win_ready, scan_done, el_clear, el_scan, scan_seen;
  logic [VID_W-1:0] win_s, win_e, src;
  assign src      = {1'b0, e_word[VID_W-2:0]};
  assign el_clear = (st == A_ACQ) && agg_gnt;
  assign el_scan  = (st == A_SCAN) && !el_busy;

  sparsity_eliminator #(.MAX_ROWS(MAX_ROWS)) u_elim (
    .clk, .rst_n, .n_rows(nv), .win_h,
    .clear(el_clear), .mark(edge_kept), .mark_row(src),
    .scan(el_scan), .busy(el_busy),
    .win_valid, .win_ready, .win_start(win_s), .win_end(win_e), .scan_done
  );

  // ---------------- Input Buffer and prefetch of window features -----------
  logic ib_wr_ready, ib_rd_ready, ib_fill, ib_release;
  logic [2*VID_W-1:0] ib_tag;
  logic [INA-1:0] ib_raddr [NCORES];
  logic [BEAT_W-1:0] ib_rdata_raw [NCORES];
  chunk_t ib_rdata [NCORES];

  typedef enum logic [1:0] {F_IDLE, F_REQ, F_WAIT} fstate_e;
  fstate_e fst;
  logic [VID_W-1:0] f_ws, f_we, f_len, f_got;

  assign win_ready = (st == A_RUN) && (fst == F_IDLE) && ib_wr_ready;
  assign win_fire  = win_valid && win_ready;
  assign iq_valid  = (fst == F_REQ);
  assign iq_addr   = x_base + MADDR_W'(f_ws * cpv);
  assign iq_len    = MLEN_W'(f_len);
  assign ib_fill   = (fst == F_WAIT) && (f_got == f_len);

  pingpong_ram #(.DEPTH(IN_DEPTH), .W(BEAT_W), .NRD(NCORES), .TAG_W(2*VID_W)) u_ibuf (
    .clk, .rst_n,
    .wr_ready(ib_wr_ready), .wr_en(ir_valid), .wr_addr(INA'(ir_idx)), .wr_data(ir_data),
    .fill_done(ib_fill), .fill_tag({f_ws, f_we}),
    .rd_ready(ib_rd_ready), .rd_tag(ib_tag),
    .rd_addr(ib_raddr), .rd_data(ib_rdata_raw), .rd_release(ib_release)
  );
  for (genvar c = 0; c < NCORES; c++) begin : g_ib
    assign ib_rdata[c] = chunk_t'(ib_rdata_raw[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; f_ws <= '0; f_we <= '0; f_len <= '0; f_got <= '0;
    end else begin
      unique case (fst)
        F_IDLE: if (win_fire) begin
          f_ws <= win_s; f_we <= win_e; f_got <= '0;
          f_len <= (win_e - win_s + 1) * cpv;
          fst <= F_REQ;
        end
        F_REQ:  if (iq_ready) fst <= F_WAIT;
        F_WAIT: begin
          if (ir_valid) f_got <= f_got + 1'b1;
          if (ib_fill)  fst <= F_IDLE;
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // ---------------- eSched and the SIMD cores -------------------------------
  logic es_busy, es_done, es_start, es_run;
  logic [IWA-1:0] ecp_addr [NCORES];
  logic [VID_W-1:0] ecp_lo [NCORES], ecp_hi [NCORES], eb_src [NCORES];
  logic [$clog2(EB_DEPTH)-1:0] eb_addr [NCORES];

  assign es_start   = ib_rd_ready && !es_run;
  assign ib_release = es_done;
  for (genvar s = 0; s < NCORES; s++) begin : g_eb
    assign ecp_lo[s] = ecp[ecp_addr[s]];
    assign ecp_hi[s] = ecp[IWA'(ecp_addr[s] + 1'b1)];
    assign eb_src[s] = smp[EBA'(eb_addr[s])];
  end

  esched #(.MAX_IW(MAX_IW), .EB_DEPTH(EB_DEPTH), .IN_DEPTH(IN_DEPTH), .AG_DEPTH(AG_DEPTH)) u_esched (
    .clk, .rst_n, .op, .cpv, .iw(niw),
    .new_interval(el_clear), .start(es_start),
    .ws(ib_tag[2*VID_W-1:VID_W]), .we(ib_tag[VID_W-1:0]),
    .busy(es_busy), .done(es_done),
    .ecp_addr, .ecp_lo, .ecp_hi, .eb_addr, .eb_src,
    .in_addr(ib_raddr), .in_data(ib_rdata),
    .ag_raddr, .ag_rdata, .ag_we, .ag_waddr, .ag_wvid, .ag_wdata,
    .fin_valid, .fin_vid, .edge_fire
  );

  // ---------------- interval sequencing -------------------------------------
  assign eq_valid = (st == A_CPREQ) || (st == A_EDREQ);
  assign eq_addr  = (st == A_CPREQ) ? cp_base + MADDR_W'(ivs) : ri_base + MADDR_W'(cp_raw[0]);
  assign eq_len   = (st == A_CPREQ) ? MLEN_W'(niw + 1) : MLEN_W'(ne);
  assign agg_done = (st == A_FIN);

  always_ff @(posedge clk) begin
    if (er_valid && st == A_CPWAIT) cp_raw[IWA'(er_idx)] <= er_data[0];
    if (er_valid && st == A_EDWAIT) raw[EBA'(er_idx)]    <= er_data[0];
    if (st == A_VSTART) ecp[IWA'(sv)] <= wp;
    if (edge_kept)      smp[EBA'(wp)] <= src;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; ivs <= '0; niw <= '0; cnt <= '0; sv <= '0; rp <= '0; wp <= '0; j <= '0;
      es_run <= 1'b0; scan_seen <= 1'b0;
    end else begin
      if (es_start) es_run <= 1'b1;
      if (es_done)  es_run <= 1'b0;
      if (scan_done) scan_seen <= 1'b1;
      unique case (st)
        A_IDLE: if (start) begin ivs <= '0; st <= A_ACQ; end
        A_ACQ: begin
          niw <= agg_iw;
          if (agg_gnt) st <= A_CPREQ;
        end
        A_CPREQ: if (eq_ready) begin cnt <= '0; st <= A_CPWAIT; end
        A_CPWAIT: begin
          if (er_valid) cnt <= cnt + 1'b1;
          if (cnt == niw + 1 && !el_busy) begin
            cnt <= '0;
            st  <= (ne == '0) ? A_VSTART : A_EDREQ;
            sv  <= '0; rp <= '0; wp <= '0;
          end
        end
        A_EDREQ: if (eq_ready) st <= A_EDWAIT;
        A_EDWAIT: begin
          if (er_valid) cnt <= cnt + 1'b1;
          if (cnt == ne) st <= A_VSTART;
        end
        A_VSTART: begin
          j <= '0;
          if (sv == niw)       st <= A_SCAN;
          else if (jdeg == '0) sv <= sv + 1'b1;
          else                 st <= A_VEDGE;
        end
        A_VEDGE: begin
          rp <= rp + 1'b1;
          if (s_keep) wp <= wp + 1'b1;
          j <= j + 1'b1;
          if (j + 1 == jdeg) begin sv <= sv + 1'b1; st <= A_VSTART; end
        end
        A_SCAN: if (!el_busy) begin scan_seen <= 1'b0; st <= A_RUN; end
        A_RUN: if (scan_seen && !win_valid && fst == F_IDLE && !ib_rd_ready && !es_run && !es_busy)
                 st <= A_FIN;
        A_FIN: begin
          ivs <= ivs + niw;
          st  <= (ivs + niw >= nv) ? A_IDLE : A_ACQ;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  a_edges_fit: assert property (@(posedge clk) disable iff (!rst_n)
                                (st == A_EDREQ) |-> (ne <= VID_W'(HEB)));
  a_window_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                  (fst == F_REQ) |-> (f_len <= VID_W'(IN_DEPTH)));

endmodule
