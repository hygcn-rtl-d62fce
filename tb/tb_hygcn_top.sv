// tb_hygcn_top: end-to-end test of the accelerator at its full default size.
//
// Runs three GCN layers on small random graphs through hygcn_top and an
// in-order memory model, and compares every output feature with a reference
// computed here from the graph: sampling (same LFSR rule as the Sampler),
// aggregation (add / max / min), h = ReLU((W a) >> 16 + b) in Q16.16.
// The three layers together exercise: several intervals, window sliding past
// empty rows and window shrinking (window count checked against the
// algorithm), uniform and predefined sampling, vertex-disperse slots
// (features of 3 beats) and multi-pass aggregation (38 beats), the
// latency-aware pipeline (independent modules) and the energy-aware pipeline
// (cooperative modules), both Aggregation Buffer banks in use at once, and
// batched memory arbitration. Each mechanism that never occurs counts a failure.
module tb_hygcn_top;
  import hygcn_pkg::*;

  localparam int NVMAX = 64, EMAX = 1024, FMAX = 640, OC = MCOLS;
  localparam int unsigned CPB = 32'h0, RIB = 32'h1000, XB = 32'h10000,
                          WBASE = 32'h80000, OB = 32'h100000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  layer_cfg_t cfg;
  logic start = 1'b0, done;
  logic mreq_v, mreq_r, mreq_we, mrsp_v;
  logic [MADDR_W-1:0] mreq_a;
  logic [2:0] mch; logic [3:0] mbk; logic [MADDR_W-8:0] mrow;
  chunk_t mreq_d, mrsp_d;
  logic s_win, s_kept, s_lat, s_coop, s_batch, s_wait, s_both;
  logic [NCORES-1:0] s_fire;

  hygcn_top u_dut (
    .clk, .rst_n, .cfg, .start, .done,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_we(mreq_we),
    .mem_req_addr(mreq_a), .mem_req_ch(mch), .mem_req_bank(mbk), .mem_req_row(mrow),
    .mem_req_wdata(mreq_d), .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
    .stat_window(s_win), .stat_edge_kept(s_kept), .stat_edge_fire(s_fire),
    .stat_disp_lat(s_lat), .stat_disp_coop(s_coop), .stat_batch(s_batch),
    .stat_agg_wait(s_wait), .stat_both_live(s_both)
  );

  hbm_model #(.LAT(20), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mreq_v), .req_ready(mreq_r), .req_we(mreq_we),
    .req_addr(mreq_a), .req_wdata(mreq_d), .rsp_valid(mrsp_v), .rsp_data(mrsp_d)
  );

  int checks = 0, failures = 0;
  int n_win = 0, n_kept = 0, n_lat = 0, n_coop = 0, n_batch = 0, n_both = 0, n_edges = 0;
  int n_wait = 0, exp_win = 0, n_slide = 0, n_shrink = 0, n_sampled_out = 0;
  int n_multislot = 0, n_multipass = 0, n_remap = 0;

  always @(posedge clk) if (rst_n) begin
    n_win   += int'(s_win);
    n_kept  += int'(s_kept);
    n_lat   += int'(s_lat);
    n_coop  += int'(s_coop);
    n_batch += int'(s_batch);
    n_wait  += int'(s_wait);
    n_edges += $countones(s_fire);
    n_both  += int'(s_both);
    if (mreq_v && mreq_r && mch != 3'(mreq_a) ) n_remap++;
  end

  // ---- graph and reference ------------------------------------------------
  int ecol [NVMAX+1];
  int erow [EMAX];
  bit eflag[EMAX];
  bit keepe[EMAX];
  int x    [NVMAX][FMAX];
  int w    [FMAX][OC];
  int b    [OC];

  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  function automatic int aggf(agg_op_e op, int a, int c);
    if (op == AGG_MAX) return (a > c) ? a : c;
    if (op == AGG_MIN) return (a < c) ? a : c;
    return a + c;
  endfunction

  task automatic run_layer(int nv, int flen, int iw, int h, agg_op_e op,
                           sample_mode_e sm, int fac, int smax, pipe_mode_e pm);
    int cpv, e, cyc;
    logic [15:0] lf;
    bit rows [NVMAX];
    cpv = (flen + 15) / 16;
    // graph: sources near the vertex (clustered) plus a far one, sorted, unique
    e = 0;
    for (int v = 0; v < nv; v++) begin
      bit pick [NVMAX];
      for (int u = 0; u < nv; u++) pick[u] = 0;
      pick[v] = 1;
      for (int k = 0; k < 4; k++) pick[(v + $urandom_range(6)) % nv] = 1;
      if ($urandom_range(3) == 0) pick[$urandom_range(nv-1)] = 1;
      if (v % 16 >= 12) for (int u = 0; u < nv; u++) pick[u] = (u == v);  // sparse rows
      ecol[v] = e;
      for (int u = 0; u < nv; u++) if (pick[u]) begin
        erow[e] = u; eflag[e] = ($urandom_range(1) == 1) || (u == v); e++;
      end
    end
    ecol[nv] = e;
    for (int u = 0; u < nv; u++) for (int k = 0; k < flen; k++)
      x[u][k] = int'($urandom_range(262143)) - 131072;     // [-2, 2) in Q16.16
    for (int k = 0; k < flen; k++) for (int c = 0; c < OC; c++)
      w[k][c] = int'($urandom_range(131071)) - 65536;      // [-1, 1)
    for (int c = 0; c < OC; c++) b[c] = int'($urandom_range(65535)) - 32768;

    // sampling reference
    lf = 16'h1234;
    for (int v = 0; v < nv; v++) begin
      int deg, span, off, kept;
      deg = ecol[v+1] - ecol[v];
      span = (deg < fac) ? deg : fac;
      off = (span == 0) ? 0 : int'(lf) % span;
      lf = lfsr_next(lf);
      kept = 0;
      for (int j = 0; j < deg; j++) begin
        bit k;
        case (sm)
          SAMPLE_UNIFORM: k = ((j % fac) == off) && (smax == 0 || kept < smax);
          SAMPLE_PREDEF:  k = eflag[ecol[v] + j];
          default:        k = 1;
        endcase
        keepe[ecol[v] + j] = k;
        if (k) kept++; else n_sampled_out++;
      end
    end

    // window reference (sliding and shrinking) per interval
    for (int i0 = 0; i0 < nv; i0 += iw) begin
      int pos, ws, we, lim;
      for (int u = 0; u < nv; u++) rows[u] = 0;
      for (int v = i0; v < i0 + iw && v < nv; v++)
        for (int q = ecol[v]; q < ecol[v+1]; q++) if (keepe[q]) rows[erow[q]] = 1;
      pos = 0;
      forever begin
        ws = pos;
        while (ws < nv && !rows[ws]) ws++;
        if (ws >= nv) break;
        if (ws > pos) n_slide++;
        lim = (ws + h - 1 < nv) ? ws + h - 1 : nv - 1;
        we = lim;
        while (!rows[we]) we--;
        if (we < lim) n_shrink++;
        exp_win++;
        pos = ws + h;
      end
    end

    // memory image
    for (int i = 0; i <= nv; i++) begin chunk_t c; c = '0; c[0] = ecol[i]; u_mem.mem[CPB + i] = c; end
    for (int q = 0; q < e; q++) begin
      chunk_t c; c = '0; c[0] = erow[q]; c[0][PREDEF_BIT] = eflag[q]; u_mem.mem[RIB + q] = c;
    end
    for (int u = 0; u < nv; u++) for (int j = 0; j < cpv; j++) begin
      chunk_t c; c = '0;
      for (int l = 0; l < SIMD_W; l++) if (j*16 + l < flen) c[l] = x[u][j*16 + l];
      u_mem.mem[XB + u*cpv + j] = c;
    end
    for (int k = 0; k < flen; k++) for (int j = 0; j < OC/16; j++) begin
      chunk_t c; for (int l = 0; l < 16; l++) c[l] = w[k][j*16 + l];
      u_mem.mem[WBASE + k*8 + j] = c;
    end
    for (int j = 0; j < OC/16; j++) begin
      chunk_t c; for (int l = 0; l < 16; l++) c[l] = b[j*16 + l];
      u_mem.mem[WBASE + flen*8 + j] = c;
    end
    for (int v = 0; v < nv; v++) for (int j = 0; j < 8; j++) u_mem.mem[OB + v*8 + j] = '0;

    cfg = '{nv: nv, flen: flen, cpv: cpv, iw: iw, win_h: h, op: op, s_mode: sm,
            s_factor: 16'(fac), s_max: 16'(smax), s_seed: 16'h1234, pipe: pm, relu: 1'b1,
            cp_base: CPB, ri_base: RIB, x_base: XB, w_base: WBASE, out_base: OB};
    if (cpv < NCORES) n_multislot++; else n_multipass++;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    $display("layer nv=%0d flen=%0d op=%s sample=%s pipe=%s: %0d cycles",
             nv, flen, op.name(), sm.name(), pm.name(), cyc);

    // compare outputs
    for (int v = 0; v < nv; v++) begin
      longint acc [OC];
      int a [FMAX];
      bit has;
      has = 0;
      for (int k = 0; k < flen; k++) a[k] = 0;
      for (int q = ecol[v]; q < ecol[v+1]; q++) if (keepe[q]) begin
        for (int k = 0; k < flen; k++) a[k] = has ? aggf(op, a[k], x[erow[q]][k]) : x[erow[q]][k];
        has = 1;
      end
      for (int c = 0; c < OC; c++) begin
        longint s;
        int got, exp;
        s = 0;
        for (int k = 0; k < flen; k++) s += longint'(a[k]) * longint'(w[k][c]);
        s = (s >>> 16) + longint'(b[c]);
        if (s > 64'sd2147483647) s = 64'sd2147483647;
        if (s < -64'sd2147483648) s = -64'sd2147483648;
        if (s < 0) s = 0;
        exp = int'(s);
        got = u_mem.mem[OB + v*8 + c/16][c%16];
        checks++;
        if (got !== exp) begin
          failures++;
          if (failures < 10) $display("MISMATCH v=%0d c=%0d got=%0d exp=%0d", v, c, got, exp);
        end
      end
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    cfg = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run_layer(48, 40, 16, 8, AGG_ADD, SAMPLE_ALL, 1, 0, PIPE_LATENCY);
    run_layer(48, 40, 32, 6, AGG_MAX, SAMPLE_UNIFORM, 2, 3, PIPE_ENERGY);
    run_layer(24, 600, 8, 4, AGG_MIN, SAMPLE_PREDEF, 1, 0, PIPE_LATENCY);
    checks++;
    if (n_win != exp_win) begin
      failures++; $display("window count %0d, expected %0d", n_win, exp_win);
    end
    $display("mechanisms:");
    need("windows loaded", n_win);
    need("window slid past empty rows", n_slide);
    need("window shrunk", n_shrink);
    need("edges dropped by sampling", n_sampled_out);
    need("edges aggregated", n_edges);
    need("multi-slot aggregation layers", n_multislot);
    need("multi-pass aggregation layers", n_multipass);
    need("latency-aware dispatches", n_lat);
    need("energy-aware (cooperative) dispatches", n_coop);
    need("cycles with both agg banks live", n_both);
    need("memory batches", n_batch);
    need("aggregation waited for a free bank", n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
