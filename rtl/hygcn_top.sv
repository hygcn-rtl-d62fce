// hygcn_top: the HyGCN accelerator, one GCN layer per start.
//
// A GCN layer computes, for every vertex v, a_v = Aggregate(features of the
// sampled neighbours of v) and then h_v = ReLU(W a_v + b). HyGCN runs the two
// phases on two engines built for their opposite behaviour: an Aggregation
// Engine for the irregular, graph-shaped gathering (SIMD cores, edge sampling,
// sparsity elimination) and a Combination Engine for the regular
// matrix-vector work (systolic modules). The Coordinator's ping-pong
// Aggregation Buffer lets the two run as a pipeline, and a single Memory
// Access Handler merges the traffic of the four off-chip-facing buffers
// (edges > input features > weights > output features) into one memory port.
//
// Use: set cfg, pulse start; done rises when every output feature of the
// layer has been written. The memory port carries one 512-bit beat per cycle,
// with the channel/bank/row split of each beat address alongside; read data
// must return in order. The stat_* outputs pulse on internal events (for
// observation only). Block structure follows the paper (Fig. 3); the memory
// port and configuration interface are this design's.
module hygcn_top
  import hygcn_pkg::*;
#(
  parameter int unsigned MAX_IW   = 131072,   // vertices per interval (8 MB bank / 64 B per vertex)
  parameter int unsigned EB_DEPTH = 524288,   // Edge Buffer, 2 MB
  parameter int unsigned IN_DEPTH = 1024,     // Input Buffer bank, 64 KB (128 KB double buffer)
  parameter int unsigned AG_DEPTH = 131072,   // Aggregation Buffer bank, 8 MB (16 MB ping-pong)
  parameter int unsigned WB_ROWS  = 4096,     // Weight Buffer, 2 MB
  parameter int unsigned OB_DEPTH = 8192,     // Output Buffer, 4 MB
  parameter int unsigned MAX_ROWS = 262144    // largest graph (vertices)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  input  logic               start,
  output logic               done,
  // off-chip memory port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [MADDR_W-1:0] mem_req_addr,
  output logic [2:0]         mem_req_ch,
  output logic [3:0]         mem_req_bank,
  output logic [MADDR_W-8:0] mem_req_row,
  output chunk_t             mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  chunk_t             mem_rsp_data,
  // event pulses
  output logic               stat_window,
  output logic               stat_edge_kept,
  output logic [NCORES-1:0]  stat_edge_fire,
  output logic               stat_disp_lat,
  output logic               stat_disp_coop,
  output logic               stat_batch,
  output logic               stat_agg_wait,
  output logic               stat_both_live
);

  localparam int unsigned AGA = $clog2(AG_DEPTH);
  localparam int unsigned NCR = NMOD * MROWS;

  // ---- Memory Access Handler ------------------------------------------------
  logic [NCLIENT-1:0] req_valid, req_ready, req_we, wr_pop, rsp_valid;
  logic [MADDR_W-1:0] req_addr [NCLIENT];
  logic [MLEN_W-1:0]  req_len  [NCLIENT];
  chunk_t             wr_data  [NCLIENT];
  logic [MLEN_W-1:0]  rsp_idx;
  chunk_t             rsp_data;

  memory_handler u_mh (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_addr, .req_len, .req_we, .wr_data, .wr_pop,
    .rsp_valid, .rsp_idx, .rsp_data,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_ch, .mem_req_bank, .mem_req_row, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data, .batch_start(stat_batch)
  );

  assign req_we  = 4'b1000;                 // only the Output Buffer writes
  assign wr_data[CL_EDGE]   = '0;
  assign wr_data[CL_INPUT]  = '0;
  assign wr_data[CL_WEIGHT] = '0;

  // ---- Coordinator ----------------------------------------------------------
  logic              agg_acq, agg_gnt, agg_done;
  logic [VID_W-1:0]  agg_base, agg_iw;
  logic [AGA-1:0]    ag_raddr [NCORES];
  chunk_t            ag_rdata [NCORES];
  logic [NCORES-1:0] ag_we, fin_valid;
  logic [AGA-1:0]    ag_waddr [NCORES];
  logic [VID_W-1:0]  ag_wvid  [NCORES];
  chunk_t            ag_wdata [NCORES];
  logic [VID_W-1:0]  fin_vid  [NCORES];
  logic              comb_valid, comb_complete, comb_release;
  logic [VID_W-1:0]  comb_base, comb_iw, q_vid;
  logic [NCR-1:0]    q_ready;
  logic [AGA-1:0]    c_raddr [NCR];
  logic [VID_W-1:0]  c_rvid  [NCR];
  chunk_t            c_rdata [NCR];

  coordinator #(.AG_DEPTH(AG_DEPTH), .MAX_IW(MAX_IW)) u_coord (
    .clk, .rst_n,
    .agg_acq, .agg_base, .agg_iw, .agg_gnt, .agg_done,
    .ag_raddr, .ag_rdata, .ag_we, .ag_waddr, .ag_wvid, .ag_wdata, .fin_valid, .fin_vid,
    .comb_valid, .comb_base, .comb_iw, .comb_complete,
    .q_vid, .q_ready, .c_raddr, .c_rvid, .c_rdata, .comb_release,
    .agg_wait(stat_agg_wait), .both_live(stat_both_live)
  );

  // ---- Aggregation Engine ---------------------------------------------------
  logic agg_busy;

  aggregation_engine #(.MAX_IW(MAX_IW), .EB_DEPTH(EB_DEPTH), .IN_DEPTH(IN_DEPTH),
                       .AG_DEPTH(AG_DEPTH), .MAX_ROWS(MAX_ROWS)) u_agg (
    .clk, .rst_n,
    .nv(cfg.nv), .cpv(cfg.cpv), .iw_cfg(cfg.iw), .win_h(cfg.win_h), .op(cfg.op),
    .s_mode(cfg.s_mode), .s_factor(cfg.s_factor), .s_max(cfg.s_max), .s_seed(cfg.s_seed),
    .cp_base(cfg.cp_base), .ri_base(cfg.ri_base), .x_base(cfg.x_base),
    .start, .busy(agg_busy),
    .agg_acq, .agg_base, .agg_iw, .agg_gnt, .agg_done,
    .ag_raddr, .ag_rdata, .ag_we, .ag_waddr, .ag_wvid, .ag_wdata, .fin_valid, .fin_vid,
    .eq_valid(req_valid[CL_EDGE]), .eq_ready(req_ready[CL_EDGE]),
    .eq_addr(req_addr[CL_EDGE]), .eq_len(req_len[CL_EDGE]),
    .er_valid(rsp_valid[CL_EDGE]), .er_idx(rsp_idx), .er_data(rsp_data),
    .iq_valid(req_valid[CL_INPUT]), .iq_ready(req_ready[CL_INPUT]),
    .iq_addr(req_addr[CL_INPUT]), .iq_len(req_len[CL_INPUT]),
    .ir_valid(rsp_valid[CL_INPUT]), .ir_idx(rsp_idx), .ir_data(rsp_data),
    .win_fire(stat_window), .edge_fire(stat_edge_fire), .edge_kept(stat_edge_kept)
  );

  // ---- Combination Engine ---------------------------------------------------
  logic comb_idle, w_loaded, disp_valid, disp_coop;

  combination_engine #(.WB_ROWS(WB_ROWS), .AG_DEPTH(AG_DEPTH), .OB_DEPTH(OB_DEPTH)) u_comb (
    .clk, .rst_n,
    .mode(cfg.pipe), .flen(cfg.flen), .cpv(cfg.cpv), .relu_en(cfg.relu),
    .w_base(cfg.w_base), .out_base(cfg.out_base),
    .load_w(start), .w_loaded, .idle(comb_idle),
    .comb_valid, .comb_base, .comb_iw, .comb_complete,
    .q_vid, .q_ready, .c_raddr, .c_rvid, .c_rdata, .comb_release,
    .wq_valid(req_valid[CL_WEIGHT]), .wq_ready(req_ready[CL_WEIGHT]),
    .wq_addr(req_addr[CL_WEIGHT]), .wq_len(req_len[CL_WEIGHT]),
    .wr_valid(rsp_valid[CL_WEIGHT]), .wr_idx(rsp_idx), .wr_rdata(rsp_data),
    .oq_valid(req_valid[CL_OUTPUT]), .oq_ready(req_ready[CL_OUTPUT]),
    .oq_addr(req_addr[CL_OUTPUT]), .oq_len(req_len[CL_OUTPUT]),
    .oq_wdata(wr_data[CL_OUTPUT]), .oq_pop(wr_pop[CL_OUTPUT]),
    .disp_valid, .disp_coop
  );

  assign stat_disp_lat  = disp_valid && !disp_coop;
  assign stat_disp_coop = disp_valid &&  disp_coop;

  // ---- layer completion -------------------------------------------------------
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0;
    end else if (start) begin
      running <= 1'b1; done <= 1'b0;
    end else if (running && !agg_busy && comb_idle && !mem_req_valid) begin
      running <= 1'b0; done <= 1'b1;
    end
  end

endmodule
