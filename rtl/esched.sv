// esched: edge scheduler (eSched) of the Aggregation Engine.
//
// Runs the aggregation of one effectual window (source rows ws..we, whose
// features sit in the Input Buffer) for every destination vertex of the
// current interval, in vertex-disperse mode: the CPV 16-element chunks of a
// vertex's feature are spread over the SIMD cores, so all cores work on the
// same vertex. When a vertex has fewer chunks than there are cores, the free
// cores form further "slots", each serving another vertex (G = NCORES/CPV
// slots); when it has more, the chunks are covered in several passes.
//
// Per group of G vertices (and per pass): SETUP reads each slot's edge range,
// LOAD gives every core the vertex's partial result from the Aggregation
// Buffer (or starts it empty if nothing was aggregated yet), WALK feeds one
// edge per slot per cycle whose source row lies in the window (edges of a
// vertex are sorted by source, so a per-vertex cursor remembers where the next
// window continues), and WB writes the partial results back. A vertex whose
// cursor reaches the end of its edge list is reported final (fin_*), which
// lets the Combination Engine start on it early.
//
// Buffer reads are asynchronous (data in the same cycle). The vertex-disperse
// mode follows the paper (Fig. 4); the slot/pass arrangement, the cursors and
// the group-by-group order are this design's choices.
module esched
  import hygcn_pkg::*;
#(
  parameter int unsigned MAX_IW   = 131072,  // vertices per interval
  parameter int unsigned EB_DEPTH = 524288,  // edges in the Edge Buffer (2 MB)
  parameter int unsigned IN_DEPTH = 1024,    // chunks per Input Buffer bank (64 KB)
  parameter int unsigned AG_DEPTH = 131072   // chunks per Aggregation Buffer bank (8 MB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  agg_op_e          op,
  input  logic [VID_W-1:0] cpv,          // chunks per vertex feature
  input  logic [VID_W-1:0] iw,           // vertices in this interval
  input  logic             new_interval, // pulse: forget all cursors
  input  logic             start,        // pulse: aggregate window ws..we
  input  logic [VID_W-1:0] ws,
  input  logic [VID_W-1:0] we,
  output logic             busy,
  output logic             done,         // pulse
  // Edge Buffer: local column pointers and sampled source rows
  output logic [$clog2(MAX_IW+1)-1:0] ecp_addr [NCORES],
  input  logic [VID_W-1:0]  ecp_lo [NCORES],   // ecp[v]
  input  logic [VID_W-1:0]  ecp_hi [NCORES],   // ecp[v+1]
  output logic [$clog2(EB_DEPTH)-1:0] eb_addr [NCORES],
  input  logic [VID_W-1:0]  eb_src [NCORES],
  // Input Buffer (current bank)
  output logic [$clog2(IN_DEPTH)-1:0] in_addr [NCORES],
  input  chunk_t            in_data [NCORES],
  // Aggregation Buffer (current bank)
  output logic [$clog2(AG_DEPTH)-1:0] ag_raddr [NCORES],
  input  chunk_t            ag_rdata [NCORES],
  output logic [NCORES-1:0] ag_we,
  output logic [$clog2(AG_DEPTH)-1:0] ag_waddr [NCORES],
  output logic [VID_W-1:0]  ag_wvid [NCORES],
  output chunk_t            ag_wdata [NCORES],
  // final vertices (interval-local ids)
  output logic [NCORES-1:0] fin_valid,
  output logic [VID_W-1:0]  fin_vid [NCORES],
  // statistics
  output logic [NCORES-1:0] edge_fire      // slot s consumed an edge
);

  localparam int unsigned IWA = $clog2(MAX_IW+1);
  localparam int unsigned CUA = $clog2(MAX_IW);       // cursor memory index
  localparam int unsigned EBA = $clog2(EB_DEPTH);
  localparam int unsigned INA = $clog2(IN_DEPTH);
  localparam int unsigned AGA = $clog2(AG_DEPTH);

  // ---- core-to-slot map ---------------------------------------------------
  logic              multi;            // cpv >= NCORES: one slot, several passes
  logic [VID_W-1:0]  nslot, npass;
  logic [5:0]        slot_of [NCORES];
  logic [VID_W-1:0]  chunk_of[NCORES];
  always_comb begin
    logic [5:0] s; logic [VID_W-1:0] k;
    multi = (cpv >= VID_W'(NCORES));
    s = '0; k = '0;
    for (int c = 0; c < NCORES; c++) begin
      slot_of[c]  = multi ? 6'd0 : s;
      chunk_of[c] = multi ? VID_W'(c) : k;
      k = k + 1;
      if (k == cpv) begin k = '0; s = s + 1'b1; end
    end
    nslot = multi ? VID_W'(1) : VID_W'(s);
    npass = multi ? (cpv + VID_W'(NCORES) - 1) / VID_W'(NCORES) : VID_W'(1);
  end

  // ---- per-vertex cursors (valid bits cleared at each new interval) -------
  logic [VID_W-1:0]  cur_mem [MAX_IW];
  logic [MAX_IW-1:0] cur_vld;

  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_LOAD, S_WALK, S_WB} state_e;
  state_e state;

  logic [VID_W-1:0] vbase, pass, pass_off;
  logic [VID_W-1:0] ptr  [NCORES];
  logic [VID_W-1:0] pend [NCORES];
  logic [VID_W-1:0] plo  [NCORES];
  logic [NCORES-1:0] sval;             // slot holds a vertex

  assign pass_off = pass * VID_W'(NCORES);
  assign busy     = (state != S_IDLE);

  // per-slot views
  logic [VID_W-1:0] sv     [NCORES];    // vertex of slot s
  logic [VID_W-1:0] curs   [NCORES];
  logic [NCORES-1:0] e_ok;
  for (genvar s = 0; s < NCORES; s++) begin : g_slot
    assign sv[s]       = vbase + VID_W'(s);
    assign ecp_addr[s] = IWA'(sv[s]);
    assign curs[s]     = (sv[s] < VID_W'(MAX_IW) && cur_vld[CUA'(sv[s])]) ? cur_mem[CUA'(sv[s])]
                                                                      : ecp_lo[s];
    assign eb_addr[s]  = EBA'(ptr[s]);
    assign e_ok[s]     = (state == S_WALK) && sval[s] && (ptr[s] < pend[s]) && (eb_src[s] <= we);
  end
  assign edge_fire = e_ok;

  // per-core views
  logic [NCORES-1:0] c_act, c_clear, c_load, c_x, c_has;
  chunk_t            c_acc [NCORES];
  logic [VID_W-1:0]  c_chunk [NCORES];
  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic [$clog2(NCORES)-1:0] s;      // a core's slot is below NCORES
    assign s          = slot_of[c][$clog2(NCORES)-1:0];
    assign c_chunk[c] = chunk_of[c] + pass_off;
    assign c_act[c]   = (VID_W'(s) < nslot) && sval[s] && (c_chunk[c] < cpv);
    assign ag_raddr[c] = AGA'(sv[s] * cpv + c_chunk[c]);
    assign in_addr[c]  = INA'((eb_src[s] - ws) * cpv + c_chunk[c]);
    assign c_clear[c] = (state == S_LOAD) && !(c_act[c] && ptr[s] != plo[s]);
    assign c_load[c]  = (state == S_LOAD) &&  (c_act[c] && ptr[s] != plo[s]);
    assign c_x[c]     = c_act[c] && e_ok[s];

    simd_core u_core (
      .clk, .rst_n, .op,
      .clear(c_clear[c]), .load(c_load[c]), .init(ag_rdata[c]),
      .x_valid(c_x[c]), .x(in_data[c]),
      .acc(c_acc[c]), .has(c_has[c])
    );

    assign ag_we[c]    = (state == S_WB) && c_act[c] && c_has[c];
    assign ag_waddr[c] = ag_raddr[c];
    assign ag_wvid[c]  = sv[s];
    assign ag_wdata[c] = c_acc[c];
  end

  logic last_pass;
  assign last_pass = (pass + 1 >= npass);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; vbase <= '0; pass <= '0; sval <= '0; done <= 1'b0;
      cur_vld <= '0; fin_valid <= '0;
      for (int s = 0; s < NCORES; s++) begin
        ptr[s] <= '0; pend[s] <= '0; plo[s] <= '0; fin_vid[s] <= '0;
      end
    end else begin
      done      <= 1'b0;
      fin_valid <= '0;
      if (new_interval) cur_vld <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          vbase <= '0; pass <= '0; state <= S_SETUP;
        end
        S_SETUP: begin
          for (int s = 0; s < NCORES; s++) begin
            sval[s] <= (VID_W'(s) < nslot) && (sv[s] < iw);
            ptr[s]  <= curs[s];
            plo[s]  <= ecp_lo[s];
            pend[s] <= ecp_hi[s];
          end
          state <= S_LOAD;
        end
        S_LOAD: state <= S_WALK;
        S_WALK: begin
          for (int s = 0; s < NCORES; s++) if (e_ok[s]) ptr[s] <= ptr[s] + 1;
          if (e_ok == '0) state <= S_WB;
        end
        S_WB: begin
          if (last_pass) begin
            for (int s = 0; s < NCORES; s++) if (sval[s]) begin
              cur_mem[CUA'(sv[s])] <= ptr[s];
              cur_vld[CUA'(sv[s])] <= 1'b1;
              fin_valid[s] <= (ptr[s] == pend[s]);
              fin_vid[s]   <= sv[s];
            end
            pass <= '0;
            if (vbase + nslot >= iw) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              vbase <= vbase + nslot; state <= S_SETUP;
            end
          end else begin
            pass  <= pass + 1; state <= S_SETUP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
