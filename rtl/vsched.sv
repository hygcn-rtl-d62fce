// vsched: vertex scheduler (vSched) of the Combination Engine.
//
// Hands groups of aggregated vertices to the systolic modules. A group is the
// MROWS vertices one module processes at once. In the latency-aware pipeline
// (PIPE_LATENCY) each group is dispatched as soon as all its vertices are
// final and some module is free, to the lowest-numbered free module, which
// then works independently. In the energy-aware pipeline (PIPE_ENERGY) it
// waits until NMOD consecutive groups (a large group of NMOD*MROWS vertices)
// are final and every module is free, and dispatches them together for the
// cooperative mode in which the modules form one tall array.
//
// Interface: start (pulse) gives the number of groups of the interval; the
// scheduler asks for the ready flags of groups q_grp .. q_grp+NMOD-1 (groups
// past the end must read as ready) and watches the modules' busy flags. A
// dispatch is a one-cycle pulse disp_valid with the module (or 0 when
// cooperative), the first group and the mode. all_sent is high once every
// group of the interval has been dispatched. The two policies follow the
// paper (Sec. 4.5.1, Fig. 8); the in-order dispatch is this design's choice.
module vsched
  import hygcn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  pipe_mode_e       mode,
  input  logic             start,
  input  logic [VID_W-1:0] n_groups,
  output logic [VID_W-1:0] q_grp,
  input  logic [NMOD-1:0]  q_ready,
  input  logic [NMOD-1:0]  mod_busy,
  output logic             disp_valid,
  output logic             disp_coop,
  output logic [$clog2(NMOD)-1:0] disp_mod,
  output logic [VID_W-1:0] disp_grp,
  output logic             all_sent
);

  logic             active;
  logic [VID_W-1:0] next, total;

  assign q_grp    = next;
  assign all_sent = !active;

  logic                    any_free;
  logic [$clog2(NMOD)-1:0] free_m;
  always_comb begin
    any_free = 1'b0; free_m = '0;
    for (int m = NMOD-1; m >= 0; m--)
      if (!mod_busy[m]) begin any_free = 1'b1; free_m = $clog2(NMOD)'(m); end
  end

  logic go_lat, go_en;
  assign go_lat = active && (mode == PIPE_LATENCY) && q_ready[0] && any_free;
  assign go_en  = active && (mode == PIPE_ENERGY)  && (&q_ready) && (mod_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; next <= '0; total <= '0;
      disp_valid <= 1'b0; disp_coop <= 1'b0; disp_mod <= '0; disp_grp <= '0;
    end else begin
      disp_valid <= 1'b0;
      if (start) begin
        active <= (n_groups != '0); next <= '0; total <= n_groups;
      end else if (go_lat || go_en) begin
        disp_valid <= 1'b1;
        disp_coop  <= go_en;
        disp_mod   <= go_en ? '0 : free_m;
        disp_grp   <= next;
        next       <= next + (go_en ? VID_W'(NMOD) : VID_W'(1));
        if (next + (go_en ? VID_W'(NMOD) : VID_W'(1)) >= total) active <= 1'b0;
      end
    end
  end

endmodule
