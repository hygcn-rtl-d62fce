// sampler: Sampler of the Aggregation Engine (the Sample function).
//
// Decides, edge by edge, which edges of a vertex's edge list take part in
// aggregation. SAMPLE_ALL keeps every edge. SAMPLE_UNIFORM keeps the edges at a
// fixed index interval ("sampling factor"): positions off, off+factor,
// off+2*factor, ... of the list, where off is drawn per vertex from a 16-bit
// LFSR (dynamically generated indices) and limited to the list length so a
// short list still yields one edge; max_keep, if not 0, caps the number of
// kept edges (GraphSage keeps 25). SAMPLE_PREDEF keeps the edges whose
// predefined-selection flag, precomputed off-line and read from off-chip
// memory with the edge, is set.
//
// Interface: pulse v_start with the vertex's degree before its first edge;
// then present the edges in list order with e_valid; keep is combinational
// for the presented edge. The state advances at the clock edge.
// The uniform/predefined choice and the sampling factor follow the paper; the
// LFSR, the offset rule and the flag encoding are this design's choices.
module sampler
  import hygcn_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  sample_mode_e mode,
  input  logic [15:0]  factor,     // index interval, >= 1
  input  logic [15:0]  max_keep,   // 0: no cap
  input  logic [15:0]  seed,
  input  logic         seed_load,
  input  logic         v_start,
  input  logic [VID_W-1:0] v_deg,
  input  logic         e_valid,
  input  logic         e_flag,
  output logic         keep
);

  logic [15:0] lfsr, phase, off, kept;

  // x^16 + x^14 + x^13 + x^11 + 1, never allowed to reach zero
  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    logic fb;
    fb = s[15] ^ s[13] ^ s[12] ^ s[10];
    return {s[14:0], fb};
  endfunction

  logic [VID_W-1:0] span;
  logic [15:0]      fac1;
  assign fac1 = (factor == 16'd0) ? 16'd1 : factor;
  assign span = (v_deg < VID_W'(fac1)) ? v_deg : VID_W'(fac1);

  logic cap_ok;
  assign cap_ok = (max_keep == 16'd0) || (kept < max_keep);

  always_comb begin
    unique case (mode)
      SAMPLE_UNIFORM: keep = (phase == off) && cap_ok;
      SAMPLE_PREDEF:  keep = e_flag;
      default:        keep = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hACE1; phase <= '0; off <= '0; kept <= '0;
    end else if (seed_load) begin
      lfsr <= (seed == 16'd0) ? 16'hACE1 : seed;
    end else if (v_start) begin
      lfsr  <= lfsr_next(lfsr);
      off   <= (span == '0) ? 16'd0 : 16'(VID_W'(lfsr) % span);
      phase <= '0;
      kept  <= '0;
    end else if (e_valid) begin
      phase <= (phase == fac1 - 16'd1) ? 16'd0 : phase + 16'd1;
      if (keep) kept <= kept + 16'd1;
    end
  end

endmodule
