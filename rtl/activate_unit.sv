// activate_unit: Activate Unit of the Combination Engine.
//
// Turns one row of systolic accumulators (the MVM result W*a_v of one vertex,
// LANES outputs) into the vertex's new feature: each lane drops the Q16.16
// product's extra fraction bits (arithmetic shift by FRAC_W), adds the layer's
// bias b, saturates to 32 bits and applies ReLU when relu_en is set, as in
// h_v = ReLU(W a_v + b) of the GCN, GraphSage and GINConv models.
//
// Timing: one pipeline stage; out/out_valid follow in/in_valid by one cycle,
// together with the vertex tag. The rounding (truncation) and saturation are
// this design's choice; the paper does not describe the unit's insides.
module activate_unit
  import hygcn_pkg::*;
#(
  parameter int unsigned LANES = MCOLS,
  parameter int unsigned TAG_W = VID_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             relu_en,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  acc_t             in   [LANES],
  input  elem_t            bias [LANES],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output elem_t            out  [LANES]
);

  localparam acc_t MAXV = acc_t'({1'b0, {(ELEM_W-1){1'b1}}});
  localparam acc_t MINV = -MAXV - 1;

  function automatic elem_t act(acc_t x, elem_t b, logic relu);
    acc_t s;
    s = (x >>> FRAC_W) + acc_t'(b);
    if (s > MAXV) s = MAXV;
    if (s < MINV) s = MINV;
    if (relu && s < 0) s = '0;
    return elem_t'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int l = 0; l < LANES; l++) out[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        for (int l = 0; l < LANES; l++) out[l] <= act(in[l], bias[l], relu_en);
      end
    end
  end

endmodule
