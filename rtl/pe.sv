// pe: processing element of a systolic module in the Combination Engine.
//
// Output-stationary multiply-accumulate: the aggregated feature element a
// travels left to right, the weight w travels bottom to top, and the PE adds
// a*w to its own accumulator whenever both carry valid data. Each operand is
// passed on to the neighbour one cycle later (a_out, w_out). clear zeroes the
// accumulator at the start of a new vertex group.
//
// The paper names the PE and shows the two flows (Fig. 6); the stationary
// accumulator, the 64-bit accumulation of Q16.16 products and the valid bits
// are this design's choices.
module pe
  import hygcn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  elem_t a_in,
  input  logic  a_vin,
  input  elem_t w_in,
  input  logic  w_vin,
  output elem_t a_out,
  output logic  a_vout,
  output elem_t w_out,
  output logic  w_vout,
  output acc_t  acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; a_vout <= 1'b0;
      w_out <= '0; w_vout <= 1'b0;
      acc   <= '0;
    end else begin
      a_out <= a_in; a_vout <= a_vin;
      w_out <= w_in; w_vout <= w_vin;
      if (clear)               acc <= '0;
      else if (a_vin && w_vin) acc <= acc + acc_t'(a_in) * acc_t'(w_in);
    end
  end

endmodule
