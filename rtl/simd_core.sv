// simd_core: one SIMD16 core of the Aggregation Engine.
//
// The core owns SIMD_W elements of one destination vertex's partial
// aggregation (vertex-disperse mode: a vertex's feature is spread over all
// cores, each core keeping its slice while neighbour features stream past).
// Each cycle it can either load the slice's earlier partial result from the
// Aggregation Buffer (load), start empty (clear), or fold one neighbour chunk
// into it with the layer's Aggregate operation (add, max or min). The first
// chunk folded into an empty core is taken as is, so max/min need no identity.
//
// Timing: all operations take effect at the next rising edge; acc/has show
// the result one cycle after the operation. load and clear win over x_valid.
// The lane count and the three operations follow the paper; the load/clear
// protocol and the has flag are this design's choice.
module simd_core
  import hygcn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  agg_op_e op,
  input  logic    clear,      // start empty
  input  logic    load,       // start from init
  input  chunk_t  init,
  input  logic    x_valid,    // fold x into the slice
  input  chunk_t  x,
  output chunk_t  acc,
  output logic    has         // acc holds at least one contribution
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      has <= 1'b0;
    end else if (clear) begin
      has <= 1'b0;
    end else if (load) begin
      acc <= init;
      has <= 1'b1;
    end else if (x_valid) begin
      for (int l = 0; l < SIMD_W; l++)
        acc[l] <= has ? agg_apply(op, acc[l], x[l]) : x[l];
      has <= 1'b1;
    end
  end

endmodule
