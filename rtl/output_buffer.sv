// output_buffer: Output Buffer of the Combination Engine.
//
// Collects the new feature vectors (one row of LANES elements per vertex,
// from the Activate Unit) and writes them to off-chip memory as whole bursts:
// each vertex's row leaves as one burst of LANES/SIMD_W consecutive beats at
// out_base + vid * LANES/SIMD_W, so the element-wise results are coalesced
// into long sequential writes. Storage is a circular queue of rows, so the
// Activate Unit can keep writing one part of the buffer while the other part
// drains, which gives the double-buffering effect.
//
// Interface: push/push_vid/push_row with full as back-pressure (push is
// ignored when full); client port of the Memory Access Handler (burst request,
// write data pulled with wr_pop); empty is high when nothing is left to write.
// The buffer's purpose and size (4 MB) follow the paper; the queue
// organisation and the data layout are this design's choices.
//
// Its assertions are switched off during reset with disable iff (!rst_n), so
// lint reports rst_n as used both asynchronously (flip-flop reset) and
// synchronously (assertion clock domain); the warning is expected and stands.
module output_buffer
  import hygcn_pkg::*;
#(
  parameter int unsigned LANES = MCOLS,
  parameter int unsigned DEPTH = 8192      // rows: 4 MB / (128 x 4 B)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [MADDR_W-1:0] out_base,
  input  logic               push,
  input  logic [VID_W-1:0]   push_vid,
  input  elem_t              push_row [LANES],
  output logic               full,
  output logic               empty,
  // Memory Access Handler client
  output logic               req_valid,
  input  logic               req_ready,
  output logic [MADDR_W-1:0] req_addr,
  output logic [MLEN_W-1:0]  req_len,
  output chunk_t             wr_data,
  input  logic               wr_pop
);

  localparam int unsigned BPR = LANES / SIMD_W;   // beats per row
  localparam int unsigned AW  = $clog2(DEPTH);

  elem_t            rows [DEPTH][LANES];
  logic [VID_W-1:0] vids [DEPTH];
  logic [AW:0]      wp, rp;
  logic [$clog2(BPR+1)-1:0] beat;
  logic             sent;               // head row's request accepted

  // one row of slack for the row still in the Activate Unit pipeline
  assign full  = (wp - rp) >= (AW+1)'(DEPTH - 1);
  assign empty = (wp == rp);

  assign req_valid = !empty && !sent;
  assign req_addr  = out_base + MADDR_W'(vids[AW'(rp)]) * MADDR_W'(BPR);
  assign req_len   = MLEN_W'(BPR);
  always_comb begin
    for (int l = 0; l < SIMD_W; l++)
      wr_data[l] = rows[AW'(rp)][(32'(beat) * SIMD_W + l) % LANES];
  end

  always_ff @(posedge clk) begin
    if (push && !full) begin
      rows[AW'(wp)] <= push_row;
      vids[AW'(wp)] <= push_vid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; beat <= '0; sent <= 1'b0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (req_ready) sent <= 1'b1;
      if (wr_pop) begin
        if (beat == $bits(beat)'(BPR - 1)) begin
          beat <= '0; rp <= rp + 1'b1; sent <= 1'b0;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  a_pop_has_data: assert property (@(posedge clk) disable iff (!rst_n) wr_pop |-> !empty);

endmodule
