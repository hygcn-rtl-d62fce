// pingpong_ram: double buffer (two banks) with one fill port and NRD read ports.
//
// Used for the on-chip buffers that hide off-chip latency with the double
// buffer technique: while the reader works on one bank, the writer fills the
// other. The writer may write whenever wr_ready is high (its bank is empty),
// and pulses fill_done with a tag describing the contents when the bank is
// complete; the banks then trade roles once the reader has released its bank
// (rd_release). The reader sees rd_ready while its bank is full, the tag the
// writer attached, and reads asynchronously (data in the same cycle) at
// bank-relative addresses. Writes of the cycle are visible on the next cycle.
// The bank handshake is this design's; the sizes used follow the paper.
//
// Its assertions are switched off during reset with disable iff (!rst_n), so
// lint reports rst_n as used both asynchronously (flip-flop reset) and
// synchronously (assertion clock domain); the warning is expected and stands.
module pingpong_ram #(
  parameter int unsigned DEPTH = 1024,   // entries per bank
  parameter int unsigned W     = 512,
  parameter int unsigned NRD   = 1,
  parameter int unsigned TAG_W = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     wr_ready,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     fill_done,
  input  logic [TAG_W-1:0]         fill_tag,
  output logic                     rd_ready,
  output logic [TAG_W-1:0]         rd_tag,
  input  logic [$clog2(DEPTH)-1:0] rd_addr [NRD],
  output logic [W-1:0]             rd_data [NRD],
  input  logic                     rd_release
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]     mem [2][DEPTH];
  logic [TAG_W-1:0] tag [2];
  logic [1:0]       full;
  logic             wb, rb;            // bank being filled / being read

  assign wr_ready = !full[wb];
  assign rd_ready = full[rb];
  assign rd_tag   = tag[rb];

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rd_data[p] = mem[rb][rd_addr[p]];
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) mem[wb][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0;
      tag[0] <= '0; tag[1] <= '0;
    end else begin
      if (fill_done && wr_ready) begin
        full[wb] <= 1'b1;
        tag[wb]  <= fill_tag;
        wb       <= ~wb;
      end
      if (rd_release && rd_ready) begin
        full[rb] <= 1'b0;
        rb       <= ~rb;
      end
    end
  end

  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n)
                                    wr_en |-> wr_ready);

endmodule
