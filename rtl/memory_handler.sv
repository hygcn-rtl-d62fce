// memory_handler: Memory Access Handler between the on-chip buffers and the
// single off-chip memory.
//
// Four clients issue burst requests (beat address, length, read or write):
// the Edge Buffer, Input Buffer, Weight Buffer and Output Buffer, in that
// order of priority (edges > input features > weights > output features).
// Requests are coordinated batch by batch: when the handler is idle it takes
// a snapshot of the clients that are requesting; that batch is served in
// priority order, each burst issued whole with consecutive addresses, before
// any request that arrived later is looked at. A low-priority request of the
// current batch is therefore served before a high-priority request of the
// next batch, which keeps long runs of consecutive addresses together.
// Each beat address is then remapped: its low bits select the channel and the
// next bits the bank, so that consecutive beats spread over channels and banks.
//
// Client side: req_valid/req_ready (ready pulses when the burst is taken into
// service; addr/len/we must be held until then). Write data is pulled with
// wr_pop (first-word-fall-through from the client). Read data returns with
// rsp_valid[client], rsp_idx (beat number within the burst) and rsp_data.
// Memory side: one beat per cycle with valid/ready; read responses must come
// back in request order. The priority order, the batching and the low-bit
// channel/bank mapping follow the paper; the burst interface, the single
// beat-per-cycle port and the channel/bank counts are this design's choices.
//
// Its assertions are switched off during reset with disable iff (!rst_n), so
// lint reports rst_n as used both asynchronously (flip-flop reset) and
// synchronously (assertion clock domain); the warning is expected and stands.
module memory_handler
  import hygcn_pkg::*;
#(
  parameter int unsigned CH_BITS = 3,      // 8 channels (HBM 1.0, assumed)
  parameter int unsigned BK_BITS = 4,      // 16 banks per channel (assumed)
  parameter int unsigned TAG_DEPTH = 64    // read beats in flight
) (
  input  logic               clk,
  input  logic               rst_n,
  // clients
  input  logic [NCLIENT-1:0] req_valid,
  output logic [NCLIENT-1:0] req_ready,
  input  logic [MADDR_W-1:0] req_addr [NCLIENT],
  input  logic [MLEN_W-1:0]  req_len  [NCLIENT],
  input  logic [NCLIENT-1:0] req_we,
  input  chunk_t             wr_data  [NCLIENT],
  output logic [NCLIENT-1:0] wr_pop,
  output logic [NCLIENT-1:0] rsp_valid,
  output logic [MLEN_W-1:0]  rsp_idx,
  output chunk_t             rsp_data,
  // off-chip memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [MADDR_W-1:0] mem_req_addr,
  output logic [CH_BITS-1:0] mem_req_ch,
  output logic [BK_BITS-1:0] mem_req_bank,
  output logic [MADDR_W-CH_BITS-BK_BITS-1:0] mem_req_row,
  output chunk_t             mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  chunk_t             mem_rsp_data,
  // statistics
  output logic               batch_start
);

  localparam int unsigned CW = $clog2(NCLIENT);
  localparam int unsigned TW = $clog2(TAG_DEPTH);

  logic [NCLIENT-1:0] batch;
  logic               active;
  logic [CW-1:0]      cur;
  logic [MADDR_W-1:0] addr;
  logic [MLEN_W-1:0]  cnt, len;
  logic               we;

  // read-return routing: which client and beat each outstanding read is
  logic [CW+MLEN_W-1:0] tagq [TAG_DEPTH];
  logic [TW:0]          t_wp, t_rp;
  logic                 tag_full;
  assign tag_full = (t_wp - t_rp) == (TW+1)'(TAG_DEPTH);

  // highest-priority member of the batch
  logic [CW-1:0] pick;
  always_comb begin
    pick = '0;
    for (int i = NCLIENT-1; i >= 0; i--) if (batch[i]) pick = CW'(i);
  end

  logic issue;
  assign mem_req_valid = active && (we || !tag_full);
  assign issue         = mem_req_valid && mem_req_ready;
  assign mem_req_we    = we;
  assign mem_req_addr  = addr;
  assign mem_req_ch    = addr[CH_BITS-1:0];
  assign mem_req_bank  = addr[CH_BITS +: BK_BITS];
  assign mem_req_row   = addr[MADDR_W-1:CH_BITS+BK_BITS];
  assign mem_req_wdata = wr_data[cur];

  always_comb begin
    wr_pop = '0;
    if (issue && we) wr_pop[cur] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      batch <= '0; active <= 1'b0; cur <= '0; addr <= '0; cnt <= '0; len <= '0;
      we <= 1'b0; t_wp <= '0; req_ready <= '0; batch_start <= 1'b0;
    end else begin
      req_ready   <= '0;
      batch_start <= 1'b0;
      if (!active) begin
        if (batch != '0) begin
          // take the next request of the batch into service
          active <= 1'b1;
          cur    <= pick;
          addr   <= req_addr[pick];
          len    <= req_len[pick];
          we     <= req_we[pick];
          cnt    <= '0;
          batch[pick]     <= 1'b0;
          req_ready[pick] <= 1'b1;
        end else if (req_valid != '0 && req_ready == '0) begin
          batch       <= req_valid;    // new batch
          batch_start <= 1'b1;
        end
      end else if (len == '0) begin
        active <= 1'b0;
      end else if (issue) begin
        if (!we) begin
          tagq[TW'(t_wp)] <= {cur, cnt};
          t_wp <= t_wp + 1'b1;
        end
        addr <= addr + 1'b1;
        cnt  <= cnt + 1'b1;
        if (cnt + 1'b1 == len) active <= 1'b0;
      end
    end
  end

  // route read data back
  logic [CW-1:0] rc;
  assign rc       = tagq[TW'(t_rp)][CW+MLEN_W-1:MLEN_W];
  assign rsp_idx  = tagq[TW'(t_rp)][MLEN_W-1:0];
  assign rsp_data = mem_rsp_data;
  always_comb begin
    rsp_valid = '0;
    if (mem_rsp_valid) rsp_valid[rc] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_rp <= '0;
    else if (mem_rsp_valid) t_rp <= t_rp + 1'b1;
  end

  // read data may only come back for a read that was issued
  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
                                  mem_rsp_valid |-> (t_wp != t_rp));

endmodule
