// coordinator: Coordinator between the Aggregation and Combination Engines,
// holding the ping-pong Aggregation Buffer.
//
// The Aggregation Buffer is split into two banks (chunks). The Aggregation
// Engine acquires a free bank for each interval of destination vertices
// (agg_acq/agg_gnt), reads and writes partial results in it, reports vertices
// whose aggregation is final (fin_*), and marks the interval complete
// (agg_done). The Combination Engine works on the banks in the order they were
// acquired: it reads final aggregated features through its own read ports,
// asks which vertices are ready (a vertex is ready once reported final, or
// when its interval is complete), and releases the bank when all of the
// interval's vertices have been combined (comb_release). While the
// Combination Engine works on one bank the Aggregation Engine fills the other,
// which is the inter-engine pipeline.
//
// A written flag per vertex makes a vertex that received no aggregation read
// as zeros. All reads are asynchronous; writes and flags take effect at the
// next clock edge. The two-bank split and its role follow the paper
// (Sec. 4.5.1); the acquire/release handshake and the per-vertex ready flags
// are this design's choices.
//
// Its assertions are switched off during reset with disable iff (!rst_n), so
// lint reports rst_n as used both asynchronously (flip-flop reset) and
// synchronously (assertion clock domain); the warning is expected and stands.
module coordinator
  import hygcn_pkg::*;
#(
  parameter int unsigned AG_DEPTH = 131072,  // chunks per bank (2 x 8 MB = 16 MB)
  parameter int unsigned MAX_IW   = 131072,  // vertices per interval
  parameter int unsigned NCR      = NMOD * MROWS  // combination read ports
) (
  input  logic              clk,
  input  logic              rst_n,
  // aggregation side
  input  logic              agg_acq,
  input  logic [VID_W-1:0]  agg_base,     // first vertex of the interval
  input  logic [VID_W-1:0]  agg_iw,       // vertices in the interval
  output logic              agg_gnt,      // pulse: bank granted
  input  logic              agg_done,     // pulse: interval complete
  input  logic [$clog2(AG_DEPTH)-1:0] ag_raddr [NCORES],
  output chunk_t            ag_rdata [NCORES],
  input  logic [NCORES-1:0] ag_we,
  input  logic [$clog2(AG_DEPTH)-1:0] ag_waddr [NCORES],
  input  logic [VID_W-1:0]  ag_wvid [NCORES],
  input  chunk_t            ag_wdata [NCORES],
  input  logic [NCORES-1:0] fin_valid,
  input  logic [VID_W-1:0]  fin_vid [NCORES],
  // combination side
  output logic              comb_valid,   // a bank holds an interval to combine
  output logic [VID_W-1:0]  comb_base,
  output logic [VID_W-1:0]  comb_iw,
  output logic              comb_complete,
  input  logic [VID_W-1:0]  q_vid,        // ready flags of q_vid .. q_vid+NCR-1
  output logic [NCR-1:0]    q_ready,
  input  logic [$clog2(AG_DEPTH)-1:0] c_raddr [NCR],
  input  logic [VID_W-1:0]  c_rvid [NCR],
  output chunk_t            c_rdata [NCR],
  input  logic              comb_release,
  // statistics
  output logic              agg_wait,     // aggregation waits for a bank
  output logic              both_live     // both banks hold an interval
);

  localparam int unsigned IWA = $clog2(MAX_IW);

  chunk_t            mem [2][AG_DEPTH];
  logic [MAX_IW-1:0] ready [2];
  logic [MAX_IW-1:0] written [2];
  logic [1:0]        live, complete;
  logic [VID_W-1:0]  base [2];
  logic [VID_W-1:0]  iwr  [2];
  logic              ab, cb;            // aggregation bank, combination bank

  assign agg_wait = agg_acq && live[ab];
  assign both_live = &live;

  // aggregation-side reads
  for (genvar p = 0; p < NCORES; p++) begin : g_ar
    assign ag_rdata[p] = mem[ab][ag_raddr[p]];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NCORES; p++)
      if (ag_we[p]) mem[ab][ag_waddr[p]] <= ag_wdata[p];
  end

  // combination-side reads
  assign comb_valid    = live[cb];
  assign comb_base     = base[cb];
  assign comb_iw       = iwr[cb];
  assign comb_complete = complete[cb];
  for (genvar p = 0; p < NCR; p++) begin : g_cr
    logic in_rng;
    assign in_rng    = c_rvid[p] < VID_W'(MAX_IW);
    assign c_rdata[p] = (in_rng && written[cb][IWA'(c_rvid[p])]) ? mem[cb][c_raddr[p]] : '0;
    assign q_ready[p] = complete[cb] || (q_vid + VID_W'(p) >= iwr[cb]) ||
                        ready[cb][IWA'(q_vid + VID_W'(p))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live <= '0; complete <= '0; ab <= 1'b0; cb <= 1'b0; agg_gnt <= 1'b0;
      base[0] <= '0; base[1] <= '0; iwr[0] <= '0; iwr[1] <= '0;
      ready[0] <= '0; ready[1] <= '0; written[0] <= '0; written[1] <= '0;
    end else begin
      agg_gnt <= 1'b0;
      if (agg_acq && !live[ab] && !agg_gnt) begin
        live[ab]     <= 1'b1;
        complete[ab] <= 1'b0;
        base[ab]     <= agg_base;
        iwr[ab]      <= agg_iw;
        ready[ab]    <= '0;
        written[ab]  <= '0;
        agg_gnt      <= 1'b1;
      end else begin
        for (int p = 0; p < NCORES; p++) begin
          if (ag_we[p])     written[ab][IWA'(ag_wvid[p])] <= 1'b1;
          if (fin_valid[p]) ready[ab][IWA'(fin_vid[p])]   <= 1'b1;
        end
        if (agg_done) begin
          complete[ab] <= 1'b1;
          ab           <= ~ab;
        end
      end
      if (comb_release && live[cb]) begin
        live[cb] <= 1'b0;
        cb       <= ~cb;
      end
    end
  end

  a_done_live: assert property (@(posedge clk) disable iff (!rst_n) agg_done |-> live[ab]);

endmodule
