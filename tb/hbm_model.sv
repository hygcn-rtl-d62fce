// hbm_model: behavioural model of the off-chip memory (HBM) for simulation.
//
// Not synthesizable logic and not part of the accelerator: a sparse array of
// 512-bit beats behind the accelerator's single-beat memory port. Requests are
// accepted when ready (ready drops at random for 1 cycle in STALL_PCT percent
// of cycles); reads return in order LAT cycles after acceptance; writes update
// the array at acceptance. Unwritten beats read as zero. The testbench fills
// and inspects mem directly.
module hbm_model
  import hygcn_pkg::*;
#(
  parameter int unsigned LAT       = 20,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [MADDR_W-1:0] req_addr,
  input  chunk_t             req_wdata,
  output logic               rsp_valid,
  output chunk_t             rsp_data
);

  chunk_t mem [int unsigned];

  logic   pv [LAT];
  chunk_t pd [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b0;
    else        req_ready <= ($urandom_range(99) >= STALL_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= req_valid && req_ready && !req_we;
      pd[0] <= (req_valid && req_ready && !req_we && mem.exists(req_addr)) ? mem[req_addr] : '0;
    end
  end

  // a dynamic array cannot take a nonblocking write; one request per cycle
  // means a write never meets a read of the same cycle
  always @(posedge clk)
    if (rst_n && req_valid && req_ready && req_we) mem[req_addr] = req_wdata;

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];

endmodule
