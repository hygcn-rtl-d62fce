// tb_output_buffer: full-size Output Buffer. Pushes activated rows at random
// times while a model of the Memory Access Handler accepts bursts and pops
// beats with random delays, including a long stall that fills the buffer.
// Checks each burst's address and length, every written beat, the order of
// rows, and the full / empty flags.
module tb_output_buffer;
  import hygcn_pkg::*;
  localparam int LANES = MCOLS, DEPTH = 8192, BPR = LANES / SIMD_W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic [MADDR_W-1:0] out_base, req_addr;
  logic [MLEN_W-1:0] req_len;
  logic push, full, empty, req_valid, req_ready, wr_pop;
  logic [VID_W-1:0] push_vid;
  elem_t push_row [LANES];
  chunk_t wr_data;
  output_buffer u_dut (.clk, .rst_n, .out_base, .push, .push_vid, .push_row, .full, .empty,
                       .req_valid, .req_ready, .req_addr, .req_len, .wr_data, .wr_pop);
  int checks = 0, failures = 0, n_full = 0;
  typedef struct { int vid; elem_t row [LANES]; } row_t;
  row_t q[$];
  int n_push = 0, n_rows_out = 0;
  bit stall;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("%0t: %s", $time, msg); end
  endtask
  // producer
  initial begin
    push = 0; push_vid = 0; out_base = 32'h0010_0000;
    foreach (push_row[l]) push_row[l] = 0;
    wait (rst_n);
    while (n_push < DEPTH + 600) begin
      @(negedge clk);
      push = 0;
      if (!full && $urandom_range(3) != 0) begin
        row_t r;
        r.vid = $urandom_range(100000);
        foreach (r.row[l]) r.row[l] = elem_t'($urandom);
        push = 1; push_vid = r.vid; push_row = r.row;
        q.push_back(r); n_push++;
      end
      if (full) n_full++;
    end
    @(negedge clk) push = 0;
  end
  // memory side
  initial begin
    req_ready = 0; wr_pop = 0; stall = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2 * DEPTH) @(negedge clk);        // let the buffer fill up
    check(full, "buffer not full after the stall");
    check(int'(u_dut.wp - u_dut.rp) == DEPTH - 1, $sformatf("full at the wrong level wp %0d rp %0d", u_dut.wp, u_dut.rp));
    stall = 0;
    while (n_rows_out < DEPTH + 600) begin
      row_t r;
      @(negedge clk);
      while (!req_valid) @(negedge clk);
      r = q.pop_front();
      check(req_addr == out_base + r.vid * BPR && req_len == BPR, "burst address or length");
      repeat ($urandom_range(2)) @(negedge clk);
      req_ready = 1;
      @(negedge clk) req_ready = 0;
      for (int b = 0; b < BPR; b++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        for (int l = 0; l < SIMD_W; l++)
          check(wr_data[l] == r.row[b * SIMD_W + l], "beat data");
        wr_pop = 1;
        @(negedge clk) wr_pop = 0;
      end
      n_rows_out++;
    end
    @(negedge clk);
    check(empty && !req_valid, "buffer not empty at the end");
    check(n_full > 0, "full never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
