// tb_simd_core: checks the SIMD core's clear/load/fold behaviour for add, max
// and min against a lane-by-lane model, with random operation sequences.
module tb_simd_core;
  import hygcn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  agg_op_e op;
  logic clear, load, xv, has;
  chunk_t init, x, acc;
  simd_core u_dut (.clk, .rst_n, .op, .clear, .load, .init, .x_valid(xv), .x, .acc, .has);

  int checks = 0, failures = 0;
  chunk_t m_acc; bit m_has;

  initial begin
    op = AGG_ADD; clear = 0; load = 0; xv = 0; init = '0; x = '0;
    m_acc = '0; m_has = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 600; it++) begin
      if (it % 50 == 0) op = agg_op_e'($urandom_range(2));
      clear = ($urandom_range(15) == 0);
      load  = !clear && ($urandom_range(15) == 0);
      xv    = ($urandom_range(3) != 0);
      for (int l = 0; l < SIMD_W; l++) begin init[l] = $urandom; x[l] = $urandom; end
      // model
      if (clear) m_has = 0;
      else if (load) begin m_acc = init; m_has = 1; end
      else if (xv) begin
        for (int l = 0; l < SIMD_W; l++) m_acc[l] = m_has ? agg_apply(op, m_acc[l], x[l]) : x[l];
        m_has = 1;
      end
      @(negedge clk);
      checks++;
      if (has !== m_has || (m_has && acc !== m_acc)) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d op=%s", it, op.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
