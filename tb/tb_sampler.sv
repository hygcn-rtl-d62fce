// tb_sampler: checks the Sampler's keep decisions in all three modes against
// an independent model (LFSR offset, index interval, neighbour cap, flags).
module tb_sampler;
  import hygcn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  sample_mode_e mode;
  logic [15:0] factor, max_keep, seed;
  logic seed_load, v_start, e_valid, e_flag, keep;
  logic [VID_W-1:0] v_deg;
  sampler u_dut (.clk, .rst_n, .mode, .factor, .max_keep, .seed, .seed_load,
                 .v_start, .v_deg, .e_valid, .e_flag, .keep);
  int checks = 0, failures = 0, kept_total = 0, dropped = 0;
  logic [15:0] lf;
  function automatic logic [15:0] nx(logic [15:0] s); return {s[14:0], s[15]^s[13]^s[12]^s[10]}; endfunction
  initial begin
    seed_load = 0; v_start = 0; e_valid = 0; e_flag = 0; v_deg = 0;
    mode = SAMPLE_ALL; factor = 1; max_keep = 0; seed = 16'h0BEE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = sample_mode_e'(m); factor = 16'(1 + $urandom_range(4)); max_keep = (m == 1) ? 16'd3 : 16'd0;
      @(negedge clk) seed_load = 1;
      @(negedge clk) seed_load = 0;
      lf = seed;
      for (int v = 0; v < 40; v++) begin
        int deg, span, off, kept;
        deg = $urandom_range(12);
        v_deg = deg; v_start = 1;
        span = (deg < factor) ? deg : factor;
        off = (span == 0) ? 0 : int'(lf) % span;
        lf = nx(lf);
        @(negedge clk) v_start = 0;
        kept = 0;
        for (int j = 0; j < deg; j++) begin
          bit k;
          e_valid = 1; e_flag = $urandom_range(1);
          case (mode)
            SAMPLE_UNIFORM: k = (j % factor == off) && (kept < 3);
            SAMPLE_PREDEF:  k = e_flag;
            default:        k = 1;
          endcase
          #0.5;
          checks++;
          if (keep !== k) begin failures++; if (failures < 5) $display("mode %0d v %0d j %0d: keep %0d exp %0d", m, v, j, keep, k); end
          if (k) begin kept++; kept_total++; end else dropped++;
          @(negedge clk);
        end
        e_valid = 0;
      end
    end
    checks++; if (dropped == 0 || kept_total == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
