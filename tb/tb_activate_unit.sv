// tb_activate_unit: checks shift, bias add, saturation and ReLU of the
// Activate Unit on random accumulator rows, and its one-cycle latency.
module tb_activate_unit;
  import hygcn_pkg::*;
  localparam int L = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic relu, iv, ov;
  logic [VID_W-1:0] itag, otag;
  acc_t in [L];
  elem_t bias [L], out [L];
  activate_unit #(.LANES(L)) u_dut (.clk, .rst_n, .relu_en(relu), .in_valid(iv), .in_tag(itag),
    .in, .bias, .out_valid(ov), .out_tag(otag), .out);
  int checks = 0, failures = 0;
  function automatic int ref_act(longint x, int b, bit r);
    longint s;
    s = (x >>> 16) + longint'(b);
    if (s > 64'sd2147483647) s = 64'sd2147483647;
    if (s < -64'sd2147483648) s = -64'sd2147483648;
    if (r && s < 0) s = 0;
    return int'(s);
  endfunction
  initial begin
    relu = 0; iv = 0; itag = 0;
    for (int l = 0; l < L; l++) begin in[l] = 0; bias[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 200; it++) begin
      relu = $urandom_range(1); iv = 1; itag = it;
      for (int l = 0; l < L; l++) begin
        in[l] = (it % 4 == 0) ? {$urandom, $urandom} : acc_t'($signed($urandom)) <<< ($urandom_range(20));
        bias[l] = $urandom;
      end
      @(negedge clk);
      checks++;
      if (!ov || otag != itag) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (out[l] !== ref_act(in[l], bias[l], relu)) failures++;
      end
    end
    @(negedge clk) iv = 0;
    @(negedge clk);
    checks++; if (ov) failures++;
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
