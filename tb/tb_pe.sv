// tb_pe: checks the PE's multiply-accumulate (only when both operands are
// valid), its clear, and that both operands are passed on one cycle later.
module tb_pe;
  import hygcn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic clear, av, wv, avo, wvo;
  elem_t a, w, ao, wo;
  acc_t acc;
  pe u_dut (.clk, .rst_n, .clear, .a_in(a), .a_vin(av), .w_in(w), .w_vin(wv),
            .a_out(ao), .a_vout(avo), .w_out(wo), .w_vout(wvo), .acc);
  int checks = 0, failures = 0;
  acc_t m;
  initial begin
    clear = 0; av = 0; wv = 0; a = 0; w = 0; m = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 500; it++) begin
      clear = ($urandom_range(31) == 0);
      av = $urandom_range(1); wv = $urandom_range(1);
      a = $urandom; w = $urandom;
      if (clear) m = 0; else if (av && wv) m += acc_t'(a) * acc_t'(w);
      @(negedge clk);
      checks += 3;
      if (acc !== m) failures++;
      if (ao !== a || avo !== av) failures++;
      if (wo !== w || wvo !== wv) failures++;
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
