// tb_pingpong_ram: full-size Input Buffer (two banks of 1024 x 512 bits).
// A writer fills banks with random lengths and tags while a reader checks
// random locations of the bank it is given and releases it after a random
// time. Checks data, tag order, that the writer is held while both banks are
// full, and that the reader never sees a bank that is still being filled.
module tb_pingpong_ram;
  localparam int DEPTH = 1024, W = 512, TAG_W = 64, NRD = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic wr_ready, wr_en, fill_done, rd_ready, rd_release;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr [NRD];
  logic [W-1:0] wr_data, rd_data [NRD];
  logic [TAG_W-1:0] fill_tag, rd_tag;
  pingpong_ram #(.DEPTH(DEPTH), .W(W), .NRD(NRD), .TAG_W(TAG_W)) u_dut (.clk, .rst_n,
    .wr_ready, .wr_en, .wr_addr, .wr_data, .fill_done, .fill_tag,
    .rd_ready, .rd_tag, .rd_addr, .rd_data, .rd_release);
  int checks = 0, failures = 0, n_held = 0;
  localparam int NFILL = 40;
  logic [W-1:0] img [NFILL][DEPTH];
  int len [NFILL];
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("%0t: %s", $time, msg); end
  endtask
  function automatic logic [W-1:0] rnd();
    logic [W-1:0] x;
    for (int i = 0; i < W / 32; i++) x[i*32 +: 32] = $urandom;
    return x;
  endfunction
  initial begin
    wr_en = 0; fill_done = 0; wr_addr = 0; wr_data = 0; fill_tag = 0;
    for (int f = 0; f < NFILL; f++) begin
      len[f] = 1 + $urandom_range(DEPTH - 1);
      for (int a = 0; a < len[f]; a++) img[f][a] = rnd();
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFILL; f++) begin
      for (int a = 0; a < len[f]; a++) begin
        @(negedge clk);
        wr_en = 0;
        while (!wr_ready) begin n_held++; @(negedge clk); end
        wr_en = 1; wr_addr = a; wr_data = img[f][a];
      end
      @(negedge clk) wr_en = 0;
      fill_done = 1; fill_tag = 64'(f) * 64'h1_0000_0001;
      @(negedge clk) fill_done = 0;
    end
  end
  initial begin
    rd_release = 0;
    foreach (rd_addr[p]) rd_addr[p] = 0;
    wait (rst_n);
    for (int f = 0; f < NFILL; f++) begin
      @(negedge clk);
      while (!rd_ready) @(negedge clk);
      check(rd_tag == 64'(f) * 64'h1_0000_0001, "tag order");
      // hold the bank longer for the first half so the writer must wait
      repeat ((f < NFILL / 2) ? 3000 : $urandom_range(50)) @(negedge clk);
      for (int i = 0; i < 64; i++) begin
        for (int p = 0; p < NRD; p++) rd_addr[p] = $urandom_range(len[f] - 1);
        #0.2;
        for (int p = 0; p < NRD; p++) check(rd_data[p] == img[f][rd_addr[p]], "read data");
        @(negedge clk);
      end
      rd_release = 1;
      @(negedge clk) rd_release = 0;
    end
    check(n_held > 0, "writer never held by two full banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
