// tb_memory_handler: four clients (edges, input, weights, output) issue
// random bursts to the Memory Access Handler in front of the behavioural
// off-chip memory. Checks that requests are grouped into batches and served
// in priority order inside a batch, that every burst issues consecutive
// addresses split into channel / bank / row, that read beats return to the
// right client with the right beat index and data, and that written beats
// reach memory.
module tb_memory_handler;
  import hygcn_pkg::*;
  localparam int NR = 4096;           // preloaded read region
  localparam int WBASE = 32'h0001_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic [NCLIENT-1:0] req_valid, req_ready, req_we, wr_pop, rsp_valid;
  logic [MADDR_W-1:0] req_addr [NCLIENT];
  logic [MLEN_W-1:0]  req_len [NCLIENT], rsp_idx;
  chunk_t wr_data [NCLIENT], rsp_data;
  logic m_valid, m_ready, m_we, m_rvalid, batch_start;
  logic [MADDR_W-1:0] m_addr;
  logic [2:0] m_ch; logic [3:0] m_bank; logic [MADDR_W-8:0] m_row;
  chunk_t m_wdata, m_rdata;
  memory_handler u_dut (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_len, .req_we,
    .wr_data, .wr_pop, .rsp_valid, .rsp_idx, .rsp_data,
    .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_we(m_we), .mem_req_addr(m_addr),
    .mem_req_ch(m_ch), .mem_req_bank(m_bank), .mem_req_row(m_row), .mem_req_wdata(m_wdata),
    .mem_rsp_valid(m_rvalid), .mem_rsp_data(m_rdata), .batch_start);
  hbm_model u_mem (.clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req_we(m_we),
    .req_addr(m_addr), .req_wdata(m_wdata), .rsp_valid(m_rvalid), .rsp_data(m_rdata));

  int checks = 0, failures = 0, n_batch = 0, n_multi = 0, n_bursts = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("%0t: %s", $time, msg); end
  endtask
  function automatic chunk_t pat(int a);
    chunk_t x;
    for (int l = 0; l < SIMD_W; l++) x[l] = elem_t'(a * 7919 + l * 131 + 5);
    return x;
  endfunction
  function automatic chunk_t wpat(int c, int a, int i);
    chunk_t x;
    for (int l = 0; l < SIMD_W; l++) x[l] = elem_t'(c * 1000003 + a * 31 + i * 17 + l);
    return x;
  endfunction

  // per-client burst state
  int  b_addr [NCLIENT], b_len [NCLIENT], b_got [NCLIENT], b_pop [NCLIENT];
  bit  b_busy [NCLIENT];            // burst accepted, data outstanding
  int  wrote [int];                 // expected memory image of written beats
  int  done_bursts [NCLIENT];
  localparam int PER_CLIENT = 60;
  logic [NCLIENT-1:0] batch_m, vld_q;

  // memory-side checks: consecutive addresses and the address split
  int exp_addr;
  always @(negedge clk) if (rst_n && m_valid && m_ready) begin
    check(m_addr == exp_addr, "burst address not consecutive");
    check({m_row, m_bank, m_ch} == m_addr, "channel / bank / row split");
    exp_addr = exp_addr + 1;
  end

  // write beats are taken on the clock edge that sees wr_pop
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NCLIENT; c++) if (wr_pop[c]) begin
      wrote[b_addr[c] + b_pop[c]] = 1;
      b_pop[c]++;
    end
  always_comb for (int c = 0; c < NCLIENT; c++) wr_data[c] = wpat(c, b_addr[c], b_pop[c]);

  initial begin
    req_valid = '0; req_we = 4'b1000; exp_addr = 0; batch_m = '0; vld_q = '0;
    foreach (req_addr[c]) begin req_addr[c] = 0; req_len[c] = 0; b_addr[c] = 0; b_pop[c] = 0; end
    foreach (b_busy[c]) begin b_busy[c] = 0; done_bursts[c] = 0; end
    for (int a = 0; a < NR; a++) u_mem.mem[a] = pat(a);
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (done_bursts.sum() < NCLIENT * PER_CLIENT) begin
      @(negedge clk);
      // batch bookkeeping: batch_start means the requests seen last edge form the batch
      if (batch_start) begin
        check(batch_m == '0, "new batch before the old one was served");
        batch_m = vld_q; n_batch++;
        if ($countones(vld_q) > 1) n_multi++;
      end
      for (int c = 0; c < NCLIENT; c++) if (req_ready[c]) begin
        check(batch_m[c], "served a client outside the batch");
        for (int h = 0; h < c; h++) check(!batch_m[h], "priority order inside the batch");
        batch_m[c] = 0;
        req_valid[c] = 0; b_busy[c] = 1; b_got[c] = 0; b_pop[c] = 0;
        exp_addr = b_addr[c];
        n_bursts++;
      end
      // read returns
      for (int c = 0; c < NCLIENT; c++) if (rsp_valid[c]) begin
        check(!req_we[c] && b_busy[c], "read data for a client without a read");
        check(int'(rsp_idx) == b_got[c], "beat index");
        check(rsp_data == pat(b_addr[c] + int'(rsp_idx)), "read data");
        b_got[c]++;
      end
      for (int c = 0; c < NCLIENT; c++)
        if (b_busy[c] && (req_we[c] ? b_pop[c] : b_got[c]) == b_len[c]) begin
          b_busy[c] = 0; done_bursts[c]++;
        end
      // new requests
      for (int c = 0; c < NCLIENT; c++)
        if (!b_busy[c] && !req_valid[c] && done_bursts[c] < PER_CLIENT && $urandom_range(4) == 0) begin
          b_len[c]  = 1 + $urandom_range(9);
          b_addr[c] = req_we[c] ? WBASE + c * 4096 + done_bursts[c] * 16 : $urandom_range(NR - 16);
          req_addr[c] = b_addr[c]; req_len[c] = b_len[c]; req_valid[c] = 1;
        end
      vld_q = req_valid;
    end
    repeat (40) @(negedge clk);
    foreach (wrote[a]) begin
      automatic int c = (a - WBASE) / 4096;
      automatic int base = WBASE + c * 4096 + ((a - WBASE - c * 4096) / 16) * 16;
      check(u_mem.mem.exists(a) && u_mem.mem[a] == wpat(c, base, a - base), $sformatf("written beat %0h: %0h exp %0h", a, u_mem.mem[a][0], wpat(c, base, a - base)));
    end
    check(n_batch > 0 && n_multi > 0 && wrote.num() > 0, "mechanisms");
    $display("batches %0d (with several clients %0d), bursts %0d", n_batch, n_multi, n_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
