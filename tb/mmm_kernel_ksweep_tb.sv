// mmm_kernel_ksweep_tb: throughput against the length of the common dimension.
//
// Reproduces, at a size that simulates in seconds, the experiment in which
// m and n are fixed and k grows: every memory tile costs its compute time,
// k * (X_TOT/N_P) * (Y_TOT/Y_C) cycles, plus a drain of X_TOT * Y_TOT/Y_C
// cycles that does not depend on k, so efficiency rises towards 1 with k.
//
// Kernel: W=32, Y_C=2, N_P=4, X_TOT=8, Y_TOT=16, 128-bit words. A B row is
// MB=8 beats and the A chain needs N_P+2=6 cycles per row, so this build has
// no A stalls in steady state (unlike mmm_kernel_tb). The product is 16 x 32
// (2 x 2 tiles, N_c = 8 multiply-adds per cycle) for k = 4, 16, 64 and 128,
// without memory back-pressure. For each k the testbench
//  - checks every element of C against a reference product;
//  - checks the cycle count against the model
//        m*n*k/N_c  +  m*n/Y_C  <=  cycles  <=  that + 40 per tile;
//  - counts the cycles in which Feed B holds a full B row but waits for A
//    values; with Y_TOT/Y_C >= N_P + 2 there must be none.
// Efficiency (ideal compute cycles / measured cycles) must rise with k and
// exceed 0.9 at k = 128.
module mmm_kernel_ksweep_tb;
  import mmm_pkg::*;

  localparam int unsigned W = 32, Y_C = 2, N_P = 4, X_TOT = 8, Y_TOT = 16;
  localparam int unsigned MEM_BITS = 128, ADDR_W = 32, WORDS = 2048;
  localparam int unsigned EPW = MEM_BITS / W, N_C = N_P * Y_C;
  localparam int unsigned MM = 16, NN = 32, NKS = 4;
  localparam int unsigned TILES = (MM / X_TOT) * (NN / Y_TOT);
  localparam int KS [NKS] = '{4, 16, 64, 128};

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, bp = 1'b0;
  logic [DIM_W-1:0] m, n, k;
  logic [ADDR_W-1:0] a_base, b_base, c_base, c_hi;
  logic busy, done;
  logic a_req_valid, a_req_ready, a_rsp_valid, a_rsp_ready;
  logic b_req_valid, b_req_ready, b_rsp_valid, b_rsp_ready;
  logic c_wr_valid, c_wr_ready;
  logic [ADDR_W-1:0] a_req_addr, b_req_addr, c_wr_addr;
  logic [MEM_BITS-1:0] a_rsp_data, b_rsp_data, c_wr_data;
  int oob_writes, writes;
  int checks = 0, failures = 0;
  int n_stall = 0;

  always #5 clk = ~clk;

  mmm_kernel #(.W(W), .Y_C(Y_C), .N_P(N_P), .X_TOT(X_TOT), .Y_TOT(Y_TOT),
               .MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W)) dut (.*);

  mem_model #(.MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .WORDS(WORDS)) u_mem (
    .clk, .bp, .c_lo(c_base), .c_hi,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
    .b_req_valid, .b_req_ready, .b_req_addr, .b_rsp_valid, .b_rsp_ready, .b_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data, .oob_writes, .writes);

  always @(posedge clk) if (rst_n && dut.fb_stall) n_stall++;

  function automatic logic [W-1:0] elem(input logic [ADDR_W-1:0] word, input int e);
    return u_mem.mem[word][e*W +: W];
  endfunction

  task automatic run(input int kk, output int cycles, output int stalls);
    logic [W-1:0] ref_c;
    int a_words = MM * kk / EPW;
    int b_words = kk * NN / EPW;
    int stall0;
    m = MM; n = NN; k = kk;
    a_base = 8; b_base = a_base + a_words; c_base = b_base + b_words;
    c_hi = c_base + MM * NN / EPW;
    for (int i = 0; i < WORDS; i++)
      for (int e = 0; e < EPW; e++) u_mem.mem[i][e*W +: W] = $urandom;
    @(posedge clk);
    start <= 1'b1;
    stall0 = n_stall;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done && cycles < 100000) begin
      @(posedge clk);
      cycles++;
    end
    stalls = n_stall - stall0;
    checks++;
    if (!done) begin failures++; $display("FAIL: k=%0d did not finish", kk); end
    for (int i = 0; i < MM; i++)
      for (int j = 0; j < NN; j++) begin
        ref_c = '0;
        for (int p = 0; p < kk; p++)
          ref_c += elem(a_base + (i * kk + p) / EPW, (i * kk + p) % EPW) *
                   elem(b_base + (p * NN + j) / EPW, (p * NN + j) % EPW);
        checks++;
        if (elem(c_base + (i * NN + j) / EPW, (i * NN + j) % EPW) !== ref_c) begin
          failures++;
          if (failures < 10) $display("FAIL: k=%0d C[%0d][%0d] wrong", kk, i, j);
        end
      end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, stalls, ideal, lo, hi;
    real eff, prev_eff;
    m = '0; n = '0; k = '0; a_base = '0; b_base = '0; c_base = '0; c_hi = '0;
    prev_eff = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NKS; s++) begin
      run(KS[s], cyc, stalls);
      ideal = MM * NN * KS[s] / N_C;
      lo = ideal + MM * NN / Y_C;
      hi = lo + 40 * TILES;
      eff = real'(ideal) / real'(cyc);
      $display("k=%0d: %0d cycles (model %0d..%0d), efficiency %0.3f, Feed B stall cycles %0d",
               KS[s], cyc, lo, hi, eff, stalls);
      checks++;
      if (cyc < lo || cyc > hi) begin
        failures++; $display("FAIL: k=%0d cycle count outside the model", KS[s]);
      end
      checks++;
      if (eff <= prev_eff) begin
        failures++; $display("FAIL: efficiency did not rise with k");
      end
      checks++;
      if (stalls != 0) begin
        failures++; $display("FAIL: %0d Feed B stall cycles", stalls);
      end
      prev_eff = eff;
    end
    checks++;
    if (prev_eff < 0.9) begin failures++; $display("FAIL: efficiency at the largest k below 0.9"); end
    checks++;
    if (oob_writes != 0) begin failures++; $display("FAIL: %0d writes outside C", oob_writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
