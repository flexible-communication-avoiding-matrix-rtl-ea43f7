// mmm_kernel_minplus_tb: the kernel built for the distance product.
//
// With OP = OP_ADD_MIN every compute unit adds instead of multiplying and
// takes the minimum instead of adding, so the kernel computes
// C[i][j] = min over p of (A[i][p] + B[p][j]) (sums modulo 2^W) with the same
// tiling, chain and drain as the ordinary product. Kernel: W=32, Y_C=2,
// N_P=4, X_TOT=8, Y_TOT=16, 128-bit words. The product is 13 x 20 with
// k = 12 (partial tiles in both dimensions, 2 x 2 tiles), run once without
// and once with random memory back-pressure. Elements are drawn from 0..255
// so that no sum wraps and the minimum changes often. Every element of C is
// compared with a reference computed here.
module mmm_kernel_minplus_tb;
  import mmm_pkg::*;

  localparam int unsigned W = 32, Y_C = 2, N_P = 4, X_TOT = 8, Y_TOT = 16;
  localparam int unsigned MEM_BITS = 128, ADDR_W = 32, WORDS = 512;
  localparam int unsigned EPW = MEM_BITS / W;
  localparam int unsigned MM = 13, NN = 20, KK = 12;

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
  
  always #5 clk = ~clk;

  mmm_kernel #(.W(W), .Y_C(Y_C), .N_P(N_P), .X_TOT(X_TOT), .Y_TOT(Y_TOT),
               .MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .OP(OP_ADD_MIN)) dut (.*);

  mem_model #(.MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .WORDS(WORDS)) u_mem (
    .clk, .bp, .c_lo(c_base), .c_hi,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
    .b_req_valid, .b_req_ready, .b_req_addr, .b_rsp_valid, .b_rsp_ready, .b_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data, .oob_writes, .writes);

  function automatic logic [W-1:0] elem(input logic [ADDR_W-1:0] word, input int e);
    return u_mem.mem[word][e*W +: W];
  endfunction

  task automatic run(input logic with_bp);
    logic [W-1:0] ref_c, sum;
    int cycles;
    m = MM; n = NN; k = KK; bp = with_bp;
    a_base = 4; b_base = a_base + MM * KK / EPW; c_base = b_base + KK * NN / EPW;
    c_hi = c_base + MM * NN / EPW;
    for (int i = 0; i < WORDS; i++)
      for (int e = 0; e < EPW; e++) u_mem.mem[i][e*W +: W] = W'($urandom_range(0, 255));
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done && cycles < 20000) begin
      @(posedge clk);
      cycles++;
    end
    checks++;
    if (!done) begin failures++; $display("FAIL: bp=%0d did not finish", with_bp); end
    for (int i = 0; i < MM; i++)
      for (int j = 0; j < NN; j++) begin
        ref_c = '1;
        for (int p = 0; p < KK; p++) begin
          sum = elem(a_base + (i * KK + p) / EPW, (i * KK + p) % EPW) +
                elem(b_base + (p * NN + j) / EPW, (p * NN + j) % EPW);
          if (sum < ref_c) ref_c = sum;
        end
        checks++;
        if (elem(c_base + (i * NN + j) / EPW, (i * NN + j) % EPW) !== ref_c) begin
          failures++;
          if (failures < 10) $display("FAIL: C[%0d][%0d] = %0d, expected %0d", i, j,
                                      elem(c_base + (i * NN + j) / EPW, (i * NN + j) % EPW), ref_c);
        end
      end
    $display("min-plus %0dx%0dx%0d bp=%0d: %0d cycles, failures so far %0d", MM, NN, KK, with_bp, cycles, failures);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = '0; n = '0; k = '0; a_base = '0; b_base = '0; c_base = '0; c_hi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1'b0);
    run(1'b1);
    checks++;
    if (oob_writes != 0) begin failures++; $display("FAIL: %0d writes outside C", oob_writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
