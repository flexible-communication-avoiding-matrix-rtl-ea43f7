// mmm_kernel_full_tb: one complete product on the kernel at its default size.
//
// The kernel is built with its default parameters (N_P=202 PEs of Y_C=8
// 32-bit compute units, a 1212 x 1360 memory tile, 512-bit memory words).
// It multiplies a 1212 x 16 matrix by a 16 x 1360 matrix, exactly one memory
// tile, without memory back-pressure, compares all of C with a reference
// computed here and checks the cycle count: with Y_TOT/Y_C = 170 < N_P + 2
// each of the k*R = 96 PE rows takes N_P + 2 = 204 cycles, and the drain
// takes X_TOT*MB = 206,040 cycles.
module mmm_kernel_full_tb;
  import mmm_pkg::*;

  localparam int unsigned W = W_DEFAULT, Y_C = Y_C_DEFAULT, N_P = N_P_DEFAULT;
  localparam int unsigned X_TOT = X_TOT_DEFAULT, Y_TOT = Y_TOT_DEFAULT;
  localparam int unsigned MEM_BITS = MEM_BITS_DEFAULT, ADDR_W = ADDR_W_DEFAULT, WORDS = 106000;
  localparam int unsigned EPW = MEM_BITS / W, R = X_TOT / N_P, MB = Y_TOT / Y_C;

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

  mmm_kernel dut (.*);

  mem_model #(.MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .WORDS(WORDS)) u_mem (
    .clk, .bp, .c_lo(c_base), .c_hi,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
    .b_req_valid, .b_req_ready, .b_req_addr, .b_rsp_valid, .b_rsp_ready, .b_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data, .oob_writes, .writes);

  // ---------------- mechanism counters ----------------
  int n_stall, n_swap, n_firstk, n_drain, n_drain_bp, n_dropped, n_bfill_overlap, n_tiles, n_fwd;
  always @(posedge clk) if (rst_n) begin
    if (dut.fb_stall) n_stall++;
    if (dut.b_v[0] && dut.b_c[0].first_row) n_swap++;
    if (dut.b_v[0] && dut.b_c[0].first_k) n_firstk++;
    if (dut.c_v[0] && dut.c_r[0]) n_drain++;
    if (dut.c_v[0] && !dut.c_r[0]) n_drain_bp++;
    if (dut.u_write_c.in_fire && dut.u_write_c.word_end && !dut.u_write_c.in_bounds) n_dropped++;
    if (dut.u_feed_b.wr && dut.u_feed_b.state == FB_STREAM) n_bfill_overlap++;
    if (dut.tile_drained) n_tiles++;
    if (dut.c_v[1] && dut.c_r[1]) n_fwd++;
  end

  function automatic logic [W-1:0] elem(input logic [ADDR_W-1:0] word, input int e);
    return u_mem.mem[word][e*W +: W];
  endfunction

  task automatic run(input int mm, input int nn, input int kk, input logic with_bp, output int cycles);
    logic [W-1:0] ref_c;
    int a_words = mm * kk / EPW;
    int b_words = kk * nn / EPW;
    m = mm; n = nn; k = kk; bp = with_bp;
    a_base = 16; b_base = a_base + a_words; c_base = b_base + b_words + 3;
    c_hi = c_base + mm * nn / EPW;
    for (int i = 0; i < int'(c_hi); i++)
      for (int e = 0; e < EPW; e++) u_mem.mem[i][e*W +: W] = $urandom;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done && cycles < 400000) begin
      @(posedge clk);
      cycles++;
    end
    checks++;
    if (!done) begin failures++; $display("FAIL: run %0dx%0dx%0d did not finish", mm, nn, kk); end
    // compare C with the reference product
    for (int i = 0; i < mm; i++)
      for (int j = 0; j < nn; j++) begin
        ref_c = '0;
        for (int p = 0; p < kk; p++)
          ref_c += elem(a_base + (i * kk + p) / EPW, (i * kk + p) % EPW) *
                   elem(b_base + (p * nn + j) / EPW, (p * nn + j) % EPW);
        checks++;
        if (elem(c_base + (i * nn + j) / EPW, (i * nn + j) % EPW) !== ref_c) begin
          failures++;
          if (failures < 10) $display("FAIL: C[%0d][%0d] = %h, expected %h", i, j,
                                      elem(c_base + (i * nn + j) / EPW, (i * nn + j) % EPW), ref_c);
        end
      end
    checks++;
    if (oob_writes != 0) begin failures++; $display("FAIL: %0d writes outside C", oob_writes); end
    $display("run %0dx%0dx%0d bp=%0d: %0d cycles, failures so far %0d", mm, nn, kk, with_bp, cycles, failures);
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, lo, hi;
    {n_stall, n_swap, n_firstk, n_drain, n_drain_bp, n_dropped, n_bfill_overlap, n_tiles, n_fwd} = '0;
    m = '0; n = '0; k = '0; a_base = '0; b_base = '0; c_base = '0; c_hi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // one full memory tile, no back-pressure: check the cycle count.
    run(1212, 1360, 16, 1'b0, cyc);
    lo = 16 * R * MB + X_TOT * MB;
    hi = 16 * R * (N_P + 2) + X_TOT * MB + 2 * N_P + 40;
    checks++;
    if (cyc < lo || cyc > hi) begin
      failures++; $display("FAIL: %0d cycles outside [%0d, %0d]", cyc, lo, hi);
    end
    checks++;
    if (n_swap != 16 * R || n_firstk != R * MB || n_drain != X_TOT * MB) begin
      failures++; $display("FAIL: beat counts swap=%0d firstk=%0d drain=%0d", n_swap, n_firstk, n_drain);
    end
    $display("mechanisms: stall=%0d swap=%0d first_k=%0d drain=%0d drain_bp=%0d dropped=%0d bfill_overlap=%0d tiles=%0d fwd=%0d",
             n_stall, n_swap, n_firstk, n_drain, n_drain_bp, n_dropped, n_bfill_overlap, n_tiles, n_fwd);
    checks++; if (n_stall == 0)         begin failures++; $display("FAIL: no A stall"); end
    checks++; if (n_bfill_overlap == 0) begin failures++; $display("FAIL: B row never filled while streaming"); end
    checks++; if (n_tiles != 1)         begin failures++; $display("FAIL: tiles drained %0d", n_tiles); end
    checks++; if (n_fwd == 0)           begin failures++; $display("FAIL: no C forwarded between PEs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
