// read_b_tb: Read B against the behavioural memory with random back-pressure.
// B is 3 x 12 bytes (EPW=4 per 32-bit word, n_words=3), the tile is Y_TOT=8
// columns (2 words), so the second column tile is partial and repeats the
// last word. Each word must come out as BPW=2 beats of Y_C=2 elements, lowest
// half first, in the order tile, k, word.
module read_b_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 8, Y_C = 2, MEM_BITS = 32, Y_TOT = 8, ADDR_W = 16, DW = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, bp;
  logic [ADDR_W-1:0] b_base;
  logic [DIM_W-1:0] n_words, k_steps, tiles_m, tiles_n;
  logic req_valid, req_ready, rsp_valid, rsp_ready, out_valid, out_ready, done;
  logic [ADDR_W-1:0] req_addr;
  logic [MEM_BITS-1:0] rsp_data;
  logic [DW-1:0] out_data;
  logic a_req_ready, a_rsp_valid, c_wr_ready;
  logic [MEM_BITS-1:0] a_rsp_data;
  int oob, writes, checks = 0, failures = 0, got = 0;
  logic [DW-1:0] expect_q[$];

  always #5 clk = ~clk;

  read_b #(.W(W), .Y_C(Y_C), .MEM_BITS(MEM_BITS), .Y_TOT(Y_TOT), .ADDR_W(ADDR_W), .MAX_OUT(4)) dut (.*);
  mem_model #(.MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .WORDS(256)) u_mem (
    .clk, .bp, .c_lo('0), .c_hi('0),
    .a_req_valid(1'b0), .a_req_ready(a_req_ready), .a_req_addr('0),
    .a_rsp_valid(a_rsp_valid), .a_rsp_ready(1'b0), .a_rsp_data(a_rsp_data),
    .b_req_valid(req_valid), .b_req_ready(req_ready), .b_req_addr(req_addr),
    .b_rsp_valid(rsp_valid), .b_rsp_ready(rsp_ready), .b_rsp_data(rsp_data),
    .c_wr_valid(1'b0), .c_wr_ready(c_wr_ready), .c_wr_addr('0), .c_wr_data('0),
    .oob_writes(oob), .writes(writes));

  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && out_ready) begin
      checks++;
      if (expect_q.size() == 0 || out_data !== expect_q[0]) begin
        failures++; $display("FAIL: beat %0d = %h", got, out_data);
      end
      if (expect_q.size() != 0) expect_q.delete(0);
      got++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    bp = 1; out_ready = 0;
    b_base = 7; n_words = 3; k_steps = 3; tiles_m = 2; tiles_n = 2;
    for (int i = 0; i < 256; i++) u_mem.mem[i] = $urandom;
    for (int tm = 0; tm < 2; tm++) for (int tn = 0; tn < 2; tn++)
      for (int kk = 0; kk < 3; kk++) for (int w = 0; w < 2; w++) begin
        automatic int cw = tn * 2 + w;
        if (cw > 2) cw = 2;
        expect_q.push_back(u_mem.mem[7 + kk * 3 + cw][15:0]);
        expect_q.push_back(u_mem.mem[7 + kk * 3 + cw][31:16]);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    checks++;
    if (!done || got != 48 || expect_q.size() != 0) begin
      failures++; $display("FAIL: done=%0d beats=%0d", done, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
