// read_a_tb: Read A against the behavioural memory with random back-pressure.
// A is 6 x 8 bytes in 32-bit words (EPW=4), the tile has X_TOT=4 rows, so the
// second row tile is partial and must re-read the last row. The testbench
// recomputes the expected word sequence (tile, column group, row, with the
// row clamped to m-1) and checks every word pushed towards the FIFOs, the
// bound on outstanding requests and the final `done`.
module read_a_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 8, MEM_BITS = 32, X_TOT = 4, ADDR_W = 16, MAX_OUT = 3, EPW = 4;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, bp;
  logic [ADDR_W-1:0] a_base;
  logic [DIM_W-1:0] m, k_words, tiles_m, tiles_n;
  logic req_valid, req_ready, rsp_valid, rsp_ready, push_valid, push_ready, done;
  logic [ADDR_W-1:0] req_addr;
  logic [MEM_BITS-1:0] rsp_data;
  logic [EPW-1:0][W-1:0] push_data;
  logic b_req_ready, b_rsp_valid, c_wr_ready;
  logic [MEM_BITS-1:0] b_rsp_data;
  int oob, writes, checks = 0, failures = 0, got = 0, outst = 0, max_outst = 0;
  logic [MEM_BITS-1:0] expect_q[$];

  always #5 clk = ~clk;

  read_a #(.W(W), .MEM_BITS(MEM_BITS), .X_TOT(X_TOT), .ADDR_W(ADDR_W), .MAX_OUT(MAX_OUT)) dut (.*);
  mem_model #(.MEM_BITS(MEM_BITS), .ADDR_W(ADDR_W), .WORDS(256)) u_mem (
    .clk, .bp, .c_lo('0), .c_hi('0),
    .a_req_valid(req_valid), .a_req_ready(req_ready), .a_req_addr(req_addr),
    .a_rsp_valid(rsp_valid), .a_rsp_ready(rsp_ready), .a_rsp_data(rsp_data),
    .b_req_valid(1'b0), .b_req_ready(b_req_ready), .b_req_addr('0),
    .b_rsp_valid(b_rsp_valid), .b_rsp_ready(1'b0), .b_rsp_data(b_rsp_data),
    .c_wr_valid(1'b0), .c_wr_ready(c_wr_ready), .c_wr_addr('0), .c_wr_data('0),
    .oob_writes(oob), .writes(writes));

  always @(posedge clk) if (rst_n) begin
    push_ready <= ($urandom_range(0, 2) != 0);
    outst = outst + int'(req_valid && req_ready) - int'(rsp_valid && rsp_ready);
    if (outst > max_outst) max_outst = outst;
    if (push_valid && push_ready) begin
      checks++;
      if (expect_q.size() == 0 || push_data !== expect_q[0]) begin
        failures++; $display("FAIL: word %0d = %h", got, push_data);
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
    bp = 1; push_ready = 0;
    a_base = 10; m = 6; k_words = 2; tiles_m = 2; tiles_n = 2;
    for (int i = 0; i < 256; i++) u_mem.mem[i] = $urandom;
    for (int tm = 0; tm < 2; tm++) for (int tn = 0; tn < 2; tn++)
      for (int kb = 0; kb < 2; kb++) for (int r = 0; r < X_TOT; r++) begin
        automatic int row = tm * X_TOT + r;
        if (row > 5) row = 5;
        expect_q.push_back(u_mem.mem[10 + row * 2 + kb]);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    checks++;
    if (!done || got != 32 || expect_q.size() != 0) begin
      failures++; $display("FAIL: done=%0d words=%0d", done, got);
    end
    checks++;
    if (max_outst > MAX_OUT) begin failures++; $display("FAIL: %0d outstanding", max_outst); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
