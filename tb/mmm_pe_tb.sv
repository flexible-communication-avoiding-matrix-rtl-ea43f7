// mmm_pe_tb: a chain of three processing elements driven as the kernel's head
// would drive it.
//
// For every PE row (k, n1) the testbench streams MB beats of row k of B and,
// in the same cycles, the A values of the next PE row, so the double buffer
// is loaded while the current row computes. After the last beat the chain
// drains the tile under random back-pressure; the drained beats must come out
// in tile row order and equal a reference product. Two tiles are run, the
// second with different data, to check that first_k restarts accumulation.
// It also checks that every B beat leaves the last PE N_P cycles later and
// that no A value leaks past the chain.
module mmm_pe_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 16, Y_C = 2, N_P = 3, R = 2, MB = 3;
  localparam int unsigned DW = Y_C * W, X = N_P * R, Y = MB * Y_C, PW = $clog2(N_P);

  logic clk = 1'b0, rst_n = 1'b0;
  logic          a_v [N_P+1];
  logic [PW-1:0] a_dst [N_P+1];
  logic [W-1:0]  a_d [N_P+1];
  logic          b_v [N_P+1];
  b_ctrl_t       b_c [N_P+1];
  logic [DW-1:0] b_d [N_P+1];
  logic          c_v [N_P+1];
  logic          c_r [N_P+1];
  logic [DW-1:0] c_d [N_P+1];
  int checks = 0, failures = 0;
  int b_in_cnt = 0, b_out_cnt = 0, a_leak = 0;
  logic [W-1:0] A [X][16];
  logic [W-1:0] B [16][Y];

  always #5 clk = ~clk;
  assign c_v[N_P] = 1'b0;
  assign c_d[N_P] = '0;

  for (genvar i = 0; i < N_P; i++) begin : g_pe
    mmm_pe #(.W(W), .Y_C(Y_C), .N_P(N_P), .IDX(i), .R(R), .MB(MB)) u_pe (
      .clk, .rst_n,
      .a_in_valid(a_v[i]), .a_in_dest(a_dst[i]), .a_in_data(a_d[i]),
      .a_out_valid(a_v[i+1]), .a_out_dest(a_dst[i+1]), .a_out_data(a_d[i+1]),
      .b_in_valid(b_v[i]), .b_in_ctrl(b_c[i]), .b_in_data(b_d[i]),
      .b_out_valid(b_v[i+1]), .b_out_ctrl(b_c[i+1]), .b_out_data(b_d[i+1]),
      .c_in_valid(c_v[i+1]), .c_in_ready(c_r[i+1]), .c_in_data(c_d[i+1]),
      .c_out_valid(c_v[i]), .c_out_ready(c_r[i]), .c_out_data(c_d[i]));
  end

  // B beats must leave the last PE exactly N_P cycles after entering.
  logic [N_P:0] vhist;
  always @(posedge clk) begin
    vhist <= {vhist[N_P-1:0], b_v[0]};
    if (b_v[0]) b_in_cnt++;
    if (b_v[N_P]) begin
      b_out_cnt++;
      checks++;
      if (!vhist[N_P-1]) begin failures++; $display("FAIL: B beat latency through chain"); end
    end
    if (a_v[N_P]) a_leak++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(input int K);
    int order[N_P];
    logic [W-1:0] ref_c;
    int got;
    for (int r = 0; r < X; r++) for (int p = 0; p < K; p++) A[r][p] = W'($urandom);
    for (int p = 0; p < K; p++) for (int j = 0; j < Y; j++) B[p][j] = W'($urandom);
    // preload A of row 0
    for (int p = 0; p < N_P; p++) begin
      @(negedge clk);
      a_v[0] = 1; a_dst[0] = PW'(N_P - 1 - p); a_d[0] = A[0 * N_P + (N_P - 1 - p)][0];
    end
    @(negedge clk); a_v[0] = 0;
    for (int g = 0; g < K * R; g++) begin
      int kk = g / R, n1 = g % R;
      int ng = g + 1, nk = (g + 1) / R, nn1 = (g + 1) % R;
      int cyc = (MB > N_P + 1) ? MB : N_P + 1;
      for (int p = 0; p < N_P; p++) order[p] = p;
      order.shuffle();
      for (int t = 0; t < cyc; t++) begin
        @(negedge clk);
        b_v[0] = (t < MB);
        b_c[0].first_row = (t == 0);
        b_c[0].first_k   = (kk == 0);
        b_c[0].last_tile = (g == K * R - 1) && (t == MB - 1);
        for (int j = 0; j < Y_C; j++) b_d[0][j*W +: W] = (t < MB) ? B[kk][t*Y_C + j] : '0;
        a_v[0] = (t >= 1) && (t <= N_P) && (ng < K * R);
        if (t >= 1 && t <= N_P) begin
          a_dst[0] = PW'(order[t-1]);
          a_d[0]   = (ng < K * R) ? A[nn1 * N_P + order[t-1]][nk] : '0;
        end
      end
    end
    @(negedge clk); b_v[0] = 0; a_v[0] = 0; b_c[0] = '0;
    // drain
    got = 0;
    while (got < X * MB) begin
      @(negedge clk);
      c_r[0] = 1'($urandom_range(0, 2) != 0);
      #1;
      if (c_v[0] && c_r[0]) begin
        int r = got / MB, mb = got % MB;
        for (int j = 0; j < Y_C; j++) begin
          ref_c = '0;
          for (int p = 0; p < K; p++) ref_c += A[r][p] * B[p][mb*Y_C + j];
          checks++;
          if (c_d[0][j*W +: W] !== ref_c) begin
            failures++;
            if (failures < 10) $display("FAIL: C[%0d][%0d] = %h expected %h", r, mb*Y_C+j, c_d[0][j*W +: W], ref_c);
          end
        end
        got++;
      end
    end
    @(negedge clk); c_r[0] = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (c_v[0]) begin failures++; $display("FAIL: extra drained data"); end
  endtask

  initial begin
    a_v[0] = 0; a_dst[0] = '0; a_d[0] = '0; b_v[0] = 0; b_c[0] = '0; b_d[0] = '0; c_r[0] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tile(4);
    tile(7);
    checks++;
    if (b_in_cnt != b_out_cnt || b_in_cnt != (4 + 7) * R * MB) begin
      failures++; $display("FAIL: B beats in %0d out %0d", b_in_cnt, b_out_cnt);
    end
    checks++;
    if (a_leak != 0) begin failures++; $display("FAIL: %0d A values left the chain", a_leak); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
