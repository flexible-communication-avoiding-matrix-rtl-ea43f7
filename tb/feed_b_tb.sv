// feed_b_tb: Feed B between a random-rate source of B beats, a model of
// Transpose that answers each row start with the next group of A values after
// a set latency, and a model of Write C that reports the tile drained some
// cycles after the last beat. Checks every beat and its control bits (each B
// row replayed R times, first_row, first_k, last_tile), that nothing is sent
// between a tile's last beat and its drain, that rows run back to back when A
// is early (first tile) and that Feed B stalls when A is late (second tile).
module feed_b_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 8, Y_C = 2, R = 2, MB = 3, DW = 16, KS = 3, NT = 2;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [DIM_W-1:0] k_steps, n_tiles;
  logic in_valid, in_ready, group_done, row_start, tile_drained, b_valid, stall, done;
  logic [DW-1:0] in_data, b_data;
  b_ctrl_t b_ctrl;
  logic [DW-1:0] rows [NT][KS][MB];
  logic [DW-1:0] src_q[$];
  logic [DW-1:0] exp_d[$];
  b_ctrl_t exp_c[$];
  int checks = 0, failures = 0, beats = 0, stalls = 0, b2b = 0, lat = 1;
  int gd_timer[$];
  int drain_timer = -1;
  logic in_drain = 1'b0, prev_last = 1'b0;

  always #5 clk = ~clk;

  feed_b #(.W(W), .Y_C(Y_C), .R(R), .MB(MB)) dut (.*);

  assign in_data = (src_q.size() > 0) ? src_q[0] : '0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) src_q.delete(0);
    in_valid <= (src_q.size() > int'(in_valid && in_ready)) && ($urandom_range(0, 2) != 0);
    if (stall) stalls++;
    // Transpose model: the next group is complete `lat` cycles after a row start
    group_done <= 1'b0;
    foreach (gd_timer[i]) gd_timer[i]--;
    if (gd_timer.size() > 0 && gd_timer[0] <= 0) begin group_done <= 1'b1; gd_timer.delete(0); end
    if (row_start) gd_timer.push_back(lat);
    // Write C model
    tile_drained <= 1'b0;
    if (drain_timer > 0) drain_timer--;
    else if (drain_timer == 0) begin tile_drained <= 1'b1; drain_timer = -1; in_drain = 1'b0; end
    if (b_valid) begin
      checks++;
      if (in_drain) begin failures++; $display("FAIL: beat during drain"); end
      checks++;
      if (exp_d.size() == 0 || b_data !== exp_d[0] || b_ctrl !== exp_c[0]) begin
        failures++; $display("FAIL: beat %0d = %h ctrl %b", beats, b_data, b_ctrl);
      end
      if (exp_d.size() != 0) begin exp_d.delete(0); exp_c.delete(0); end
      if (prev_last && b_ctrl.first_row) b2b++;
      if (b_ctrl.last_tile) begin in_drain = 1'b1; drain_timer = 5; lat = 8; end
      beats++;
    end
    prev_last <= b_valid && (beats % MB == 0);
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
    b_ctrl_t c;
    k_steps = KS; n_tiles = NT; in_valid = 0; group_done = 0; tile_drained = 0;
    for (int t = 0; t < NT; t++) for (int kk = 0; kk < KS; kk++) for (int mb = 0; mb < MB; mb++) begin
      rows[t][kk][mb] = DW'($urandom);
      src_q.push_back(rows[t][kk][mb]);
    end
    for (int t = 0; t < NT; t++) for (int kk = 0; kk < KS; kk++)
      for (int n1 = 0; n1 < R; n1++) for (int mb = 0; mb < MB; mb++) begin
        exp_d.push_back(rows[t][kk][mb]);
        c.first_row = (mb == 0);
        c.first_k   = (kk == 0);
        c.last_tile = (kk == KS - 1) && (n1 == R - 1) && (mb == MB - 1);
        exp_c.push_back(c);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; group_done = 1; @(negedge clk); start = 0; group_done = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    checks++;
    if (!done || beats != NT * KS * R * MB) begin failures++; $display("FAIL: done=%0d beats=%0d", done, beats); end
    checks++;
    if (b2b == 0) begin failures++; $display("FAIL: rows never back to back"); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: never stalled for A"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
