// transpose_tb: Transpose fed by four model FIFOs that run empty at random
// and paced by a model of Feed B that starts a row a random time after each
// group of A values is complete. Checks the transposed output order (tile,
// column group, column, row), the destination tag r mod N_P, the credit rule
// (group g enters only after row g-1 has started), `group_done` and `done`.
module transpose_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 8, EPW = 4, N_P = 2, X_TOT = 4, PW = 1;
  localparam int unsigned KW = 2, NT = 2;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [DIM_W-1:0] k_words, n_tiles;
  logic [EPW-1:0] fifo_valid, fifo_pop;
  logic [EPW-1:0][W-1:0] fifo_data;
  logic row_start, a_valid, group_done, done;
  logic [PW-1:0] a_dest;
  logic [W-1:0] a_data;
  logic [W-1:0] fq [EPW][$];
  logic [W-1:0] exp_v[$];
  int exp_d[$];
  int checks = 0, failures = 0, emitted = 0, rows_started = 0, a_avail = 0, delay = 0, groups = 0;

  always #5 clk = ~clk;

  transpose #(.W(W), .EPW(EPW), .N_P(N_P), .X_TOT(X_TOT)) dut (.*);

  always_comb
    for (int e = 0; e < EPW; e++) fifo_data[e] = (fq[e].size() > 0) ? fq[e][0] : '0;

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < EPW; e++) begin
      if (fifo_pop[e]) begin
        checks++;
        if (!fifo_valid[e]) begin failures++; $display("FAIL: pop of empty FIFO %0d", e); end
        else fq[e].delete(0);
      end
      fifo_valid[e] <= (fq[e].size() > int'(fifo_pop[e])) && ($urandom_range(0, 3) != 0);
    end
    if (a_valid) begin
      checks++;
      if (exp_v.size() == 0 || a_data !== exp_v[0] || int'(a_dest) != exp_d[0]) begin
        failures++; $display("FAIL: A value %0d = %h dest %0d", emitted, a_data, a_dest);
      end
      if (exp_v.size() != 0) begin exp_v.delete(0); exp_d.delete(0); end
      checks++;
      if (emitted / N_P > rows_started) begin
        failures++; $display("FAIL: group %0d entered before row %0d started", emitted / N_P, emitted / N_P - 1);
      end
      emitted++;
    end
    // Feed B model
    row_start <= 1'b0;
    if (group_done) begin a_avail++; groups++; end
    if (delay > 0) delay--;
    else if (a_avail > 0 && !row_start) begin
      row_start <= 1'b1;
      rows_started++;
      a_avail--;
      delay = $urandom_range(0, 6);
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
    logic [W-1:0] v [NT][KW][EPW][X_TOT];
    k_words = KW; n_tiles = NT; fifo_valid = '0; row_start = 0;
    for (int t = 0; t < NT; t++) for (int kb = 0; kb < KW; kb++)
      for (int r = 0; r < X_TOT; r++) for (int e = 0; e < EPW; e++) begin
        v[t][kb][e][r] = W'($urandom);
        fq[e].push_back(v[t][kb][e][r]);
      end
    for (int t = 0; t < NT; t++) for (int kb = 0; kb < KW; kb++)
      for (int e = 0; e < EPW; e++) for (int r = 0; r < X_TOT; r++) begin
        exp_v.push_back(v[t][kb][e][r]);
        exp_d.push_back(r % N_P);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    repeat (3) @(posedge clk);
    checks++;
    if (!done || emitted != NT * KW * EPW * X_TOT || groups != emitted / N_P) begin
      failures++; $display("FAIL: done=%0d emitted=%0d groups=%0d", done, emitted, groups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
