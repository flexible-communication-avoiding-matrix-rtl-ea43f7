// write_c_tb: Write C receiving four drained tiles of a 3 x 12 byte matrix C
// (tiles of X_TOT=2 rows by Y_TOT=8 columns; 32-bit words of EPW=4 bytes,
// BPW=2 beats per word). The last row tile and the last column tile are
// partial, so some words must be dropped. Checks the address and data of every
// write, the dropped count, the `tile_drained` pulses, `done`, and that with
// no back-pressure the first tile is taken at one beat per cycle.
module write_c_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 8, Y_C = 2, MEM_BITS = 32, X_TOT = 2, Y_TOT = 8, ADDR_W = 16, DW = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [ADDR_W-1:0] c_base, wr_addr;
  logic [DIM_W-1:0] m, n_words, tiles_m, tiles_n;
  logic in_valid, in_ready, wr_valid, wr_ready, tile_drained, done;
  logic [DW-1:0] in_data;
  logic [MEM_BITS-1:0] wr_data;
  logic [DW-1:0] src_q[$];
  logic [ADDR_W-1:0] exp_a[$];
  logic [MEM_BITS-1:0] exp_w[$];
  int checks = 0, failures = 0, tiles = 0, writes = 0, dones = 0, taken = 0, first_tile_cycles = 0;
  logic bp = 1'b0;

  always #5 clk = ~clk;

  write_c #(.W(W), .Y_C(Y_C), .MEM_BITS(MEM_BITS), .X_TOT(X_TOT), .Y_TOT(Y_TOT), .ADDR_W(ADDR_W)) dut (.*);

  assign in_data = (src_q.size() > 0) ? src_q[0] : '0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin src_q.delete(0); taken++; end
    if (taken < 8) first_tile_cycles++;
    in_valid <= (src_q.size() > int'(in_valid && in_ready)) && (!bp || $urandom_range(0, 2) != 0);
    wr_ready <= !bp || ($urandom_range(0, 2) != 0);
    if (tiles > 0) bp <= 1'b1;
    if (tile_drained) tiles++;
    if (done) dones++;
    if (wr_valid && wr_ready) begin
      checks++;
      if (exp_a.size() == 0 || wr_addr !== exp_a[0] || wr_data !== exp_w[0]) begin
        failures++; $display("FAIL: write %0d at %0d = %h", writes, wr_addr, wr_data);
      end
      if (exp_a.size() != 0) begin exp_a.delete(0); exp_w.delete(0); end
      writes++;
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
    logic [DW-1:0] lo, hi;
    c_base = 100; m = 3; n_words = 3; tiles_m = 2; tiles_n = 2;
    in_valid = 0; wr_ready = 1;
    for (int tm = 0; tm < 2; tm++) for (int tn = 0; tn < 2; tn++)
      for (int r = 0; r < X_TOT; r++) for (int w = 0; w < 2; w++) begin
        automatic int row = tm * X_TOT + r;
        automatic int colw = tn * 2 + w;
        lo = DW'($urandom); hi = DW'($urandom);
        src_q.push_back(lo); src_q.push_back(hi);
        if (row < 3 && colw < 3) begin
          exp_a.push_back(ADDR_W'(100 + row * 3 + colw));
          exp_w.push_back({hi, lo});
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (dones == 0 && cyc < 5000) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    checks++;
    if (dones != 1 || tiles != 4 || writes != 9 || exp_a.size() != 0) begin
      failures++; $display("FAIL: dones=%0d tiles=%0d writes=%0d", dones, tiles, writes);
    end
    checks++;
    if (first_tile_cycles > 8 + 2) begin failures++; $display("FAIL: first tile took %0d cycles", first_tile_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
