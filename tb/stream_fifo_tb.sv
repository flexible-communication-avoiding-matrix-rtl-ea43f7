// stream_fifo_tb: random pushes and pops against a queue model; checks data
// order, count, and the full and empty flags at a depth that is not a power
// of two.
module stream_fifo_tb;
  localparam int unsigned WIDTH = 12, DEPTH = 5, CW = $clog2(DEPTH + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [CW-1:0] count;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0;
  logic do_pop, do_push;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (count != CW'(q.size()) || in_ready != (q.size() < DEPTH) || out_valid != (q.size() > 0)) begin
        failures++; $display("FAIL: count %0d model %0d ready %0d valid %0d", count, q.size(), in_ready, out_valid);
      end
      if (q.size() > 0) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL: data %h expected %h", out_data, q[0]); end
      end
      if (q.size() == DEPTH) n_full++;
      // phases: mostly pushing, then mostly popping
      in_valid  = ($urandom_range(0, 9) < ((t / 200) % 2 == 0 ? 8 : 3));
      out_ready = ($urandom_range(0, 9) < ((t / 200) % 2 == 0 ? 3 : 8));
      in_data   = WIDTH'($urandom);
      #1;
      do_pop  = out_valid && out_ready;
      do_push = in_valid && in_ready;
      @(posedge clk);
      if (do_pop) void'(q.pop_front());
      if (do_push) q.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
