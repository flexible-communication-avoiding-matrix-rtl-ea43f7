// c_buffer_tb: random writes and reads against an array model, checking the
// one-cycle read latency and that a read of the address being written in the
// same cycle returns the old value.
module c_buffer_tb;
  localparam int unsigned DEPTH = 10, WIDTH = 24, AW = $clog2(DEPTH);
  logic clk = 1'b0, we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_v;
  logic expect_valid;
  int checks = 0, failures = 0;

  c_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; expect_valid = 0; expect_v = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = WIDTH'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    repeat (3000) begin
      @(negedge clk);
      if (expect_valid) begin
        checks++;
        if (rdata !== expect_v) begin
          failures++; $display("FAIL: read %h expected %h", rdata, expect_v);
        end
      end
      re = 1'($urandom); we = 1'($urandom);
      raddr = AW'($urandom_range(0, DEPTH - 1));
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      expect_valid = re;
      if (re) expect_v = model[raddr];
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
