// compute_unit_tb: random multiply-add vectors against a 64-bit reference
// reduced modulo 2^W, with and without init, plus the corner values. A second
// unit built for the distance product (OP_ADD_MIN) gets the same vectors and
// is compared with min(c, (a+b) mod 2^W), or (a+b) mod 2^W under init.
module compute_unit_tb;
  import mmm_pkg::*;
  localparam int unsigned W = 32;
  logic [W-1:0] a, b, c_in, c_out, c_out_min;
  logic init;
  int checks = 0, failures = 0;

  compute_unit #(.W(W)) dut (.*);
  compute_unit #(.W(W), .OP(OP_ADD_MIN)) dut_min (.a, .b, .c_in, .init, .c_out(c_out_min));

  task automatic check(input logic [W-1:0] ta, tb_, tc, input logic ti);
    longint unsigned full;
    logic [W-1:0] expect_v, sum, expect_min;
    a = ta; b = tb_; c_in = tc; init = ti;
    #1;
    full = longint'(ta) * longint'(tb_) + (ti ? 64'd0 : longint'(tc));
    expect_v = full[W-1:0];
    checks++;
    if (c_out !== expect_v) begin
      failures++;
      $display("FAIL: a=%h b=%h c=%h init=%0d -> %h, expected %h", ta, tb_, tc, ti, c_out, expect_v);
    end
    sum = W'(longint'(ta) + longint'(tb_));
    expect_min = (ti || sum < tc) ? sum : tc;
    checks++;
    if (c_out_min !== expect_min) begin
      failures++;
      $display("FAIL min-plus: a=%h b=%h c=%h init=%0d -> %h, expected %h", ta, tb_, tc, ti, c_out_min, expect_min);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('1, '1, '1, 1'b0);
    check('1, '1, '1, 1'b1);
    check(0, 5, 7, 1'b0);
    check(3, 4, 5, 1'b0);
    check(3, 4, 5, 1'b1);
    check(1, 2, 2, 1'b0);
    repeat (2000) check($urandom, $urandom, $urandom, 1'($urandom));
    // small values so that the minimum changes hands often
    repeat (500) check($urandom % 16, $urandom % 16, $urandom % 32, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
