// compute_unit: one multiply-addition per cycle.
//
// The compute unit is the paper's basic circuit: it multiplies an element of A
// with an element of B and adds the product to a partial sum of C. On the
// first step of the k loop there is no partial sum yet, so `init` makes the
// unit return the bare product; this replaces a separate clearing pass over
// the C buffer (a choice of this design). The arithmetic is unsigned integer,
// modulo 2^W, as in the paper's uint8/uint16/uint32 kernels; floating point
// operators are not part of this RTL.
//
// The paper's kernel lets the operation be chosen at build time, with the
// distance product (add and minimum instead of multiply and add) as its
// example. OP selects it: with OP_ADD_MIN the unit returns min(c_in, a+b),
// the sum wrapping modulo 2^W, and a+b alone when `init` is set.
//
// Interface: purely combinational; the processing element registers around it.
module compute_unit
  import mmm_pkg::*;
#(
  parameter int unsigned W  = W_DEFAULT,
  parameter cu_op_t      OP = OP_MUL_ADD
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c_in,
  input  logic         init,
  output logic [W-1:0] c_out
);

  logic [W-1:0] combined;  // a*b, or a+b for the distance product
  logic [W-1:0] reduced;   // c_in + a*b, or min(c_in, a+b)

  always_comb begin
    if (OP == OP_ADD_MIN) begin
      combined = W'(a + b);
      reduced  = (c_in < combined) ? c_in : combined;
    end else begin
      combined = W'(a * b);
      reduced  = W'(c_in + combined);
    end
    c_out = init ? combined : reduced;
  end

endmodule
