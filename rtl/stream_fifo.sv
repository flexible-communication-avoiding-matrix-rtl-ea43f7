// stream_fifo: first-word-fall-through FIFO with valid/ready on both sides.
//
// Used for the bank of FIFOs between Read A and Transpose, where each FIFO
// collects one element position of the wide A words so that Transpose can pop
// them column by column, and as the output queue of every processing element
// on the drain path. out_data always shows the oldest entry while out_valid
// is high; a push and a pop may happen in the same cycle. `count` is the fill
// level. DEPTH need not be a power of two.
module stream_fifo #(
  parameter int unsigned WIDTH = mmm_pkg::W_DEFAULT,
  parameter int unsigned DEPTH = mmm_pkg::X_TOT_DEFAULT,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

endmodule
