// mem_model: behavioural off-chip memory for the kernel testbenches.
//
// Stands in for the DDR4 memory and its controller, which are outside the
// kernel. It serves two in-order read channels (A and B) and one write
// channel (C) on a word-addressed array of MEM_BITS-bit words. When `bp` is
// set, request/write acceptance and response delivery are randomly delayed to
// exercise the kernel's back-pressure paths. `oob_writes` counts writes that
// fall outside [c_lo, c_hi).
module mem_model #(
  parameter int unsigned MEM_BITS = 512,
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned WORDS    = 1024
) (
  input  logic                clk,
  input  logic                bp,
  input  logic [ADDR_W-1:0]   c_lo,
  input  logic [ADDR_W-1:0]   c_hi,
  input  logic                a_req_valid,
  output logic                a_req_ready,
  input  logic [ADDR_W-1:0]   a_req_addr,
  output logic                a_rsp_valid,
  input  logic                a_rsp_ready,
  output logic [MEM_BITS-1:0] a_rsp_data,
  input  logic                b_req_valid,
  output logic                b_req_ready,
  input  logic [ADDR_W-1:0]   b_req_addr,
  output logic                b_rsp_valid,
  input  logic                b_rsp_ready,
  output logic [MEM_BITS-1:0] b_rsp_data,
  input  logic                c_wr_valid,
  output logic                c_wr_ready,
  input  logic [ADDR_W-1:0]   c_wr_addr,
  input  logic [MEM_BITS-1:0] c_wr_data,
  output int                  oob_writes,
  output int                  writes
);

  logic [MEM_BITS-1:0] mem [WORDS];
  logic [ADDR_W-1:0] qa[$], qb[$];

  function automatic logic coin(input logic en);
    return !en || ($urandom_range(0, 3) != 0);
  endfunction

  initial begin
    a_req_ready = 1'b0; b_req_ready = 1'b0; c_wr_ready = 1'b0;
    a_rsp_valid = 1'b0; b_rsp_valid = 1'b0;
    a_rsp_data  = '0;   b_rsp_data  = '0;
    oob_writes  = 0;    writes      = 0;
  end

  always @(posedge clk) begin
    automatic logic [ADDR_W-1:0] ra, rb;
    if (a_req_valid && a_req_ready) qa.push_back(a_req_addr);
    if (b_req_valid && b_req_ready) qb.push_back(b_req_addr);
    if (c_wr_valid && c_wr_ready) begin
      writes <= writes + 1;
      if (c_wr_addr < c_lo || c_wr_addr >= c_hi || c_wr_addr >= ADDR_W'(WORDS))
        oob_writes <= oob_writes + 1;
      else
        mem[c_wr_addr] <= c_wr_data;
    end
    if (a_rsp_valid && a_rsp_ready) a_rsp_valid <= 1'b0;
    if (b_rsp_valid && b_rsp_ready) b_rsp_valid <= 1'b0;
    if ((!a_rsp_valid || a_rsp_ready) && qa.size() > 0 && coin(bp)) begin
      ra = qa.pop_front();
      a_rsp_valid <= 1'b1;
      a_rsp_data  <= mem[ra];
    end
    if ((!b_rsp_valid || b_rsp_ready) && qb.size() > 0 && coin(bp)) begin
      rb = qb.pop_front();
      b_rsp_valid <= 1'b1;
      b_rsp_data  <= mem[rb];
    end
    a_req_ready <= coin(bp);
    b_req_ready <= coin(bp);
    c_wr_ready  <= coin(bp);
  end

endmodule
