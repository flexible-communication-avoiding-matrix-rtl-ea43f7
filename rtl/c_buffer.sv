// c_buffer: the slice of the output memory tile held by one processing element.
//
// Each PE owns x_tot*y_tot/N_p elements of C, stored as DEPTH words of Y_C
// elements so that all compute units of the PE read and write in the same
// cycle (the coalesced access behind N_b,min). It is a simple dual-port
// memory with one synchronous read port and one write port, the shape of an
// on-chip block RAM: rdata shows mem[raddr] one cycle after `re`. A read and
// a write of the same address in one cycle return the old value; the PE never
// does that, because a given address is revisited only every DEPTH cycles.
module c_buffer #(
  parameter int unsigned DEPTH = (mmm_pkg::X_TOT_DEFAULT / mmm_pkg::N_P_DEFAULT) *
                                 (mmm_pkg::Y_TOT_DEFAULT / mmm_pkg::Y_C_DEFAULT),
  parameter int unsigned WIDTH = mmm_pkg::Y_C_DEFAULT * mmm_pkg::W_DEFAULT,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
