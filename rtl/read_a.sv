// read_a: reads A from off-chip memory as wide row-major words.
//
// A (m x k, row-major, k a multiple of EPW = MEM_BITS/W) is read one memory
// word at a time: for each memory tile and each group of EPW columns, the
// word of every one of the tile's X_TOT rows. Element e of a word (bits
// e*W +: W) is pushed into FIFO e of the bank that feeds Transpose, so each
// FIFO collects one column of the tile. Reading whole words keeps DRAM
// bursts efficient even though the kernel consumes A column by column.
// Rows past the end of A (a partial last memory tile) read the last row
// again; their results are discarded by Write C.
//
// Interface: request channel (req_valid/req_ready/req_addr, word address)
// and in-order response channel (rsp_valid/rsp_ready/rsp_data). At most
// MAX_OUT requests are outstanding. A response is accepted only when every
// FIFO has room. The response channel passes straight through to the FIFO
// bank (push_data is the response word, element e in bits e*W +: W), so the
// read path adds no register stage; the module's logic is the request
// sequencer and the outstanding-request count. The tiling order follows the paper; the memory protocol and
// the clamping of rows are choices of this design.
module read_a
  import mmm_pkg::*;
#(
  parameter int unsigned W        = W_DEFAULT,
  parameter int unsigned MEM_BITS = MEM_BITS_DEFAULT,
  parameter int unsigned X_TOT    = X_TOT_DEFAULT,
  parameter int unsigned ADDR_W   = ADDR_W_DEFAULT,
  parameter int unsigned MAX_OUT  = 32,
  localparam int unsigned EPW     = MEM_BITS / W,
  localparam int unsigned XW      = (X_TOT > 1) ? $clog2(X_TOT) : 1,
  localparam int unsigned OW      = $clog2(MAX_OUT + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [ADDR_W-1:0]     a_base,
  input  logic [DIM_W-1:0]      m,
  input  logic [DIM_W-1:0]      k_words,  // k / EPW
  input  logic [DIM_W-1:0]      tiles_m,
  input  logic [DIM_W-1:0]      tiles_n,
  output logic                  req_valid,
  input  logic                  req_ready,
  output logic [ADDR_W-1:0]     req_addr,
  input  logic                  rsp_valid,
  output logic                  rsp_ready,
  input  logic [MEM_BITS-1:0]   rsp_data,
  output logic                  push_valid,
  input  logic                  push_ready,
  output logic [EPW-1:0][W-1:0] push_data,
  output logic                  done
);

  logic             issuing;
  logic [DIM_W-1:0] tm, tn, kb;
  logic [XW-1:0]    r;
  logic [OW-1:0]    outstanding;
  logic [DIM_W-1:0] row, row_c;
  logic             load, rsp_fire, last_req;

  assign row       = tm * DIM_W'(X_TOT) + DIM_W'(r);
  assign row_c     = (row >= m) ? m - 1 : row;
  assign load      = issuing && (!req_valid || req_ready) && (outstanding < OW'(MAX_OUT));
  assign rsp_ready = push_ready;
  assign rsp_fire  = rsp_valid && rsp_ready;
  assign last_req  = (r == XW'(X_TOT - 1)) && (kb == k_words - 1) &&
                     (tn == tiles_n - 1) && (tm == tiles_m - 1);

  assign push_valid = rsp_valid;
  assign push_data  = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing     <= 1'b0;
      req_valid   <= 1'b0;
      req_addr    <= '0;
      tm          <= '0;
      tn          <= '0;
      kb          <= '0;
      r           <= '0;
      outstanding <= '0;
      done        <= 1'b0;
    end else begin
      outstanding <= outstanding + OW'(load) - OW'(rsp_fire);
      if (req_valid && req_ready && !load) req_valid <= 1'b0;
      if (start) begin
        issuing <= 1'b1;
        done    <= 1'b0;
        tm      <= '0;
        tn      <= '0;
        kb      <= '0;
        r       <= '0;
      end else if (load) begin
        req_valid <= 1'b1;
        req_addr  <= a_base + ADDR_W'(row_c * k_words + kb);
        if (r == XW'(X_TOT - 1)) begin
          r <= '0;
          if (kb == k_words - 1) begin
            kb <= '0;
            if (tn == tiles_n - 1) begin
              tn <= '0;
              tm <= tm + 1'b1;
            end else begin
              tn <= tn + 1'b1;
            end
          end else begin
            kb <= kb + 1'b1;
          end
        end else begin
          r <= r + 1'b1;
        end
        if (last_req) issuing <= 1'b0;
      end
      if (!issuing && !start && !req_valid && outstanding == '0 && !done && tm != '0)
        done <= 1'b1;
    end
  end

endmodule
