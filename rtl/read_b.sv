// read_b: reads rows of B from off-chip memory for Feed B.
//
// B (k x n, row-major, n a multiple of EPW = MEM_BITS/W) is read, for each
// memory tile and each step k, as the Y_TOT/EPW words covering the tile's
// columns of row k. Each word is split into BPW = MEM_BITS/(Y_C*W) beats of
// Y_C elements, lowest bits first, and handed to Feed B over valid/ready.
// Words past the last column of B (partial last tile) repeat the last word;
// the matching results are discarded by Write C. The paper only names this
// module; the protocol and order are choices of this design, with the same
// memory channel as Read A.
module read_b
  import mmm_pkg::*;
#(
  parameter int unsigned W        = W_DEFAULT,
  parameter int unsigned Y_C      = Y_C_DEFAULT,
  parameter int unsigned MEM_BITS = MEM_BITS_DEFAULT,
  parameter int unsigned Y_TOT    = Y_TOT_DEFAULT,
  parameter int unsigned ADDR_W   = ADDR_W_DEFAULT,
  parameter int unsigned MAX_OUT  = 32,
  localparam int unsigned DW      = Y_C * W,
  localparam int unsigned EPW     = MEM_BITS / W,
  localparam int unsigned BPW     = MEM_BITS / DW,
  localparam int unsigned YW_N    = Y_TOT / EPW,
  localparam int unsigned WW      = (YW_N > 1) ? $clog2(YW_N) : 1,
  localparam int unsigned SW      = (BPW > 1) ? $clog2(BPW) : 1,
  localparam int unsigned OW      = $clog2(MAX_OUT + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ADDR_W-1:0]   b_base,
  input  logic [DIM_W-1:0]    n_words,  // n / EPW
  input  logic [DIM_W-1:0]    k_steps,
  input  logic [DIM_W-1:0]    tiles_m,
  input  logic [DIM_W-1:0]    tiles_n,
  output logic                req_valid,
  input  logic                req_ready,
  output logic [ADDR_W-1:0]   req_addr,
  input  logic                rsp_valid,
  output logic                rsp_ready,
  input  logic [MEM_BITS-1:0] rsp_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [DW-1:0]       out_data,
  output logic                done
);

  logic             issuing;
  logic [DIM_W-1:0] tm, tn, kk;
  logic [WW-1:0]    w;
  logic [OW-1:0]    outstanding;
  logic [DIM_W-1:0] colw, colw_c;
  logic             load, rsp_fire, out_fire, last_req;
  logic [BPW-1:0][DW-1:0] hold;
  logic [SW-1:0]    sub;

  assign colw      = tn * DIM_W'(YW_N) + DIM_W'(w);
  assign colw_c    = (colw >= n_words) ? n_words - 1 : colw;
  assign load      = issuing && (!req_valid || req_ready) && (outstanding < OW'(MAX_OUT));
  assign last_req  = (w == WW'(YW_N - 1)) && (kk == k_steps - 1) &&
                     (tn == tiles_n - 1) && (tm == tiles_m - 1);
  assign out_data  = hold[sub];
  assign out_fire  = out_valid && out_ready;
  assign rsp_ready = !out_valid || (out_ready && sub == SW'(BPW - 1));
  assign rsp_fire  = rsp_valid && rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing     <= 1'b0;
      req_valid   <= 1'b0;
      req_addr    <= '0;
      tm          <= '0;
      tn          <= '0;
      kk          <= '0;
      w           <= '0;
      outstanding <= '0;
      out_valid   <= 1'b0;
      sub         <= '0;
      done        <= 1'b0;
    end else begin
      outstanding <= outstanding + OW'(load) - OW'(rsp_fire);
      if (req_valid && req_ready && !load) req_valid <= 1'b0;
      if (start) begin
        issuing <= 1'b1;
        done    <= 1'b0;
        tm      <= '0;
        tn      <= '0;
        kk      <= '0;
        w       <= '0;
      end else if (load) begin
        req_valid <= 1'b1;
        req_addr  <= b_base + ADDR_W'(kk * n_words + colw_c);
        if (w == WW'(YW_N - 1)) begin
          w <= '0;
          if (kk == k_steps - 1) begin
            kk <= '0;
            if (tn == tiles_n - 1) begin
              tn <= '0;
              tm <= tm + 1'b1;
            end else begin
              tn <= tn + 1'b1;
            end
          end else begin
            kk <= kk + 1'b1;
          end
        end else begin
          w <= w + 1'b1;
        end
        if (last_req) issuing <= 1'b0;
      end
      // beat splitter
      if (rsp_fire) begin
        out_valid <= 1'b1;
        sub       <= '0;
      end else if (out_fire) begin
        if (sub == SW'(BPW - 1)) out_valid <= 1'b0;
        else                     sub <= sub + 1'b1;
      end
      if (!issuing && !start && !req_valid && outstanding == '0 && !out_valid && !done && tm != '0)
        done <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rsp_fire) hold <= rsp_data;
  end

endmodule
