// write_c: writes drained C tiles back to off-chip memory.
//
// The first PE delivers each finished memory tile as X_TOT rows of MB beats
// of Y_C elements, already in row order. Write C packs BPW = MEM_BITS/(Y_C*W)
// beats into one memory word (first beat in the lowest bits) and writes it to
// C (m x n, row-major, word address c_base + row*n/EPW + column word). Words
// outside C (partial last tiles) are dropped. After the last beat of a tile it
// pulses `tile_drained`, which lets Feed B reuse the C buffers; `done` pulses
// when the last word has been accepted by memory.
//
// Timing: one beat per cycle; the write request (wr_valid/wr_ready/wr_addr/
// wr_data) is a register, and back-pressure on it stalls the drain chain.
// Writing results contiguously from the head of the chain follows the paper;
// packing and the write protocol are choices of this design.
module write_c
  import mmm_pkg::*;
#(
  parameter int unsigned W        = W_DEFAULT,
  parameter int unsigned Y_C      = Y_C_DEFAULT,
  parameter int unsigned MEM_BITS = MEM_BITS_DEFAULT,
  parameter int unsigned X_TOT    = X_TOT_DEFAULT,
  parameter int unsigned Y_TOT    = Y_TOT_DEFAULT,
  parameter int unsigned ADDR_W   = ADDR_W_DEFAULT,
  localparam int unsigned DW      = Y_C * W,
  localparam int unsigned EPW     = MEM_BITS / W,
  localparam int unsigned BPW     = MEM_BITS / DW,
  localparam int unsigned YW_N    = Y_TOT / EPW,
  localparam int unsigned WW      = (YW_N > 1) ? $clog2(YW_N) : 1,
  localparam int unsigned XW      = (X_TOT > 1) ? $clog2(X_TOT) : 1,
  localparam int unsigned SW      = (BPW > 1) ? $clog2(BPW) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ADDR_W-1:0]   c_base,
  input  logic [DIM_W-1:0]    m,
  input  logic [DIM_W-1:0]    n_words,  // n / EPW
  input  logic [DIM_W-1:0]    tiles_m,
  input  logic [DIM_W-1:0]    tiles_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DW-1:0]       in_data,
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [ADDR_W-1:0]   wr_addr,
  output logic [MEM_BITS-1:0] wr_data,
  output logic                tile_drained,
  output logic                done
);

  logic             running, finished;
  logic [DIM_W-1:0] tm, tn;
  logic [XW-1:0]    r;
  logic [WW-1:0]    w;
  logic [SW-1:0]    sub;
  logic [BPW-1:0][DW-1:0] pack, word;
  logic [DIM_W-1:0] row, colw;
  logic             in_fire, word_end, tile_end, in_bounds;

  assign row       = tm * DIM_W'(X_TOT) + DIM_W'(r);
  assign colw      = tn * DIM_W'(YW_N) + DIM_W'(w);
  assign in_bounds = (row < m) && (colw < n_words);
  assign word_end  = (sub == SW'(BPW - 1));
  assign tile_end  = word_end && (w == WW'(YW_N - 1)) && (r == XW'(X_TOT - 1));
  assign in_ready  = running && (!word_end || !wr_valid || wr_ready);
  assign in_fire   = in_valid && in_ready;

  always_comb begin
    word = pack;
    word[BPW-1] = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running      <= 1'b0;
      finished     <= 1'b0;
      tm           <= '0;
      tn           <= '0;
      r            <= '0;
      w            <= '0;
      sub          <= '0;
      wr_valid     <= 1'b0;
      tile_drained <= 1'b0;
      done         <= 1'b0;
    end else begin
      tile_drained <= in_fire && tile_end;
      done         <= 1'b0;
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (start) begin
        running  <= 1'b1;
        finished <= 1'b0;
        tm       <= '0;
        tn       <= '0;
        r        <= '0;
        w        <= '0;
        sub      <= '0;
      end else if (in_fire) begin
        sub <= word_end ? '0 : sub + 1'b1;
        if (word_end) begin
          wr_valid <= in_bounds;
          if (w == WW'(YW_N - 1)) begin
            w <= '0;
            if (r == XW'(X_TOT - 1)) begin
              r <= '0;
              if (tn == tiles_n - 1) begin
                tn <= '0;
                if (tm == tiles_m - 1) begin
                  running  <= 1'b0;
                  finished <= 1'b1;
                end
                tm <= tm + 1'b1;
              end else begin
                tn <= tn + 1'b1;
              end
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            w <= w + 1'b1;
          end
        end
      end
      if (finished && !wr_valid) begin
        done     <= 1'b1;
        finished <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire && !word_end) pack[sub] <= in_data;
    if (in_fire && word_end) begin
      wr_addr <= c_base + ADDR_W'(row * n_words + colw);
      wr_data <= word;
    end
  end

endmodule
