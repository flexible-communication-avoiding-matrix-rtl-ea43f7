// transpose: turns row-major words of A into columns of A for the PE chain.
//
// Read A pushes element e of each wide A word into FIFO e, one word per row
// of the memory tile, so FIFO e holds column (kb*EPW + e) of the tile. This
// module pops FIFO 0 for all X_TOT rows, then FIFO 1, and so on: the
// transposed order in which the outer products need A. Each value is sent into
// the PE chain tagged with the PE that keeps it; row r of the memory tile
// belongs to PE (r mod N_P), so each run of N_P consecutive values (a "group")
// loads one A value into every PE.
//
// Pacing against Feed B: the PEs hold only one spare A value each, so the
// values of group g+1 may enter the chain only after Feed B has started row g
// (`row_start`), which swaps the spare value of group g into use. A credit
// counter enforces this; `group_done` tells Feed B that a whole group is in
// the chain. The transposition through FIFOs follows the paper; the tagging
// and the credit handshake are choices of this design.
//
// Timing: one A value per cycle when the FIFO is non-empty and credit allows.
module transpose
  import mmm_pkg::*;
#(
  parameter int unsigned W     = W_DEFAULT,
  parameter int unsigned EPW   = MEM_BITS_DEFAULT / W_DEFAULT,
  parameter int unsigned N_P   = N_P_DEFAULT,
  parameter int unsigned X_TOT = X_TOT_DEFAULT,
  localparam int unsigned PW   = (N_P > 1) ? $clog2(N_P) : 1,
  localparam int unsigned EW   = (EPW > 1) ? $clog2(EPW) : 1,
  localparam int unsigned XW   = (X_TOT > 1) ? $clog2(X_TOT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DIM_W-1:0]     k_words,   // k / EPW
  input  logic [DIM_W-1:0]     n_tiles,   // number of memory tiles
  input  logic [EPW-1:0]       fifo_valid,
  input  logic [EPW-1:0][W-1:0] fifo_data,
  output logic [EPW-1:0]       fifo_pop,
  input  logic                 row_start,
  output logic                 a_valid,
  output logic [PW-1:0]        a_dest,
  output logic [W-1:0]         a_data,
  output logic                 group_done,
  output logic                 done
);

  logic             running;
  logic [1:0]       credit;
  logic [DIM_W-1:0] tile, kb;
  logic [EW-1:0]    col;
  logic [XW-1:0]    row;
  logic [PW-1:0]    pe;
  logic             emit, last_in_group, last_value;

  assign emit          = running && credit != 2'd0 && fifo_valid[col];
  assign last_in_group = (pe == PW'(N_P - 1));
  assign last_value    = (row == XW'(X_TOT - 1)) && (col == EW'(EPW - 1)) &&
                         (kb == k_words - 1) && (tile == n_tiles - 1);

  always_comb begin
    fifo_pop = '0;
    fifo_pop[col] = emit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      credit     <= 2'd0;
      tile       <= '0;
      kb         <= '0;
      col        <= '0;
      row        <= '0;
      pe         <= '0;
      a_valid    <= 1'b0;
      group_done <= 1'b0;
      done       <= 1'b0;
    end else begin
      a_valid    <= emit;
      group_done <= emit && last_in_group;
      credit     <= credit + 2'(row_start) - 2'(emit && last_in_group);
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
        credit  <= 2'd1;
        tile    <= '0;
        kb      <= '0;
        col     <= '0;
        row     <= '0;
        pe      <= '0;
      end else if (emit) begin
        pe <= last_in_group ? '0 : pe + 1'b1;
        if (row == XW'(X_TOT - 1)) begin
          row <= '0;
          if (col == EW'(EPW - 1)) begin
            col <= '0;
            if (kb == k_words - 1) begin
              kb   <= '0;
              tile <= tile + 1'b1;
            end else begin
              kb <= kb + 1'b1;
            end
          end else begin
            col <= col + 1'b1;
          end
        end else begin
          row <= row + 1'b1;
        end
        if (last_value) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    a_dest <= pe;
    a_data <= fifo_data[col];
  end

  // A group boundary coincides with the end of a tile column only if N_P divides X_TOT.
  initial assert (X_TOT % N_P == 0) else $error("transpose: N_P must divide X_TOT");

endmodule
