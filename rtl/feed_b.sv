// feed_b: double-buffered row of B and sequencer of the PE chain.
//
// For every step k of a memory tile, the chain needs row k of B restricted to
// the tile's Y_TOT columns, as MB = Y_TOT/Y_C beats of Y_C elements. Feed B
// keeps two such rows: one is filled from Read B while the other is streamed
// into the chain R = X_TOT/N_P times, once for each row of A values the PEs
// hold (each PE computes R rows of the tile). It is the head of the chain
// and decides when each row of beats starts:
//  * the B row must be complete in its buffer;
//  * Transpose must have put the A values for this row into the chain
//    (`a_avail`, counted from `group_done`). When Y_TOT/Y_C < N_P the A values
//    take longer to arrive than a row takes to compute, and Feed B stalls;
//  * a new memory tile starts only after Write C reports that the previous
//    tile has been drained (`tile_drained`), because the C buffers are reused.
// Each beat carries b_ctrl_t bits: first_row on the first beat of a row,
// first_k during k = 0 and last_tile on the very last beat of a tile.
//
// Timing: the B buffer has a synchronous read, so beats leave one cycle after
// they are scheduled; the chain takes one beat per cycle with no back-pressure.
// The double-buffered B row follows the paper; the sequencing rules are this
// design's way of keeping the chain in lockstep.
module feed_b
  import mmm_pkg::*;
#(
  parameter int unsigned W   = W_DEFAULT,
  parameter int unsigned Y_C = Y_C_DEFAULT,
  parameter int unsigned R   = X_TOT_DEFAULT / N_P_DEFAULT,
  parameter int unsigned MB  = Y_TOT_DEFAULT / Y_C_DEFAULT,
  localparam int unsigned DW = Y_C * W,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned MW = (MB > 1) ? $clog2(MB) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] k_steps,
  input  logic [DIM_W-1:0] n_tiles,
  // B row beats from Read B
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [DW-1:0]    in_data,
  // pacing
  input  logic             group_done,
  output logic             row_start,
  input  logic             tile_drained,
  // into the first PE
  output logic             b_valid,
  output b_ctrl_t          b_ctrl,
  output logic [DW-1:0]    b_data,
  output logic             stall,     // a B row is ready but its A values are not
  output logic             done
);

  logic [DW-1:0] mem [2][MB];

  // ---------------- fill side ----------------
  logic [1:0]    full;
  logic          wsel;
  logic [MW-1:0] wcnt;
  logic          wr;

  assign in_ready = !full[wsel];
  assign wr       = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wsel][wcnt] <= in_data;
  end

  // ---------------- stream side ----------------
  feed_state_t      state;
  logic             rsel;
  logic [MW-1:0]    col;
  logic [RW-1:0]    prow;
  logic [DIM_W-1:0] kk, tile;
  logic [1:0]       a_avail;
  logic             go, issue, last_col, release_row;
  b_ctrl_t          ctrl_d;

  logic next_bank_full, tile_last_row;

  // The next row reuses the current bank unless this is the PE-row R-1.
  assign next_bank_full = (prow == RW'(R - 1)) ? full[~rsel] : full[rsel];
  assign tile_last_row  = (prow == RW'(R - 1)) && (kk == k_steps - 1);
  assign last_col       = (col == MW'(MB - 1));
  assign issue          = (state == FB_STREAM);
  assign go             = ((state == FB_WAIT) && full[rsel] && a_avail != 2'd0) ||
                          (issue && last_col && !tile_last_row && next_bank_full &&
                           a_avail != 2'd0);
  assign release_row    = issue && last_col && prow == RW'(R - 1);
  assign row_start      = go;
  assign stall          = (state == FB_WAIT) && full[rsel] && a_avail == 2'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      wcnt <= '0;
    end else begin
      if (start) begin
        full <= '0;
        wsel <= 1'b0;
        wcnt <= '0;
      end else begin
        if (wr) begin
          wcnt <= last_w(wcnt) ? '0 : wcnt + 1'b1;
          if (last_w(wcnt)) wsel <= ~wsel;
        end
        for (int b = 0; b < 2; b++) begin
          if (wr && last_w(wcnt) && wsel == 1'(b)) full[b] <= 1'b1;
          else if (release_row && rsel == 1'(b)) full[b] <= 1'b0;
        end
      end
    end
  end

  function automatic logic last_w(input logic [MW-1:0] c);
    return c == MW'(MB - 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= FB_IDLE;
      rsel    <= 1'b0;
      col     <= '0;
      prow    <= '0;
      kk      <= '0;
      tile    <= '0;
      a_avail <= '0;
      b_valid <= 1'b0;
      done    <= 1'b0;
    end else begin
      b_valid <= issue;
      a_avail <= a_avail + 2'(group_done) - 2'(go);
      unique case (state)
        FB_IDLE: ;
        FB_WAIT:   if (go) state <= FB_STREAM;
        FB_STREAM: begin
          col <= last_col ? '0 : col + 1'b1;
          if (last_col) begin
            state <= go ? FB_STREAM : FB_WAIT;
            if (prow == RW'(R - 1)) begin
              prow <= '0;
              rsel <= ~rsel;
              if (kk == k_steps - 1) begin
                kk    <= '0;
                state <= FB_DRAIN;
              end else begin
                kk <= kk + 1'b1;
              end
            end else begin
              prow <= prow + 1'b1;
            end
          end
        end
        FB_DRAIN: begin
          if (tile_drained) begin
            tile  <= tile + 1'b1;
            state <= (tile == n_tiles - 1) ? FB_DONE : FB_WAIT;
            done  <= (tile == n_tiles - 1);
          end
        end
        FB_DONE: ;
        default: state <= FB_IDLE;
      endcase
      if (start) begin
        state   <= FB_WAIT;
        rsel    <= 1'b0;
        col     <= '0;
        prow    <= '0;
        kk      <= '0;
        tile    <= '0;
        a_avail <= 2'(group_done);
        done    <= 1'b0;
      end
    end
  end

  always_comb begin
    ctrl_d.first_row = issue && col == '0;
    ctrl_d.first_k   = (kk == '0);
    ctrl_d.last_tile = last_col && prow == RW'(R - 1) && kk == k_steps - 1;
  end

  always_ff @(posedge clk) begin
    if (issue) b_data <= mem[rsel][col];
    b_ctrl <= ctrl_d;
  end

  // A row starts only with a complete B row and the matching A values in the chain.
  assert property (@(posedge clk) disable iff (!rst_n) go |-> a_avail != 2'd0);

endmodule
