// mmm_pe: one processing element of the 1D compute chain.
//
// The PE follows the paper's PE figure, numbered I to IV there:
//  I)   A chain. Values of A travel down the chain one hop per cycle, each
//       tagged with the index of the PE it belongs to. The PE keeps the value
//       with its own index in `a_next` and forwards the others. `a_next` and
//       `a_cur` form the double buffer: the next A value is loaded while the
//       current row of the outer product is still being computed with `a_cur`.
//  II)  B chain. Beats of Y_C elements of the current B row pass through the
//       PE, registered once per hop, and are used by every PE in turn.
//  III) Accumulation. Every valid B beat is multiplied by the PE's A value in
//       Y_C compute units and added to the partial sums at the next address of
//       the C buffer; addresses repeat every R*MB beats (x_t x_b * y_t y_b in
//       the paper's notation). A beat flagged first_row swaps `a_next` into
//       `a_cur`; first_k stores the product instead of adding.
//  IV)  Drain. After the beat flagged last_tile is written, the PE sends its
//       C buffer backwards to the head of the chain, interleaved so that the
//       head sees the tile in row order: for each of its R rows the PE first
//       sends its own row of MB beats, then forwards the (N_P-1-IDX) rows that
//       arrive from the PEs behind it. The drain path uses valid/ready so the
//       memory interface can stall it.
//
// Timing: the B and A chains have one register per PE; the accumulation is a
// two-stage pipeline (buffer read, then multiply-add and write; OP selects
// add-and-minimum instead for the distance product), so a C
// address must not recur within two beats (R*MB >= 2). The paper states the
// behaviour I-IV; the tagging of A values, the control bits carried with B
// and the drain handshake are choices of this design.
module mmm_pe
  import mmm_pkg::*;
#(
  parameter int unsigned W   = W_DEFAULT,
  parameter int unsigned Y_C = Y_C_DEFAULT,
  parameter int unsigned N_P = N_P_DEFAULT,
  parameter int unsigned IDX = 0,
  parameter int unsigned R   = X_TOT_DEFAULT / N_P_DEFAULT,
  parameter int unsigned MB  = Y_TOT_DEFAULT / Y_C_DEFAULT,
  parameter cu_op_t      OP  = OP_MUL_ADD,
  localparam int unsigned DW    = Y_C * W,
  localparam int unsigned DEPTH = R * MB,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned PW    = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // A chain
  input  logic          a_in_valid,
  input  logic [PW-1:0] a_in_dest,
  input  logic [W-1:0]  a_in_data,
  output logic          a_out_valid,
  output logic [PW-1:0] a_out_dest,
  output logic [W-1:0]  a_out_data,
  // B chain
  input  logic          b_in_valid,
  input  b_ctrl_t       b_in_ctrl,
  input  logic [DW-1:0] b_in_data,
  output logic          b_out_valid,
  output b_ctrl_t       b_out_ctrl,
  output logic [DW-1:0] b_out_data,
  // C drain, from the next PE and towards the previous one
  input  logic          c_in_valid,
  output logic          c_in_ready,
  input  logic [DW-1:0] c_in_data,
  output logic          c_out_valid,
  input  logic          c_out_ready,
  output logic [DW-1:0] c_out_data
);

  localparam int unsigned FWD_BEATS = (N_P - 1 - IDX) * MB;
  localparam int unsigned FW        = $clog2(FWD_BEATS + 2);
  localparam int unsigned RW        = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned MW        = (MB > 1) ? $clog2(MB) : 1;
  localparam int unsigned QDEPTH    = 4;

  // ---------------- I) A double buffer, II) B forwarding ----------------
  logic [W-1:0] a_cur, a_next, a_use;

  assign a_use = b_in_ctrl.first_row ? a_next : a_cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out_valid <= 1'b0;
      b_out_valid <= 1'b0;
    end else begin
      a_out_valid <= a_in_valid && (a_in_dest != PW'(IDX));
      b_out_valid <= b_in_valid;
    end
  end

  always_ff @(posedge clk) begin
    a_out_dest <= a_in_dest;
    a_out_data <= a_in_data;
    b_out_ctrl <= b_in_ctrl;
    b_out_data <= b_in_data;
    if (a_in_valid && a_in_dest == PW'(IDX)) a_next <= a_in_data;
    if (b_in_valid && b_in_ctrl.first_row)   a_cur  <= a_next;
  end

  // ---------------- III) accumulation pipeline ----------------
  logic [AW-1:0] acc_addr;          // next C address for a B beat
  logic          s1_valid;
  b_ctrl_t       s1_ctrl;
  logic [AW-1:0] s1_addr;
  logic [W-1:0]  s1_a;
  logic [DW-1:0] s1_b;
  logic [DW-1:0] buf_rdata, acc_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_addr <= '0;
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= b_in_valid;
      if (b_in_valid) acc_addr <= (acc_addr == AW'(DEPTH - 1)) ? '0 : acc_addr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    s1_ctrl <= b_in_ctrl;
    s1_addr <= acc_addr;
    s1_a    <= a_use;
    s1_b    <= b_in_data;
  end

  for (genvar j = 0; j < Y_C; j++) begin : g_cu
    compute_unit #(.W(W), .OP(OP)) u_cu (
      .a    (s1_a),
      .b    (s1_b[j*W +: W]),
      .c_in (buf_rdata[j*W +: W]),
      .init (s1_ctrl.first_k),
      .c_out(acc_wdata[j*W +: W])
    );
  end

  // ---------------- IV) drain ----------------
  drain_state_t  dr_state;
  logic [AW-1:0] dr_addr;
  logic [MW-1:0] dr_col;
  logic [RW-1:0] dr_row;
  logic [FW-1:0] dr_fwd;
  logic          rd_inflight;
  logic          dr_issue, fwd_fire, row_done;
  logic          q_in_valid, q_in_ready;
  logic [DW-1:0] q_in_data;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  assign dr_issue   = (dr_state == DR_OWN) && (32'(q_count) + 32'(rd_inflight) < QDEPTH);
  assign c_in_ready = (dr_state == DR_FWD) && !rd_inflight && q_in_ready;
  assign fwd_fire   = c_in_valid && c_in_ready;
  assign q_in_valid = rd_inflight || fwd_fire;
  assign q_in_data  = rd_inflight ? buf_rdata : c_in_data;
  assign row_done   = (dr_state == DR_OWN) ? (dr_issue && dr_col == MW'(MB - 1) && FWD_BEATS == 0)
                                           : (fwd_fire && dr_fwd == FW'(FWD_BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dr_state    <= DR_IDLE;
      dr_addr     <= '0;
      dr_col      <= '0;
      dr_row      <= '0;
      dr_fwd      <= '0;
      rd_inflight <= 1'b0;
    end else begin
      rd_inflight <= dr_issue;
      unique case (dr_state)
        DR_IDLE: begin
          if (s1_valid && s1_ctrl.last_tile) begin
            dr_state <= DR_OWN;
            dr_addr  <= '0;
            dr_col   <= '0;
            dr_row   <= '0;
          end
        end
        DR_OWN: begin
          if (dr_issue) begin
            dr_addr <= dr_addr + 1'b1;
            dr_col  <= (dr_col == MW'(MB - 1)) ? '0 : dr_col + 1'b1;
            if (dr_col == MW'(MB - 1) && FWD_BEATS != 0) begin
              dr_state <= DR_FWD;
              dr_fwd   <= '0;
            end
          end
        end
        DR_FWD: begin
          if (fwd_fire) dr_fwd <= dr_fwd + 1'b1;
        end
        default: dr_state <= DR_IDLE;
      endcase
      if (row_done) begin
        dr_row   <= dr_row + 1'b1;
        dr_state <= (dr_row == RW'(R - 1)) ? DR_IDLE : DR_OWN;
      end
    end
  end

  c_buffer #(.DEPTH(DEPTH), .WIDTH(DW)) u_buf (
    .clk  (clk),
    .we   (s1_valid),
    .waddr(s1_addr),
    .wdata(acc_wdata),
    .re   (b_in_valid || dr_issue),
    .raddr(b_in_valid ? acc_addr : dr_addr),
    .rdata(buf_rdata)
  );

  stream_fifo #(.WIDTH(DW), .DEPTH(QDEPTH)) u_outq (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (q_in_valid),
    .in_ready (q_in_ready),
    .in_data  (q_in_data),
    .out_valid(c_out_valid),
    .out_ready(c_out_ready),
    .out_data (c_out_data),
    .count    (q_count)
  );

  // B beats must not arrive while the C buffer is being drained.
  assert property (@(posedge clk) disable iff (!rst_n) !(b_in_valid && dr_state != DR_IDLE))
    else $error("mmm_pe %0d: B beat during drain", IDX);
  // The drain queue never overflows: reads are issued only with space reserved.
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_inflight && !q_in_ready))
    else $error("mmm_pe %0d: drain queue overflow", IDX);

endmodule
