// mmm_kernel: communication-avoiding matrix multiplication C = A * B.
//
// The kernel computes C one memory tile of X_TOT x Y_TOT elements at a time,
// keeping the whole tile on chip while it runs through all of k as a
// sequence of outer products (column k of A times row k of B). Each element
// of A and B is thus read from memory once per tile, which minimises off-chip
// traffic for the on-chip memory available. The modules are those of the
// paper's module-layout figure:
//
//   Read A -> EPW FIFOs -> Transpose --A chain--+
//   Read B -> Feed B ----------------B chain----+-> PE_0 -> PE_1 -> ... -> PE_{N_P-1}
//   Write C <----------------------- C drain ---+-- PE_0 <- PE_1 <- ... <-
//
// The N_P processing elements form a 1D chain (x_c = 1, y_p = 1); each holds
// Y_C compute units and X_TOT*Y_TOT/N_P elements of the tile. PE i computes
// the tile rows r with r mod N_P = i. After the last k step the tile is
// drained through the chain to Write C (not double-buffered, so the whole
// on-chip memory serves one tile) and the next tile starts.
//
// Sizes: m >= 1 is arbitrary (a partial last tile is padded and its extra
// rows are not written); n and k must be multiples of EPW = MEM_BITS/W.
// Matrices are row-major at word addresses a_base, b_base, c_base.
//
// Interface: pulse `start` with the sizes and bases valid; `busy` is high until
// `done` pulses. Three memory channels, all MEM_BITS wide and word-addressed:
// A reads and B reads (request valid/ready, in-order response valid/ready) and
// C writes (valid/ready). Throughput at steady state: Y_C*N_P multiply-adds per
// cycle when Y_TOT/Y_C >= N_P + 2; otherwise Feed B stalls for A values.
//
// The organisation follows the paper; the memory channel protocol, the
// control bits on the B chain and the handling of partial tiles are this
// design's choices. The compute units are unsigned integer (see compute_unit);
// OP selects the ordinary product or the distance (min-plus) product.
module mmm_kernel
  import mmm_pkg::*;
#(
  parameter int unsigned W            = W_DEFAULT,
  parameter int unsigned Y_C          = Y_C_DEFAULT,
  parameter int unsigned N_P          = N_P_DEFAULT,
  parameter int unsigned X_TOT        = X_TOT_DEFAULT,
  parameter int unsigned Y_TOT        = Y_TOT_DEFAULT,
  parameter int unsigned MEM_BITS     = MEM_BITS_DEFAULT,
  parameter int unsigned ADDR_W       = ADDR_W_DEFAULT,
  parameter int unsigned A_FIFO_DEPTH = X_TOT,
  parameter int unsigned MAX_OUT      = 32,
  parameter cu_op_t      OP           = OP_MUL_ADD,
  localparam int unsigned DW  = Y_C * W,
  localparam int unsigned EPW = MEM_BITS / W,
  localparam int unsigned R   = X_TOT / N_P,
  localparam int unsigned MB  = Y_TOT / Y_C,
  localparam int unsigned PW  = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [DIM_W-1:0]    m,
  input  logic [DIM_W-1:0]    n,
  input  logic [DIM_W-1:0]    k,
  input  logic [ADDR_W-1:0]   a_base,
  input  logic [ADDR_W-1:0]   b_base,
  input  logic [ADDR_W-1:0]   c_base,
  output logic                busy,
  output logic                done,
  // A read channel
  output logic                a_req_valid,
  input  logic                a_req_ready,
  output logic [ADDR_W-1:0]   a_req_addr,
  input  logic                a_rsp_valid,
  output logic                a_rsp_ready,
  input  logic [MEM_BITS-1:0] a_rsp_data,
  // B read channel
  output logic                b_req_valid,
  input  logic                b_req_ready,
  output logic [ADDR_W-1:0]   b_req_addr,
  input  logic                b_rsp_valid,
  output logic                b_rsp_ready,
  input  logic [MEM_BITS-1:0] b_rsp_data,
  // C write channel
  output logic                c_wr_valid,
  input  logic                c_wr_ready,
  output logic [ADDR_W-1:0]   c_wr_addr,
  output logic [MEM_BITS-1:0] c_wr_data
);

  // ---------------- run configuration ----------------
  logic             go;
  logic [DIM_W-1:0] m_q, tiles_m, tiles_n, k_q, k_words, n_words;
  logic [ADDR_W-1:0] a_base_q, b_base_q, c_base_q;
  logic             wc_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      go   <= 1'b0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      go   <= start && !busy;
      done <= wc_done && busy;
      if (start && !busy) busy <= 1'b1;
      else if (wc_done)   busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      m_q      <= m;
      k_q      <= k;
      tiles_m  <= (m + DIM_W'(X_TOT - 1)) / DIM_W'(X_TOT);
      tiles_n  <= (n + DIM_W'(Y_TOT - 1)) / DIM_W'(Y_TOT);
      k_words  <= k / DIM_W'(EPW);
      n_words  <= n / DIM_W'(EPW);
      a_base_q <= a_base;
      b_base_q <= b_base;
      c_base_q <= c_base;
    end
  end

  // ---------------- Read A, FIFO bank, Transpose ----------------
  logic                  ra_push_valid, ra_push_ready;
  logic [EPW-1:0][W-1:0] ra_push_data;
  logic [EPW-1:0]        f_in_ready, f_out_valid, f_pop;
  logic [EPW-1:0][W-1:0] f_out_data;
  logic                  ra_done;

  read_a #(.W(W), .MEM_BITS(MEM_BITS), .X_TOT(X_TOT), .ADDR_W(ADDR_W), .MAX_OUT(MAX_OUT)) u_read_a (
    .clk, .rst_n, .start(go), .a_base(a_base_q), .m(m_q), .k_words, .tiles_m, .tiles_n,
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req_addr(a_req_addr),
    .rsp_valid(a_rsp_valid), .rsp_ready(a_rsp_ready), .rsp_data(a_rsp_data),
    .push_valid(ra_push_valid), .push_ready(ra_push_ready), .push_data(ra_push_data),
    .done(ra_done)
  );

  assign ra_push_ready = &f_in_ready;

  for (genvar e = 0; e < EPW; e++) begin : g_afifo
    stream_fifo #(.WIDTH(W), .DEPTH(A_FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (ra_push_valid && ra_push_ready),
      .in_ready (f_in_ready[e]),
      .in_data  (ra_push_data[e]),
      .out_valid(f_out_valid[e]),
      .out_ready(f_pop[e]),
      .out_data (f_out_data[e]),
      .count    ()
    );
  end

  logic          row_start, group_done, tr_done;
  logic          a_v    [N_P+1];
  logic [PW-1:0] a_dest [N_P+1];
  logic [W-1:0]  a_d    [N_P+1];

  transpose #(.W(W), .EPW(EPW), .N_P(N_P), .X_TOT(X_TOT)) u_transpose (
    .clk, .rst_n, .start(go), .k_words, .n_tiles(tiles_m * tiles_n),
    .fifo_valid(f_out_valid), .fifo_data(f_out_data), .fifo_pop(f_pop),
    .row_start, .a_valid(a_v[0]), .a_dest(a_dest[0]), .a_data(a_d[0]),
    .group_done, .done(tr_done)
  );

  // ---------------- Read B, Feed B ----------------
  logic          rb_valid, rb_ready, rb_done, fb_done, fb_stall, tile_drained;
  logic [DW-1:0] rb_data;
  logic          b_v    [N_P+1];
  b_ctrl_t       b_c    [N_P+1];
  logic [DW-1:0] b_d    [N_P+1];

  read_b #(.W(W), .Y_C(Y_C), .MEM_BITS(MEM_BITS), .Y_TOT(Y_TOT), .ADDR_W(ADDR_W), .MAX_OUT(MAX_OUT)) u_read_b (
    .clk, .rst_n, .start(go), .b_base(b_base_q), .n_words, .k_steps(k_q), .tiles_m, .tiles_n,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .rsp_valid(b_rsp_valid), .rsp_ready(b_rsp_ready), .rsp_data(b_rsp_data),
    .out_valid(rb_valid), .out_ready(rb_ready), .out_data(rb_data), .done(rb_done)
  );

  feed_b #(.W(W), .Y_C(Y_C), .R(R), .MB(MB)) u_feed_b (
    .clk, .rst_n, .start(go), .k_steps(k_q), .n_tiles(tiles_m * tiles_n),
    .in_valid(rb_valid), .in_ready(rb_ready), .in_data(rb_data),
    .group_done, .row_start, .tile_drained,
    .b_valid(b_v[0]), .b_ctrl(b_c[0]), .b_data(b_d[0]), .stall(fb_stall), .done(fb_done)
  );

  // ---------------- PE chain ----------------
  logic          c_v [N_P+1];
  logic          c_r [N_P+1];
  logic [DW-1:0] c_d [N_P+1];

  assign c_v[N_P] = 1'b0;
  assign c_d[N_P] = '0;

  for (genvar i = 0; i < N_P; i++) begin : g_pe
    mmm_pe #(.W(W), .Y_C(Y_C), .N_P(N_P), .IDX(i), .R(R), .MB(MB), .OP(OP)) u_pe (
      .clk, .rst_n,
      .a_in_valid(a_v[i]), .a_in_dest(a_dest[i]), .a_in_data(a_d[i]),
      .a_out_valid(a_v[i+1]), .a_out_dest(a_dest[i+1]), .a_out_data(a_d[i+1]),
      .b_in_valid(b_v[i]), .b_in_ctrl(b_c[i]), .b_in_data(b_d[i]),
      .b_out_valid(b_v[i+1]), .b_out_ctrl(b_c[i+1]), .b_out_data(b_d[i+1]),
      .c_in_valid(c_v[i+1]), .c_in_ready(c_r[i+1]), .c_in_data(c_d[i+1]),
      .c_out_valid(c_v[i]), .c_out_ready(c_r[i]), .c_out_data(c_d[i])
    );
  end

  // ---------------- Write C ----------------
  write_c #(.W(W), .Y_C(Y_C), .MEM_BITS(MEM_BITS), .X_TOT(X_TOT), .Y_TOT(Y_TOT), .ADDR_W(ADDR_W)) u_write_c (
    .clk, .rst_n, .start(go), .c_base(c_base_q), .m(m_q), .n_words, .tiles_m, .tiles_n,
    .in_valid(c_v[0]), .in_ready(c_r[0]), .in_data(c_d[0]),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .tile_drained, .done(wc_done)
  );

  // Configuration rules of the tiling.
  initial begin
    assert (X_TOT % N_P == 0)    else $error("mmm_kernel: N_P must divide X_TOT");
    assert (Y_TOT % EPW == 0)    else $error("mmm_kernel: EPW must divide Y_TOT");
    assert (MEM_BITS % DW == 0)  else $error("mmm_kernel: Y_C*W must divide MEM_BITS");
    assert (R * MB >= 2)         else $error("mmm_kernel: C buffer needs two or more words");
    assert (A_FIFO_DEPTH >= X_TOT) else $error("mmm_kernel: A FIFOs must hold a tile column");
  end

endmodule
