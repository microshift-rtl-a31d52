// microshift_top: Microshift image compression core.
//
// Pixels arrive in raster order, one per cycle (in_valid/in_ready). Each is
// micro-shifted and sub-quantized to 3 bits (ms_quantizer) and pushed into
// the line memory and template kernel (memory_block). The pixel X then being
// coded, three samples behind the newest one, goes through four pipeline
// stages:
//   S1  texture vector, context and flat test (texture_calc)
//   S2  intra prediction (subimage 1) or inter prediction from the coded
//       3x3-tile neighbours (subimages 2..9) (predictor, dict_rom)
//   S3  residual mapping to 0..7 (error_map)
//   S4  Golomb code (golomb_coder) or, in run mode, run bits (run_counter,
//       run_length_coder), merged into one code of up to 24 bits
// and the code is appended to the bit packer of its subimage (pattern
// position), which fills 32-bit words into that subimage's FIFO. The nine
// FIFOs are sent one after the other by tx_sequencer on the out_* stream,
// subimage 1 first, so the receiver can decode progressively; tx_abort ends the
// transmission of the current frame early.
// Timing: the last pixel of a frame enters at cycle H*W (counting the first
// accepted pixel as cycle 1); its code reaches its packer, and frame_done
// pulses, at cycle H*W + 8: 3 cycles of kernel delay (flushed at frame end),
// 4 pipeline stages and the packer. The paper states the same 8-cycle
// overhead. A new frame is accepted once the previous one has been sent
// (tx_done); frame start also empties the FIFOs and their overflow flags.
// The architecture follows the paper's block diagram; the
// stream interfaces, the FIFO sizes and the run-coding details are this
// design's choices (see the sub-modules).
module microshift_top
  import microshift_pkg::*;
#(
  parameter int    W          = 640,
  parameter int    H          = 480,
  parameter int    FIFO_DEPTH = 4096,
  parameter int    GOLOMB_K   = 0,
  parameter string DICT_FILE  = ""
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // pixel stream from the image sensor, raster order
  input  logic                        in_valid,
  input  logic [PIX_BITS-1:0]         in_pixel,
  output logic                        in_ready,
  // compressed word stream, subimage by subimage
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [31:0]                 out_data,
  output logic [3:0]                  out_sub,
  output logic                        out_last,
  input  logic                        tx_abort,
  // status
  output logic                        frame_done,     // frame compressed
  output logic                        tx_done,        // frame sent
  output logic                        tx_aborted,
  output logic [N_SUB-1:0]            fifo_overflow
);
  localparam int RW  = $clog2(H);
  localparam int CLW = $clog2(W);
  localparam int FCW = $clog2(FIFO_DEPTH) + 1;

  // ---------------- scan control, quantizer, memory block ----------------
  logic accept, frame_start, shift, x_new, x_last;
  sub_t in_t;
  logic [RW-1:0]  x_row;
  logic [CLW-1:0] x_col;
  logic [1:0]     x_row3, x_col3;
  qpix_t          q;

  scan_ctrl #(.W(W), .H(H)) u_scan (
    .clk, .rst_n, .in_valid, .in_ready, .tx_done,
    .accept, .frame_start, .in_t, .shift, .x_new, .x_last,
    .x_row, .x_col, .x_row3, .x_col3);

  ms_quantizer u_quant (.pix(in_pixel), .pat_idx(in_t), .q);

  qpix_t tx_x, ta, tb, tc, td, te, tg;
  logic [8:0][M_BITS-1:0] blk;
  logic [8:0] blk_ok;

  memory_block #(.W(W), .H(H)) u_mem (
    .clk, .shift, .q, .x_row, .x_col, .x_row3, .x_col3,
    .x(tx_x), .a(ta), .b(tb), .c(tc), .d(td), .e(te), .g(tg), .blk, .blk_ok);

  // ---------------- S1: texture ----------------
  ctx_t ctx;
  logic neg, flat;
  texture_calc u_tex (.a(ta), .b(tb), .c(tc), .d(td), .e(te), .ctx, .neg, .flat);

  s1_t s1;
  always_ff @(posedge clk) begin
    if (!rst_n) s1 <= '0;
    else begin
      s1.valid  <= x_new;
      s1.last   <= x_last;
      s1.eol    <= (32'(x_col) + 3) >= W;
      s1.t      <= {1'b0, x_row3, 1'b0} + {2'b0, x_row3} + {2'b0, x_col3};
      s1.x      <= tx_x;
      s1.b      <= tb;
      s1.ctx    <= ctx;
      s1.neg    <= neg;
      s1.flat   <= flat;
      s1.blk    <= blk;
      s1.blk_ok <= blk_ok;
    end
  end

  // ---------------- S2: prediction ----------------
  qpix_t xhat;
  predictor #(.DICT_FILE(DICT_FILE)) u_pred (
    .t(s1.t), .b(s1.b), .ctx(s1.ctx), .neg(s1.neg), .blk(s1.blk), .blk_ok(s1.blk_ok), .xhat);

  s2_t s2;
  always_ff @(posedge clk) begin
    if (!rst_n) s2 <= '0;
    else begin
      s2.valid <= s1.valid;
      s2.last  <= s1.last;
      s2.eol   <= s1.eol;
      s2.t     <= s1.t;
      s2.x     <= s1.x;
      s2.xhat  <= xhat;
      s2.flat  <= s1.flat;
      s2.hit   <= s1.x == s1.b;
    end
  end

  // ---------------- S3: error mapping ----------------
  qpix_t emap;
  error_map u_emap (.x(s2.x), .xhat(s2.xhat), .emap);

  s3_t s3;
  always_ff @(posedge clk) begin
    if (!rst_n) s3 <= '0;
    else begin
      s3.valid <= s2.valid;
      s3.last  <= s2.last;
      s3.eol   <= s2.eol;
      s3.t     <= s2.t;
      s3.emap  <= emap;
      s3.flat  <= s2.flat;
      s3.hit   <= s2.hit;
    end
  end

  // ---------------- S4: Golomb / run coding, mode switch ----------------
  logic [7:0]          g_bits;
  logic [LEN_BITS-1:0] g_len, r_len;
  logic                run_mode, ev_one, ev_int;
  logic [3:0]          run_j_val;
  logic [RUN_BITS-1:0] run_cnt, r_bits;

  golomb_coder #(.K(GOLOMB_K)) u_golomb (.emap(s3.emap), .bits(g_bits), .len(g_len));

  run_counter u_runcnt (
    .clk, .rst_n, .clear(frame_start), .valid(s3.valid), .t(s3.t),
    .flat(s3.flat), .hit(s3.hit), .eol(s3.eol),
    .run_mode, .ev_one, .ev_int, .j(run_j_val), .cnt(run_cnt));

  run_length_coder u_rlc (.ev_one, .ev_int, .j(run_j_val), .cnt(run_cnt), .bits(r_bits), .len(r_len));

  logic [CODE_BITS-1:0] m_bits;
  logic [LEN_BITS-1:0]  m_len;
  always_comb begin
    if (!run_mode) begin
      m_bits = CODE_BITS'(g_bits);
      m_len  = g_len;
    end else if (ev_int) begin
      m_bits = (CODE_BITS'(r_bits) << g_len) | CODE_BITS'(g_bits);
      m_len  = r_len + g_len;
    end else begin
      m_bits = CODE_BITS'(r_bits);
      m_len  = r_len;
    end
  end

  s4_t s4;
  always_ff @(posedge clk) begin
    if (!rst_n) s4 <= '0;
    else begin
      s4.valid <= s3.valid;
      s4.last  <= s3.last;
      s4.t     <= s3.t;
      s4.bits  <= m_bits;
      s4.len   <= m_len;
    end
  end

  // ---------------- packers, FIFOs ----------------
  logic coded, done_d1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      frame_done <= 1'b0;
      done_d1    <= 1'b0;
      coded      <= 1'b0;
    end else begin
      frame_done <= s4.valid && s4.last;
      done_d1    <= frame_done;
      if (frame_start)  coded <= 1'b0;
      else if (done_d1) coded <= 1'b1;
    end
  end

  logic [N_SUB-1:0] wr_en, f_empty, f_full, f_pop;
  logic [31:0]      wr_data [N_SUB];
  logic [31:0]      f_dout  [N_SUB];
  logic [FCW-1:0]   f_count [N_SUB];
  logic             f_clear;

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    bit_packer #(.WORD(32)) u_pack (
      .clk, .rst_n, .in_valid(s4.valid && s4.t == sub_t'(s)),
      .in_bits(s4.bits), .in_len(s4.len), .flush(frame_done),
      .wr_en(wr_en[s]), .wr_data(wr_data[s]));

    sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .clear(f_clear || frame_start), .push(wr_en[s]), .din(wr_data[s]),
      .pop(f_pop[s]), .dout(f_dout[s]), .empty(f_empty[s]), .full(f_full[s]),
      .count(f_count[s]), .overflow(fifo_overflow[s]));
  end

  // ---------------- progressive transmission ----------------
  tx_sequencer #(.WIDTH(32), .CW(FCW)) u_tx (
    .clk, .rst_n, .start(frame_start), .coded, .tx_abort,
    .fifo_empty(f_empty), .fifo_count(f_count), .fifo_dout(f_dout),
    .fifo_pop(f_pop), .fifo_clear(f_clear),
    .out_valid, .out_ready, .out_data, .out_sub, .out_last,
    .done(tx_done), .aborted(tx_aborted));
endmodule
