// scan_ctrl: raster-scan bookkeeping of the compressor.
//
// The sensor delivers one frame of H x W pixels in raster order, one pixel
// per accepted cycle (in_valid & in_ready). This block
//   * counts the row/column of the incoming pixel and gives its microshift
//     pattern position in_t = 3*(row mod 3) + (col mod 3);
//   * drives the memory block's shift enable: one shift per accepted pixel,
//     plus three flush shifts after the last pixel, because the pixel being
//     coded (X) sits three samples behind the newest one in the kernel;
//   * tracks the raster position of X (x_row, x_col and their values mod 3),
//     pulsing x_new in the cycle a new X is visible in the kernel, and
//     x_last with the frame's final X;
//   * holds in_ready low from the first flush cycle until tx_done says the
//     previous frame has been transmitted, since the nine output FIFOs can
//     hold only one frame.
// Row/column counting follows the paper's raster-scan architecture; the
// handshake, the flush and the frame-level hold are this design's choices.
// Synchronous active-low reset.
module scan_ctrl
  import microshift_pkg::*;
#(
  parameter int W = 640,
  parameter int H = 480
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic                 tx_done,      // previous frame fully sent
  output logic                 accept,       // pixel taken this cycle
  output logic                 frame_start,  // first pixel of a frame taken
  output sub_t                 in_t,         // pattern position of the input
  output logic                 shift,        // memory block shift enable
  output logic                 x_new,        // new X in the kernel
  output logic                 x_last,       // ... and it is the frame's last
  output logic [$clog2(H)-1:0] x_row,
  output logic [$clog2(W)-1:0] x_col,
  output logic [1:0]           x_row3,
  output logic [1:0]           x_col3
);
  localparam int RW = $clog2(H);
  localparam int CW = $clog2(W);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_HOLD} state_t;
  state_t state;

  logic [RW-1:0] ir;
  logic [CW-1:0] ic;
  logic [1:0]    ir3, ic3;
  logic [1:0]    lag;       // shifts so far, saturating at 3
  logic          xfirst;
  logic [1:0]    fcnt;
  logic          in_end;

  assign in_ready    = (state == S_IDLE) || (state == S_RUN);
  assign accept      = in_valid && in_ready;
  assign frame_start = accept && (state == S_IDLE);
  assign shift       = accept || (state == S_FLUSH);
  assign in_t        = {1'b0, ir3, 1'b0} + {2'b0, ir3} + {2'b0, ic3};
  assign in_end      = (ir == RW'(H - 1)) && (ic == CW'(W - 1));
  assign x_last      = x_new && (x_row == RW'(H - 1)) && (x_col == CW'(W - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ir     <= '0;  ic  <= '0;  ir3 <= '0;  ic3 <= '0;
      lag    <= '0;
      xfirst <= 1'b1;
      fcnt   <= '0;
      x_new  <= 1'b0;
      x_row  <= '0;  x_col  <= '0;
      x_row3 <= '0;  x_col3 <= '0;
    end else begin
      // input raster position
      if (accept) begin
        if (in_end) begin
          ir <= '0; ic <= '0; ir3 <= '0; ic3 <= '0;
        end else if (ic == CW'(W - 1)) begin
          ic  <= '0; ic3 <= '0;
          ir  <= ir + 1'b1;
          ir3 <= (ir3 == 2'd2) ? 2'd0 : ir3 + 2'd1;
        end else begin
          ic  <= ic + 1'b1;
          ic3 <= (ic3 == 2'd2) ? 2'd0 : ic3 + 2'd1;
        end
      end

      // position of X, three shifts behind the input
      x_new <= shift && (lag == 2'd3) && !frame_start;
      if (frame_start) begin
        lag    <= 2'd1;
        xfirst <= 1'b1;
        x_row  <= '0; x_col  <= '0; x_row3 <= '0; x_col3 <= '0;
      end else if (shift) begin
        if (lag != 2'd3) lag <= lag + 2'd1;
        else if (xfirst) xfirst <= 1'b0;
        else if (x_col == CW'(W - 1)) begin
          x_col  <= '0; x_col3 <= '0;
          x_row  <= x_row + 1'b1;
          x_row3 <= (x_row3 == 2'd2) ? 2'd0 : x_row3 + 2'd1;
        end else begin
          x_col  <= x_col + 1'b1;
          x_col3 <= (x_col3 == 2'd2) ? 2'd0 : x_col3 + 2'd1;
        end
      end

      // frame state
      case (state)
        S_IDLE:  begin
                   fcnt <= '0;
                   if (accept) state <= in_end ? S_FLUSH : S_RUN;
                 end
        S_RUN:   if (accept && in_end) begin state <= S_FLUSH; fcnt <= '0; end
        S_FLUSH: begin
                   fcnt <= fcnt + 2'd1;
                   if (fcnt == 2'd2) state <= S_HOLD;
                 end
        S_HOLD:  if (tx_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
