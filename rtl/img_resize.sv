// img_resize: Resize unit of the computer-vision CU. Scales a decoded RGB image
// so that its shorter side becomes `short_side` pixels (256 for the usual
// ImageNet preprocessing) while keeping the aspect ratio, with bilinear
// interpolation.
//
// How it works. On start the unit computes the output size
// (short side -> short_side, long side -> floor(long*short_side/short)) and the
// Q16 source steps in_w/out_w and in_h/out_h with one sequential divider. Pixels
// then arrive in raster order. Only two source rows are kept, in two line
// buffers indexed by row parity. Output row j samples source row position
// sy = (j+0.5)*in_h/out_h - 0.5 (clamped at 0), i.e. rows y0 = floor(sy) and
// y1 = min(y0+1, in_h-1) with an 8-bit fraction fy; the unit accepts input rows
// until row y1 has arrived, then emits the out_w pixels of row j, each from the
// four neighbours around sx = (i+0.5)*in_w/out_w - 0.5. Rows never used are
// accepted and overwritten (down-scaling); rows used twice stay in place
// (up-scaling). Leftover input rows are drained after the last output row.
//
// Interface: start with in_w/in_h/short_side; dims_valid rises when out_w/out_h
// are known and stays high until the next start; pixel streams are valid/ready;
// done pulses after the last input pixel has been consumed.
// Timing: 3 divisions (W cycles each) at start, then one output pixel per cycle
// while emitting; input and output phases alternate per row.
//
// The paper names the unit (built from the vendor vision library); the
// half-pixel-centre bilinear rule, the 8-bit weights, and the two-line-buffer
// streaming scheme are this design's choices.
module img_resize
  import preba_pkg::*;
#(
  parameter int unsigned MAX_W = 4096   // widest input row held in a line buffer
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] in_w,
  input  logic [15:0] in_h,
  input  logic [15:0] short_side,
  output logic        busy,
  output logic        done,
  output logic        dims_valid,
  output logic [15:0] out_w,
  output logic [15:0] out_h,
  // input pixels, raster order
  input  logic        in_valid,
  output logic        in_ready,
  input  rgb_t        in_pix,
  // output pixels, raster order
  output logic        out_valid,
  input  logic        out_ready,
  output rgb_t        out_pix
);
  localparam int unsigned XW = $clog2(MAX_W);

  typedef enum logic [2:0] {S_IDLE, S_DIV0, S_DIV1, S_DIV2, S_ROW, S_FILL, S_OUT, S_DRAIN} state_e;
  state_e state;

  rgb_t lb0 [MAX_W];
  rgb_t lb1 [MAX_W];

  logic [15:0] iw, ih, ss;
  logic [31:0] stepx, stepy;        // Q16
  logic [15:0] in_x, in_y;          // next input pixel position
  logic [15:0] ox, oy;              // next output pixel position
  logic [15:0] y0, y1;
  logic [7:0]  fy;

  // divider
  logic        div_start, div_done;
  logic [31:0] div_a, div_b, div_q;
  seq_div #(.W(32)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(), .done(div_done), .quotient(div_q)
  );

  // source row for the current output row
  logic signed [33:0] sy_q;
  always_comb begin
    sy_q = $signed({2'b0, 32'(((2 * {16'b0, oy} + 1) * stepy) >> 1)}) - 34'sd32768;
    if (sy_q < 0) sy_q = '0;
  end

  // source column and interpolation for the current output pixel
  logic signed [33:0] sx_q;
  logic [15:0]        x0, x1;
  logic [7:0]         fx;
  rgb_t               p00, p01, p10, p11;
  always_comb begin
    sx_q = $signed({2'b0, 32'(((2 * {16'b0, ox} + 1) * stepx) >> 1)}) - 34'sd32768;
    if (sx_q < 0) sx_q = '0;
    x0 = sx_q[31:16];
    if (x0 > iw - 1) x0 = iw - 1;
    x1 = (x0 + 1 < iw) ? x0 + 1 : x0;
    fx = (x0 + 1 < iw) ? sx_q[15:8] : 8'd0;
    p00 = y0[0] ? lb1[XW'(x0)] : lb0[XW'(x0)];
    p01 = y0[0] ? lb1[XW'(x1)] : lb0[XW'(x1)];
    p10 = y1[0] ? lb1[XW'(x0)] : lb0[XW'(x0)];
    p11 = y1[0] ? lb1[XW'(x1)] : lb0[XW'(x1)];
  end

  function automatic logic [7:0] blend(input logic [7:0] a, b, c, d,
                                       input logic [7:0] wx, wy);
    logic [16:0] top, bot;
    logic [25:0] v;
    top = 17'(a) * (17'd256 - 17'(wx)) + 17'(b) * 17'(wx);
    bot = 17'(c) * (17'd256 - 17'(wx)) + 17'(d) * 17'(wx);
    v   = 26'(top) * (26'd256 - 26'(wy)) + 26'(bot) * 26'(wy) + 26'd32768;
    return v[23:16];
  endfunction

  assign out_pix.r = blend(p00.r, p01.r, p10.r, p11.r, fx, fy);
  assign out_pix.g = blend(p00.g, p01.g, p10.g, p11.g, fx, fy);
  assign out_pix.b = blend(p00.b, p01.b, p10.b, p11.b, fx, fy);
  assign out_valid = (state == S_OUT);
  assign in_ready  = ((state == S_FILL) && (in_y <= y1)) || (state == S_DRAIN);
  assign busy      = (state != S_IDLE);

  // divider operands per state
  always_comb begin
    div_a = '0;
    div_b = 32'd1;
    unique case (state)
      S_DIV0:  begin
        div_a = (iw <= ih) ? 32'(ih) * 32'(ss) : 32'(iw) * 32'(ss);
        div_b = (iw <= ih) ? 32'(iw) : 32'(ih);
      end
      S_DIV1:  begin div_a = {iw, 16'b0}; div_b = 32'(out_w); end
      S_DIV2:  begin div_a = {ih, 16'b0}; div_b = 32'(out_h); end
      default: ;
    endcase
  end

  logic div_issued;
  assign div_start = (state inside {S_DIV0, S_DIV1, S_DIV2}) && !div_issued;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (in_y[0]) lb1[XW'(in_x)] <= in_pix;
      else         lb0[XW'(in_x)] <= in_pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      dims_valid <= 1'b0;
      div_issued <= 1'b0;
      iw <= '0; ih <= '0; ss <= '0;
      out_w <= '0; out_h <= '0;
      stepx <= '0; stepy <= '0;
      in_x <= '0; in_y <= '0; ox <= '0; oy <= '0;
      y0 <= '0; y1 <= '0; fy <= '0;
    end else begin
      done <= 1'b0;
      if (div_start) div_issued <= 1'b1;
      if (div_done)  div_issued <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_x == iw - 1) begin
          in_x <= '0;
          in_y <= in_y + 1;
        end else begin
          in_x <= in_x + 1;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          iw <= in_w; ih <= in_h; ss <= short_side;
          in_x <= '0; in_y <= '0; ox <= '0; oy <= '0;
          dims_valid <= 1'b0;
          state <= S_DIV0;
        end
        S_DIV0: if (div_done) begin
          if (iw <= ih) begin out_w <= ss; out_h <= div_q[15:0]; end
          else          begin out_h <= ss; out_w <= div_q[15:0]; end
          state <= S_DIV1;
        end
        S_DIV1: if (div_done) begin stepx <= div_q; state <= S_DIV2; end
        S_DIV2: if (div_done) begin
          stepy      <= div_q;
          dims_valid <= 1'b1;
          state      <= S_ROW;
        end
        S_ROW: begin
          y0 <= (sy_q[31:16] > ih - 1) ? ih - 1 : sy_q[31:16];
          y1 <= (sy_q[31:16] + 1 < ih) ? sy_q[31:16] + 1 : ih - 1;
          fy <= (sy_q[31:16] + 1 < ih) ? sy_q[15:8] : 8'd0;
          state <= S_FILL;
        end
        S_FILL: begin
          // wait until source row y1 is complete (in_y counts completed rows)
          if (in_y > y1 || (in_valid && in_ready && in_x == iw - 1 && in_y == y1)) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (ox == out_w - 1) begin
            ox <= '0;
            oy <= oy + 1;
            state <= (oy == out_h - 1) ? S_DRAIN : S_ROW;
          end else begin
            ox <= ox + 1;
          end
        end
        S_DRAIN: begin
          if (in_y >= ih || (in_valid && in_ready && in_x == iw - 1 && in_y == ih - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
