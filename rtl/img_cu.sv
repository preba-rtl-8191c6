// img_cu: computer-vision computing unit (CU). One CU preprocesses one image
// request at a time: JPEG decode -> resize -> centre crop -> normalise, with the
// units connected by streams so that groups of pixels flow through all stages
// concurrently (pipelined execution inside a single request).
//
// Operation. start latches the command (src/len: JPEG words in global memory;
// dst: output tensor; short_side; crop). A mem_reader streams the JPEG words out
// through the dec_in port to the JPEG decoder, which sits outside this module
// (it is taken from a vendor library and not part of this RTL). The decoder
// answers with a header (image width/height, dec_hdr handshake) followed by the
// decoded pixels in raster order (dec_pix). The header starts img_resize; once
// the resized size is known img_crop is started; img_normalize turns each kept
// pixel into three Q3.12 values, and the writer stores them as a planar CHW
// tensor: value (c, y, x) goes to dst + c*crop*crop + y*crop + x, sign-extended
// to 32 bits. The reader and the writer share the CU's memory port through a
// two-way mem_arbiter.
//
// done pulses (and busy falls) once every input word has been read, the resize
// has consumed the whole image and the last output word has been accepted by
// memory; result is then the number of words written, 3*crop*crop.
// The paper gives the CU structure (four units in sequence, streams between
// them, global memory at both ends); the command format, the decoder port
// protocol and the output layout are this design's choices.
module img_cu
  import preba_pkg::*;
#(
  parameter int unsigned MAX_W = 4096
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  logic [31:0]   src,
  input  logic [31:0]   len,
  input  logic [31:0]   dst,
  input  logic [15:0]   short_side,
  input  logic [15:0]   crop,
  output logic          busy,
  output logic          done,
  output logic [31:0]   result,
  // global memory
  output logic          req_valid,
  input  logic          req_ready,
  output mem_req_t      req,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_rdata,
  // JPEG decoder (external)
  output logic          dec_in_valid,
  input  logic          dec_in_ready,
  output logic [31:0]   dec_in_data,
  output logic          dec_in_last,
  input  logic          dec_hdr_valid,
  output logic          dec_hdr_ready,
  input  logic [15:0]   dec_w,
  input  logic [15:0]   dec_h,
  input  logic          dec_pix_valid,
  output logic          dec_pix_ready,
  input  rgb_t          dec_pix
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DIMS, S_RUN} state_e;
  state_e state;

  logic [31:0] r_dst;
  logic [15:0] r_short, r_crop;
  logic [31:0] plane, pix_idx, n_pix, writes;
  logic        rd_done_seen, rs_done_seen;

  // ---- memory arbitration: 0 = reader, 1 = writer
  logic     a_valid [2];
  logic     a_ready [2];
  mem_req_t a_req   [2];
  logic     a_rsp   [2];
  logic [DW-1:0] a_rdata;

  mem_arbiter #(.N(2), .ID_DEPTH(16)) u_arb (
    .clk, .rst_n,
    .s_req_valid(a_valid), .s_req_ready(a_ready), .s_req(a_req),
    .s_rsp_valid(a_rsp), .s_rsp_rdata(a_rdata),
    .m_req_valid(req_valid), .m_req_ready(req_ready), .m_req(req),
    .m_rsp_valid(rsp_valid), .m_rsp_rdata(rsp_rdata)
  );

  // ---- reader -> decoder
  logic rd_done;
  mem_reader #(.DEPTH(16)) u_rd (
    .clk, .rst_n,
    .start(state == S_IDLE && start), .base(src), .count(len),
    .busy(), .done(rd_done),
    .req_valid(a_valid[0]), .req_ready(a_ready[0]), .req(a_req[0]),
    .rsp_valid(a_rsp[0]), .rsp_rdata(a_rdata),
    .out_valid(dec_in_valid), .out_ready(dec_in_ready),
    .out_data(dec_in_data), .out_last(dec_in_last)
  );

  assign dec_hdr_ready = (state == S_HDR);

  // ---- resize
  logic        rs_done, rs_dims;
  logic [15:0] rs_w, rs_h;
  logic        rs_valid, rs_ready;
  rgb_t        rs_pix;
  img_resize #(.MAX_W(MAX_W)) u_resize (
    .clk, .rst_n,
    .start(state == S_HDR && dec_hdr_valid),
    .in_w(dec_w), .in_h(dec_h), .short_side(r_short),
    .busy(), .done(rs_done), .dims_valid(rs_dims), .out_w(rs_w), .out_h(rs_h),
    .in_valid(dec_pix_valid), .in_ready(dec_pix_ready), .in_pix(dec_pix),
    .out_valid(rs_valid), .out_ready(rs_ready), .out_pix(rs_pix)
  );

  // ---- crop
  logic cr_valid, cr_ready;
  rgb_t cr_pix;
  img_crop u_crop (
    .clk, .rst_n,
    .start(state == S_DIMS && rs_dims),
    .in_w(rs_w), .in_h(rs_h), .crop(r_crop),
    .busy(), .done(),
    .in_valid(rs_valid), .in_ready(rs_ready), .in_pix(rs_pix),
    .out_valid(cr_valid), .out_ready(cr_ready), .out_pix(cr_pix)
  );

  // ---- normalize
  logic               nm_valid, nm_ready;
  logic signed [15:0] nm_val [3];
  img_normalize u_norm (
    .clk, .rst_n,
    .in_valid(cr_valid), .in_ready(cr_ready), .in_pix(cr_pix),
    .out_valid(nm_valid), .out_ready(nm_ready), .out_val(nm_val)
  );

  // ---- writer: three planar writes per pixel
  logic [1:0] wc;
  assign a_valid[1] = nm_valid;
  assign a_req[1]   = '{we: 1'b1,
                        addr: r_dst + 32'(wc) * plane + pix_idx,
                        wdata: 32'(nm_val[wc])};
  assign nm_ready   = (wc == 2'd2) && a_ready[1];

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done <= 1'b0; result <= '0;
      r_dst <= '0; r_short <= '0; r_crop <= '0;
      plane <= '0; pix_idx <= '0; n_pix <= '0; writes <= '0; wc <= '0;
      rd_done_seen <= 1'b0; rs_done_seen <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rd_done) rd_done_seen <= 1'b1;
      if (rs_done) rs_done_seen <= 1'b1;
      if (a_valid[1] && a_ready[1]) begin
        writes <= writes + 1;
        if (wc == 2'd2) begin
          wc      <= '0;
          pix_idx <= pix_idx + 1;
        end else begin
          wc <= wc + 1'b1;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          r_dst <= dst; r_short <= short_side; r_crop <= crop;
          pix_idx <= '0; writes <= '0; wc <= '0;
          rd_done_seen <= (len == 0); rs_done_seen <= 1'b0;
          state <= S_HDR;
        end
        S_HDR:  if (dec_hdr_valid) state <= S_DIMS;
        S_DIMS: if (rs_dims) begin
          plane <= 32'((rs_w < r_crop) ? rs_w : r_crop) * 32'((rs_h < r_crop) ? rs_h : r_crop);
          n_pix <= 32'((rs_w < r_crop) ? rs_w : r_crop) * 32'((rs_h < r_crop) ? rs_h : r_crop);
          state <= S_RUN;
        end
        S_RUN: if (rd_done_seen && rs_done_seen && writes == 3 * n_pix) begin
          state  <= S_IDLE;
          done   <= 1'b1;
          result <= writes;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the writer only sees pixels inside the announced window
  a_write_bound: assert property (@(posedge clk) disable iff (!rst_n)
    (a_valid[1] && state == S_RUN) |-> (pix_idx < n_pix));
endmodule
