// seq_isqrt: unsigned integer square root, floor(sqrt(radicand)), by the
// bit-by-bit (digit recurrence) method: one result bit per clock, W/2 clocks.
// Pulse start; done pulses for one cycle when root is valid. W must be even.
module seq_isqrt #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   radicand,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int unsigned HW = W/2;
  logic [W-1:0]             x;      // remaining radicand
  logic [W-1:0]             res;    // partial result, scaled
  logic [W-1:0]             bitv;   // current power of four
  logic [$clog2(W/2+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      x    <= '0;
      res  <= '0;
      bitv <= '0;
      cnt  <= '0;
      root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        x    <= radicand;
        res  <= '0;
        bitv <= W'(1) << (W-2);
        cnt  <= ($clog2(W/2+1))'(W/2);
      end else if (busy) begin
        if (x >= res + bitv) begin
          x   <= x - (res + bitv);
          res <= (res >> 1) + bitv;
        end else begin
          res <= res >> 1;
        end
        bitv <= bitv >> 2;
        cnt  <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (x >= res + bitv) ? HW'((res >> 1) + bitv) : HW'(res >> 1);
        end
      end
    end
  end
endmodule
