// seq_div: unsigned restoring divider, one quotient bit per clock.
// Pulse start with dividend/divisor; W cycles later done pulses for one cycle
// with quotient = dividend / divisor (floor). Division by zero returns all ones.
// busy is high while a division is in progress.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]           den;
  logic [W-1:0]           rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]             trial;

  assign trial = {rem[W-1:0], quotient[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      cnt      <= '0;
      rem      <= '0;
      den      <= '0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        rem      <= '0;
        den      <= divisor;
        quotient <= dividend;
        cnt      <= ($clog2(W+1))'(W);
      end else if (busy) begin
        // shift the next dividend bit into the remainder, subtract if it fits
        if (trial >= {1'b0, den}) begin
          rem      <= W'(trial - {1'b0, den});
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= W'(trial);
          quotient <= {quotient[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
