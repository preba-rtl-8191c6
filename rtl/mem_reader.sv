// mem_reader: streams `count` consecutive words starting at word address `base`
// out of global memory. It is the read half of a CU's memory access, feeding the
// first functional unit of the CU.
//
// Pulse start (while not busy). Read requests are issued one per cycle as long as
// the words in flight plus the words waiting in the local FIFO stay below DEPTH,
// so every response has a slot and the memory's answers never need back-pressure.
// Words leave on a valid/ready stream; out_last marks the final word. done pulses
// when the last word has been taken (or at once for count == 0).
module mem_reader
  import preba_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [31:0]   count,
  output logic          busy,
  output logic          done,
  // memory side
  output logic          req_valid,
  input  logic          req_ready,
  output mem_req_t      req,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_rdata,
  // word stream
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  output logic          out_last
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [31:0]   issued, popped, total;
  logic [AW-1:0] addr;
  logic [CW-1:0] inflight, fcount;
  logic          fire_req, fire_out;

  assign req_valid = busy && (issued != total) && ({1'b0, inflight} + {1'b0, fcount} < (CW+1)'(DEPTH));
  assign req       = '{we: 1'b0, addr: addr, wdata: '0};
  assign fire_req  = req_valid && req_ready;
  assign fire_out  = out_valid && out_ready;
  assign out_last  = (popped + 1 == total);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      issued   <= '0;
      popped   <= '0;
      total    <= '0;
      addr     <= '0;
      inflight <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issued <= '0;
        popped <= '0;
        total  <= count;
        addr   <= base;
        if (count == 0) done <= 1'b1;
        else            busy <= 1'b1;
      end else if (busy) begin
        if (fire_req) begin
          issued <= issued + 1;
          addr   <= addr + 1'b1;
        end
        inflight <= inflight + CW'(fire_req) - CW'(rsp_valid);
        if (fire_out) begin
          popped <= popped + 1;
          if (out_last) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  sync_fifo #(.W(DW), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (rsp_valid),
    .in_ready (),
    .in_data  (rsp_rdata),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (out_data),
    .count    (fcount)
  );

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> (fcount < CW'(DEPTH)));
endmodule
