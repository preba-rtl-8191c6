// mem_arbiter: shares one global-memory port among N requesters (the CUs, or the
// reader and writer inside one CU).
//
// Requests are granted round-robin, one per cycle, starting after the last
// winner. Every granted read pushes the winner's index into an order queue; since
// the memory answers reads in order, each response is delivered to the index at
// the head of that queue. Writes need no response. A read is held back while the
// order queue is full, so at most ID_DEPTH reads are in flight through this
// arbiter. The requester side uses the same protocol as the memory side:
// valid/ready for requests, a one-cycle rsp_valid pulse per read answer that must
// be accepted. The paper shows every CU attached to the card's global memory but
// does not describe the interconnect; round-robin is this design's choice.
module mem_arbiter
  import preba_pkg::*;
#(
  parameter int unsigned N        = 2,
  parameter int unsigned ID_DEPTH = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  // requesters
  input  logic           s_req_valid [N],
  output logic           s_req_ready [N],
  input  mem_req_t       s_req       [N],
  output logic           s_rsp_valid [N],
  output logic [DW-1:0]  s_rsp_rdata,
  // memory side
  output logic           m_req_valid,
  input  logic           m_req_ready,
  output mem_req_t       m_req,
  input  logic           m_rsp_valid,
  input  logic [DW-1:0]  m_rsp_rdata
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] rr;          // highest priority requester this cycle
  logic [IW-1:0] grant;
  logic          any;
  logic          id_in_ready, id_out_valid;
  logic [IW-1:0] id_head;
  logic          rd_fire;

  // a requester is eligible if it is valid and, for a read, the order queue has room
  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 0; k < int'(N); k++) begin
      if (!any && s_req_valid[(int'(rr) + k) % int'(N)]
               && (s_req[(int'(rr) + k) % int'(N)].we || id_in_ready)) begin
        any   = 1'b1;
        grant = IW'((int'(rr) + k) % int'(N));
      end
    end
  end

  assign m_req_valid = any;
  assign m_req       = s_req[grant];
  assign rd_fire     = any && m_req_ready && !s_req[grant].we;

  always_comb begin
    for (int k = 0; k < int'(N); k++) begin
      s_req_ready[k] = any && (grant == IW'(k)) && m_req_ready;
      s_rsp_valid[k] = m_rsp_valid && id_out_valid && (id_head == IW'(k));
    end
  end
  assign s_rsp_rdata = m_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any && m_req_ready) rr <= (grant == IW'(N-1)) ? '0 : grant + 1'b1;
  end

  sync_fifo #(.W(IW), .DEPTH(ID_DEPTH)) u_order (
    .clk, .rst_n,
    .in_valid (rd_fire),
    .in_ready (id_in_ready),
    .in_data  (grant),
    .out_valid(id_out_valid),
    .out_ready(m_rsp_valid),
    .out_data (id_head),
    .count    ()
  );

  // every read answer must belong to a granted read
  a_rsp_has_owner: assert property (@(posedge clk) disable iff (!rst_n)
    m_rsp_valid |-> id_out_valid);
endmodule
