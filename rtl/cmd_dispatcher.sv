// cmd_dispatcher: the command and completion queues through which the host
// drives the computing units (CUs), and the scheduler that hands each request
// to a free CU of the right type.
//
// The host pushes commands (cmd_t) on a valid/ready port. Each command enters
// the queue of its CU type (IMG, MEL, NORM; QDEPTH entries each), so a burst of
// one type never blocks another. Every cycle, the head of each queue is started
// on the lowest-numbered idle CU of that type: start[i] pulses for one cycle and
// the command is shown on the type's *_cmd output for the CU to latch. A CU
// stays assigned from its start until its completion has been queued. When a CU
// pulses done[i] with result[i], the dispatcher records it; one recorded
// completion per cycle (lowest index first) moves into the completion queue,
// which the host drains on the cpl valid/ready port. blocked[k] is high while
// queue k holds a command but every CU of type k is assigned (request-level
// back-pressure).
//
// CU numbering: 0..NI-1 image CUs, NI..NI+NM-1 Mel CUs, then NN Normalize CUs.
// The paper states that the host controls each CU through command queues and
// that many CUs run in parallel; queue sizes and the lowest-index-first policy
// are this design's choices.
module cmd_dispatcher
  import preba_pkg::*;
#(
  parameter int unsigned NI     = 3,
  parameter int unsigned NM     = 3,
  parameter int unsigned NN     = 2,
  parameter int unsigned QDEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        cpl_valid,
  input  logic        cpl_ready,
  output cpl_t        cpl,
  output logic        start   [NI+NM+NN],
  output cmd_t        img_cmd,
  output cmd_t        mel_cmd,
  output cmd_t        norm_cmd,
  input  logic        done    [NI+NM+NN],
  input  logic [31:0] result  [NI+NM+NN],
  output logic        blocked [3]
);
  localparam int unsigned NT = NI + NM + NN;

  logic       assigned [NT];
  logic       pend     [NT];
  logic [7:0] tagr     [NT];
  logic [31:0] res     [NT];

  // ---- per-type command queues
  logic q_in_valid [3];
  logic q_in_ready [3];
  logic q_out_valid[3];
  logic q_out_ready[3];
  cmd_t q_head     [3];

  for (genvar k = 0; k < 3; k++) begin : g_q
    assign q_in_valid[k] = cmd_valid && (cmd.kind == cu_kind_e'(k));
    sync_fifo #(.W($bits(cmd_t)), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(q_in_valid[k]), .in_ready(q_in_ready[k]), .in_data(cmd),
      .out_valid(q_out_valid[k]), .out_ready(q_out_ready[k]), .out_data(q_head[k]),
      .count()
    );
  end

  always_comb begin
    unique case (cmd.kind)
      CU_IMG:  cmd_ready = q_in_ready[0];
      CU_MEL:  cmd_ready = q_in_ready[1];
      CU_NORM: cmd_ready = q_in_ready[2];
      default: cmd_ready = 1'b1;   // unknown kind: dropped
    endcase
  end

  assign img_cmd  = q_head[0];
  assign mel_cmd  = q_head[1];
  assign norm_cmd = q_head[2];

  // ---- pick the lowest idle CU of each type
  function automatic int first_cu(input int k);
    return (k == 0) ? 0 : (k == 1) ? int'(NI) : int'(NI + NM);
  endfunction
  function automatic int num_cu(input int k);
    return (k == 0) ? int'(NI) : (k == 1) ? int'(NM) : int'(NN);
  endfunction

  logic found;
  always_comb begin
    found = 1'b0;
    for (int i = 0; i < int'(NT); i++) start[i] = 1'b0;
    for (int k = 0; k < 3; k++) begin
      found = 1'b0;
      for (int i = first_cu(k); i < first_cu(k) + num_cu(k); i++) begin
        if (!found && !assigned[i] && q_out_valid[k]) begin
          start[i] = 1'b1;
          found    = 1'b1;
        end
      end
      q_out_ready[k] = found;
      blocked[k]     = q_out_valid[k] && !found;
    end
  end

  // ---- completions
  logic   cq_in_valid, cq_in_ready;
  cpl_t   cq_in;
  logic   [$clog2(NT)-1:0] pick;
  always_comb begin
    cq_in_valid = 1'b0;
    pick        = '0;
    for (int i = int'(NT) - 1; i >= 0; i--) begin
      if (pend[i]) begin
        cq_in_valid = 1'b1;
        pick        = ($clog2(NT))'(i);
      end
    end
    cq_in.kind   = (int'(pick) < int'(NI)) ? CU_IMG : (int'(pick) < int'(NI + NM)) ? CU_MEL : CU_NORM;
    cq_in.tag    = tagr[pick];
    cq_in.result = res[pick];
  end

  sync_fifo #(.W($bits(cpl_t)), .DEPTH(QDEPTH)) u_cq (
    .clk, .rst_n,
    .in_valid(cq_in_valid), .in_ready(cq_in_ready), .in_data(cq_in),
    .out_valid(cpl_valid), .out_ready(cpl_ready), .out_data(cpl),
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NT); i++) begin
        assigned[i] <= 1'b0;
        pend[i]     <= 1'b0;
        tagr[i]     <= '0;
        res[i]      <= '0;
      end
    end else begin
      for (int i = 0; i < int'(NT); i++) begin
        if (start[i]) begin
          assigned[i] <= 1'b1;
          tagr[i]     <= (i < int'(NI)) ? q_head[0].tag : (i < int'(NI + NM)) ? q_head[1].tag : q_head[2].tag;
        end
        if (done[i] && assigned[i]) begin
          pend[i] <= 1'b1;
          res[i]  <= result[i];
        end
      end
      if (cq_in_valid && cq_in_ready) begin
        pend[pick]     <= 1'b0;
        assigned[pick] <= 1'b0;
      end
    end
  end

  // a CU may only finish work it was given
  for (genvar i = 0; i < int'(NT); i++) begin : g_chk
    a_done_assigned: assert property (@(posedge clk) disable iff (!rst_n)
      done[i] |-> assigned[i]);
  end
endmodule
