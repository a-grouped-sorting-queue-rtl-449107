// timer_ctrl -- reference timer and request scheduling for the timer queue.
//
// Keeps the reference timer R_t, a DW-bit counter that advances by one every
// P clock cycles (P is the timing precision in clocks). A flow event
// (pkt_valid_i) becomes a push of {pkt_id_i, R_t + timeout_i}; the sum is
// taken modulo 2^DW, so an expiration time may wrap, and the queue's group
// sorting puts it behind the unwrapped ones. Because the ID is already
// queued for an active flow, the push is an update of that flow's timer.
// The queue head has expired when R_t has moved past its DATA; with wrapping
// values this is tested as 0 < (R_t - DATA) mod 2^DW < 2^(DW-1), which is
// plain "DATA < R_t" when nothing wrapped. An expired head is popped.
// Optional removes (rm_valid_i) delete a flow's timer.
// Requests are granted round robin (pop, push, remove), so under load pops
// and pushes alternate, one per queue slot of 3 cycles.
// Follows the paper: R_t + TO, P-cycle precision, "pop when the head time is
// below R_t", alternating push and pop. This design's own: the wrap-safe
// expiry test, the round-robin order with removes, valid/ready handshakes.
// Timing: requests go to the queue combinationally (q_valid_o/q_ready_i);
// pkt_ready_o / rm_ready_o are high in the cycle the queue takes them.
module timer_ctrl
  import gsq_pkg::*;
#(
  parameter int unsigned IDW = 12,
  parameter int unsigned DW  = 16,   // timer width W_r
  parameter int unsigned WO  = 14,   // timeout width W_o, DW > WO + 1
  parameter int unsigned P   = 6     // clocks per timer tick
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [WO-1:0]  timeout_i,     // TO, in timer ticks
  // flow events (enqueue / update)
  input  logic           pkt_valid_i,
  output logic           pkt_ready_o,
  input  logic [IDW-1:0] pkt_id_i,
  // timer deletions
  input  logic           rm_valid_i,
  output logic           rm_ready_o,
  input  logic [IDW-1:0] rm_id_i,
  // queue request port
  output logic           q_valid_o,
  input  logic           q_ready_i,
  output logic           q_push_o,
  output logic           q_remove_o,
  output logic           q_pop_o,
  output logic [IDW-1:0] q_id_o,
  output logic [DW-1:0]  q_data_o,
  // queue head
  input  logic           head_valid_i,
  input  logic [DW-1:0]  head_data_i,
  // status
  output logic [DW-1:0]  rt_o,
  output logic           expired_o
);

  localparam int unsigned PCW = (P > 1) ? $clog2(P) : 1;

  logic [PCW-1:0] presc;
  logic [DW-1:0]  rt;
  logic [DW-1:0]  age;
  grant_e         last_grant, grant;
  logic           any_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      presc <= '0;
      rt    <= '0;
    end else if (presc == PCW'(P - 1)) begin
      presc <= '0;
      rt    <= rt + 1'b1;
    end else begin
      presc <= presc + 1'b1;
    end
  end

  always_comb begin
    age       = rt - head_data_i;
    expired_o = head_valid_i && (age != '0) && !age[DW-1];
  end

  // round robin: the request after the last granted one goes first
  always_comb begin
    logic [2:0] req;
    req     = {rm_valid_i, pkt_valid_i, expired_o};  // index = grant_e value
    any_req = |req;
    grant   = GRANT_POP;
    unique case (last_grant)
      GRANT_POP:    grant = req[1] ? GRANT_PUSH   : req[2] ? GRANT_REMOVE : GRANT_POP;
      GRANT_PUSH:   grant = req[2] ? GRANT_REMOVE : req[0] ? GRANT_POP    : GRANT_PUSH;
      default:      grant = req[0] ? GRANT_POP    : req[1] ? GRANT_PUSH   : GRANT_REMOVE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       last_grant <= GRANT_REMOVE;
    else if (any_req && q_ready_i)    last_grant <= grant;
  end

  always_comb begin
    q_valid_o   = any_req;
    q_pop_o     = (grant == GRANT_POP);
    q_push_o    = (grant == GRANT_PUSH);
    q_remove_o  = (grant == GRANT_REMOVE);
    q_id_o      = (grant == GRANT_REMOVE) ? rm_id_i : pkt_id_i;
    q_data_o    = rt + DW'(timeout_i);
    pkt_ready_o = q_ready_i && (grant == GRANT_PUSH);
    rm_ready_o  = q_ready_i && (grant == GRANT_REMOVE);
  end

  assign rt_o = rt;

  if (DW <= WO + 1) begin : g_bad_width
    $error("timer_ctrl: the timer width must exceed the timeout width by 2 or more");
  end

endmodule
