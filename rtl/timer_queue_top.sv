// timer_queue_top -- hardware timer queue for flow-table timeouts.
//
// A timer_ctrl in front of a gs_queue. Each flow event names a flow ID; its
// timer is (re)armed to expire timeout_i ticks of the reference timer later,
// replacing any earlier expiration of the same flow in a single queue
// operation (update). When the earliest timer has expired it is dequeued and
// reported on exp_valid_o / exp_id_o / exp_data_o. The reference timer has
// a fixed width and wraps; group sorting in the queue keeps the expiry order
// correct across the wrap as long as the timeout is below a quarter of the
// timer range (DW > WO + 1).
// Defaults: 4096 entries (N = 2048 units of M = 2), 12-bit flow IDs, 16-bit
// timer, 6 clocks per tick (12 ns at 500 MHz), as in the paper's main
// configuration and use case; the 14-bit timeout width is the largest the
// group rule allows at DW = 16.
// Timing: the queue accepts one request every 3 clocks; an expiration is
// reported one clock after its pop is issued.
module timer_queue_top #(
  parameter int unsigned IDW = 12,
  parameter int unsigned DW  = 16,
  parameter int unsigned WO  = 14,
  parameter int unsigned N   = 2048,
  parameter int unsigned M   = 2,
  parameter int unsigned P   = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [WO-1:0]  timeout_i,
  input  logic           pkt_valid_i,
  output logic           pkt_ready_o,
  input  logic [IDW-1:0] pkt_id_i,
  input  logic           rm_valid_i,
  output logic           rm_ready_o,
  input  logic [IDW-1:0] rm_id_i,
  output logic           exp_valid_o,
  output logic [IDW-1:0] exp_id_o,
  output logic [DW-1:0]  exp_data_o,
  output logic [DW-1:0]  rt_o,
  output logic           next_valid_o,  // earliest queued timer
  output logic [IDW-1:0] next_id_o,
  output logic [DW-1:0]  next_data_o,
  output logic           next_expired_o,
  output logic           drop_valid_o,
  output logic [IDW-1:0] drop_id_o,
  output logic [DW-1:0]  drop_data_o,
  output logic           id_miss_o
);

  logic           q_valid, q_ready, q_push, q_remove, q_pop;
  logic [IDW-1:0] q_id;
  logic [DW-1:0]  q_data;
  logic           head_valid;
  logic [IDW-1:0] head_id;
  logic [DW-1:0]  head_data;

  timer_ctrl #(.IDW(IDW), .DW(DW), .WO(WO), .P(P)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .timeout_i   (timeout_i),
    .pkt_valid_i (pkt_valid_i),
    .pkt_ready_o (pkt_ready_o),
    .pkt_id_i    (pkt_id_i),
    .rm_valid_i  (rm_valid_i),
    .rm_ready_o  (rm_ready_o),
    .rm_id_i     (rm_id_i),
    .q_valid_o   (q_valid),
    .q_ready_i   (q_ready),
    .q_push_o    (q_push),
    .q_remove_o  (q_remove),
    .q_pop_o     (q_pop),
    .q_id_o      (q_id),
    .q_data_o    (q_data),
    .head_valid_i(head_valid),
    .head_data_i (head_data),
    .rt_o        (rt_o),
    .expired_o   (next_expired_o)
  );

  gs_queue #(.IDW(IDW), .DW(DW), .N(N), .M(M)) u_queue (
    .clk         (clk),
    .rst_n       (rst_n),
    .op_valid_i  (q_valid),
    .op_ready_o  (q_ready),
    .push_i      (q_push),
    .remove_i    (q_remove),
    .pop_i       (q_pop),
    .id_i        (q_id),
    .data_i      (q_data),
    .head_valid_o(head_valid),
    .head_id_o   (head_id),
    .head_data_o (head_data),
    .pop_valid_o (exp_valid_o),
    .pop_id_o    (exp_id_o),
    .pop_data_o  (exp_data_o),
    .drop_valid_o(drop_valid_o),
    .drop_id_o   (drop_id_o),
    .drop_data_o (drop_data_o),
    .id_miss_o   (id_miss_o)
  );

  assign next_valid_o = head_valid;
  assign next_id_o    = head_id;
  assign next_data_o  = head_data;

endmodule
