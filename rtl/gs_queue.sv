// gs_queue -- grouped sorting priority queue with update support.
//
// N systolic units of M shift blocks each hold up to N*M elements {ID, DATA}
// in order of increasing DATA (the head, slot 0 of unit 0, has the smallest
// value), subject to group sorting: the MSB of DATA splits the values into
// two groups and the group of the current head is served first, so that
// expiration times that wrapped around the timer width queue up behind the
// not-yet-wrapped ones.
//
// Operations (exactly one per accepted request):
//   push   : enqueue {id_i, data_i}; if id_i is already queued its old entry
//            is removed in the same pass (update). Sent down the array as
//            push + remove(id_i).
//   remove : delete the entry with ID id_i, if any.
//   pop    : dequeue the head; it appears on pop_*_o one cycle later.
// IDs must be non-zero (ID 0 marks an empty slot).
//
// Timing: a request is accepted when op_valid_i and op_ready_o are both
// high. Unit 0 searches in the accept cycle and shifts in the next; the head
// outputs are up to date again two cycles after an accept, and op_ready_o
// returns three cycles after it, so the queue takes one operation every
// 3 clocks, independent of N and M. An operation reaches unit k k cycles
// after it was accepted.
// Status: drop_valid_o reports an element pushed out of the last unit (the
// queue was full); id_miss_o reports a remove (or the removal half of a
// push, i.e. a fresh enqueue) whose ID was not found in any unit.
// The array structure and defaults (4K entries as N=2048, M=2, 12-bit ID,
// 16-bit DATA) follow the paper; the request handshake and the status
// outputs are this design's own.
module gs_queue
  import gsq_pkg::*;
#(
  parameter int unsigned IDW = 12,     // ID width
  parameter int unsigned DW  = 16,     // DATA (timer) width W_r
  parameter int unsigned N   = 2048,   // systolic units
  parameter int unsigned M   = 2       // shift blocks per unit, M >= 2
) (
  input  logic           clk,
  input  logic           rst_n,
  // request
  input  logic           op_valid_i,
  output logic           op_ready_o,
  input  logic           push_i,
  input  logic           remove_i,
  input  logic           pop_i,
  input  logic [IDW-1:0] id_i,
  input  logic [DW-1:0]  data_i,
  // head of the queue (peek)
  output logic           head_valid_o,
  output logic [IDW-1:0] head_id_o,
  output logic [DW-1:0]  head_data_o,
  // dequeued element
  output logic           pop_valid_o,
  output logic [IDW-1:0] pop_id_o,
  output logic [DW-1:0]  pop_data_o,
  // status
  output logic           drop_valid_o,
  output logic [IDW-1:0] drop_id_o,
  output logic [DW-1:0]  drop_data_o,
  output logic           id_miss_o
);

  localparam int unsigned OP_CYCLES = 3;

  // operation buses, index k feeds unit k, index N leaves the last unit
  logic           op_valid  [N+1];
  op_flags_t      op        [N+1];
  logic [IDW-1:0] push_id   [N+1];
  logic [DW-1:0]  push_data [N+1];
  logic [IDW-1:0] remove_id [N+1];
  logic           highest   [N+1];
  // head of unit k; index N is the empty place behind the last unit
  logic [IDW-1:0] first_id   [N+1];
  logic [DW-1:0]  first_data [N+1];

  logic [1:0] busy_cnt;
  logic       accept;

  assign op_ready_o = (busy_cnt == '0);
  assign accept     = op_valid_i && op_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          busy_cnt <= '0;
    else if (accept)     busy_cnt <= 2'(OP_CYCLES - 1);
    else if (busy_cnt != '0) busy_cnt <= busy_cnt - 2'd1;
  end

  always_comb begin
    op_valid[0]       = accept;
    op[0].push        = push_i;
    op[0].push_first  = 1'b0;
    op[0].pop         = pop_i;
    op[0].remove      = push_i || remove_i;
    push_id[0]        = id_i;
    push_data[0]      = data_i;
    remove_id[0]      = id_i;
    highest[0]        = first_data[0][DW-1];
  end

  assign first_id[N]   = '0;
  assign first_data[N] = '1;

  for (genvar k = 0; k < N; k++) begin : g_unit
    systolic_unit #(.IDW(IDW), .DW(DW), .M(M)) u_su (
      .clk         (clk),
      .rst_n       (rst_n),
      .op_valid_i  (op_valid[k]),
      .op_i        (op[k]),
      .push_id_i   (push_id[k]),
      .push_data_i (push_data[k]),
      .remove_id_i (remove_id[k]),
      .highest_i   (highest[k]),
      .first_id_i  (first_id[k+1]),
      .first_data_i(first_data[k+1]),
      .first_id_o  (first_id[k]),
      .first_data_o(first_data[k]),
      .op_valid_o  (op_valid[k+1]),
      .op_o        (op[k+1]),
      .push_id_o   (push_id[k+1]),
      .push_data_o (push_data[k+1]),
      .remove_id_o (remove_id[k+1]),
      .highest_o   (highest[k+1])
    );
  end

  assign head_valid_o = (first_id[0] != '0);
  assign head_id_o    = first_id[0];
  assign head_data_o  = first_data[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pop_valid_o <= 1'b0;
    else        pop_valid_o <= accept && pop_i && head_valid_o;
  end

  always_ff @(posedge clk) begin
    if (accept && pop_i) begin
      pop_id_o   <= first_id[0];
      pop_data_o <= first_data[0];
    end
  end

  // Whatever leaves the last unit: an element that found no place, or a
  // remove that found no ID.
  always_comb begin
    drop_valid_o = op_valid[N] && (op[N].push || op[N].push_first);
    drop_id_o    = push_id[N];
    drop_data_o  = push_data[N];
    id_miss_o    = op_valid[N] && op[N].remove;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (op_valid_i) begin
      a_one_op: assert ((2'(push_i) + 2'(remove_i) + 2'(pop_i)) == 2'd1)
        else $error("gs_queue: a request must be exactly one of push, remove, pop");
      a_id_nonzero: assert (pop_i || (id_i != '0))
        else $error("gs_queue: ID 0 is reserved for empty slots");
    end
  end

  if (M < 2) begin : g_bad_m
    $error("gs_queue: M must be at least 2");
  end

endmodule
