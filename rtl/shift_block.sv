// shift_block -- one slot of the queue.
//
// Holds one element {ID, DATA}. ID 0 marks an empty slot and an empty slot
// holds DATA all ones; that is also the reset value. Every cycle the slot
// reports two search results for the operation on the buses of its unit:
//   cmp_flag_o : the element on the push bus goes ahead of this slot
//                (always true for an empty slot, otherwise overflow_cmp);
//   id_hit_o   : this slot holds the ID on the remove bus.
// One cycle later the unit's control applies at most one of
//   set_en   : load the new element,
//   left_en  : load the element of the head-side neighbour (elements move
//              one place towards the tail, used by insertion),
//   right_en : load the element of the tail-side neighbour (elements move one
//              place towards the head, used by deletion).
// Enable names follow the paper's figure, where the head is drawn on the
// right; the explicit empty test follows the text's "until the first empty
// slot". Timing: search is combinational, the update takes effect at the
// clock edge on which an enable is high.
module shift_block #(
  parameter int unsigned IDW = 12,
  parameter int unsigned DW  = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  // search buses
  input  logic [DW-1:0]  push_data_i,
  input  logic           highest_i,
  input  logic [IDW-1:0] remove_id_i,
  output logic           cmp_flag_o,
  output logic           id_hit_o,
  // shift and set
  input  logic           set_en_i,
  input  logic           left_en_i,
  input  logic           right_en_i,
  input  logic [IDW-1:0] set_id_i,
  input  logic [DW-1:0]  set_data_i,
  input  logic [IDW-1:0] head_side_id_i,   // neighbour nearer the head
  input  logic [DW-1:0]  head_side_data_i,
  input  logic [IDW-1:0] tail_side_id_i,   // neighbour nearer the tail
  input  logic [DW-1:0]  tail_side_data_i,
  // contents
  output logic [IDW-1:0] hold_id_o,
  output logic [DW-1:0]  hold_data_o
);

  logic [IDW-1:0] hold_id_r;
  logic [DW-1:0]  hold_data_r;
  logic           lt_flag;

  overflow_cmp #(.DW(DW)) u_cmp (
    .push_data_i     (push_data_i),
    .highest_i       (highest_i),
    .hold_data_i     (hold_data_r),
    .push_data_flag_o(lt_flag)
  );

  assign cmp_flag_o  = (hold_id_r == '0) || lt_flag;
  assign id_hit_o    = (hold_id_r != '0) && (hold_id_r == remove_id_i);
  assign hold_id_o   = hold_id_r;
  assign hold_data_o = hold_data_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_id_r   <= '0;
      hold_data_r <= '1;
    end else if (set_en_i) begin
      hold_id_r   <= set_id_i;
      hold_data_r <= set_data_i;
    end else if (left_en_i) begin
      hold_id_r   <= head_side_id_i;
      hold_data_r <= head_side_data_i;
    end else if (right_en_i) begin
      hold_id_r   <= tail_side_id_i;
      hold_data_r <= tail_side_data_i;
    end
  end

  // At most one of the three enables may be active.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      a_one_enable: assert (!((set_en_i && left_en_i) || (set_en_i && right_en_i) ||
                              (left_en_i && right_en_i)))
        else $error("shift_block: more than one enable");
    end
  end

endmodule
