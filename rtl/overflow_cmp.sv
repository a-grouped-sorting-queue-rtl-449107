// overflow_cmp -- group-sorting comparator ("CMP" / Next_CMP).
//
// Decides whether an incoming element goes ahead of (has higher priority
// than) a resident element. Priority is the timer value DATA: smaller is
// earlier. The DATA range is split at its MSB into two groups; the group that
// holds the queue head is served first. Hence:
//   * both MSBs equal  -> ordinary comparison, push_data < hold_data;
//   * MSBs differ      -> the incoming element goes first exactly when its
//                         MSB equals the head's MSB (highest_i).
// With the MSB as group flag, an expiration time that wrapped past 2^DW sorts
// behind every element of the not-yet-wrapped group, which is what keeps the
// dequeue order right across timer overflow.
//
// The ports (Push_data_i, Highest_i, Hold_data_r, Push_data_flag_o), the
// strict "<" and the MSB as group flag are those of the paper's overflow
// control comparator; the result for differing MSBs is derived from its
// enqueue sorting rule table. Strict "<" keeps FIFO order among equal values.
// Purely combinational.
module overflow_cmp #(
  parameter int unsigned DW = 16   // DATA (timer) width W_r
) (
  input  logic [DW-1:0] push_data_i,      // DATA of the incoming element
  input  logic          highest_i,        // MSB of the queue head's DATA
  input  logic [DW-1:0] hold_data_i,      // DATA of the resident element
  output logic          push_data_flag_o  // 1: incoming element goes ahead
);

  logic same_group;

  always_comb begin
    same_group = (push_data_i[DW-1] == hold_data_i[DW-1]);
    if (same_group) push_data_flag_o = (push_data_i < hold_data_i);
    else            push_data_flag_o = (push_data_i[DW-1] == highest_i);
  end

endmodule
