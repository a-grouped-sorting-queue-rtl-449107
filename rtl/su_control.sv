// su_control -- shift/set control of one systolic unit ("Control").
//
// Turns the search results of the M slots into one enable per slot. Slot 0
// is nearest the queue head. Inputs:
//   flag_i[j]   : the inserted element goes ahead of slot j. The slots are
//                 kept in order, so the vector is a thermometer code 0..01..1;
//                 its first 1 is the insertion point p. All ones for
//                 push_first, all zeros when there is no insertion.
//   next_flag_i : the inserted element goes ahead of the head of the next
//                 unit (Next_CMP); only used when this unit also deletes.
//   hit_i[j]    : one-hot deletion point r (ID match for remove, slot 0 for
//                 pop), all zeros when nothing is deleted here.
// The result is the order "old slots minus slot r, new element before old
// slot p, tail filled from the next unit's head if one place is left over":
//   p <= r : set slot p, slots p+1..r take their head-side neighbour;
//   p >  r : slots r..p-2 take their tail-side neighbour, set slot p-1;
//   no insertion here : slots r..M-1 take their tail-side neighbour (slot M-1
//            takes the next unit's head).
// These are written as AND/OR terms of the thermometer and of the prefix OR
// of hit_i, as the paper describes ("Boolean logic operations"); the exact
// terms are this design's own. ins_here_o / del_here_o tell the unit which
// row of the operation propagation table applies. Purely combinational.
// left_en_o[0] is constant 0: slot 0 has no head-side neighbour in the unit,
// and an element entering at the head arrives through set_en_o[0].
module su_control #(
  parameter int unsigned M = 2    // shift blocks per systolic unit (M >= 2)
) (
  input  logic [M-1:0] flag_i,
  input  logic         next_flag_i,
  input  logic [M-1:0] hit_i,
  output logic [M-1:0] set_en_o,
  output logic [M-1:0] left_en_o,   // load head-side neighbour (move to tail)
  output logic [M-1:0] right_en_o,  // load tail-side neighbour (move to head)
  output logic         ins_here_o,  // insertion lands in this unit
  output logic         del_here_o   // deletion happens in this unit
);

  logic [M:0]   f_ext;   // flag_i extended by the next unit's head
  logic [M-1:0] del_pre; // del_pre[j] = deletion point at or before slot j

  always_comb begin
    del_here_o = |hit_i;
    begin
      logic acc;
      acc = 1'b0;
      for (int j = 0; j < M; j++) begin
        acc        = acc | hit_i[j];
        del_pre[j] = acc;
      end
    end
    f_ext[M-1:0] = flag_i;
    f_ext[M]     = flag_i[M-1] | (del_here_o & next_flag_i);
    ins_here_o   = f_ext[M];

    for (int j = 0; j < M; j++) begin
      logic f_prev, d_prev;
      f_prev = (j == 0) ? 1'b0 : f_ext[j-1];
      d_prev = (j == 0) ? 1'b0 : del_pre[j-1];
      set_en_o[j]   = (f_ext[j] & ~f_prev & ~d_prev) |
                      (f_ext[j+1] & ~f_ext[j] & del_pre[j]);
      left_en_o[j]  = f_prev & ~d_prev;
      right_en_o[j] = del_pre[j] & ~f_ext[j+1];
    end
  end

endmodule
