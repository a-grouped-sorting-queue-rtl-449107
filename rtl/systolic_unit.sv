// systolic_unit -- one stage of the 1D systolic array: M shift blocks,
// a Next_CMP comparator, the shift/set control and an interface register.
//
// The unit executes one operation in two working phases, one clock each:
//   search      (op_valid_i high): every slot compares the push bus against
//               its element (group-sorting comparator, compare_flag) and the
//               remove bus against its ID; Next_CMP compares the push bus
//               against the head of the next unit (first_*_i). su_control
//               turns this into set/left/right enables, which are registered,
//               and the operations for the next unit are loaded into the
//               interface register.
//   set & shift (next cycle): the slots move/load; the tail slot may take the
//               next unit's head (this unit has one free place), which the
//               next unit, searching in this same cycle with a pop, removes
//               one cycle later.
// A third, idle cycle follows before the unit may search again; operations
// therefore enter the queue at most once every 3 cycles, and an operation
// reaches unit k+1 one cycle after unit k. Every head a search looks at is
// then settled: unit k+1 finishes operation i-1 before unit k searches
// operation i.
// Propagation (paper's operation propagation table): insertion and deletion
// both here -> nothing; deletion only -> pop (and push if one is travelling);
// insertion only -> push_first of the evicted tail (and remove if the ID was
// not found); neither -> push and/or remove travel on.
// The structure, the port set and the 3-cycle operation follow the paper;
// the one-cycle offset between neighbouring units is this design's choice
// (the paper's timing figure starts unit k+1 in unit k's third cycle).
module systolic_unit
  import gsq_pkg::*;
#(
  parameter int unsigned IDW = 12,
  parameter int unsigned DW  = 16,
  parameter int unsigned M   = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  // operation from the previous unit (or the queue input)
  input  logic           op_valid_i,
  input  op_flags_t      op_i,
  input  logic [IDW-1:0] push_id_i,
  input  logic [DW-1:0]  push_data_i,
  input  logic [IDW-1:0] remove_id_i,
  input  logic           highest_i,
  // head of the next unit / own head
  input  logic [IDW-1:0] first_id_i,
  input  logic [DW-1:0]  first_data_i,
  output logic [IDW-1:0] first_id_o,
  output logic [DW-1:0]  first_data_o,
  // operation to the next unit
  output logic           op_valid_o,
  output op_flags_t      op_o,
  output logic [IDW-1:0] push_id_o,
  output logic [DW-1:0]  push_data_o,
  output logic [IDW-1:0] remove_id_o,
  output logic           highest_o
);

  logic [IDW-1:0] hold_id   [M];
  logic [DW-1:0]  hold_data [M];
  logic [M-1:0]   cmp_flag, id_hit;
  logic [M-1:0]   flag_g, hit_g;
  logic           next_lt, next_flag;
  logic [M-1:0]   set_en, left_en, right_en;
  logic           ins_here, del_here;
  op_flags_t      prop;

  // registered control for the set & shift phase
  logic [M-1:0]   set_en_r, left_en_r, right_en_r;
  logic [IDW-1:0] set_id_r;
  logic [DW-1:0]  set_data_r;

  for (genvar j = 0; j < M; j++) begin : g_sb
    logic [IDW-1:0] hs_id, ts_id;
    logic [DW-1:0]  hs_data, ts_data;
    if (j == 0) begin : g_head
      assign hs_id   = '0;            // never used: left_en[0] is always 0
      assign hs_data = '1;
    end else begin : g_mid
      assign hs_id   = hold_id[j-1];
      assign hs_data = hold_data[j-1];
    end
    if (j == M-1) begin : g_tail
      assign ts_id   = first_id_i;     // pull from the next unit
      assign ts_data = first_data_i;
    end else begin : g_body
      assign ts_id   = hold_id[j+1];
      assign ts_data = hold_data[j+1];
    end

    shift_block #(.IDW(IDW), .DW(DW)) u_sb (
      .clk             (clk),
      .rst_n           (rst_n),
      .push_data_i     (push_data_i),
      .highest_i       (highest_i),
      .remove_id_i     (remove_id_i),
      .cmp_flag_o      (cmp_flag[j]),
      .id_hit_o        (id_hit[j]),
      .set_en_i        (set_en_r[j]),
      .left_en_i       (left_en_r[j]),
      .right_en_i      (right_en_r[j]),
      .set_id_i        (set_id_r),
      .set_data_i      (set_data_r),
      .head_side_id_i  (hs_id),
      .head_side_data_i(hs_data),
      .tail_side_id_i  (ts_id),
      .tail_side_data_i(ts_data),
      .hold_id_o       (hold_id[j]),
      .hold_data_o     (hold_data[j])
    );
  end

  // Next_CMP: the pushed element against the next unit's head
  overflow_cmp #(.DW(DW)) u_next_cmp (
    .push_data_i     (push_data_i),
    .highest_i       (highest_i),
    .hold_data_i     (first_data_i),
    .push_data_flag_o(next_lt)
  );

  always_comb begin
    next_flag = op_valid_i && op_i.push && ((first_id_i == '0) || next_lt);
    if (op_valid_i && op_i.push)            flag_g = cmp_flag;
    else if (op_valid_i && op_i.push_first) flag_g = '1;
    else                                    flag_g = '0;
    if (op_valid_i && op_i.pop)             hit_g  = M'(1);
    else if (op_valid_i && op_i.remove)     hit_g  = id_hit;
    else                                    hit_g  = '0;
  end

  su_control #(.M(M)) u_ctrl (
    .flag_i     (flag_g),
    .next_flag_i(next_flag),
    .hit_i      (hit_g),
    .set_en_o   (set_en),
    .left_en_o  (left_en),
    .right_en_o (right_en),
    .ins_here_o (ins_here),
    .del_here_o (del_here)
  );

  always_comb begin
    prop.pop        = del_here && !ins_here;
    prop.push       = op_i.push && !ins_here;
    prop.push_first = ins_here && !del_here && (hold_id[M-1] != '0);
    prop.remove     = op_i.remove && !del_here;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_en_r   <= '0;
      left_en_r  <= '0;
      right_en_r <= '0;
    end else begin
      set_en_r   <= set_en;    // all zero when op_valid_i is low
      left_en_r  <= left_en;
      right_en_r <= right_en;
    end
  end

  always_ff @(posedge clk) begin
    if (op_valid_i) begin
      set_id_r   <= push_id_i;
      set_data_r <= push_data_i;
    end
  end

  interface_register #(.IDW(IDW), .DW(DW)) u_ifr (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_i     (op_valid_i),
    .prop_i     (prop),
    .elem_id_i  (push_id_i),
    .elem_data_i(push_data_i),
    .tail_id_i  (hold_id[M-1]),
    .tail_data_i(hold_data[M-1]),
    .remove_id_i(remove_id_i),
    .highest_i  (highest_i),
    .op_valid_o (op_valid_o),
    .op_o       (op_o),
    .push_id_o  (push_id_o),
    .push_data_o(push_data_o),
    .remove_id_o(remove_id_o),
    .highest_o  (highest_o)
  );

  assign first_id_o   = hold_id[0];
  assign first_data_o = hold_data[0];

endmodule
