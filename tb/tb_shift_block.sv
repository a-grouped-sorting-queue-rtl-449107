// tb_shift_block -- random check of one queue slot.
//
// Applies random single enables (set, head-side load, tail-side load or
// none) with random bus values and checks the held element against a
// shadow copy after every clock, the reset value (ID 0, DATA all ones), the
// ID match (never on an empty slot or ID 0) and the comparison flag
// (always 1 on an empty slot, otherwise the group rule on a key in which
// the head's group comes first).
module tb_shift_block;

  localparam int unsigned IDW = 4;
  localparam int unsigned DW  = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [DW-1:0]  push_data, set_data, hs_data, ts_data, hold_data;
  logic [IDW-1:0] remove_id, set_id, hs_id, ts_id, hold_id;
  logic highest, set_en = 1'b0, left_en = 1'b0, right_en = 1'b0, cmp_flag, id_hit;
  logic [IDW-1:0] m_id;
  logic [DW-1:0]  m_data;
  int checks = 0, failures = 0;
  int n_set = 0, n_left = 0, n_right = 0;

  shift_block #(.IDW(IDW), .DW(DW)) dut (
    .clk, .rst_n,
    .push_data_i(push_data), .highest_i(highest), .remove_id_i(remove_id),
    .cmp_flag_o(cmp_flag), .id_hit_o(id_hit),
    .set_en_i(set_en), .left_en_i(left_en), .right_en_i(right_en),
    .set_id_i(set_id), .set_data_i(set_data),
    .head_side_id_i(hs_id), .head_side_data_i(hs_data),
    .tail_side_id_i(ts_id), .tail_side_data_i(ts_data),
    .hold_id_o(hold_id), .hold_data_o(hold_data)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_data = '0; set_data = '0; hs_data = '0; ts_data = '0;
    remove_id = '0; set_id = '0; hs_id = '0; ts_id = '0; highest = 1'b0;
    repeat (2) @(negedge clk);
    check(hold_id == '0 && hold_data == '1, "reset value");
    check(cmp_flag == 1'b1, "empty slot flag");
    rst_n = 1'b1;
    m_id = '0; m_data = '1;
    for (int i = 0; i < 4000; i++) begin
      int sel;
      logic [DW-1:0] ka, kb;
      // search side, checked against the present contents
      push_data = DW'($urandom);
      highest   = 1'($urandom);
      remove_id = ($urandom_range(0, 3) == 0) ? m_id : IDW'($urandom);
      #1;
      ka = push_data ^ {highest, {(DW-1){1'b0}}};
      kb = m_data    ^ {highest, {(DW-1){1'b0}}};
      check(hold_id == m_id && hold_data == m_data, "held element");
      check(cmp_flag == ((m_id == '0) || (ka < kb)), "compare flag");
      check(id_hit == ((m_id != '0) && (remove_id == m_id)), "ID match");
      // update side
      sel = $urandom_range(0, 3);
      set_id  = IDW'($urandom); set_data = DW'($urandom);
      hs_id   = IDW'($urandom); hs_data  = DW'($urandom);
      ts_id   = IDW'($urandom); ts_data  = DW'($urandom);
      set_en  = (sel == 1); left_en = (sel == 2); right_en = (sel == 3);
      @(negedge clk);
      case (sel)
        1: begin m_id = set_id; m_data = set_data; n_set++;   end
        2: begin m_id = hs_id;  m_data = hs_data;  n_left++;  end
        3: begin m_id = ts_id;  m_data = ts_data;  n_right++; end
        default: ;
      endcase
      set_en = 1'b0; left_en = 1'b0; right_en = 1'b0;
    end
    check(n_set > 0 && n_left > 0 && n_right > 0, "all loads exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
