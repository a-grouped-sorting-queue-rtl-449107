// tb_overflow_cmp -- exhaustive check of the group-sorting comparator at
// DW = 5: every push value, resident value and head-group bit. The expected
// result is worked out by mapping each value to a key in which the head's
// group comes first (flip the MSB when the head group is the upper half)
// and comparing keys; this must equal the comparator's output.
module tb_overflow_cmp;

  localparam int unsigned DW = 5;

  logic [DW-1:0] push_data, hold_data;
  logic          highest, flag;
  int checks = 0, failures = 0;

  overflow_cmp #(.DW(DW)) dut (
    .push_data_i(push_data), .highest_i(highest), .hold_data_i(hold_data),
    .push_data_flag_o(flag)
  );

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < (1 << DW); a++)
        for (int b = 0; b < (1 << DW); b++) begin
          logic [DW-1:0] ka, kb;
          push_data = DW'(a);
          hold_data = DW'(b);
          highest   = h[0];
          #1;
          ka = push_data ^ {highest, {(DW-1){1'b0}}};
          kb = hold_data ^ {highest, {(DW-1){1'b0}}};
          checks++;
          if (flag !== (ka < kb)) begin
            failures++;
            $display("FAIL push=%0d hold=%0d highest=%0d flag=%0d", a, b, h, flag);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
