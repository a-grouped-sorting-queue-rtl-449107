// tb_su_control -- exhaustive check of the shift/set control for M = 4.
//
// For every insertion point p (0..M, thermometer flag_i), every deletion
// point (none or one-hot hit_i) and both values of next_flag_i, the expected
// result is computed by list manipulation: take the slot indices 0..M-1,
// delete r, insert a marker for the new element before old index p (or at
// the tail if p = M and next_flag_i with a deletion), append a marker for
// the next unit's head if one place is free, cut to M. Each new slot then
// names its source, which must match the one-hot enables: the new element
// (set), slot j-1 (left), slot j+1 or the next head (right) or itself.
module tb_su_control;

  localparam int M = 4;
  localparam int E_MARK = 100;   // new element
  localparam int N_MARK = 200;   // next unit's head

  logic [M-1:0] flag, hit, set_en, left_en, right_en;
  logic         next_flag, ins_here, del_here;
  int checks = 0, failures = 0;

  su_control #(.M(M)) dut (
    .flag_i(flag), .next_flag_i(next_flag), .hit_i(hit),
    .set_en_o(set_en), .left_en_o(left_en), .right_en_o(right_en),
    .ins_here_o(ins_here), .del_here_o(del_here)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s flag=%b hit=%b next=%0d set=%b left=%b right=%b", what, flag, hit, next_flag, set_en, left_en, right_en);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p <= M; p++)
      for (int r = -1; r < M; r++)
        for (int nf = 0; nf < 2; nf++) begin
          int lst[$];
          bit ins, del;
          flag      = '0;
          for (int j = 0; j < M; j++) if (j >= p) flag[j] = 1'b1;
          hit       = (r < 0) ? '0 : M'(1 << r);
          next_flag = nf[0];
          #1;
          lst = {};
          for (int j = 0; j < M; j++) lst.push_back(j);
          del = (r >= 0);
          if (del) lst.delete(r);
          ins = (p < M) || (del && nf == 1);
          if (ins) begin
            int pos;
            pos = (p < M) ? p : M;
            if (del && r < pos) pos--;
            lst.insert(pos, E_MARK);
          end
          if (lst.size() < M) lst.push_back(N_MARK);
          while (lst.size() > M) void'(lst.pop_back());
          check(ins_here == ins, "ins_here");
          check(del_here == del, "del_here");
          for (int j = 0; j < M; j++) begin
            bit es, el, er;
            es = (lst[j] == E_MARK);
            el = (lst[j] == j - 1);
            er = (lst[j] == j + 1) || (lst[j] == N_MARK);
            check(set_en[j] == es && left_en[j] == el && right_en[j] == er,
                  $sformatf("enables of slot %0d", j));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
