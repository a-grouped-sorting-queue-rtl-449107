// tb_interface_register -- random check of the inter-unit register.
//
// Every cycle drives random operation flags (legal combinations only),
// buses and load. One cycle later the register must show a valid pulse
// exactly when it was loaded with at least one flag set, the same flags,
// the travelling element for a push or the tail element for a push_first,
// the remove ID and the head-group bit. Without a load the valid bit and
// the flags must be zero.
module tb_interface_register;

  import gsq_pkg::*;

  localparam int unsigned IDW = 6;
  localparam int unsigned DW  = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, highest = 1'b0, highest_o, valid_o;
  op_flags_t prop = '0, op_o;
  logic [IDW-1:0] eid = '0, tid = '0, rid = '0, pid_o, rid_o;
  logic [DW-1:0]  edata = '0, tdata = '0, pdata_o;
  int checks = 0, failures = 0, n_pf = 0, n_push = 0;

  interface_register #(.IDW(IDW), .DW(DW)) dut (
    .clk, .rst_n, .load_i(load), .prop_i(prop),
    .elem_id_i(eid), .elem_data_i(edata), .tail_id_i(tid), .tail_data_i(tdata),
    .remove_id_i(rid), .highest_i(highest),
    .op_valid_o(valid_o), .op_o(op_o), .push_id_o(pid_o), .push_data_o(pdata_o),
    .remove_id_o(rid_o), .highest_o(highest_o)
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
    repeat (2) @(negedge clk);
    check(valid_o == 1'b0 && op_o == '0, "reset");
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      op_flags_t f;
      bit fire;
      int ins, del;
      ins = $urandom_range(0, 2);
      del = $urandom_range(0, 2);
      f.push = (ins == 1); f.push_first = (ins == 2);
      f.pop  = (del == 1); f.remove     = (del == 2);
      prop = f;
      load = ($urandom_range(0, 3) != 0);
      eid = IDW'($urandom); edata = DW'($urandom);
      tid = IDW'($urandom); tdata = DW'($urandom);
      rid = IDW'($urandom); highest = 1'($urandom);
      fire = load && (f != '0);
      @(negedge clk);
      check(valid_o == fire, "valid pulse");
      if (fire) begin
        check(op_o == f, "flags");
        if (f.push_first) begin
          check(pid_o == tid && pdata_o == tdata, "push_first carries tail");
          n_pf++;
        end else if (f.push) begin
          check(pid_o == eid && pdata_o == edata, "push carries element");
          n_push++;
        end
        check(rid_o == rid && highest_o == highest, "remove ID and highest");
      end else begin
        check(op_o == '0, "flags cleared");
      end
    end
    check(n_pf > 0 && n_push > 0, "both element sources used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
