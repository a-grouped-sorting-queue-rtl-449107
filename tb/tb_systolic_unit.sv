// tb_systolic_unit -- one systolic unit (M = 4) against a list model.
//
// The testbench plays the neighbours of the unit: it issues operations the
// way the previous unit would (push+remove, push+pop, push_first with or
// without remove, remove, pop), keeps IDs unique and presents a "next unit
// head" consistent with the unit's order (empty unless the unit is full).
// For every operation the model takes the slot list, deletes the matching
// ID (or slot 0 for pop), inserts the element before the first slot it goes
// ahead of (group rule; empty slots always lose; push_first at the front;
// after the last slot only if something was deleted and it also beats the
// next head), refills a free place from the next head or evicts the tail.
// Checked: the propagated operation and its buses one cycle after the
// search cycle, that the slots are still unchanged then, the new slots one
// cycle later (the set & shift phase), and the head output.
module tb_systolic_unit;

  import gsq_pkg::*;

  localparam int unsigned IDW = 5;
  localparam int unsigned DW  = 6;
  localparam int unsigned M   = 4;
  localparam logic [DW-2:0] LOW_MAX = '1;

  typedef struct packed {
    logic [IDW-1:0] id;
    logic [DW-1:0]  data;
  } elem_t;

  localparam elem_t EMPTY = '{id: '0, data: '1};

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 1'b0, highest = 1'b0;
  op_flags_t op = '0, op_o;
  logic [IDW-1:0] push_id = '0, remove_id = '0, first_id_i = '0;
  logic [DW-1:0]  push_data = '0, first_data_i = '1;
  logic [IDW-1:0] first_id_o, push_id_o, remove_id_o;
  logic [DW-1:0]  first_data_o, push_data_o;
  logic op_valid_o, highest_o;
  elem_t slots [M];
  elem_t model [M];
  int checks = 0, failures = 0;
  int n_kind [5];
  int n_pf = 0, n_pp = 0, n_next = 0, n_both = 0;

  systolic_unit #(.IDW(IDW), .DW(DW), .M(M)) dut (
    .clk, .rst_n,
    .op_valid_i(op_valid), .op_i(op), .push_id_i(push_id), .push_data_i(push_data),
    .remove_id_i(remove_id), .highest_i(highest),
    .first_id_i(first_id_i), .first_data_i(first_data_i),
    .first_id_o(first_id_o), .first_data_o(first_data_o),
    .op_valid_o(op_valid_o), .op_o(op_o), .push_id_o(push_id_o), .push_data_o(push_data_o),
    .remove_id_o(remove_id_o), .highest_o(highest_o)
  );

  for (genvar j = 0; j < M; j++) begin : g_probe
    assign slots[j].id   = dut.g_sb[j].u_sb.hold_id_o;
    assign slots[j].data = dut.g_sb[j].u_sb.hold_data_o;
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic bit ahead(elem_t e, elem_t s, logic h);
    if (s.id == '0) return 1'b1;
    return (e.data ^ {h, {(DW-1){1'b0}}}) < (s.data ^ {h, {(DW-1){1'b0}}});
  endfunction

  function automatic bit id_used(logic [IDW-1:0] x, elem_t nh);
    if (x == '0 || x == nh.id) return 1'b1;
    foreach (model[j]) if (model[j].id == x) return 1'b1;
    return 1'b0;
  endfunction

  function automatic logic [IDW-1:0] fresh_id(elem_t nh);
    logic [IDW-1:0] x;
    do x = IDW'($urandom); while (id_used(x, nh));
    return x;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[j]) model[j] = EMPTY;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 6000; i++) begin
      int kind, del_at, pos;
      elem_t nh, e, lst[$], evicted;
      op_flags_t f, pf;
      logic h;
      bit ins_here;
      // next unit's head, consistent with this unit's order
      nh = EMPTY;
      if (model[M-1].id != '0 && $urandom_range(0, 2) != 0) begin
        nh.data = model[M-1].data;
        nh.data[DW-2:0] = (model[M-1].data[DW-2:0] > LOW_MAX - 3) ? LOW_MAX
                        : model[M-1].data[DW-2:0] + (DW-1)'($urandom_range(0, 3));
        nh.id = fresh_id(EMPTY);
      end
      first_id_i = nh.id; first_data_i = nh.data;
      h = (model[0].id != '0) ? model[0].data[DW-1] : 1'($urandom);
      // operation: 0 push+remove, 1 push+pop, 2 push_first(+remove), 3 remove, 4 pop
      kind = $urandom_range(0, 4);
      n_kind[kind]++;
      f = '0;
      e.id = fresh_id(nh);
      e.data = DW'($urandom);
      remove_id = '0;
      case (kind)
        0: begin
          f.push = 1'b1; f.remove = 1'b1;
          if ($urandom_range(0, 1) == 1 && model[0].id != '0) begin
            int k;
            do k = $urandom_range(0, M - 1); while (model[k].id == '0);
            e.id = model[k].id;    // update of a resident element
          end
          remove_id = e.id;
        end
        1: begin f.push = 1'b1; f.pop = 1'b1; end
        2: begin
          f.push_first = 1'b1;
          if (model[0].id != '0) begin
            e.data = model[0].data;
            e.data[DW-2:0] = (model[0].data[DW-2:0] < 3) ? '0
                           : model[0].data[DW-2:0] - (DW-1)'($urandom_range(0, 3));
          end
          if ($urandom_range(0, 1) == 1) begin
            f.remove = 1'b1;
            remove_id = ($urandom_range(0, 1) == 1) ? model[$urandom_range(0, M - 1)].id
                                                    : fresh_id(nh);
          end
        end
        3: begin
          f.remove = 1'b1;
          remove_id = ($urandom_range(0, 2) != 0) ? model[$urandom_range(0, M - 1)].id
                                                  : fresh_id(nh);
          if (remove_id == '0) remove_id = fresh_id(nh);
        end
        default: f.pop = 1'b1;
      endcase
      // ---- model ----
      lst = {};
      foreach (model[j]) lst.push_back(model[j]);
      del_at = -1;
      if (f.pop) del_at = 0;
      else if (f.remove) foreach (model[j]) if (model[j].id != '0 && model[j].id == remove_id) del_at = j;
      pos = M;
      if (f.push_first) pos = 0;
      else if (f.push) begin
        for (int j = M - 1; j >= 0; j--) if (ahead(e, model[j], h)) pos = j;
      end
      ins_here = (f.push || f.push_first) && (pos < M || (del_at >= 0 && ahead(e, nh, h)));
      if (del_at >= 0) lst.delete(del_at);
      if (ins_here) lst.insert((del_at >= 0 && del_at < pos) ? pos - 1 : pos, e);
      pf = '0;
      evicted = EMPTY;
      if (lst.size() < M) begin
        lst.push_back(nh);
        pf.pop = 1'b1;
      end
      if (lst.size() > M) begin
        evicted = lst.pop_back();
        pf.push_first = (evicted.id != '0);
      end
      pf.push   = f.push && !ins_here;
      pf.remove = f.remove && (del_at < 0);
      if (pf.push_first) n_pf++;
      if (pf.pop) n_pp++;
      if (ins_here && del_at >= 0 && pos == M) n_next++;
      if (ins_here && del_at >= 0 && pos < M) n_both++;
      // ---- drive the search cycle ----
      check(first_id_o == model[0].id && first_data_o == model[0].data, "head output");
      op = f; op_valid = 1'b1; highest = h;
      push_id = e.id; push_data = e.data;
      @(negedge clk);
      op_valid = 1'b0; op = '0;
      check(op_valid_o == (pf != '0), "propagated valid");
      check(op_o == ((pf != '0) ? pf : '0), "propagated operations");
      if (pf.push)       check(push_id_o == e.id && push_data_o == e.data, "propagated push element");
      if (pf.push_first) check(push_id_o == evicted.id && push_data_o == evicted.data, "evicted tail");
      if (pf.remove)     check(remove_id_o == remove_id, "propagated remove ID");
      if (pf != '0)      check(highest_o == h, "propagated highest");
      foreach (model[j]) check(slots[j] == model[j], "slots unchanged during search");
      @(negedge clk);
      foreach (model[j]) model[j] = lst[j];
      foreach (model[j]) check(slots[j] == model[j], $sformatf("slot %0d after set & shift", j));
      check(op_valid_o == 1'b0, "single-cycle propagation");
      @(negedge clk);
    end
    $display("kinds %0d %0d %0d %0d %0d push_first=%0d pop_prop=%0d next_cmp=%0d in_unit_update=%0d",
             n_kind[0], n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_pf, n_pp, n_next, n_both);
    check(n_pf > 0 && n_pp > 0 && n_next > 0 && n_both > 0, "all paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
