// tb_gs_queue -- self-checking testbench of the grouped sorting queue.
//
// Drives random push (enqueue/update), remove and pop requests into a small
// queue (N=4 units of M=3 slots, 6-bit DATA so that both groups and many
// group changes of the head occur, 5-bit IDs so that the queue fills up)
// and compares everything against a list model written here:
//   * the model keeps the entries in service order; a push first deletes an
//     entry with the same ID, then inserts before the first entry it beats
//     under the group rule (equal MSBs: smaller DATA first; different MSBs:
//     the group of the head before the request first), or at the end;
//     an entry beyond the capacity is dropped from the end;
//   * head outputs are compared before every request, popped elements one
//     cycle after the pop, drops and ID misses when they leave the last unit;
//   * the issue rate is checked: op_ready_o is low for exactly the two
//     cycles after an accept.
// Finally the queue is drained and compared entry by entry.
// It also counts how often each mechanism occurred (updates, inserts into
// the other group, drops, push_first / pop / Next_CMP placement inside
// unit 0) and counts a failure for any that never happened.
module tb_gs_queue;

  localparam int unsigned IDW = 5;
  localparam int unsigned DW  = 6;
  localparam int unsigned N   = 4;
  localparam int unsigned M   = 3;
  localparam int unsigned CAP = N * M;

  typedef struct packed {
    logic [IDW-1:0] id;
    logic [DW-1:0]  data;
  } elem_t;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           op_valid = 1'b0, push = 1'b0, remove = 1'b0, pop = 1'b0;
  logic [IDW-1:0] id = '0;
  logic [DW-1:0]  data = '0;
  logic           op_ready, head_valid, pop_valid, drop_valid, id_miss;
  logic [IDW-1:0] head_id, pop_id, drop_id;
  logic [DW-1:0]  head_data, pop_data, drop_data;

  int checks = 0, failures = 0;
  int n_update = 0, n_other_group = 0, n_drop = 0, n_miss = 0, n_pop = 0, n_remove_hit = 0;
  int n_pf = 0, n_pp = 0, n_next = 0;
  int exp_miss = 0;

  elem_t model[$];
  elem_t drops_exp[$];

  gs_queue #(.IDW(IDW), .DW(DW), .N(N), .M(M)) dut (
    .clk, .rst_n,
    .op_valid_i(op_valid), .op_ready_o(op_ready),
    .push_i(push), .remove_i(remove), .pop_i(pop), .id_i(id), .data_i(data),
    .head_valid_o(head_valid), .head_id_o(head_id), .head_data_o(head_data),
    .pop_valid_o(pop_valid), .pop_id_o(pop_id), .pop_data_o(pop_data),
    .drop_valid_o(drop_valid), .drop_id_o(drop_id), .drop_data_o(drop_data),
    .id_miss_o(id_miss)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // group rule of the model: does a go ahead of b when the head's MSB is h?
  function automatic bit ahead(logic [DW-1:0] a, logic [DW-1:0] b, logic h);
    logic [DW-1:0] ka, kb;
    // rotate so that the head's group maps to the lower half
    ka = a ^ {h, {(DW-1){1'b0}}};
    kb = b ^ {h, {(DW-1){1'b0}}};
    return ka < kb;
  endfunction

  function automatic logic model_highest();
    return (model.size() == 0) ? 1'b1 : model[0].data[DW-1];
  endfunction

  // ---- model operations ----
  function automatic bit model_delete(logic [IDW-1:0] rid);
    foreach (model[i]) if (model[i].id == rid) begin
      model.delete(i);
      return 1'b1;
    end
    return 1'b0;
  endfunction

  function automatic void model_push(elem_t e);
    logic h;
    int pos;
    h = model_highest();
    if (model.size() != 0 && (e.data[DW-1] != h)) n_other_group++;
    if (model_delete(e.id)) n_update++;
    else exp_miss++;
    pos = model.size();
    foreach (model[i]) if (ahead(e.data, model[i].data, h)) begin
      pos = i;
      break;
    end
    model.insert(pos, e);
    if (model.size() > CAP) drops_exp.push_back(model.pop_back());
  endfunction

  // ---- monitors ----
  always @(posedge clk) if (rst_n) begin
    if (drop_valid) begin
      n_drop++;
      if (drops_exp.size() == 0) check(1'b0, "unexpected drop");
      else begin
        elem_t d;
        d = drops_exp.pop_front();
        check(drop_id == d.id && drop_data == d.data, "dropped element");
      end
    end
    if (id_miss) n_miss++;
    // mechanisms inside unit 0
    if (dut.g_unit[0].u_su.op_valid_i) begin
      if (dut.g_unit[0].u_su.prop.push_first) n_pf++;
      if (dut.g_unit[0].u_su.prop.pop) n_pp++;
      if (dut.g_unit[0].u_su.del_here && dut.g_unit[0].u_su.ins_here &&
          !dut.g_unit[0].u_su.flag_g[M-1]) n_next++;
    end
  end

  // ---- one request, with timing checks ----
  task automatic issue(input int kind, input logic [IDW-1:0] rid, input logic [DW-1:0] rdata);
    // called at a negedge with op_ready expected high
    check(op_ready == 1'b1, "ready before request");
    check(head_valid == (model.size() != 0), "head valid");
    if (model.size() != 0)
      check(head_id == model[0].id && head_data == model[0].data, "head element");
    op_valid = 1'b1;
    push     = (kind == 0);
    remove   = (kind == 1);
    pop      = (kind == 2);
    id       = rid;
    data     = rdata;
    @(negedge clk);
    op_valid = 1'b0; push = 1'b0; remove = 1'b0; pop = 1'b0;
    case (kind)
      0: model_push('{id: rid, data: rdata});
      1: begin
        if (model_delete(rid)) n_remove_hit++;
        else exp_miss++;
      end
      default: begin
        check(pop_valid == (model.size() != 0), "pop valid");
        if (model.size() != 0) begin
          elem_t h;
          h = model.pop_front();
          check(pop_id == h.id && pop_data == h.data, "popped element");
          n_pop++;
        end
      end
    endcase
    check(op_ready == 1'b0, "busy 1 cycle after accept");
    @(negedge clk);
    check(op_ready == 1'b0, "busy 2 cycles after accept");
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int kind;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // phase 1: random mix, push-heavy so that the queue fills up
    for (int i = 0; i < 3000; i++) begin
      int r;
      r = $urandom_range(0, 99);
      kind = (r < 55) ? 0 : (r < 70) ? 1 : 2;
      issue(kind, IDW'($urandom_range(1, (1 << IDW) - 1)), DW'($urandom));
    end
    // phase 2: narrow DATA range with many equal values (FIFO order)
    for (int i = 0; i < 1500; i++) begin
      int r;
      r = $urandom_range(0, 99);
      kind = (r < 50) ? 0 : (r < 60) ? 1 : 2;
      issue(kind, IDW'($urandom_range(1, (1 << IDW) - 1)), DW'($urandom_range(20, 24)));
    end
    // drain
    while (model.size() != 0) issue(2, '0, '0);
    issue(2, '0, '0);   // pop on empty queue
    repeat (N + 4) @(negedge clk);
    check(drops_exp.size() == 0, "all expected drops seen");
    check(n_miss == exp_miss, "ID miss count");
    $display("mechanisms: update=%0d other_group=%0d drop=%0d miss=%0d pop=%0d remove=%0d push_first=%0d pop_prop=%0d next_cmp=%0d",
             n_update, n_other_group, n_drop, n_miss, n_pop, n_remove_hit, n_pf, n_pp, n_next);
    check(n_update > 0, "update happened");
    check(n_other_group > 0, "insert into other group happened");
    check(n_drop > 0, "drop happened");
    check(n_pop > 0, "pop happened");
    check(n_remove_hit > 0, "remove happened");
    check(n_pf > 0, "push_first propagation happened");
    check(n_pp > 0, "pop propagation happened");
    check(n_next > 0, "Next_CMP placement happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
