// tb_timer_queue_top -- end-to-end test of the timer queue at reduced size.
//
// 8 units of 2 slots (16 timers), 5-bit flow IDs, 8-bit timer (wraps every
// 256 ticks), 5-bit timeout, a tick every 6 clocks. A flow-event generator
// re-arms random flows, with one timeout per phase or one per event;
// occasionally flows are removed. The testbench keeps
// for every flow whether it is armed, the tick at which it was armed (an
// unwrapped tick count) and the expiration value it was given, and checks:
//   * every reported expiration belongs to an armed flow and carries its
//     latest expiration value (an update really replaced the old timer);
//   * it was issued when at least TO+1 ticks had passed since arming, and
//     not more than a bounded number of ticks later (one pop per queue slot
//     pair, so at most one tick per timer that expires at the same time);
//   * drops (more armed flows than entries, phase 2) carry one of the
//     flow's last two timer values (an update may overtake a dropped copy);
//   * after the events stop every armed timer expires and nothing is left.
// Mechanisms counted, each must occur: updates, expirations, removes,
// drops, expiration values that wrapped past the timer width, timer wraps,
// push_first and pop propagation out of unit 0, back-to-back push/pop.
module tb_timer_queue_top;

  localparam int unsigned IDW = 5;
  localparam int unsigned DW  = 8;
  localparam int unsigned WO  = 5;
  localparam int unsigned N   = 8;
  localparam int unsigned M   = 2;
  localparam int unsigned P   = 6;
  localparam int unsigned CAP = N * M;
  localparam int unsigned NFLOW = (1 << IDW) - 1;
  localparam int LATE = CAP + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [WO-1:0]  timeout = WO'(20);
  logic pkt_valid = 1'b0, rm_valid = 1'b0;
  logic [IDW-1:0] pkt_id = '0, rm_id = '0;
  logic pkt_ready, rm_ready, exp_valid, next_valid, next_expired, drop_valid, id_miss;
  logic [IDW-1:0] exp_id, next_id, drop_id;
  logic [DW-1:0]  exp_data, rt, next_data, drop_data;

  int checks = 0, failures = 0;
  bit armed [NFLOW+1];
  longint arm_tick [NFLOW+1];
  logic [DW-1:0] arm_data [NFLOW+1];
  logic [DW-1:0] prev_data [NFLOW+1];
  int arm_to [NFLOW+1];
  longint tick = 0, tick_d1 = 0;
  logic [DW-1:0] rt_d1 = '0;
  int n_update = 0, n_exp = 0, n_remove = 0, n_drop = 0, n_wrapped = 0, n_rt_wrap = 0;
  int n_pf = 0, n_pp = 0, n_backtoback = 0, n_push = 0, max_late = 0;
  int n_flows = 12;
  bit events_on = 1'b1;
  bit random_to = 1'b0;
  int last_kind = -1;

  timer_queue_top #(.IDW(IDW), .DW(DW), .WO(WO), .N(N), .M(M), .P(P)) dut (
    .clk, .rst_n, .timeout_i(timeout),
    .pkt_valid_i(pkt_valid), .pkt_ready_o(pkt_ready), .pkt_id_i(pkt_id),
    .rm_valid_i(rm_valid), .rm_ready_o(rm_ready), .rm_id_i(rm_id),
    .exp_valid_o(exp_valid), .exp_id_o(exp_id), .exp_data_o(exp_data), .rt_o(rt),
    .next_valid_o(next_valid), .next_id_o(next_id), .next_data_o(next_data),
    .next_expired_o(next_expired),
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

  function automatic int armed_count();
    int c = 0;
    for (int f = 1; f <= NFLOW; f++) if (armed[f]) c++;
    return c;
  endfunction

  // ---- scoreboard, sampled at the rising edge ----
  always @(posedge clk) if (rst_n) begin
    // expirations refer to the pop issued one cycle earlier
    if (exp_valid) begin
      longint waited;
      n_exp++;
      check(armed[exp_id], "expired flow is armed");
      check(exp_data == arm_data[exp_id], "expiration carries the latest value");
      waited = tick_d1 - arm_tick[exp_id];
      check(waited >= arm_to[exp_id] + 1, "not expired early");
      check(waited <= arm_to[exp_id] + 1 + LATE, "not expired too late");
      if (waited - arm_to[exp_id] - 1 > max_late) max_late = int'(waited - arm_to[exp_id] - 1);
      armed[exp_id] = 1'b0;
    end
    if (drop_valid) begin
      n_drop++;
      // the drop may report the value an update was replacing at the time
      check(arm_data[drop_id] == drop_data || prev_data[drop_id] == drop_data,
            "dropped element is one of the flow's last two timers");
      if (arm_data[drop_id] == drop_data) armed[drop_id] = 1'b0;
    end
    if (pkt_valid && pkt_ready) begin
      if (armed[pkt_id]) n_update++;
      armed[pkt_id]    = 1'b1;
      arm_tick[pkt_id] = tick;
      prev_data[pkt_id] = arm_data[pkt_id];
      arm_data[pkt_id] = rt + DW'(timeout);
      arm_to[pkt_id]   = int'(timeout);
      if (DW'(rt + DW'(timeout)) < rt) n_wrapped++;
      n_push++;
      if (last_kind == 0) n_backtoback++;
      last_kind = 1;
    end
    if (rm_valid && rm_ready) begin
      if (armed[rm_id]) n_remove++;
      armed[rm_id] = 1'b0;
      last_kind = 2;
    end
    if (dut.u_queue.accept && dut.u_queue.pop_i) begin
      if (last_kind == 1) n_backtoback++;
      last_kind = 0;
    end
    if (dut.u_queue.g_unit[0].u_su.op_valid_i) begin
      if (dut.u_queue.g_unit[0].u_su.prop.push_first) n_pf++;
      if (dut.u_queue.g_unit[0].u_su.prop.pop) n_pp++;
    end
    // unwrapped tick count
    tick_d1 = tick;
    rt_d1   = rt;
  end

  always @(negedge clk) if (rst_n) begin
    if (rt != rt_d1) begin
      tick++;
      if (rt == '0) n_rt_wrap++;
    end
  end

  // ---- flow events ----
  always @(negedge clk) begin
    if (pkt_valid && !pkt_ready) ;                 // hold until taken
    else begin
      pkt_valid = events_on && ($urandom_range(0, 9) < 3);
      pkt_id    = IDW'($urandom_range(1, n_flows));
      if (random_to) timeout = WO'($urandom_range(1, (1 << WO) - 1));
    end
    if (rm_valid && !rm_ready) ;
    else begin
      rm_valid = events_on && ($urandom_range(0, 199) == 0);
      rm_id    = IDW'($urandom_range(1, n_flows));
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: 12 flows, fits in the queue, several timeouts
    for (int ph = 0; ph < 4; ph++) begin
      timeout = WO'(8 + 7 * ph);
      repeat (8000) @(negedge clk);
    end
    // phase 1b: a timeout per event, so that new timers also land in front
    random_to = 1'b1;
    repeat (8000) @(negedge clk);
    random_to = 1'b0;
    // phase 2: 31 flows, more than 16 entries: some timers are dropped
    n_flows = NFLOW;
    timeout = WO'(31);
    repeat (6000) @(negedge clk);
    // drain
    events_on = 1'b0;
    repeat ((32 + LATE + 4) * P + 20) @(negedge clk);
    check(armed_count() == 0, "every armed timer expired");
    check(next_valid == 1'b0, "queue empty at the end");
    $display("mechanisms: push=%0d update=%0d expire=%0d remove=%0d drop=%0d wrapped=%0d rt_wraps=%0d push_first=%0d pop_prop=%0d push_pop_back_to_back=%0d max_late_ticks=%0d",
             n_push, n_update, n_exp, n_remove, n_drop, n_wrapped, n_rt_wrap, n_pf, n_pp, n_backtoback, max_late);
    check(n_update > 0, "update happened");
    check(n_exp > 0, "expiration happened");
    check(n_remove > 0, "remove happened");
    check(n_drop > 0, "drop happened");
    check(n_wrapped > 0, "wrapped expiration value happened");
    check(n_rt_wrap > 0, "timer wrap happened");
    check(n_pf > 0, "push_first propagation happened");
    check(n_pp > 0, "pop propagation happened");
    check(n_backtoback > 0, "alternating push and pop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
