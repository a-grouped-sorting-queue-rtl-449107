// tb_timer_usecase -- the flow-timeout use case at the sizes of the
// smallest configuration reported for it: queue depth 2048 (1024 units of
// 2), a 9-bit timer, timeout 127 ticks (7-bit timeout), a tick every 6
// clocks, 2047 flows, 12-bit IDs.
//
// With only 9 bits the reference timer wraps every 512 ticks (3072 clocks),
// and about a quarter of all new expiration times wrap past zero, so this
// run depends on group sorting for every timer that straddles a wrap. A
// sorted queue without groups would release those timers at once.
// Flow events arrive on average every 4 clocks, more than the queue can
// take in while it also pops, so the queue runs close to its limit of one
// operation per 3 clocks. Flow IDs are uniformly random (no packet trace
// is available). The scoreboard is the one of the full-size test: every
// expiration must carry the flow's latest value and come TO+1 .. TO+65
// ticks after the flow was last armed, across timer wraps. Nothing may be
// dropped and the queue must drain. Reports the operation rate reached and
// the largest occupancy.
module tb_timer_usecase;

  // the use-case configuration
  localparam int unsigned IDW = 12;
  localparam int unsigned DW  = 9;
  localparam int unsigned WO  = 7;
  localparam int unsigned N   = 1024;
  localparam int unsigned M   = 2;
  localparam int unsigned P   = 6;
  localparam int unsigned NF  = 2047;   // flows, as in the paper's use case
  localparam int unsigned CAP = N * M;
  localparam int unsigned NFLOW = NF;
  localparam int LATE = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [WO-1:0]  timeout = WO'(127);
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
  int n_flows = NF;
  int max_occ = 0;
  longint n_ops = 0, run_clocks = 0;
  localparam int RUN_CYCLES = 120000;
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
  int armed_now = 0;
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
      if (armed[exp_id]) armed_now--;
      armed[exp_id] = 1'b0;
    end
    if (drop_valid) begin
      n_drop++;
      // the drop may report the value an update was replacing at the time
      check(arm_data[drop_id] == drop_data || prev_data[drop_id] == drop_data,
            "dropped element is one of the flow's last two timers");
      if (arm_data[drop_id] == drop_data && armed[drop_id]) begin
        armed[drop_id] = 1'b0;
        armed_now--;
      end
    end
    if (pkt_valid && pkt_ready) begin
      if (armed[pkt_id]) n_update++;
      else armed_now++;
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
      if (armed[rm_id]) begin
        n_remove++;
        armed_now--;
      end
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
    if (events_on && dut.u_queue.accept) n_ops++;
    if (events_on) run_clocks++;
    if (armed_now > max_occ) max_occ = armed_now;
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
      pkt_valid = events_on && ($urandom_range(0, 3) == 0);
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
    // TO = 127 ticks, one tick per 6 clocks, 2047 flows
    repeat (RUN_CYCLES) @(negedge clk);
    events_on = 1'b0;
    $display("operations while loaded: %0d in %0d clocks (%0d per 1000 clocks, limit 333)",
             n_ops, run_clocks, n_ops * 1000 / run_clocks);
    repeat ((128 + LATE + 4) * P + 20) @(negedge clk);
    check(armed_count() == 0, "every armed timer expired");
    check(next_valid == 1'b0, "queue empty at the end");
    $display("mechanisms: push=%0d update=%0d expire=%0d remove=%0d drop=%0d wrapped=%0d rt_wraps=%0d push_first=%0d pop_prop=%0d push_pop_back_to_back=%0d max_late_ticks=%0d max_occupancy=%0d",
             n_push, n_update, n_exp, n_remove, n_drop, n_wrapped, n_rt_wrap, n_pf, n_pp, n_backtoback, max_late, max_occ);
    check(n_update > 0, "update happened");
    check(n_exp > 0, "expiration happened");
    check(n_remove > 0, "remove happened");
    check(n_drop == 0, "no drop with 2047 flows in 2048 entries");
    check(n_rt_wrap > 0, "reference timer wrapped");
    check(n_wrapped > 0, "expiration times wrapped");
    check(n_pp > 0, "pop propagation happened");
    check(n_backtoback > 0, "alternating push and pop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
