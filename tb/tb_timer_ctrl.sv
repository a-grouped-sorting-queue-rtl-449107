// tb_timer_ctrl -- check of the reference timer and request scheduling.
//
// Small sizes (6-bit timer, 3-bit timeout, a tick every 3 clocks) so that
// the timer wraps many times. The testbench plays the queue: it accepts a
// request and then is busy for two cycles, like the real queue, and drives
// random head values, flow events and removes. Checked every cycle against
// values computed here: the timer equals the number of elapsed ticks modulo
// 2^6, the push DATA is timer + timeout modulo 2^6, the expiry flag is
// "timer is ahead of the head by 1 .. 2^5-1" (plain "head < timer" without
// wrap), and the granted request follows the round-robin order pop, push,
// remove after the last grant, so that pushes and pops alternate when both
// wait. Counts expiries seen across the timer wrap.
module tb_timer_ctrl;

  import gsq_pkg::*;

  localparam int unsigned IDW = 4;
  localparam int unsigned DW  = 6;
  localparam int unsigned WO  = 3;
  localparam int unsigned P   = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [WO-1:0]  timeout = '0;
  logic pkt_valid = 1'b0, rm_valid = 1'b0, head_valid = 1'b0;
  logic [IDW-1:0] pkt_id = '0, rm_id = '0, q_id;
  logic [DW-1:0]  head_data = '0, q_data, rt;
  logic pkt_ready, rm_ready, q_valid, q_ready, q_push, q_remove, q_pop, expired;
  logic [1:0] busy = '0;
  int checks = 0, failures = 0;
  int n_alt = 0, n_wrap_exp = 0, n_grant [3];

  timer_ctrl #(.IDW(IDW), .DW(DW), .WO(WO), .P(P)) dut (
    .clk, .rst_n, .timeout_i(timeout),
    .pkt_valid_i(pkt_valid), .pkt_ready_o(pkt_ready), .pkt_id_i(pkt_id),
    .rm_valid_i(rm_valid), .rm_ready_o(rm_ready), .rm_id_i(rm_id),
    .q_valid_o(q_valid), .q_ready_i(q_ready), .q_push_o(q_push), .q_remove_o(q_remove),
    .q_pop_o(q_pop), .q_id_o(q_id), .q_data_o(q_data),
    .head_valid_i(head_valid), .head_data_i(head_data),
    .rt_o(rt), .expired_o(expired)
  );

  always #5 clk = ~clk;
  assign q_ready = (busy == 2'd0);
  always @(posedge clk) begin
    if (q_valid && q_ready) busy <= 2'd2;
    else if (busy != 0) busy <= busy - 2'd1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, last, prev_granted;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    last = 2;           // remove: pop is served first after reset
    prev_granted = -1;
    for (int i = 0; i < 20000; i++) begin
      logic [DW-1:0] exp_rt, age;
      bit exp_expired;
      int req [3], g;
      // drive
      timeout    = WO'($urandom);
      pkt_valid  = ($urandom_range(0, 3) != 0);
      pkt_id     = IDW'($urandom);
      rm_valid   = ($urandom_range(0, 5) == 0);
      rm_id      = IDW'($urandom);
      head_valid = ($urandom_range(0, 4) != 0);
      head_data  = (i % 2 == 0) ? DW'($urandom) : rt - DW'($urandom_range(0, 3)) + 1'b1;
      #1;
      // reference
      exp_rt = DW'(cyc / P);
      age = exp_rt - head_data;
      exp_expired = head_valid && (age != 0) && (age < (1 << (DW - 1)));
      check(rt == exp_rt, "reference timer");
      check(expired == exp_expired, "expiry test");
      if (expired && head_data > rt) n_wrap_exp++;
      check(q_data == DW'(exp_rt + timeout), "expiration = R_t + TO");
      req[0] = exp_expired; req[1] = pkt_valid; req[2] = rm_valid;
      check(q_valid == (req[0] || req[1] || req[2]), "request valid");
      g = -1;
      for (int k = 1; k <= 3; k++) if (g < 0 && req[(last + k) % 3]) g = (last + k) % 3;
      if (g >= 0) begin
        check(q_pop == (g == 0) && q_push == (g == 1) && q_remove == (g == 2), "round-robin grant");
        if (g == 2) check(q_id == rm_id, "remove ID");
        if (g == 1) check(q_id == pkt_id, "push ID");
        check(pkt_ready == (q_ready && g == 1), "packet ready");
        check(rm_ready == (q_ready && g == 2), "remove ready");
        if (q_ready) begin
          if (prev_granted >= 0 && g != prev_granted && req[prev_granted]) n_alt++;
          prev_granted = g;
          last = g;
          n_grant[g]++;
        end
      end
      @(negedge clk);
      cyc++;
    end
    $display("grants pop=%0d push=%0d remove=%0d alternations=%0d wrapped expiries=%0d",
             n_grant[0], n_grant[1], n_grant[2], n_alt, n_wrap_exp);
    check(n_alt > 0 && n_wrap_exp > 0, "alternation and wrapped expiry seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
