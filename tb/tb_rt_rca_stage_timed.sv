// tb_rt_rca_stage_timed -- end-to-end testbench of the 32-bit adder stage
// with every gate one time unit long (DLY = U).
//
// The same 4-phase sender and receiver as tb_rt_rca_stage run around the
// stage, but now with real gate delays, so the checks below see the adder
// inside the stage the way a gate-level netlist would behave:
//   * every result equals a + b + cin of the word sent;
//   * relative timing: inside the adder, each internal carry carry[k] is
//     back at the spacer before the sum bit k it feeds is (monitor on every
//     k), with the operands coming from the stage register rather than from
//     the testbench;
//   * forward latency: when the input register is open, the adder outputs
//     are all valid exactly 1 + f units after the word is applied (one
//     register C-element, then f = the adder's unit-delay forward latency
//     from the reference model, which is m + 4 for a carry run of m);
//   * reverse latency: when the input register lets the spacer through, the
//     adder outputs are all spacer exactly 1 + 3 units after the sender
//     resets, for every word (the constant one-full-adder reset).
// The sender returns the whole operand bus to the spacer at once, as the
// stage requires.  Each measured case must occur at least once.  Event times
// are recorded where they happen, so no sampling instant can race a gate.
// Power-up as in tb_rt_rca_stage, with waits long enough for the delays.
// The relative-timing condition and the constant one-full-adder reset are
// those of the published design; the equal unit gate delays, the random
// operands and the environment's timing are this testbench's own choices.
module tb_rt_rca_stage_timed;
  import dr_pkg::*;
  import rca_model_pkg::*;

  localparam int unsigned N      = 32;
  localparam int unsigned U      = 10;
  localparam int unsigned NWORDS = 300;

  dr_t [N-1:0] a_in, b_in, sum_out;
  dr_t         cin_in, cout_out;
  logic        ackout_cur, ackout_nxt, ackout_rx;

  int checks = 0, failures = 0;
  int n_results = 0, n_fwd = 0, n_rev = 0, n_rt = 0;
  logic [N:0] expq[$];
  logic       running = 1'b0;

  // Measurement state, set by the sender, completed by the monitors.
  logic fwd_pending = 1'b0, rev_pending = 1'b0;
  time  t_apply, t_valid, t_reset, t_spacer;

  rt_rca_stage #(.N(N), .DLY(U)) dut (
    .a_in       (a_in),
    .b_in       (b_in),
    .cin_in     (cin_in),
    .ackout_cur (ackout_cur),
    .sum_out    (sum_out),
    .cout_out   (cout_out),
    .ackout_nxt (ackout_nxt),
    .ackout_rx  (ackout_rx)
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #(NWORDS * 400 * U + 100000);
    failures++;
    $display("watchdog expired: ackout_cur=%b ackout_nxt=%b ackout_rx=%b results=%0d",
             ackout_cur, ackout_nxt, ackout_rx, n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Relative-timing monitor on the adder inside the stage.
  for (genvar k = 1; k < N; k++) begin : g_rt_mon
    always @(dut.sum_c[k]) begin
      if (running && dr_is_spacer(dut.sum_c[k])) begin
        n_rt++;
        check(dr_is_spacer(dut.u_rca.carry[k]),
              $sformatf("relative timing: carry[%0d] spacer before sum[%0d]", k, k));
      end
    end
  end

  function automatic logic adder_valid();
    logic ok = dr_is_valid(dut.cout_c);
    for (int i = 0; i < int'(N); i++) ok &= dr_is_valid(dut.sum_c[i]);
    return ok;
  endfunction

  function automatic logic adder_spacer();
    logic ok = dr_is_spacer(dut.cout_c);
    for (int i = 0; i < int'(N); i++) ok &= dr_is_spacer(dut.sum_c[i]);
    return ok;
  endfunction

  // First instant at which the adder outputs are complete.
  always @(dut.sum_c, dut.cout_c) begin
    if (fwd_pending && adder_valid()) begin
      t_valid     = $time;
      fwd_pending = 1'b0;
    end
    if (rev_pending && adder_spacer()) begin
      t_spacer    = $time;
      rev_pending = 1'b0;
    end
  end

  // ---------------------------------------------------------------- sender
  task automatic send(input logic [N-1:0] va, input logic [N-1:0] vb, input logic vc);
    logic        open_in, closed_in;
    int unsigned f, ct;
    f = fwd_latency(MAXN'(va), MAXN'(vb), N, ct);
    for (int i = 0; i < int'(N); i++) begin
      a_in[i] = dr_encode(va[i]);
      b_in[i] = dr_encode(vb[i]);
    end
    cin_in = dr_encode(vc);
    expq.push_back({1'b0, va} + {1'b0, vb} + {{N{1'b0}}, vc});
    // Forward latency is measured only if the register lets the word
    // straight through (ackin_cur already 1).
    open_in = dut.ackin_cur;
    t_apply = $time;
    fwd_pending = open_in;
    wait (ackout_cur);
    if (open_in) begin
      wait (!fwd_pending);
      n_fwd++;
      check(t_valid - t_apply == time'((1 + f) * U),
            $sformatf("forward latency %0d units, expected %0d (m = %0d)",
                      (t_valid - t_apply) / U, 1 + f,
                      longest_propagate_run(MAXN'(va), MAXN'(vb), N)));
    end
    #($urandom_range(8, 0) * U + $urandom_range(U - 1, 0));
    // The whole operand bus returns to the spacer at once.
    closed_in = !dut.ackin_cur;
    a_in = '0; b_in = '0; cin_in = DR_SPACER;
    t_reset = $time;
    rev_pending = closed_in;
    wait (!ackout_cur);
    if (closed_in) begin
      wait (!rev_pending);
      n_rev++;
      check(t_spacer - t_reset == time'((1 + REV_LATENCY) * U),
            $sformatf("reverse latency %0d units, expected %0d",
                      (t_spacer - t_reset) / U, 1 + REV_LATENCY));
    end
    rev_pending = 1'b0;
    #($urandom_range(8, 0) * U + $urandom_range(U - 1, 0));
  endtask

  // -------------------------------------------------------------- receiver
  initial begin : receiver
    wait (running);
    forever begin
      logic [N:0] exp;
      wait (ackout_nxt);
      check(expq.size() > 0, "result without a word sent");
      exp = expq.pop_front();
      for (int i = 0; i < int'(N); i++)
        check(sum_out[i] == dr_encode(exp[i]), $sformatf("sum bit %0d", i));
      check(cout_out == dr_encode(exp[N]), "carry out");
      n_results++;
      #($urandom_range(3, 0) == 0 ? $urandom_range(60, 20) * U / 2 : $urandom_range(5, 1) * U / 2);
      ackout_rx = 1'b1;
      wait (!ackout_nxt);
      #($urandom_range(5, 1) * U / 2);
      ackout_rx = 1'b0;
    end
  end

  initial begin : sender
    a_in = '1; b_in = '1; cin_in = 2'b11; ackout_rx = 1'b0;
    #(40 * U);
    a_in = '0; b_in = '0; cin_in = DR_SPACER; ackout_rx = 1'b1;
    #(40 * U);
    ackout_rx = 1'b0;
    #(40 * U);
    check(!ackout_cur && !ackout_nxt && adder_spacer(), "idle after power-up");
    running = 1'b1;

    send('1, '0, 1'b1);
    send('0, '1, 1'b0);
    send(N'(3), N'(3), 1'b0);
    for (int i = 0; i < int'(NWORDS) - 3; i++)
      send(N'({$urandom, $urandom}), N'({$urandom, $urandom}), 1'($urandom));

    wait (expq.size() == 0);
    #(100 * U);
    check(n_results == int'(NWORDS), "every word produced a result");
    if (n_fwd == 0 || n_rev == 0 || n_rt == 0) begin
      failures++;
      $display("FAIL: a measured case never occurred");
    end
    $display("words=%0d forward_measured=%0d reverse_measured=%0d rt_checks=%0d",
             n_results, n_fwd, n_rev, n_rt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
