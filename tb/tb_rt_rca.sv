// tb_rt_rca -- self-checking testbench for the N-bit relative-timed RCA.
//
// Instances: u_z (N = 32, zero delay), u_t (N = 32, every cell one unit U)
// and u_f (N = 2, unit delay) for the two-bit example of the design
// description.  Per operand pair (random, plus directed carry chains):
//  * early set: operands valid, cin spacer -> exactly the sums and carries
//    that the model says are fixed without cin are valid (a generate/kill
//    stage fixes its carry; a propagate run waits);
//  * result: cin valid -> sum and cout equal a + b + cin;
//  * forward latency (u_t, all inputs applied together): all outputs valid
//    exactly at the unit-delay time of the model; it grows with the longest
//    propagate run m, not with N;
//  * reverse latency (u_t): after the operands return to the spacer, either
//    all together or only the a operand (b and cin late, as in the two-bit
//    example), every output is spacer after exactly 3 units, whatever the
//    data.
// A monitor on u_t checks the relative-timing assumption: whenever sum[k]
// returns to the spacer, the carry into stage k is already spacer.
//
// The two-bit example, the early reset and the relative-timing condition
// follow the published design; the random operands and unit delays are
// this testbench's own choices.
module tb_rt_rca;
  import dr_pkg::*;
  import rca_model_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;
  localparam int unsigned NVEC = 400;

  dr_t [N-1:0] a, b;
  dr_t         cin;
  dr_t [N-1:0] sum_z, sum_t;
  dr_t         cout_z, cout_t;

  dr_t [1:0]   fa, fb, fsum;
  dr_t         fcin, fcout;

  int checks = 0, failures = 0;
  int n_gen = 0, n_kill = 0, n_prop = 0;
  int n_early_set = 0, n_early_reset = 0, n_rt_checks = 0;
  int max_run_seen = 0;
  logic mon_en = 1'b0;   // monitor armed once the power-up sequence is over

  rt_rca #(.N(N), .DLY(0)) u_z (.a(a), .b(b), .cin(cin), .sum(sum_z), .cout(cout_z));
  rt_rca #(.N(N), .DLY(U)) u_t (.a(a), .b(b), .cin(cin), .sum(sum_t), .cout(cout_t));
  rt_rca #(.N(2), .DLY(U)) u_f (.a(fa), .b(fb), .cin(fcin), .sum(fsum), .cout(fcout));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 40) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic all_valid(input dr_t [N-1:0] s, input dr_t c);
    logic ok;
    ok = dr_is_valid(c);
    for (int i = 0; i < N; i++) ok &= dr_is_valid(s[i]);
    return ok;
  endfunction

  function automatic logic all_spacer(input dr_t [N-1:0] s, input dr_t c);
    logic ok;
    ok = dr_is_spacer(c);
    for (int i = 0; i < N; i++) ok &= dr_is_spacer(s[i]);
    return ok;
  endfunction

  // Relative-timing monitor: sum[k] may only fall once carry[k] has fallen.
  for (genvar k = 1; k < N; k++) begin : g_rt_mon
    always @(sum_t[k]) begin
      if (mon_en && dr_is_spacer(sum_t[k])) begin
        n_rt_checks++;
        check(dr_is_spacer(u_t.carry[k]), $sformatf("relative timing: carry[%0d] spacer before sum[%0d]", k, k));
      end
    end
  end

  initial begin : watchdog
    #(NVEC * 400 * U + 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_spacer();
    a = '0; b = '0; cin = DR_SPACER;
  endtask

  task automatic run_vector(input logic [N-1:0] va, input logic [N-1:0] vb,
                            input logic vc, input int idx);
    logic [N:0]    full;
    logic [MAXN:0] emask;
    int unsigned   lat, cout_lat, run, meas;
    dr_t [N-1:0]   exp_sum;

    logic [N:0]    cref;   // reference carries, cref[k] = carry into stage k
    full = {1'b0, va} + {1'b0, vb} + {{N{1'b0}}, vc};
    cref[0] = vc;
    for (int k = 0; k < N; k++) cref[k+1] = (va[k] & vb[k]) | (cref[k] & (va[k] ^ vb[k]));
    for (int i = 0; i < N; i++) exp_sum[i] = dr_encode(full[i]);
    emask = early_carry_mask(MAXN'(va), MAXN'(vb), N);
    lat   = fwd_latency(MAXN'(va), MAXN'(vb), N, cout_lat);
    run   = longest_propagate_run(MAXN'(va), MAXN'(vb), N);
    if (int'(run) > max_run_seen) max_run_seen = run;
    for (int i = 0; i < N; i++) begin
      if (va[i] & vb[i]) n_gen++;
      else if (!va[i] & !vb[i]) n_kill++;
      else n_prop++;
    end

    if (idx % 2 == 0) begin
      // Early set: operands only.
      a = encode_vec(MAXN'(va), N)[N-1:0];
      b = encode_vec(MAXN'(vb), N)[N-1:0];
      #((N + 10) * U);
      for (int k = 0; k < N; k++) begin
        // A sum is valid as soon as its own carry input is; a carry out is
        // valid when the operands alone fix it.
        check(dr_is_valid(sum_z[k]) == emask[k], $sformatf("early set: sum[%0d] validity", k));
        if (emask[k]) check(sum_z[k] == exp_sum[k], $sformatf("early set: sum[%0d] value", k));
        check(dr_is_valid(u_z.carry[k+1]) == emask[k+1],
              $sformatf("early set: carry[%0d] fixed by operands", k + 1));
        if (emask[k+1]) check(u_z.carry[k+1] == dr_encode(cref[k+1]),
                              $sformatf("early set: carry[%0d] value", k + 1));
      end
      if (emask[N]) n_early_set++;
      cin = dr_encode(vc);
      #((N + 10) * U);
    end else begin
      // All inputs together: timed forward latency.
      a = encode_vec(MAXN'(va), N)[N-1:0];
      b = encode_vec(MAXN'(vb), N)[N-1:0];
      cin = dr_encode(vc);
      #(H);
      meas = 0;
      for (int t = 1; t <= int'(N) + 10; t++) begin
        #(U);
        if (all_valid(sum_t, cout_t)) begin
          meas = t;
          break;
        end
      end
      check(meas == lat, $sformatf("forward latency %0d units, model %0d (run %0d)", meas, lat, run));
      #((N + 10) * U);
    end
    check(sum_z == exp_sum && cout_z == dr_encode(full[N]), "zero-delay result");
    check(sum_t == exp_sum && cout_t == dr_encode(full[N]), "unit-delay result");

    // Return to zero: all operands together, or only a (b and cin late).
    if (idx % 3 == 0) begin
      a = '0;
    end else begin
      a = '0; b = '0; cin = DR_SPACER;
    end
    #(H);
    meas = 0;
    for (int t = 1; t <= int'(N) + 10; t++) begin
      #(U);
      if (all_spacer(sum_t, cout_t)) begin
        meas = t;
        break;
      end
    end
    check(meas == REV_LATENCY, $sformatf("reverse latency %0d units, expected %0d", meas, REV_LATENCY));
    check(all_spacer(sum_z, cout_z), "zero-delay outputs spacer");
    if (idx % 3 == 0) n_early_reset++;
    #(5 * U);
    apply_spacer();
    #(5 * U);
  endtask

  initial begin
    // Power-up: every rail high, then low, to clear the timed instances.
    a = '1; b = '1; cin = 2'b11; fa = '1; fb = '1; fcin = 2'b11;
    #((N + 10) * U);
    apply_spacer();
    fa = '0; fb = '0; fcin = DR_SPACER;
    #((N + 10) * U);
    check(all_spacer(sum_z, cout_z) && all_spacer(sum_t, cout_t), "initial spacer");
    mon_en = 1'b1;

    // Two-bit example: A = B = 11, carry input 0 -> SUM = 10, COUT = 1;
    // then only the augend returns to zero: every output must follow.
    fa = {DR_ONE, DR_ONE}; fb = {DR_ONE, DR_ONE}; fcin = DR_ZERO;
    #(10 * U);
    check(fsum == {DR_ONE, DR_ZERO} && fcout == DR_ONE, "two-bit example result");
    check(u_f.carry[1] == DR_ONE, "two-bit example: internal carry generated");
    fa = '0;
    #(10 * U);
    check(fsum == '0 && fcout == DR_SPACER && u_f.carry[1] == DR_SPACER,
          "two-bit example: partial reset clears every output");
    fb = '0; fcin = DR_SPACER;
    #(10 * U);

    // Directed carry chains of length m: bit 0 generates, bits 1..m
    // propagate, the rest kill.
    begin
      int lens[8] = '{0, 4, 8, 16, 24, 28, 31, 30};
      foreach (lens[i]) begin
        logic [N-1:0] va, vb;
        va = '0; vb = '0;
        va[0] = 1; vb[0] = 1;
        for (int k = 1; k <= lens[i] && k < int'(N); k++) va[k] = 1;
        run_vector(va, vb, 1'b0, 2 * i + 1);
        run_vector(va, vb, 1'b1, 2 * i);
      end
    end

    for (int i = 0; i < NVEC; i++) begin
      logic [N-1:0] va, vb;
      va = N'({$urandom, $urandom});
      vb = N'({$urandom, $urandom});
      run_vector(va, vb, 1'($urandom), i);
    end

    if (n_gen == 0 || n_kill == 0 || n_prop == 0 || n_early_set == 0 ||
        n_early_reset == 0 || n_rt_checks == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("generate=%0d kill=%0d propagate=%0d early_set_cout=%0d early_reset=%0d rt_checks=%0d max_run=%0d",
             n_gen, n_kill, n_prop, n_early_set, n_early_reset, n_rt_checks, max_run_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
