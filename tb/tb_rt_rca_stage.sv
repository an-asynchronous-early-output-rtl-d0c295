// tb_rt_rca_stage -- end-to-end testbench of the 32-bit asynchronous adder
// stage at its default parameters (N = 32, zero-delay cells).
//
// A sender process and a receiver process play the 4-phase return-to-zero
// protocol around the stage:
//   sender:   put a random operand word (a, b, cin) on the inputs, wait for
//             ackout_cur = 1, return to the spacer, wait for ackout_cur = 0;
//   receiver: wait for ackout_nxt = 1, compare sum/cout with a + b + cin of
//             the oldest word sent, raise ackout_rx, wait for
//             ackout_nxt = 0, lower ackout_rx.
// Both wait random times between steps.  1200 words are sent.  Every result
// is checked, no output wire may ever carry the illegal code (1, 1), and the
// following mechanisms are counted; each must occur at least once:
//   * carry generate, kill and propagate stages, and a full 32-stage chain;
//   * hold: the sender already drives the spacer while the next stage has
//     not taken the result; the register must keep the word (and
//     ackout_cur stays 1);
//   * back-pressure: a slow receiver keeps the next word out of the stage
//     (ackout_cur stays 0 with the word applied).
// The sender returns the whole operand bus to the spacer at once, as the
// stage requires (see rt_rca_stage).  The adder's early reset from a
// partial spacer is exercised in tb_rt_rca and tb_eo_full_adder.
// Power-up: the stage has no reset.  All data rails are driven high, then
// the spacer is driven with ackout_rx = 1, then ackout_rx is lowered; this
// leaves every C-element cleared whatever its initial value.
//
// The 4-phase protocol and the stage follow the published design; the
// environment's timing, the word count and the whole-bus reset rule are
// this design's own.
module tb_rt_rca_stage;
  import dr_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned NWORDS = 1200;

  dr_t [N-1:0] a_in, b_in, sum_out;
  dr_t         cin_in, cout_out;
  logic        ackout_cur, ackout_nxt, ackout_rx;

  int checks = 0, failures = 0;
  int n_gen = 0, n_kill = 0, n_prop = 0, n_full_chain = 0;
  int n_hold = 0, n_stall = 0, n_results = 0;
  logic [N:0] expq[$];
  logic       running = 1'b0;

  rt_rca_stage dut (
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
    #(NWORDS * 2000 + 100000);
    failures++;
    $display("watchdog expired: ackout_cur=%b ackout_nxt=%b ackout_rx=%b ackin_cur=%b results=%0d",
             ackout_cur, ackout_nxt, ackout_rx, dut.ackin_cur, n_results);
    $display("op_q=%b\nsum_c=%b cout_c=%b\nres_q=%b", dut.op_q, dut.sum_c, dut.cout_c, dut.res_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // No output wire may carry (1, 1).
  always @(sum_out, cout_out) begin
    if (running) begin
      logic bad;
      bad = cout_out.r1 & cout_out.r0;
      for (int i = 0; i < int'(N); i++) bad |= sum_out[i].r1 & sum_out[i].r0;
      check(!bad, "illegal dual-rail code on the outputs");
    end
  end

  function automatic logic word_spacer(input dr_t [N-1:0] w);
    logic ok = 1'b1;
    for (int i = 0; i < int'(N); i++) ok &= dr_is_spacer(w[i]);
    return ok;
  endfunction

  function automatic logic word_valid(input dr_t [N-1:0] w);
    logic ok = 1'b1;
    for (int i = 0; i < int'(N); i++) ok &= dr_is_valid(w[i]);
    return ok;
  endfunction

  // ---------------------------------------------------------------- sender
  task automatic send(input logic [N-1:0] va, input logic [N-1:0] vb, input logic vc);
    int run = 0;
    logic hold;
    for (int i = 0; i < int'(N); i++) begin
      a_in[i] = dr_encode(va[i]);
      b_in[i] = dr_encode(vb[i]);
      if (va[i] & vb[i]) begin n_gen++; run = 0; end
      else if (!va[i] & !vb[i]) begin n_kill++; run = 0; end
      else begin n_prop++; run++; end
    end
    if (run == int'(N)) n_full_chain++;
    cin_in = dr_encode(vc);
    expq.push_back({1'b0, va} + {1'b0, vb} + {{N{1'b0}}, vc});
    #2;
    if (!ackout_cur && ackout_nxt && ackout_rx) n_stall++;
    wait (ackout_cur);
    #($urandom_range(6, 1));
    // The whole operand bus returns to the spacer at once.  If the next
    // stage has not yet taken the result, the register must hold the data.
    hold = dut.ackin_cur;
    a_in = '0; b_in = '0; cin_in = DR_SPACER;
    #1;
    if (hold && dut.ackin_cur) begin
      n_hold++;
      check(ackout_cur && word_valid(dut.op_q[N-1:0]) && word_valid(dut.op_q[2*N-1:N]),
            "register holds the word until the next stage has it");
    end
    wait (!ackout_cur);
    #($urandom_range(6, 1));
  endtask

  // -------------------------------------------------------------- receiver
  initial begin : receiver
    wait (running);
    forever begin
      logic [N:0] exp;
      wait (ackout_nxt);
      #1;
      check(expq.size() > 0, "result without a word sent");
      exp = expq.pop_front();
      for (int i = 0; i < int'(N); i++)
        check(sum_out[i] == dr_encode(exp[i]), $sformatf("sum bit %0d", i));
      check(cout_out == dr_encode(exp[N]), "carry out");
      n_results++;
      // Sometimes a slow receiver, to back-pressure the stage.
      #($urandom_range(3, 0) == 0 ? $urandom_range(60, 20) : $urandom_range(5, 1));
      ackout_rx = 1'b1;
      wait (!ackout_nxt);
      #1;
      check(word_spacer(sum_out) && dr_is_spacer(cout_out), "outputs back to spacer");
      #($urandom_range(5, 1));
      ackout_rx = 1'b0;
    end
  end

  initial begin : sender
    // Power-up sequence (see header).
    a_in = '1; b_in = '1; cin_in = 2'b11; ackout_rx = 1'b0;
    #20;
    a_in = '0; b_in = '0; cin_in = DR_SPACER; ackout_rx = 1'b1;
    #20;
    ackout_rx = 1'b0;
    #20;
    check(!ackout_cur && !ackout_nxt && word_spacer(sum_out), "idle after power-up");
    running = 1'b1;

    // Directed: full-length carry chain both ways, then the two-bit example
    // pattern (A = B = 3, carry 0).
    send('1, '0, 1'b1);
    send('0, '1, 1'b0);
    send(N'(3), N'(3), 1'b0);
    for (int i = 0; i < int'(NWORDS) - 3; i++)
      send(N'({$urandom, $urandom}), N'({$urandom, $urandom}), 1'($urandom));

    wait (expq.size() == 0);
    #200;
    check(n_results == int'(NWORDS), "every word produced a result");
    if (n_gen == 0 || n_kill == 0 || n_prop == 0 || n_full_chain == 0 ||
        n_hold == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("words=%0d generate=%0d kill=%0d propagate=%0d full_chain=%0d hold=%0d stall=%0d",
             n_results, n_gen, n_kill, n_prop, n_full_chain, n_hold, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
