// tb_completion_detector -- self-checking testbench for the completion
// detector.
//
// Widths 1, 5 and 65 (the operand register of the 32-bit stage), zero delay,
// plus a unit-delay copy of width 65.  Each round fills the bus with a data
// word one wire at a time in random order, then returns it to the spacer one
// wire at a time.  The reference: ackout stays 0 until the last wire is
// valid, then rises; it stays 1 until the last wire is spacer, then falls.
// The unit-delay copy must settle within 1 + ceil(log2 W) cell delays.
//
// Only the detector's function is given by the published design; the
// settling bound checked is that of this design's C-element tree.
module tb_completion_detector;
  import dr_pkg::*;

  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;
  localparam int unsigned WB = 65;
  localparam int unsigned DEPTH = $clog2(WB);

  dr_t [0:0]    d1;
  dr_t [4:0]    d5;
  dr_t [WB-1:0] d65;
  logic ack1, ack5, ack65, ack65t;
  int checks = 0, failures = 0;
  int n_wait_valid = 0, n_wait_spacer = 0;

  completion_detector #(.W(1),  .DLY(0)) u_w1  (.d(d1),  .ackout(ack1));
  completion_detector #(.W(5),  .DLY(0)) u_w5  (.d(d5),  .ackout(ack5));
  completion_detector #(.W(WB), .DLY(0)) u_w65 (.d(d65), .ackout(ack65));
  completion_detector #(.W(WB), .DLY(U)) u_t65 (.d(d65), .ackout(ack65t));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random permutation of 0 .. n-1.
  function automatic void shuffle(ref int order[], input int n);
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i, 0);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endfunction

  initial begin
    int order[];
    // Power-up: all rails high, then low.
    d1 = '1; d5 = '1; d65 = '1;
    #(20*U);
    d1 = '0; d5 = '0; d65 = '0;
    #(20*U);
    check(!ack1 && !ack5 && !ack65 && !ack65t, "initial ack 0");

    for (int r = 0; r < 40; r++) begin
      // --- fill ---
      shuffle(order, WB);
      for (int i = 0; i < int'(WB); i++) begin
        d65[order[i]] = dr_encode(1'($urandom));
        if (order[i] < 5) d5[order[i]] = dr_encode(1'($urandom));
        if (order[i] == 0) d1[0] = dr_encode(1'($urandom));
        #(H);
        if (i < int'(WB) - 1) begin
          check(ack65 == 1'b0, "ack 0 while the word is incomplete");
          n_wait_valid++;
        end
      end
      #((DEPTH + 1) * U);
      check(ack1 && ack5 && ack65 && ack65t, "ack 1 once every wire is valid");
      // --- drain ---
      shuffle(order, WB);
      for (int i = 0; i < int'(WB); i++) begin
        d65[order[i]] = DR_SPACER;
        if (order[i] < 5) d5[order[i]] = DR_SPACER;
        if (order[i] == 0) d1[0] = DR_SPACER;
        #(H);
        if (i < int'(WB) - 1) begin
          check(ack65 == 1'b1, "ack 1 until every wire is spacer");
          n_wait_spacer++;
        end
      end
      #((DEPTH + 1) * U);
      check(!ack1 && !ack5 && !ack65 && !ack65t, "ack 0 once every wire is spacer");
    end

    // Timed response of the unit-delay copy: a word whose last wire arrives
    // at t0 is acknowledged no later than t0 + (1 + DEPTH) cell delays.
    for (int r = 0; r < 20; r++) begin
      int last;
      last = $urandom_range(WB - 1, 0);
      for (int i = 0; i < int'(WB); i++) if (i != last) d65[i] = DR_ONE;
      #((DEPTH + 2) * U);
      check(ack65t == 1'b0, "timed: ack 0 before the last wire");
      d65[last] = DR_ZERO;
      #((DEPTH + 1) * U + H);
      check(ack65t == 1'b1, "timed: ack within 1 + log2 W cell delays");
      d65 = '0;
      #((DEPTH + 1) * U + H);
      check(ack65t == 1'b0, "timed: ack falls within 1 + log2 W cell delays");
      d5 = '0; d1 = '0;
    end

    if (n_wait_valid == 0 || n_wait_spacer == 0) begin
      failures++;
      $display("FAIL: partial words not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
