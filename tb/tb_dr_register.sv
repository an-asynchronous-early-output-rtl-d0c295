// tb_dr_register -- self-checking testbench for the dual-rail stage register.
//
// Drives a W = 4 register (zero delay) and a unit-delay copy with random
// rail and ackin changes and compares every output rail with the reference
// "rail follows data when data and ackin agree, otherwise holds".  Directed
// protocol steps check the two cases the 4-phase handshake relies on:
//  * hold data: ackin still 1 while the sender already returns to the
//    spacer -> q keeps the data word;
//  * hold spacer: ackin 0 while the next word already arrives -> q stays
//    spacer until ackin rises.
//
// The hold behaviour checked is what the published stage protocol needs;
// the C-element register itself is this design's choice.
module tb_dr_register;
  import dr_pkg::*;

  localparam int unsigned W = 4;
  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;

  dr_t [W-1:0] d, q0, q1, qref;
  logic        ackin;
  int checks = 0, failures = 0;
  int n_hold_data = 0, n_hold_spacer = 0;

  dr_register #(.W(W), .DLY(0)) u_zero (.d(d), .ackin(ackin), .q(q0));
  dr_register #(.W(W), .DLY(U)) u_unit (.d(d), .ackin(ackin), .q(q1));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: d=%b ackin=%b q0=%b q1=%b ref=%b at %0t", what, d, ackin, q0, q1, qref, $time);
    end
  endtask

  // Reference: per rail C-element of (rail, ackin).
  task automatic update_ref();
    for (int i = 0; i < W; i++) begin
      if (d[i].r1 == ackin) qref[i].r1 = ackin;
      if (d[i].r0 == ackin) qref[i].r0 = ackin;
    end
  endtask

  task automatic step();
    update_ref();
    #(H);
    check(q0 == qref, "zero-delay register");
    #(U);
    check(q1 == qref, "unit-delay register");
    #(U);
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Power-up: all rails and ackin high, then low.
    d = '1; ackin = 1;
    #(3*U);
    d = '0; ackin = 0; qref = '0;
    #(3*U);
    check(q0 == '0 && q1 == '0, "initial spacer");

    // Directed 4-phase steps.
    for (int i = 0; i < 50; i++) begin
      dr_t [W-1:0] word;
      for (int k = 0; k < W; k++) word[k] = dr_encode(1'($urandom));
      // Next word arrives while ackin is still 0: q must stay spacer.
      d = word; step();
      check(q0 == '0, "hold spacer while ackin = 0");
      n_hold_spacer++;
      ackin = 1; step();
      check(q0 == word, "pass data when ackin = 1");
      // Sender resets before the next stage acknowledges: hold data.
      d = '0; step();
      check(q0 == word, "hold data while ackin = 1");
      n_hold_data++;
      ackin = 0; step();
      check(q0 == '0, "pass spacer when ackin = 0");
    end

    // Random rail and ackin changes.
    for (int i = 0; i < 2000; i++) begin
      d = W'($urandom) == 0 ? '0 : (2 * W)'($urandom);
      ackin = 1'($urandom);
      step();
    end

    if (n_hold_data == 0 || n_hold_spacer == 0) begin
      failures++;
      $display("FAIL: hold cases not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
