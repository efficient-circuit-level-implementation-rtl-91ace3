// tb_least_flip_mux -- checks the priority selection of the candidate mux
// at the 32-bit encoder's size (32 candidates of 40 bits).
//
// Random candidate words and balance flags, with flags sparse or dense; the
// expected choice, the lowest flagged index or else the last candidate, is
// computed here. Cases with several flags set and with no flag set are
// counted and must both occur.
module tb_least_flip_mux;
  localparam int NU = 32, M = 40, NTEST = 4000;

  int checks = 0, failures = 0;
  int multi = 0, none = 0;

  logic [M-1:0]  cand [NU];
  logic [NU-2:0] bal;
  logic [M-1:0]  sel_word;
  logic [4:0]    sel_idx;

  least_flip_mux #(.NU(NU), .M(M)) dut (.cand, .bal, .sel_word, .sel_idx);

  initial begin
    int exp;
    for (int t = 0; t < NTEST; t++) begin
      for (int j = 0; j < NU; j++) cand[j] = M'({$urandom, $urandom});
      bal = '0;
      case ($urandom_range(3, 0))
        0: bal = '0;
        1: bal[$urandom_range(NU - 2, 0)] = 1'b1;
        2: bal = (NU-1)'($urandom) & (NU-1)'($urandom) & (NU-1)'($urandom);
        default: bal = (NU-1)'($urandom);
      endcase
      #1;
      exp = NU - 1;
      for (int j = NU - 2; j >= 0; j--) if (bal[j]) exp = j;
      if ($countones(bal) > 1) multi++;
      if (bal == '0) none++;
      checks += 2;
      if (sel_idx !== 5'(exp)) begin
        failures++;
        if (failures < 10) $display("FAIL bal=%b idx=%0d exp=%0d", bal, sel_idx, exp);
      end
      if (sel_word !== cand[exp]) begin
        failures++;
        if (failures < 10) $display("FAIL word bal=%b", bal);
      end
    end
    checks++;
    if (multi == 0 || none == 0) begin
      failures++;
      $display("FAIL coverage multi=%0d none=%0d", multi, none);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(NTEST * 10);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
