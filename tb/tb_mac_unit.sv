// tb_mac_unit: checks the multiplier array and adder tree of mac_unit.
//
// Two instances (P_IN = 8, a power of two, and P_IN = 5, padded tree) get
// random and extreme signed operands; each result is compared with a dot
// product computed in the testbench. Combinational: one check per vector.
module tb_mac_unit;
  import mtd_pkg::*;
  import mtd_ref_pkg::*;

  int checks = 0, failures = 0;
  word_t x8 [8], w8 [8], x5 [5], w5 [5];
  acc_t  s8, s5;

  mac_unit #(.P_IN(8)) dut8 (.x(x8), .w(w8), .sum(s8));
  mac_unit #(.P_IN(5)) dut5 (.x(x5), .w(w5), .sum(s5));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint e8, e5;
      e8 = 0;
      e5 = 0;
      for (int j = 0; j < 8; j++) begin
        x8[j] = (t < 2) ? word_t'(t == 0 ? -128 : 127) : word_t'(rnd8());
        w8[j] = (t < 2) ? word_t'(-128) : word_t'(rnd8());
        e8 += longint'(x8[j]) * longint'(w8[j]);
      end
      for (int j = 0; j < 5; j++) begin
        x5[j] = word_t'(rnd8());
        w5[j] = word_t'(rnd8());
        e5 += longint'(x5[j]) * longint'(w5[j]);
      end
      #1;
      checks += 2;
      if (longint'(s8) != e8) begin
        failures++;
        if (failures < 5) $display("mac8 mismatch: got %0d expected %0d", s8, e8);
      end
      if (longint'(s5) != e5) begin
        failures++;
        if (failures < 5) $display("mac5 mismatch: got %0d expected %0d", s5, e5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
