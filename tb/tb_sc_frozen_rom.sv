// tb_sc_frozen_rom: reads back the frozen-set ROM.
// n = 8, k = 4: the construction must freeze positions 0, 1, 2, 4, the
// well-known (8,4) polar code. n = 1024, k = 512 (defaults): every entry must
// match the testbench's own construction (ranking by direct counting), with
// exactly 512 frozen positions, position 0 frozen and position 1023 free.
module tb_sc_frozen_rom;
  import tb_sc_ref_pkg::*;

  logic [2:0] addr8;
  logic       frz8;
  logic [9:0] addr1k;
  logic       frz1k;
  int checks = 0, failures = 0;

  sc_frozen_rom #(.N(8), .K(4)) dut8 (.addr(addr8), .frozen(frz8));
  sc_frozen_rom dut1k (.addr(addr1k), .frozen(frz1k));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit got, input bit exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got=%0d exp=%0d", what, got, exp_v);
    end
  endtask

  initial begin
    bit exp8 [8] = '{1, 1, 1, 0, 1, 0, 0, 0};
    bit ref1k[];
    int nfrozen = 0;
    ref_frozen(1024, 512, 2.0, ref1k);
    #1;
    for (int a = 0; a < 8; a++) begin
      addr8 = 3'(a);
      #1;
      check(frz8, exp8[a], $sformatf("n8[%0d]", a));
    end
    for (int a = 0; a < 1024; a++) begin
      addr1k = 10'(a);
      #1;
      nfrozen += int'(frz1k);
      check(frz1k, ref1k[a], $sformatf("n1024[%0d]", a));
    end
    check(ref1k[0], 1'b1, "reference n1024[0]");
    check(ref1k[1023], 1'b0, "reference n1024[1023]");
    checks++;
    if (nfrozen != 512) begin
      failures++;
      $display("n1024 frozen count %0d", nfrozen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
