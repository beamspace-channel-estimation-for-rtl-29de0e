// tb_recip_lut: checks all 512 entries of the reciprocal table against
// round(1024/idx) computed in floating point (and 4095 for idx = 0).
module tb_recip_lut;
  import beaches_pkg::*;

  logic [XW-1:0]      idx;
  logic [RECIP_W-1:0] recip;
  int checks = 0, failures = 0;

  recip_lut dut (.idx(idx), .recip(recip));

  initial begin
    for (int i = 0; i < 512; i++) begin
      int exp_v;
      idx = XW'(i);
      #1;
      exp_v = (i == 0) ? 4095 : $rtoi(1024.0 / real'(i) + 0.5);
      checks++;
      if (int'(recip) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL idx=%0d got %0d expected %0d", i, recip, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
