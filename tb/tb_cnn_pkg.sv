// tb_cnn_pkg: self-checking test of the shared package.
//
// Checks sat8 (the 8-bit saturation used after every sum) over the whole
// neighbourhood of both limits and over random 32-bit values, and checks the
// package constants that fix the core size: 32 x 4 PEAs of nine PEs (1152
// multipliers), 8-bit data and the 222-entry reuse arrays. There is no clock;
// a timed watchdog still ends a hung run.
module tb_cnn_pkg;
  import cnn_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  function automatic int ref_sat(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -1000; v <= 1000; v++)
      chk(int'(sat8(32'(v))) == ref_sat(v), $sformatf("sat8(%0d)", v));
    for (int i = 0; i < 5000; i++) begin
      int v;
      v = $signed($urandom);
      chk(int'(sat8(32'(v))) == ref_sat(v), $sformatf("sat8(%0d)", v));
    end
    chk(TM * TN * NPE == 1152, "1152 multipliers");
    chk(TM == 32 && TN == 4 && KSZ == 3, "32 x 4 PEAs of 3 x 3");
    chk(DATA_W == 8, "8-bit data");
    chk(RU_DEPTH == 222, "reuse depth");
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
