// tb_dll -- self-checking test of the dll behavioural model.
// While enabled, every RWEB edge must reappear on DVS exactly t_DLL later;
// while disabled DVS must stay high; the edge that coincides with the
// disable is still delivered.
`timescale 1ns/10ps
module tb_dll;
  logic rweb = 1, en = 0, dvs;
  int checks = 0, failures = 0;
  realtime t_r;
  dll #(.T_DLL_NS(3.0)) dut (.*);
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask
  initial begin
    #10;
    repeat (4) begin #6 rweb = ~rweb; #0.5 chk(dvs == 1, "disabled: high"); end
    rweb = 1; #5 en = 1;
    for (int i = 0; i < 8; i++) begin
      #6 rweb = ~rweb;
      #2.9 chk(dvs != rweb, "not yet at 2.9 ns");
      #0.2 chk(dvs == rweb, "follows at 3.0 ns");
    end
    // last edge is rising (rweb high) and en drops at the same time
    #6 rweb = 0; #6 rweb = 1; en = 0;
    #2.9 chk(dvs == 0, "last rising edge not early");
    #0.2 chk(dvs == 1, "last rising edge delivered");
    repeat (4) begin #6 rweb = ~rweb; #3.5 chk(dvs == 1, "disabled again"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
