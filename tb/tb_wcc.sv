// Self-checking testbench of wcc: random column currents, all switch
// settings, against 8*c0 + 4*c1 + 2*c2 + c3 per selected side.
`timescale 1ns/1ps
module tb_wcc;
  import nvm_pkg::*;
  localparam int unsigned CW = 8;
  logic [CW-1:0] cur1 [WBITS]; logic [CW-1:0] cur2 [WBITS];
  logic s_l, s_r; logic [CW+WBITS:0] iout;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  wcc #(.CW(CW)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 400; n++) begin
      int e;
      for (int b = 0; b < WBITS; b++) begin
        cur1[b] = CW'($urandom_range(0, 128)); cur2[b] = CW'($urandom_range(0, 128));
      end
      if (n < 4) for (int b = 0; b < WBITS; b++) begin cur1[b] = 128; cur2[b] = 128; end
      s_l = n[0]; s_r = n[1];
      #1;
      e = 0;
      if (s_l) e += 8*cur1[0] + 4*cur1[1] + 2*cur1[2] + cur1[3];
      if (s_r) e += 8*cur2[0] + 4*cur2[1] + 2*cur2[2] + cur2[3];
      checks++;
      if (int'(iout) != e) begin failures++; if (failures < 10) $display("FAIL iout=%0d exp %0d", iout, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
