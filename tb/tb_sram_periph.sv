// Self-checking testbench of sram_periph: bitline levels for every phase and
// side with random data, and the read-data latch.
`timescale 1ns/1ps
module tb_sram_periph;
  import nvm_pkg::*;
  localparam int unsigned COLS = 16;
  logic clk = 0, rst_n = 0;
  phase_t phase; side_t side; logic [COLS-1:0] wdata, rd_in, rdata;
  lvl_t bl [COLS]; lvl_t blb [COLS];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  sram_periph #(.COLS(COLS)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    phase = PH_HOLD; side = SIDE_L; wdata = '0; rd_in = '0;
    #3 rst_n = 1;
    for (int p = 0; p <= 10; p++)
      for (int s = 0; s < 2; s++) begin
        @(negedge clk);
        phase = phase_t'(p); side = side_t'(s); wdata = 16'($urandom); rd_in = 16'($urandom);
        #0.5;
        for (int c = 0; c < COLS; c++) begin
          lvl_t e, eb;
          e = LV_NOM; eb = LV_NOM;
          case (p)
            1: begin e = wdata[c] ? LV_NOM : LV_GND; eb = wdata[c] ? LV_GND : LV_NOM; end
            3: begin e = LV_GND; eb = LV_GND; end
            4: begin e = wdata[c] ? LV_OD : LV_GND; eb = LV_GND; end
            5: begin e = LV_GND; eb = wdata[c] ? LV_OD : LV_GND; end
            7, 8, 9, 10: begin e = (s == 0) ? LV_NOM : LV_GND; eb = (s == 1) ? LV_NOM : LV_GND; end
            default: ;
          endcase
          checks++;
          if (bl[c] !== e || blb[c] !== eb) begin
            failures++;
            if (failures < 10) $display("FAIL p=%0d s=%0d c=%0d bl=%0d blb=%0d exp %0d %0d", p, s, c, bl[c], blb[c], e, eb);
          end
        end
        @(posedge clk); #0.1;
        if (p == 2) begin
          checks++;
          if (rdata !== rd_in) begin failures++; $display("FAIL read latch %h %h", rdata, rd_in); end
        end
      end
    // latch holds when not reading
    begin
      logic [COLS-1:0] keep;
      keep = rdata;
      @(negedge clk); phase = PH_HOLD; rd_in = ~rd_in;
      @(posedge clk); #0.1;
      checks++;
      if (rdata !== keep) begin failures++; $display("FAIL latch not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
