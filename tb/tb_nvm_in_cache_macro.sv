`timescale 1ns/1ps
// End-to-end testbench of the NVM-in-cache macro at reduced size.
// Writes cache data into every row, programs 4-bit weights into the RRAMs of
// every row (verify must pass), rewrites the cache data (programming destroys
// it), runs PIM operations with random 4-bit input activations and checks
// each word's MAC result against an independent model of the same chain
// (weighted current -> S&H voltage -> ideal 6-bit SAR code -> inversion,
// shift-add over IA bits, left + right sum), checks the 1280 ns latency, and
// reads the cache back to show that PIM left the SRAM data intact.
// Mechanisms counted: SRAM writes and reads, programming with verify, left-
// and right-side conversions that carry current, ADC codes at the clipping
// limits, command back-pressure, and cache retention across PIM.
module tb_nvm_in_cache_macro;
  import nvm_pkg::*;
  localparam int unsigned ROWS  = 16;
  localparam int unsigned WORDS = 8;
  localparam int unsigned NPIM  = 6;
  localparam int unsigned COLS  = WORDS * WBITS;
  localparam int unsigned AW    = $clog2(ROWS);
  localparam int unsigned RW    = ADC_BITS + IA_BITS + 2;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_valid, prog_done, prog_ok, result_valid;
  cmd_t cmd; logic [AW-1:0] row; logic [COLS-1:0] wdata, rdata;
  logic [ROWS-1:0][IA_BITS-1:0] ia;
  logic [WORDS-1:0][RW-1:0] result;
  always #0.25 clk = ~clk;

  nvm_in_cache_macro #(.ROWS(ROWS), .WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_prog = 0, n_conv_l = 0, n_conv_r = 0, n_clip = 0, n_stall = 0, n_retain = 0;
  logic [COLS-1:0] d_ref [ROWS];
  logic [3:0]      w_ref [ROWS][WORDS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic issue(cmd_t c, int r, logic [COLS-1:0] d);
    @(negedge clk);
    cmd = c; row = AW'(r); wdata = d; cmd_valid = 1;
    if (!cmd_ready) n_stall++;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic logic [COLS-1:0] weight_bits(int r);
    logic [COLS-1:0] v;
    for (int w = 0; w < WORDS; w++)
      for (int b = 0; b < WBITS; b++) v[w*WBITS + b] = w_ref[r][w][WBITS-1-b];
    return v;
  endfunction

  function automatic int adc_ref(int i);
    longint d; int v, c;
    d = longint'(i) * longint'(600000 - 87500) / longint'(15 * ROWS);
    v = (d >= 600000) ? 0 : int'(600000 - d);
    c = 0;
    for (int k = 0; k < 64; k++) if (155000 + (k * 415000) / 64 <= v) c = k;
    return c;
  endfunction

  task automatic sram_write_all();
    for (int r = 0; r < ROWS; r++) begin
      d_ref[r] = {COLS{1'b0}};
      for (int k = 0; k < COLS; k += 32) d_ref[r][k +: 32] = $urandom;
      issue(CMD_SRAM_WR, r, d_ref[r]);
      n_wr++;
    end
  endtask

  task automatic sram_check_all(input bit after_pim);
    for (int r = 0; r < ROWS; r++) begin
      issue(CMD_SRAM_RD, r, '0);
      while (!rd_valid) @(negedge clk);
      @(negedge clk);
      n_rd++;
      chk(rdata == d_ref[r], $sformatf("SRAM row %0d read back", r));
      if (after_pim && rdata == d_ref[r]) n_retain++;
    end
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = CMD_SRAM_WR; row = '0; wdata = '0; ia = '0;
    #2 rst_n = 1;
    sram_write_all();
    sram_check_all(0);
    // program weights; row 0 gets all-15 weights to reach the ADC limits
    for (int r = 0; r < ROWS; r++) begin
      for (int w = 0; w < WORDS; w++) w_ref[r][w] = (r == 0) ? 4'hF : 4'($urandom);
      issue(CMD_PROG, r, weight_bits(r));
      while (!prog_done) @(negedge clk);
      chk(prog_ok, $sformatf("program verify row %0d", r));
      if (prog_ok) n_prog++;
    end
    sram_write_all();                      // programming destroyed the cache data
    for (int n = 0; n < NPIM; n++) begin
      int exp_res [WORDS];
      realtime t0;
      for (int r = 0; r < ROWS; r++)
        ia[r] = (n == 0) ? 4'hF : (n == 1) ? 4'h0 : 4'($urandom);
      // reference model
      for (int w = 0; w < WORDS; w++) begin
        exp_res[w] = 0;
        for (int s = 0; s < 2; s++)
          for (int k = 0; k < IA_BITS; k++) begin
            int cur, code;
            cur = 0;
            for (int r = 0; r < ROWS; r++)
              if (ia[r][k])
                for (int b = 0; b < WBITS; b++)
                  if (w_ref[r][w][WBITS-1-b] && (d_ref[r][w*WBITS+b] == (s == 0)))
                    cur += 1 << (WBITS - 1 - b);
            code = adc_ref(cur);
            if (code == 0 || code == 63) n_clip++;
            if (cur > 0 && s == 0) n_conv_l++;
            if (cur > 0 && s == 1) n_conv_r++;
            exp_res[w] += (63 - code) << k;
          end
      end
      issue(CMD_PIM, 0, '0);
      t0 = $realtime;
      // a command issued while PIM runs waits for it (back-pressure)
      if (n == 2) begin
        @(negedge clk);
        chk(!cmd_ready, "busy during PIM");
      end
      while (!result_valid) @(negedge clk);
      // accept at t0-0.5; conversions start on the next ADC clock edge
      chk($realtime - t0 >= 1280.0 && $realtime - t0 <= 1281.0 + 20.0,
          $sformatf("PIM latency %0.1f ns", $realtime - t0));
      for (int w = 0; w < WORDS; w++)
        chk(int'(result[w]) == exp_res[w], $sformatf("PIM %0d word %0d result %0d exp %0d", n, w, result[w], exp_res[w]));
      if (n == 2) begin
        issue(CMD_SRAM_RD, 3, '0);         // exercised with cmd_ready low before
        while (!rd_valid) @(negedge clk);
        chk(rdata == d_ref[3], "read right after PIM");
      end
    end
    sram_check_all(1);
    begin
      issue(CMD_PIM, 0, '0);
      issue(CMD_SRAM_RD, 1, '0);           // issued while the PIM runs
      while (!rd_valid) @(negedge clk);
      chk(rdata == d_ref[1], "read after stalled command");
    end
    $display("mechanisms: sram_wr=%0d sram_rd=%0d prog_verified=%0d conv_left=%0d conv_right=%0d adc_clip=%0d stall=%0d retained_rows=%0d",
             n_wr, n_rd, n_prog, n_conv_l, n_conv_r, n_clip, n_stall, n_retain);
    chk(n_wr > 0, "SRAM write happened");
    chk(n_rd > 0, "SRAM read happened");
    chk(n_prog == ROWS, "every row programmed and verified");
    chk(n_conv_l > 0, "left-side PIM conversion happened");
    chk(n_conv_r > 0, "right-side PIM conversion happened");
    chk(n_clip > 0, "ADC clipping happened");
    chk(n_stall > 0, "command back-pressure happened");
    chk(n_retain == ROWS, "cache data retained through PIM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
