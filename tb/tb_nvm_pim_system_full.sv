`timescale 1ns/1ps
// Full-size end-to-end testbench of the signed-weight PIM system: every
// parameter at its default (one bank pair of 128 x 512 sub-arrays).
// Flow: write cache data into every row of every bank and read it back;
// program random 4-bit weight magnitudes into every row of every bank (each
// verify must pass); rewrite the cache data, which programming destroys; run
// PIM operations with 4-bit input activations (each bank pair its own
// vector), including an 8-bit activation
// done as two passes (low nibble, then high nibble accumulated with shift 4),
// and 8-bit weights (wide mode: word 2j upper, word 2j+1 lower nibble) with
// 4-bit and with 8-bit activations;
// compare each signed output with a model of the whole chain (per bank:
// weighted column current -> sample-and-hold voltage -> ideal 6-bit SAR code
// -> inversion, shift-add over IA bits, left + right sum; then positive minus
// negative banks, summed over pairs); check the 1280 ns PIM latency; finally
// read every row of every bank to show that PIM kept the cache data.
// Mechanisms counted (each must occur): SRAM writes and reads, verified
// programming, left- and right-side conversions carrying current, ADC codes
// at a clipping limit, negative (net) outputs, accumulated shifted passes,
// wide (8-bit weight) combining,
// command back-pressure while a PIM runs, and cache retention across PIM.
module tb_nvm_pim_system_full;
  import nvm_pkg::*;
  localparam int unsigned ROWS  = ROWS_DEF;
  localparam int unsigned WORDS = WORDS_DEF;
  localparam int unsigned NPAIR = 1;
  localparam int unsigned NB    = 2 * NPAIR;
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned COLS  = WORDS * WBITS;
  localparam int unsigned AW    = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_valid, prog_done, prog_ok, sum_valid, keep, wide;
  logic [3:0] shift;
  cmd_t cmd; logic [BW-1:0] bank; logic [AW-1:0] row; logic [COLS-1:0] wdata, rdata;
  logic [ROWS-1:0][IA_BITS-1:0] ia [NPAIR];
  logic signed [31:0] sum [WORDS];
  always #0.25 clk = ~clk;

  nvm_pim_system dut (.*);

  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_prog = 0, n_conv_l = 0, n_conv_r = 0, n_clip = 0;
  int n_neg = 0, n_acc = 0, n_wide = 0, n_stall = 0, n_retain = 0;
  logic [COLS-1:0] d_ref [NB][ROWS];
  logic [3:0]      w_ref [NB][ROWS][WORDS];
  longint          model [WORDS];
  longint          dd [WORDS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic issue(cmd_t c, int b, int r, logic [COLS-1:0] d);
    @(negedge clk);
    cmd = c; bank = BW'(b); row = AW'(r); wdata = d; cmd_valid = 1;
    if (!cmd_ready) n_stall++;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic logic [COLS-1:0] weight_bits(int b, int r);
    logic [COLS-1:0] v;
    for (int w = 0; w < WORDS; w++)
      for (int k = 0; k < WBITS; k++) v[w*WBITS + k] = w_ref[b][r][w][WBITS-1-k];
    return v;
  endfunction

  // ideal 6-bit SAR code of the sample-and-hold voltage for a column current
  function automatic int adc_ref(int i);
    longint d; int v, c;
    d = longint'(i) * longint'(600000 - 87500) / longint'(15 * ROWS);
    v = (d >= 600000) ? 0 : int'(600000 - d);
    c = 0;
    for (int k = 0; k < 64; k++) if (155000 + (k * 415000) / 64 <= v) c = k;
    return c;
  endfunction

  // one bank's post-processed result for one word column
  function automatic int bank_ref(int b, int w, logic [ROWS-1:0][IA_BITS-1:0] a, ref int nl, ref int nr, ref int nc);
    int res, cur, code;
    res = 0;
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < IA_BITS; k++) begin
        cur = 0;
        for (int r = 0; r < ROWS; r++)
          if (a[r][k])
            for (int j = 0; j < WBITS; j++)
              if (w_ref[b][r][w][WBITS-1-j] && (d_ref[b][r][w*WBITS+j] == (s == 0)))
                cur += 1 << (WBITS - 1 - j);
        code = adc_ref(cur);
        if (code == 0 || code == 63) nc++;
        if (cur > 0 && s == 0) nl++;
        if (cur > 0 && s == 1) nr++;
        res += (63 - code) << k;
      end
    return res;
  endfunction

  task automatic sram_write_all();
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < ROWS; r++) begin
        d_ref[b][r] = {COLS{1'b0}};
        for (int k = 0; k < COLS; k += 32) d_ref[b][r][k +: 32] = $urandom;
        issue(CMD_SRAM_WR, b, r, d_ref[b][r]);
        n_wr++;
      end
  endtask

  task automatic sram_check_all(input bit after_pim);
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < ROWS; r++) begin
        issue(CMD_SRAM_RD, b, r, '0);
        while (!rd_valid) @(negedge clk);
        @(negedge clk);
        n_rd++;
        chk(rdata == d_ref[b][r], $sformatf("SRAM bank %0d row %0d read back", b, r));
        if (after_pim && rdata == d_ref[b][r]) n_retain++;
      end
  endtask

  // one PIM pass with the given activations, keep and shift; checks the sums
  task automatic pim_pass(input logic [ROWS-1:0][IA_BITS-1:0] a, input bit k, input int sh, input bit probe_stall,
                          input bit wd = 0);
    realtime t0;
    logic [ROWS-1:0][IA_BITS-1:0] ap [NPAIR];
    // pair p gets its own activations: the vector rotated by 3p rows
    for (int p = 0; p < NPAIR; p++)
      for (int r = 0; r < ROWS; r++) ap[p][r] = a[(r + 3 * p) % ROWS];
    for (int w = 0; w < WORDS; w++) begin
      dd[w] = 0;
      for (int p = 0; p < NPAIR; p++)
        dd[w] += longint'(bank_ref(2*p, w, ap[p], n_conv_l, n_conv_r, n_clip))
               - longint'(bank_ref(2*p+1, w, ap[p], n_conv_l, n_conv_r, n_clip));
    end
    for (int w = 0; w < WORDS; w++) begin
      longint d;
      d = !wd ? dd[w] : (w % 2 == 1) ? 0 : (dd[w] << 4) + dd[w+1];
      model[w] = (k ? model[w] : 0) + (d << sh);
    end
    ia = ap; keep = k; shift = 4'(sh); wide = wd;
    if (wd) n_wide++;
    issue(CMD_PIM, 0, 0, '0);
    t0 = $realtime;
    if (probe_stall) issue(CMD_SRAM_RD, NB - 1, 2, '0);   // waits for the PIM
    while (!sum_valid) @(negedge clk);
    // command accepted 0.5 ns before t0; conversions start on the next
    // 50 MHz ADC edge, and the combiner adds one register
    if (!probe_stall)
      chk($realtime - t0 >= 1280.0 && $realtime - t0 <= 1281.5 + 20.0,
          $sformatf("PIM latency %0.1f ns", $realtime - t0));
    if (k) n_acc++;
    for (int w = 0; w < WORDS; w++) begin
      chk(longint'(sum[w]) == model[w], $sformatf("sum word %0d = %0d, expected %0d", w, sum[w], model[w]));
      if (sum[w] < 0) n_neg++;
    end
    if (probe_stall) begin
      while (!rd_valid) @(negedge clk);
      chk(rdata == d_ref[NB-1][2], "read issued during PIM");
    end
  endtask

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ROWS-1:0][IA_BITS-1:0] a, hi;
    cmd_valid = 0; cmd = CMD_SRAM_WR; bank = '0; row = '0; wdata = '0; keep = 0;
    for (int p = 0; p < NPAIR; p++) ia[p] = '0; shift = '0; wide = 0;
    for (int w = 0; w < WORDS; w++) model[w] = 0;
    #2 rst_n = 1;
    sram_write_all();
    sram_check_all(0);
    // row 0 of bank 0 holds all-15 weights, so all-ones inputs reach the ADC limit
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < ROWS; r++) begin
        for (int w = 0; w < WORDS; w++) w_ref[b][r][w] = (b == 0 && r == 0) ? 4'hF : 4'($urandom);
        issue(CMD_PROG, b, r, weight_bits(b, r));
        while (!prog_done) @(negedge clk);
        chk(prog_ok, $sformatf("program verify bank %0d row %0d", b, r));
        if (prog_ok) n_prog++;
      end
    sram_write_all();                      // programming destroyed the cache data
    for (int r = 0; r < ROWS; r++) a[r] = 4'hF;
    pim_pass(a, 0, 0, 0);
    for (int n = 0; n < 3; n++) begin
      for (int r = 0; r < ROWS; r++) a[r] = 4'($urandom);
      pim_pass(a, 0, 0, n == 1);
    end
    // 8-bit activations as two 4-bit passes: low nibble, then high nibble << 4
    for (int r = 0; r < ROWS; r++) begin a[r] = 4'($urandom); hi[r] = 4'($urandom); end
    pim_pass(a, 0, 0, 0);
    pim_pass(hi, 1, 4, 0);
    // 8-bit weights (two word columns), 4-bit then 8-bit activations
    pim_pass(a, 0, 0, 0, 1);
    pim_pass(a, 0, 0, 0, 1);
    pim_pass(hi, 1, 4, 0, 1);
    sram_check_all(1);
    $display("mechanisms: sram_wr=%0d sram_rd=%0d prog_verified=%0d conv_left=%0d conv_right=%0d adc_clip=%0d negative_out=%0d accumulated=%0d wide=%0d stall=%0d retained_rows=%0d",
             n_wr, n_rd, n_prog, n_conv_l, n_conv_r, n_clip, n_neg, n_acc, n_wide, n_stall, n_retain);
    chk(n_wr > 0, "SRAM write happened");
    chk(n_rd > 0, "SRAM read happened");
    chk(n_prog == NB * ROWS, "every row of every bank programmed and verified");
    chk(n_conv_l > 0, "left-side conversion with current");
    chk(n_conv_r > 0, "right-side conversion with current");
    chk(n_clip > 0, "ADC clipping happened");
    chk(n_neg > 0, "negative net output happened");
    chk(n_acc > 0, "shifted accumulation happened");
    chk(n_wide > 0, "8-bit weight combining happened");
    chk(n_stall > 0, "command back-pressure happened");
    chk(n_retain == NB * ROWS, "cache data retained through PIM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
