`timescale 1ns/1ps
// Self-checking testbench of pim_ctrl with a behavioural ADC timing model:
// phase sequences and durations of SRAM write/read, NVM programming with
// verify (pass and fail), and a full bit-serial PIM operation: the order and
// length of phases A-D in each conversion, the side and IA bits, the tracking
// window, the post-processing steering, and the 1280 ns MAC latency.
module tb_pim_ctrl;
  import nvm_pkg::*;
  localparam int unsigned ROWS = 8, COLS = 8, IAB = 4, DIV = 40;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_valid, prog_done, prog_ok, pim_active;
  cmd_t cmd; logic [2:0] row; logic [COLS-1:0] wdata, data_q, sense;
  logic [ROWS-1:0][IAB-1:0] ia; logic [ROWS-1:0] ia_bits;
  phase_t phase; side_t side; logic [2:0] row_q;
  logic adc_ce, adc_start, adc_done, track, pp_clear, pp_last; logic [1:0] pp_bit_idx;
  int checks = 0, failures = 0;
  logic corrupt = 0;
  always #0.25 clk = ~clk;

  pim_ctrl #(.ROWS(ROWS), .COLS(COLS), .IAB(IAB), .ADC_DIV(DIV)) dut (.*);

  // ADC timing model: 8 ADC clocks from the accepting edge to done
  int adc_cnt = -1;
  always @(posedge clk) begin
    if (adc_ce) begin
      if (adc_cnt == 7 || adc_cnt < 0) adc_cnt <= adc_start ? 0 : -1;
      else adc_cnt <= adc_cnt + 1;
    end
  end
  assign adc_done = adc_ce && (adc_cnt == 7);
  // verify-read loopback: the array reads back what was programmed
  assign sense = (phase == PH_VERIFY) ? (corrupt ? ~data_q : data_q) : '0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic issue(cmd_t c, logic [2:0] r, logic [COLS-1:0] d);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; row = r; wdata = d; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // count consecutive ticks spent in one phase
  task automatic expect_phase(phase_t p, int n, side_t s);
    for (int k = 0; k < n; k++) begin
      chk(phase == p && side == s, $sformatf("phase %s tick %0d (got %s side %0d)", p.name(), k, phase.name(), side));
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = CMD_SRAM_WR; row = 0; wdata = 0; ia = '0;
    #2 rst_n = 1;
    // SRAM write: 2 ticks of PH_SRAM_WR on the addressed row
    issue(CMD_SRAM_WR, 3'd5, 8'hA5);
    chk(row_q == 3'd5 && data_q == 8'hA5, "write row/data latched");
    chk(!cmd_ready, "busy during write");
    expect_phase(PH_SRAM_WR, 2, SIDE_L);
    chk(phase == PH_HOLD && cmd_ready, "back to hold after write");
    // SRAM read
    issue(CMD_SRAM_RD, 3'd2, '0);
    expect_phase(PH_SRAM_RD, 2, SIDE_L);
    chk(rd_valid, "rd_valid pulse");
    // NVM programming: 3 x 4 ns pulses, 2 x 1 ns verify
    issue(CMD_PROG, 3'd1, 8'h3C);
    expect_phase(PH_PROG_HRS, 8, SIDE_L);
    expect_phase(PH_PROG_LRS_L, 8, SIDE_L);
    expect_phase(PH_PROG_LRS_R, 8, SIDE_L);
    expect_phase(PH_VERIFY, 2, SIDE_L);
    expect_phase(PH_VERIFY, 2, SIDE_R);
    chk(prog_done && prog_ok, "program verified");
    corrupt = 1;
    issue(CMD_PROG, 3'd1, 8'h0F);
    while (!prog_done) @(negedge clk);
    chk(!prog_ok, "verify failure reported");
    corrupt = 0;
    // PIM
    for (int r = 0; r < ROWS; r++) ia[r] = 4'($urandom);
    ia[0] = 4'hF;
    issue(CMD_PIM, 3'd0, '0);
    chk(pim_active, "pim active");
    begin
      realtime t_first, t_last;
      int done_seen;
      done_seen = 0;
      for (int n = 0; n < 2 * IAB; n++) begin
        side_t s;
        s = (n < IAB) ? SIDE_L : SIDE_R;
        // wait for the conversion start edge
        while (phase != PH_PIM_A) begin
          if (adc_done) begin
            chk(pp_bit_idx == 2'((n - 1) % IAB) && pp_last == 0, "pp steering mid-operation");
            done_seen++;
          end
          @(negedge clk);
        end
        if (n == 0) t_first = $realtime;
        chk(adc_cnt == 0, "PIM cycle starts in the ADC sample cycle");
        expect_phase(PH_PIM_A, 3, s);
        for (int k = 0; k < 2; k++) begin
          chk(track, "track in phase B");
          for (int r = 0; r < ROWS; r++) chk(ia_bits[r] == ia[r][n % IAB], "ia bit");
          expect_phase(PH_PIM_B, 1, s);
        end
        chk(!track, "no track after B");
        expect_phase(PH_PIM_C, 1, s);
        expect_phase(PH_PIM_D, 1, s);
        chk(phase == PH_HOLD, "hold after PIM cycle");
      end
      while (!adc_done) @(negedge clk);
      chk(pp_last && pp_bit_idx == 2'(IAB - 1), "last conversion flagged");
      t_last = $realtime;
      // phase A is first seen 0.25 ns after the start edge and done 0.25 ns
      // before the edge that ends the last conversion
      chk(t_last - t_first + 0.5 == 2 * IAB * 8 * DIV * 0.5, $sformatf("MAC latency %0t", t_last - t_first + 0.5));
      $display("PIM MAC latency %0.1f ns, %0d intermediate conversions", t_last - t_first + 0.5, done_seen);
      chk(done_seen == 2 * IAB - 1, "all conversions completed");
      @(negedge clk);
      chk(cmd_ready && !pim_active, "idle after PIM");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
