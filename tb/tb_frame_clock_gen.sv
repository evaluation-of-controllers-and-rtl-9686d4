// tb_frame_clock_gen: self-checking test of the H2RG frame clock generator.
//
// A monitor counts, per frame, the FSyncB and LSyncB low pulses, the VClk
// pulses and the HClk pulses of every line, and follows the row/column of
// each sample strobe. These are compared with the counts a frame of
// ROWS x COLS pixels must have, with the pixel order (row-major), with the
// frame length PIX_DIV*(1 + ROWS*(1 + COLS)) cycles and with the rule that
// each pixel slot holds exactly one HClk pulse before its sample strobe,
// and that a sample strobe comes at least 3 cycles before the next HClk.
module tb_frame_clock_gen;
  localparam int unsigned COLS = 8, ROWS = 4, PIX_DIV = 12;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, hclk, lsyncb, vclk, fsyncb, sample;
  logic [1:0] row;
  logic [2:0] col;
  int checks = 0, failures = 0;

  frame_clock_gen #(.COLS(COLS), .ROWS(ROWS), .PIX_DIV(PIX_DIV)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Monitor.
  int n_fsync, n_lsync, n_vclk, n_hclk_line, n_samples, hclk_since_sample;
  int exp_row, exp_col, bad_order, bad_line_len, bad_slot, since_sample, bad_lead;
  logic p_hclk = 0, p_lsyncb = 1, p_vclk = 0, p_fsyncb = 1;
  always @(posedge clk) begin
    if (rst_n) begin
      if (!fsyncb && p_fsyncb) n_fsync++;
      if (vclk && !p_vclk) n_vclk++;
      if (!lsyncb && p_lsyncb) begin
        if (n_lsync > 0 && n_hclk_line != COLS) bad_line_len++;
        n_lsync++;
        n_hclk_line = 0;
      end
      since_sample++;
      if (hclk && !p_hclk) begin
        if (n_samples > 0 && since_sample < 3) bad_lead++;
        n_hclk_line++;
        hclk_since_sample++;
      end
      if (sample) begin
        if (int'(row) != exp_row || int'(col) != exp_col) bad_order++;
        if (hclk_since_sample != 1 || hclk) bad_slot++;
        hclk_since_sample = 0;
        since_sample = 0;
        n_samples++;
        exp_col++;
        if (exp_col == COLS) begin
          exp_col = 0;
          exp_row++;
        end
      end
    end
    p_hclk <= hclk; p_lsyncb <= lsyncb; p_vclk <= vclk; p_fsyncb <= fsyncb;
  end

  task automatic run_frame();
    int cyc;
    n_fsync = 0; n_lsync = 0; n_vclk = 0; n_hclk_line = 0; n_samples = 0;
    hclk_since_sample = 0; exp_row = 0; exp_col = 0;
    bad_order = 0; bad_line_len = 0; bad_slot = 0; bad_lead = 0; since_sample = 0;
    @(negedge clk);
    check(!busy && hclk == 0 && vclk == 0 && lsyncb && fsyncb, "clocks inactive before frame");
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    // done is registered one cycle after the last slot ends
    check(cyc - 1 == PIX_DIV*(1 + ROWS*(1 + COLS)), $sformatf("frame took %0d cycles", cyc - 1));
    @(negedge clk);  // let the monitor see the last sample strobe
    if (n_hclk_line != COLS) bad_line_len++;
    check(n_fsync == 1, $sformatf("%0d FSyncB pulses", n_fsync));
    check(n_lsync == ROWS, $sformatf("%0d LSyncB pulses", n_lsync));
    check(n_vclk == ROWS, $sformatf("%0d VClk pulses", n_vclk));
    check(bad_line_len == 0, $sformatf("%0d lines without %0d HClk pulses", bad_line_len, COLS));
    check(n_samples == ROWS*COLS, $sformatf("%0d samples", n_samples));
    check(bad_order == 0, $sformatf("%0d samples out of order", bad_order));
    check(bad_slot == 0, $sformatf("%0d pixel slots without one HClk before the sample", bad_slot));
    check(bad_lead == 0, $sformatf("%0d samples less than 3 cycles before the next HClk", bad_lead));
    repeat (3) @(negedge clk);
    check(!busy && hclk == 0 && vclk == 0 && lsyncb && fsyncb, "clocks inactive after frame");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame();
    run_frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
