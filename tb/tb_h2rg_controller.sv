// tb_h2rg_controller: end-to-end test of the controller at a reduced array
// size (16 x 8 pixels, 20 cycles per pixel, an 8-word output buffer).
//
// The controller drives behavioural models of the DAC bank, the readout chip
// and the ADC; a host model drains the pixel stream. The test runs:
//   1. start-up: all DACs must hold their codes (and voltages) and the chip
//      must have received both register words over the shared VClk/FSyncB
//      pins before any frame clock; a frame request made during start-up
//      must be served afterwards;
//   2. a frame with a host that is always ready: every pixel word (value,
//      frame flag, line flag) and the frame length in cycles are checked;
//   3. a frame with a host that stops reading: the buffer must overflow and
//      received plus dropped words must equal the frame size;
//   4. re-initialisation with new DAC codes;
//   5. a frame with an ADC slower than the pixel period: conversions are
//      skipped (overrun) and received plus skipped equals the frame size.
// Each mechanism (DAC write, register write, shared-pin serial clocking,
// pending request, frame, host stall, overflow, reinit, overrun) is counted
// and a mechanism that never occurred is a failure.
module tb_h2rg_controller;
  localparam int unsigned COLS = 16, ROWS = 8, PIX_DIV = 20, N_DAC = 8, DEPTH = 8;
  localparam int unsigned NPIX = COLS * ROWS;
  localparam int unsigned FRAME_CYCLES = PIX_DIV * (1 + ROWS * (1 + COLS));

  logic clk = 0, rst_n = 0;
  logic frame_req = 0, reinit = 0;
  logic [11:0] dac_code [N_DAC];
  logic [15:0] roic_word [2];
  logic dac_clk, dac_sdi;
  logic [N_DAC-1:0] dac_load_n;
  logic roic_csb, roic_vclk, roic_fsyncb, roic_lsyncb, roic_hclk;
  logic adc_soc, adc_eoc;
  logic [9:0] adc_data;
  logic pix_valid, pix_ready = 0;
  logic [15:0] pix_data;
  logic ready, frame_busy, frame_done, overrun, overflow;
  h2rg_pkg::seq_state_t seq_state;

  logic [11:0] dac_out_code [N_DAC];
  real dac_vout [N_DAC];
  int  dac_loads;
  real vout;

  h2rg_controller #(
    .COLS(COLS), .ROWS(ROWS), .PIX_DIV(PIX_DIV), .N_DAC(N_DAC),
    .DAC_HALF_DIV(2), .ROIC_HALF_DIV(2), .FIFO_DEPTH(DEPTH)
  ) dut (.*);

  dac_bank_model #(.N_DAC(N_DAC)) u_dacs (
    .dac_clk, .dac_sdi, .dac_load_n, .code(dac_out_code), .vout(dac_vout), .n_loads(dac_loads));
  h2rg_roic_model u_roic (
    .csb(roic_csb), .vclk(roic_vclk), .fsyncb(roic_fsyncb), .lsyncb(roic_lsyncb),
    .hclk(roic_hclk), .vout);
  adc10_model #(.CONV_CYCLES(8)) u_adc (
    .clk, .soc(adc_soc), .vin(vout), .eoc(adc_eoc), .data(adc_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Mechanism counters.
  int n_overflow = 0, n_overrun = 0, n_stall = 0, n_frames_done = 0;
  int n_pending = 0, n_reinit = 0;
  always @(posedge clk) if (rst_n) begin
    if (overflow) n_overflow++;
    if (overrun) n_overrun++;
    if (pix_valid && !pix_ready) n_stall++;
    if (frame_done) n_frames_done++;
  end

  // Host: collects the words of the current frame.
  logic [15:0] rx [$];
  int p_ready = 100;
  always @(negedge clk) pix_ready = ($urandom_range(0, 99) < p_ready);
  always @(posedge clk) if (rst_n && pix_valid && pix_ready) rx.push_back(pix_data);

  function automatic logic [15:0] expected_word(int idx);
    int r = idx / COLS, c = idx % COLS;
    return {(idx == 0), (c == 0), 4'b0, 10'(u_roic.pixel_code(r, c))};
  endfunction

  task automatic check_dacs(string when);
    int bad = 0;
    for (int k = 0; k < N_DAC; k++) begin
      if (dac_out_code[k] != dac_code[k]) bad++;
      if (dac_vout[k] < real'(dac_code[k]) * 3.3 / 4096.0 - 1e-9 ||
          dac_vout[k] > real'(dac_code[k]) * 3.3 / 4096.0 + 1e-9) bad++;
    end
    check(bad == 0, $sformatf("%0d DAC outputs wrong %s", bad, when));
  endtask

  // Run one frame: request it, wait for it and for the stream to drain.
  task automatic run_frame(output int cycles);
    cycles = 0;
    rx.delete();
    @(negedge clk);
    frame_req = 1;
    @(negedge clk);
    frame_req = 0;
    while (!frame_busy) @(negedge clk);
    while (!frame_done) begin
      @(negedge clk);
      cycles++;
    end
    p_ready = 100;
    repeat (DEPTH + 40) @(negedge clk);
  endtask

  initial begin
    int cyc, bad;
    for (int k = 0; k < N_DAC; k++) dac_code[k] = 12'($urandom);
    dac_code[0] = 12'hFFF;
    dac_code[1] = 12'h000;
    roic_word[0] = 16'h4A01;
    roic_word[1] = 16'hC3B5;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. start-up, with a frame request arriving early
    repeat (10) @(negedge clk);
    check(!ready && seq_state != h2rg_pkg::SEQ_READY, "still setting up");
    frame_req = 1;
    @(negedge clk);
    frame_req = 0;
    n_pending++;
    while (!ready && !frame_busy) @(negedge clk);
    check_dacs("after start-up");
    check(dac_loads == N_DAC, $sformatf("%0d DAC loads", dac_loads));
    check(u_roic.n_words == 2 && u_roic.reg_words[0] == roic_word[0] &&
          u_roic.reg_words[1] == roic_word[1], "ROIC register words received");
    check(u_roic.dataclk_pulses == 32, $sformatf("%0d DATACLK pulses on VClk", u_roic.dataclk_pulses));
    check(u_roic.clocks_before_config == 0, "no frame clock before configuration");
    // the early request must now run a frame
    while (!frame_done) @(negedge clk);
    repeat (DEPTH + 40) @(negedge clk);
    check(rx.size() == NPIX, $sformatf("pending-request frame: %0d words", rx.size()));

    // 2. clean frame
    run_frame(cyc);
    check(cyc == FRAME_CYCLES, $sformatf("frame took %0d cycles, expected %0d", cyc, FRAME_CYCLES));
    check(rx.size() == NPIX, $sformatf("%0d words received", rx.size()));
    bad = 0;
    for (int i = 0; i < rx.size() && i < NPIX; i++)
      if (rx[i] != expected_word(i)) begin
        if (bad < 4) $display("word %0d: %h expected %h", i, rx[i], expected_word(i));
        bad++;
      end
    check(bad == 0, $sformatf("%0d pixel words wrong", bad));
    check(u_roic.frames == 3 - 1 && u_roic.lsync_pulses == 2 * ROWS,
          $sformatf("chip saw %0d frames, %0d line syncs", u_roic.frames, u_roic.lsync_pulses));
    check(n_overflow == 0 && n_overrun == 0, "no loss in clean frames");

    // 3. host stops reading: overflow
    p_ready = 0;
    run_frame(cyc);
    check(n_overflow > 0, "buffer overflowed");
    check(rx.size() + n_overflow == NPIX,
          $sformatf("received %0d + dropped %0d", rx.size(), n_overflow));
    bad = 0;
    for (int i = 0; i < DEPTH && i < rx.size(); i++)
      if (rx[i] != expected_word(i)) bad++;
    check(bad == 0, "words kept before the overflow are intact");

    // 4. re-initialise with new DAC codes
    for (int k = 0; k < N_DAC; k++) dac_code[k] = 12'($urandom);
    @(negedge clk);
    reinit = 1;
    @(negedge clk);
    reinit = 0;
    n_reinit++;
    repeat (5) @(negedge clk);
    while (!ready) @(negedge clk);
    check_dacs("after reinit");
    check(u_roic.n_words == 4, "registers rewritten");

    // 5. ADC slower than the pixel period: overrun
    u_adc.conv_cycles = PIX_DIV + 5;
    run_frame(cyc);
    check(n_overrun > 0, "conversions overran");
    check(rx.size() + n_overrun == NPIX,
          $sformatf("received %0d + skipped %0d", rx.size(), n_overrun));
    u_adc.conv_cycles = 8;

    // mechanisms
    check(dac_loads == 2 * N_DAC, "DAC writes");
    check(u_roic.dataclk_pulses == 64, "register writes over shared pins");
    check(n_pending > 0, "pending request");
    check(n_frames_done == 4, $sformatf("%0d frames", n_frames_done));
    check(n_stall > 0, "host stall");
    check(n_reinit > 0, "reinit");
    $display("mechanisms: dac_loads=%0d dataclk=%0d frames=%0d stalls=%0d overflow=%0d overrun=%0d reinit=%0d pending=%0d",
             dac_loads, u_roic.dataclk_pulses, n_frames_done, n_stall, n_overflow, n_overrun, n_reinit, n_pending);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
