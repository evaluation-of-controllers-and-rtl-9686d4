// tb_h2rg_controller_full: one complete full-size readout of the controller
// with every parameter at its default: 2048 x 2048 pixels, 100 cycles per
// pixel, 8 DACs, two ROIC register words, a 512-word output buffer.
//
// After start-up (DAC codes and register words checked at the models) one
// frame is requested. A host that is always ready checks every pixel word
// against the value the readout-chip model put on its output, in row-major
// order with the frame and line flags, and the frame length is checked
// against 100*(1 + 2048*2049) cycles. At a 10 MHz clock this frame is the
// 100 kHz single-output readout of a whole H2RG, about 42 s of real time.
module tb_h2rg_controller_full;
  localparam int unsigned COLS = h2rg_pkg::H2RG_COLS, ROWS = h2rg_pkg::H2RG_ROWS;
  localparam int unsigned N_DAC = h2rg_pkg::N_DAC;
  localparam int unsigned NPIX = COLS * ROWS;
  localparam longint unsigned FRAME_CYCLES = longint'(h2rg_pkg::PIX_DIV) * (1 + ROWS * (1 + COLS));

  logic clk = 0, rst_n = 0;
  logic frame_req = 0, reinit = 0;
  logic [11:0] dac_code [N_DAC];
  logic [15:0] roic_word [2];
  logic dac_clk, dac_sdi;
  logic [N_DAC-1:0] dac_load_n;
  logic roic_csb, roic_vclk, roic_fsyncb, roic_lsyncb, roic_hclk;
  logic adc_soc, adc_eoc;
  logic [9:0] adc_data;
  logic pix_valid, pix_ready = 1;
  logic [15:0] pix_data;
  logic ready, frame_busy, frame_done, overrun, overflow;
  h2rg_pkg::seq_state_t seq_state;

  logic [11:0] dac_out_code [N_DAC];
  real dac_vout [N_DAC];
  int  dac_loads;
  real vout;

  h2rg_controller dut (.*);

  dac_bank_model #(.N_DAC(N_DAC)) u_dacs (
    .dac_clk, .dac_sdi, .dac_load_n, .code(dac_out_code), .vout(dac_vout), .n_loads(dac_loads));
  h2rg_roic_model u_roic (
    .csb(roic_csb), .vclk(roic_vclk), .fsyncb(roic_fsyncb), .lsyncb(roic_lsyncb),
    .hclk(roic_hclk), .vout);
  adc10_model #(.CONV_CYCLES(30)) u_adc (
    .clk, .soc(adc_soc), .vin(vout), .eoc(adc_eoc), .data(adc_data));

  always #50 clk = ~clk;   // 10 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Streaming host check.
  int n_rx = 0, n_bad = 0, n_overflow = 0, n_overrun = 0;
  always @(posedge clk) if (rst_n) begin
    if (overflow) n_overflow++;
    if (overrun) n_overrun++;
    if (pix_valid && pix_ready) begin
      int r, c;
      logic [15:0] e;
      r = n_rx / COLS;
      c = n_rx % COLS;
      e = {(n_rx == 0), (c == 0), 4'b0, 10'(u_roic.pixel_code(r, c))};
      if (pix_data != e) begin
        if (n_bad < 4) $display("word %0d: %h expected %h", n_rx, pix_data, e);
        n_bad++;
      end
      n_rx++;
    end
  end

  initial begin
    longint unsigned cyc = 0;
    int bad = 0;
    for (int k = 0; k < N_DAC; k++) dac_code[k] = 12'($urandom);
    roic_word[0] = 16'h4A01;
    roic_word[1] = 16'hC3B5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    for (int k = 0; k < N_DAC; k++) if (dac_out_code[k] != dac_code[k]) bad++;
    check(bad == 0 && dac_loads == N_DAC, "DACs programmed");
    check(u_roic.n_words == 2 && u_roic.reg_words[0] == roic_word[0] &&
          u_roic.reg_words[1] == roic_word[1], "ROIC registers programmed");
    frame_req = 1;
    @(negedge clk);
    frame_req = 0;
    while (!frame_busy) @(negedge clk);
    while (!frame_done) begin
      @(negedge clk);
      cyc++;
    end
    repeat (100) @(negedge clk);
    check(cyc == FRAME_CYCLES, $sformatf("frame took %0d cycles, expected %0d", cyc, FRAME_CYCLES));
    check(n_rx == NPIX, $sformatf("%0d pixel words received", n_rx));
    check(n_bad == 0, $sformatf("%0d pixel words wrong", n_bad));
    check(n_overflow == 0 && n_overrun == 0, "no words lost");
    check(u_roic.frames == 1 && u_roic.lsync_pulses == ROWS, "one frame of 2048 lines at the chip");
    check(u_roic.clocks_before_config == 0, "no frame clock before configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FRAME_CYCLES + 100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
