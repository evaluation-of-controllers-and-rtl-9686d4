// tb_adc_sampler: self-checking test of the per-pixel ADC sampler.
//
// Sample strobes with row/column tags are driven at a fixed pixel period
// against the 10-bit ADC model; the analog input changes each pixel. Each
// pixel word is compared with the code computed here from the input voltage
// and with the frame/line flags expected from the tags; the ADC start and
// the word's arrival are checked against the stated one-cycle latencies.
// A strobe issued during a conversion must be dropped and flagged.
module tb_adc_sampler;
  localparam int unsigned CONV = 7;

  logic clk = 0, rst_n = 0;
  logic sample = 0;
  logic [2:0] row = 0, col = 0;
  logic adc_soc, adc_eoc, pix_valid, overrun;
  logic [9:0] adc_data;
  logic [15:0] pix_word;
  real vin = 0.0;
  int checks = 0, failures = 0;

  adc_sampler #(.ADC_BITS(10), .PIX_WORD(16), .ROW_W(3), .COL_W(3)) dut (
    .clk, .rst_n, .sample, .row, .col, .adc_soc, .adc_eoc, .adc_data,
    .pix_valid, .pix_word, .overrun);
  adc10_model #(.CONV_CYCLES(CONV)) u_adc (
    .clk, .soc(adc_soc), .vin, .eoc(adc_eoc), .data(adc_data));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pixel(input int r, input int c, input real v);
    logic [15:0] expw;
    int code, cyc;
    code = (v >= 3.3) ? 1023 : $rtoi(v / 3.3 * 1024.0);
    expw = {(r == 0 && c == 0), (c == 0), 4'b0, 10'(code)};
    @(negedge clk);
    vin = v; row = 3'(r); col = 3'(c); sample = 1;
    @(negedge clk);
    sample = 0;
    check(adc_soc, "ADC start one cycle after the strobe");
    cyc = 0;
    while (!pix_valid) begin
      @(negedge clk);
      cyc++;
    end
    // ADC takes CONV cycles after it sees adc_soc, the sampler one more
    check(cyc == CONV + 2, $sformatf("pixel word %0d cycles after start", cyc));
    check(pix_word == expw, $sformatf("pixel (%0d,%0d) word %h expected %h", r, c, pix_word, expw));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 4; c++)
        pixel(r, c, real'($urandom_range(0, 3400)) / 1000.0);
    pixel(1, 1, 0.0);
    pixel(1, 2, 3.2999);
    // a strobe during a conversion is dropped
    @(negedge clk);
    row = 3'd2; col = 3'd0; sample = 1; vin = 1.0;
    @(negedge clk);
    sample = 0;
    @(negedge clk);
    @(negedge clk);
    sample = 1; col = 3'd1;
    @(negedge clk);
    sample = 0;
    check(overrun, "overrun flagged");
    check(!adc_soc, "no second conversion started");
    while (!pix_valid) @(negedge clk);
    check(pix_word[9:0] == 10'($rtoi(1.0 / 3.3 * 1024.0)) && pix_word[14], "first pixel kept");
    repeat (CONV + 3) begin
      @(negedge clk);
      check(!pix_valid, "no word for the dropped strobe");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
