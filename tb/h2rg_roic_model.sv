// h2rg_roic_model: behavioural model of the H2RG readout chip as seen by the
// controller (not synthesizable; used by testbenches only).
//
// Serial interface: while CSB is low, DATAIN (on the FSyncB pin) is shifted
// in at each DATACLK (VClk pin) rising edge; when CSB returns high the word
// is stored in `reg_words`. The model counts as "configured" once
// CONFIG_WORDS words have been received and only then drives a video signal.
// Scanner: FSyncB low (with CSB high) restarts the frame, each VClk rising
// edge (with CSB high) selects the next row and resets the column, each HClk
// rising edge selects the next column. The video output `vout` of pixel
// (row, col) is the mid-point voltage of the 10-bit code pixel_code(row, col)
// for a 3.3 V converter, so an ideal ADC returns that code exactly.
module h2rg_roic_model #(
  parameter int unsigned WORD_BITS    = 16,
  parameter int unsigned CONFIG_WORDS = 2
) (
  input  logic csb,
  input  logic vclk,       // VClk, also DATACLK
  input  logic fsyncb,     // FSyncB, also DATAIN
  input  logic lsyncb,
  input  logic hclk,
  output real  vout
);
  logic [WORD_BITS-1:0] reg_words [$];
  logic [31:0] shreg = 0;
  int  nbits = 0;
  int  row = -1, col = -1;
  int  hclk_in_line = 0, lines = 0, frames = 0, bad_lines = 0;
  int  dataclk_pulses = 0, lsync_pulses = 0, n_words = 0;
  int  clocks_before_config = 0;

  function automatic int pixel_code(int r, int c);
    return (r * 37 + c * 11 + 5) % 1024;
  endfunction

  function automatic bit configured();
    return n_words >= CONFIG_WORDS;
  endfunction

  initial vout = 0.0;

  always @(posedge vclk) begin
    if (!csb) begin
      shreg = {shreg[30:0], fsyncb};
      nbits++;
      dataclk_pulses++;
    end else begin
      if (!configured()) clocks_before_config++;
      if (row >= 0 && hclk_in_line != 0) lines++;
      row++;
      col = -1;
      hclk_in_line = 0;
    end
  end

  always @(posedge csb) begin
    if (nbits > 0) begin
      reg_words.push_back(WORD_BITS'(shreg));
      n_words++;
    end
    nbits = 0;
  end

  always @(negedge fsyncb) if (csb) begin
    if (!configured()) clocks_before_config++;
    frames++;
    row = -1;
    col = -1;
  end

  always @(negedge lsyncb) lsync_pulses++;

  always @(posedge hclk) begin
    if (!configured()) clocks_before_config++;
    col++;
    hclk_in_line++;
  end

  always @(row or col or n_words) begin
    if (configured() && row >= 0 && col >= 0)
      vout = (real'(pixel_code(row, col)) + 0.5) * 3.3 / 1024.0;
    else
      vout = 0.0;
  end
endmodule
