// adc_sampler: converts the ROIC video output once per pixel.
//
// The buffered analog output of the H2RG is digitised by a 10-bit ADC. For
// each `sample` strobe from the frame clock generator this block pulses the
// ADC's start-of-conversion input, waits for its end-of-conversion pulse and
// emits one pixel word. The 10-bit resolution follows the prototype
// controller; the handshake with the converter and the word format are this
// design's own:
//
//   pix_word[15]    first pixel of the frame (row 0, column 0)
//   pix_word[14]    first pixel of a line (column 0)
//   pix_word[13:10] zero
//   pix_word[9:0]   ADC result
//
// so that the host can find frame and line boundaries in the stream.
// If a new `sample` arrives before the previous conversion has finished the
// new pixel is skipped and `overrun` pulses; this cannot happen when the
// conversion time is below the pixel period.
//
// Timing: `adc_soc` is high in the cycle after `sample`; `pix_valid` is high
// for one cycle, the cycle after `adc_eoc`.
module adc_sampler #(
  parameter int unsigned ADC_BITS = 10,
  parameter int unsigned PIX_WORD = 16,
  parameter int unsigned ROW_W    = 11,
  parameter int unsigned COL_W    = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  // from the frame clock generator
  input  logic                sample,
  input  logic [ROW_W-1:0]    row,
  input  logic [COL_W-1:0]    col,
  // to and from the ADC
  output logic                adc_soc,
  input  logic                adc_eoc,
  input  logic [ADC_BITS-1:0] adc_data,
  // pixel stream
  output logic                pix_valid,
  output logic [PIX_WORD-1:0] pix_word,
  output logic                overrun
);

  logic converting;
  logic sof_q, sol_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      converting <= 1'b0;
      sof_q      <= 1'b0;
      sol_q      <= 1'b0;
      adc_soc    <= 1'b0;
      pix_valid  <= 1'b0;
      pix_word   <= '0;
      overrun    <= 1'b0;
    end else begin
      adc_soc   <= 1'b0;
      pix_valid <= 1'b0;
      overrun   <= 1'b0;
      if (sample && converting) begin
        overrun <= 1'b1;
      end else if (sample) begin
        converting <= 1'b1;
        adc_soc    <= 1'b1;
        sof_q      <= (row == '0) && (col == '0);
        sol_q      <= (col == '0);
      end
      if (converting && adc_eoc) begin
        converting <= 1'b0;
        pix_valid  <= 1'b1;
        pix_word   <= {sof_q, sol_q, (PIX_WORD-2-ADC_BITS)'(0), adc_data};
      end
    end
  end

endmodule
