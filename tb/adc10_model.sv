// adc10_model: behavioural model of a 10-bit successive-approximation ADC
// (not synthesizable; used by testbenches only).
//
// A start-of-conversion pulse `soc` samples the analog input `vin` (volts);
// `conv_cycles` clock cycles later (CONV_CYCLES unless a testbench changes
// it) `eoc` pulses for one cycle with the result
// code = floor(vin / VREF * 1024), clipped to 0..1023.
module adc10_model #(
  parameter int unsigned CONV_CYCLES = 10,
  parameter real         VREF        = 3.3
) (
  input  logic       clk,
  input  logic       soc,
  input  real        vin,
  output logic       eoc,
  output logic [9:0] data
);
  int   count = 0;
  int   conv_cycles = CONV_CYCLES;
  real  held  = 0.0;
  initial begin
    eoc  = 1'b0;
    data = '0;
  end
  always @(posedge clk) begin
    eoc <= 1'b0;
    if (soc) begin
      held  <= vin;
      count <= conv_cycles;
    end else if (count > 0) begin
      count <= count - 1;
      if (count == 1) begin
        eoc  <= 1'b1;
        data <= (held <= 0.0) ? 10'd0 :
                (held >= VREF) ? 10'd1023 : 10'($rtoi(held / VREF * 1024.0));
      end
    end
  end
endmodule
