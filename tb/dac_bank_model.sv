// dac_bank_model: behavioural model of a bank of 12-bit serial bias DACs
// (not synthesizable; used by testbenches only).
//
// All DACs share CLK and SDI; each has an active-low LOAD input. The input
// register shifts SDI in at every CLK rising edge; when a DAC's LOAD goes low
// it takes the last 12 bits shifted in. Its output is code * VFS / 4096
// volts, 0 to 3.3 V full scale as for the prototype's DACs.
module dac_bank_model #(
  parameter int unsigned N_DAC = 8,
  parameter real         VFS   = 3.3
) (
  input  logic             dac_clk,
  input  logic             dac_sdi,
  input  logic [N_DAC-1:0] dac_load_n,
  output logic [11:0]      code [N_DAC],
  output real              vout [N_DAC],
  output int               n_loads
);
  logic [11:0] shreg = '0;
  initial begin
    n_loads = 0;
    for (int k = 0; k < N_DAC; k++) begin
      code[k] = '0;
      vout[k] = 0.0;
    end
  end
  always @(posedge dac_clk) shreg <= {shreg[10:0], dac_sdi};
  for (genvar k = 0; k < N_DAC; k++) begin : g_dac
    always @(negedge dac_load_n[k]) begin
      code[k] = shreg;
      vout[k] = real'(shreg) * VFS / 4096.0;
      n_loads++;
    end
  end
endmodule
