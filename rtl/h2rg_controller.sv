// h2rg_controller: digital core of a single-output H2RG readout controller.
//
// The controller brings up an H2RG focal plane array (or its bare readout
// chip) and reads out full frames on request:
//   1. after reset all detector clocks rest at their inactive levels;
//   2. the supply and bias DACs are programmed one by one over a shared
//      CLK/SDI bus, each latched by its own LOAD line (dac_serial_writer);
//   3. the ROIC registers are written over the ROIC serial interface
//      (roic_serial_writer). As in the prototype controller, the interface
//      clock DATACLK is driven on the VClk pin and DATAIN on the FSyncB pin,
//      so the ROIC needs no extra lines; only CSB is added;
//   4. on each frame request the frame clock generator drives FSyncB,
//      LSyncB, VClk and HClk for a full frame, the ADC sampler converts the
//      video output once per pixel and the pixel words are buffered for the
//      host link (sample_fifo).
// ctrl_sequencer orders these steps.
//
// The steps, the signal names, the 12-bit DACs, the 10-bit ADC, the
// 2048 x 2048 single-output readout at 100 kHz and the VClk/FSyncB sharing
// follow the prototype controller. The host link itself (USB), the DAC and
// ADC converters, the op-amp buffers and the detector lie outside: their
// signals are ports. Word formats, serial bit timing, the number of DACs
// and the output buffer are this design's own choices (see each module).
//
// Timing at the defaults (10 MHz clock): 1 MHz DAC and ROIC serial clocks;
// one pixel per 100 cycles; a frame takes 100*(1 + 2048*2049) cycles, about
// 42 s. The host must drain pix_* at the pixel rate on average; a word that
// finds the buffer full is dropped and `overflow` pulses.
module h2rg_controller #(
  parameter int unsigned COLS          = h2rg_pkg::H2RG_COLS,
  parameter int unsigned ROWS          = h2rg_pkg::H2RG_ROWS,
  parameter int unsigned PIX_DIV       = h2rg_pkg::PIX_DIV,
  parameter int unsigned N_DAC         = h2rg_pkg::N_DAC,
  parameter int unsigned DAC_HALF_DIV  = 5,
  parameter int unsigned ROIC_HALF_DIV = 5,
  parameter int unsigned FIFO_DEPTH    = 512,
  localparam int unsigned DAC_BITS     = h2rg_pkg::DAC_BITS,
  localparam int unsigned ADC_BITS     = h2rg_pkg::ADC_BITS,
  localparam int unsigned PIX_WORD     = h2rg_pkg::PIX_WORD,
  localparam int unsigned N_ROIC_REG   = h2rg_pkg::N_ROIC_REG,
  localparam int unsigned ROIC_WORD    = h2rg_pkg::ROIC_WORD
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host commands and configuration
  input  logic                 frame_req,
  input  logic                 reinit,
  input  logic [DAC_BITS-1:0]  dac_code  [N_DAC],
  input  logic [ROIC_WORD-1:0] roic_word [N_ROIC_REG],
  // bias / power DACs
  output logic                 dac_clk,
  output logic                 dac_sdi,
  output logic [N_DAC-1:0]     dac_load_n,
  // H2RG clock and serial pins
  output logic                 roic_csb,
  output logic                 roic_vclk,     // VClk, also DATACLK
  output logic                 roic_fsyncb,   // FSyncB, also DATAIN
  output logic                 roic_lsyncb,
  output logic                 roic_hclk,
  // ADC
  output logic                 adc_soc,
  input  logic                 adc_eoc,
  input  logic [ADC_BITS-1:0]  adc_data,
  // pixel stream to the host link
  output logic                 pix_valid,
  input  logic                 pix_ready,
  output logic [PIX_WORD-1:0]  pix_data,
  // status
  output logic                 ready,
  output logic                 frame_busy,
  output logic                 frame_done,
  output logic                 overrun,
  output logic                 overflow,
  output h2rg_pkg::seq_state_t seq_state
);

  localparam int unsigned SEL_W = (N_DAC > 1) ? $clog2(N_DAC) : 1;
  localparam int unsigned COL_W = $clog2(COLS);
  localparam int unsigned ROW_W = $clog2(ROWS);
  localparam int unsigned AW    = $clog2(FIFO_DEPTH);

  // sequencer <-> engines
  logic                 dac_start, dac_done, dac_busy;
  logic [SEL_W-1:0]     dac_sel;
  logic [DAC_BITS-1:0]  dac_code_sel;
  logic                 reg_start, reg_done, reg_busy;
  logic [ROIC_WORD-1:0] reg_word;
  logic                 frame_start;
  logic                 roic_prog;

  // serial interface and frame clocks before pin sharing
  logic ser_dataclk, ser_datain;
  logic fg_vclk, fg_fsyncb;

  // pixel path
  logic             sample;
  logic [ROW_W-1:0] row;
  logic [COL_W-1:0] col;
  logic             smp_valid;
  logic [PIX_WORD-1:0] smp_word;
  logic [AW:0]      fifo_level;

  ctrl_sequencer #(
    .N_DAC(N_DAC), .DAC_BITS(DAC_BITS),
    .N_ROIC_REG(N_ROIC_REG), .ROIC_WORD(ROIC_WORD)
  ) u_seq (
    .clk, .rst_n,
    .frame_req, .reinit, .dac_code, .roic_word,
    .dac_start, .dac_sel, .dac_code_o(dac_code_sel), .dac_done,
    .reg_start, .reg_word, .reg_done,
    .frame_start, .frame_done,
    .roic_prog, .ready, .state(seq_state)
  );

  dac_serial_writer #(
    .N_DAC(N_DAC), .DAC_BITS(DAC_BITS), .HALF_DIV(DAC_HALF_DIV)
  ) u_dac (
    .clk, .rst_n,
    .start(dac_start), .sel(dac_sel), .code(dac_code_sel),
    .busy(dac_busy), .done(dac_done),
    .dac_clk, .dac_sdi, .dac_load_n
  );

  roic_serial_writer #(
    .ROIC_WORD(ROIC_WORD), .HALF_DIV(ROIC_HALF_DIV)
  ) u_reg (
    .clk, .rst_n,
    .start(reg_start), .word(reg_word),
    .busy(reg_busy), .done(reg_done),
    .csb(roic_csb), .dataclk(ser_dataclk), .datain(ser_datain)
  );

  frame_clock_gen #(
    .COLS(COLS), .ROWS(ROWS), .PIX_DIV(PIX_DIV)
  ) u_fclk (
    .clk, .rst_n,
    .start(frame_start), .busy(frame_busy), .done(frame_done),
    .hclk(roic_hclk), .lsyncb(roic_lsyncb), .vclk(fg_vclk), .fsyncb(fg_fsyncb),
    .sample, .row, .col
  );

  // VClk doubles as DATACLK and FSyncB as DATAIN while the registers are
  // written. Both sources rest at the same level whenever ownership changes.
  assign roic_vclk   = roic_prog ? ser_dataclk : fg_vclk;
  assign roic_fsyncb = roic_prog ? ser_datain  : fg_fsyncb;

  adc_sampler #(
    .ADC_BITS(ADC_BITS), .PIX_WORD(PIX_WORD), .ROW_W(ROW_W), .COL_W(COL_W)
  ) u_adc (
    .clk, .rst_n,
    .sample, .row, .col,
    .adc_soc, .adc_eoc, .adc_data,
    .pix_valid(smp_valid), .pix_word(smp_word), .overrun
  );

  sample_fifo #(
    .WIDTH(PIX_WORD), .DEPTH(FIFO_DEPTH)
  ) u_fifo (
    .clk, .rst_n,
    .in_valid(smp_valid), .in_data(smp_word), .overflow,
    .out_valid(pix_valid), .out_ready(pix_ready), .out_data(pix_data),
    .level(fifo_level)
  );

  // The engines are only started when idle, and never together.
  a_dac_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dac_start |-> !dac_busy);
  a_reg_idle: assert property (@(posedge clk) disable iff (!rst_n)
    reg_start |-> !reg_busy && !frame_busy);
  a_no_clock_in_prog: assert property (@(posedge clk) disable iff (!rst_n)
    roic_prog |-> !frame_busy && !roic_hclk);
  a_fifo_level: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_level <= (AW+1)'(FIFO_DEPTH));

endmodule
