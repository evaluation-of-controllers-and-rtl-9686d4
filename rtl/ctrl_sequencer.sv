// ctrl_sequencer: start-up and frame sequencing of the H2RG controller.
//
// Follows the operating order of the prototype controller: after power on
// all detector clocks are held inactive; the supply and bias voltages are
// generated by programming the DACs one after the other; the ROIC internal
// registers are then written (the prototype writes two: one enabling the
// buffered output, one selecting single-output mode); after that a frame is
// clocked out each time the host requests one. The register words and DAC
// codes are inputs, set by the host or by the supervising processor, since
// the paper gives no values for them.
//
// This design's own choices: the programming runs by itself after reset and
// again when `reinit` is pulsed in the ready state; DACs are written in index
// order 0..N_DAC-1, then the registers in index order; a frame request that
// arrives while the controller is busy is remembered and served once ready.
//
// Interface: handshakes with the three engines are start pulses out and
// one-cycle done pulses back. `roic_prog` is high while the ROIC serial
// interface owns the shared VClk/FSyncB lines. `ready` is high in the state
// that waits for a frame request; `state` exposes the sequencer state.
module ctrl_sequencer #(
  parameter int unsigned N_DAC      = h2rg_pkg::N_DAC,
  parameter int unsigned DAC_BITS   = h2rg_pkg::DAC_BITS,
  parameter int unsigned N_ROIC_REG = h2rg_pkg::N_ROIC_REG,
  parameter int unsigned ROIC_WORD  = h2rg_pkg::ROIC_WORD,
  localparam int unsigned SEL_W     = (N_DAC > 1) ? $clog2(N_DAC) : 1,
  localparam int unsigned REG_W     = (N_ROIC_REG > 1) ? $clog2(N_ROIC_REG) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host requests and configuration
  input  logic                 frame_req,
  input  logic                 reinit,
  input  logic [DAC_BITS-1:0]  dac_code  [N_DAC],
  input  logic [ROIC_WORD-1:0] roic_word [N_ROIC_REG],
  // DAC serial writer
  output logic                 dac_start,
  output logic [SEL_W-1:0]     dac_sel,
  output logic [DAC_BITS-1:0]  dac_code_o,
  input  logic                 dac_done,
  // ROIC register writer
  output logic                 reg_start,
  output logic [ROIC_WORD-1:0] reg_word,
  input  logic                 reg_done,
  // frame clock generator
  output logic                 frame_start,
  input  logic                 frame_done,
  // status
  output logic                 roic_prog,
  output logic                 ready,
  output h2rg_pkg::seq_state_t   state
);

  logic [SEL_W-1:0] dac_idx;
  logic [REG_W-1:0] reg_idx;
  logic             req_pending;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= h2rg_pkg::SEQ_RESET;
      dac_idx     <= '0;
      reg_idx     <= '0;
      req_pending <= 1'b0;
      dac_start   <= 1'b0;
      reg_start   <= 1'b0;
      frame_start <= 1'b0;
    end else begin
      dac_start   <= 1'b0;
      reg_start   <= 1'b0;
      frame_start <= 1'b0;
      if (frame_req) req_pending <= 1'b1;
      unique case (state)
        h2rg_pkg::SEQ_RESET: begin
          dac_idx <= '0;
          reg_idx <= '0;
          state   <= h2rg_pkg::SEQ_DAC_START;
        end
        h2rg_pkg::SEQ_DAC_START: begin
          dac_start <= 1'b1;
          state     <= h2rg_pkg::SEQ_DAC_WAIT;
        end
        h2rg_pkg::SEQ_DAC_WAIT: if (dac_done) begin
          if (dac_idx == SEL_W'(N_DAC - 1)) begin
            state <= h2rg_pkg::SEQ_REG_START;
          end else begin
            dac_idx <= dac_idx + 1'b1;
            state   <= h2rg_pkg::SEQ_DAC_START;
          end
        end
        h2rg_pkg::SEQ_REG_START: begin
          reg_start <= 1'b1;
          state     <= h2rg_pkg::SEQ_REG_WAIT;
        end
        h2rg_pkg::SEQ_REG_WAIT: if (reg_done) begin
          if (reg_idx == REG_W'(N_ROIC_REG - 1)) begin
            state <= h2rg_pkg::SEQ_READY;
          end else begin
            reg_idx <= reg_idx + 1'b1;
            state   <= h2rg_pkg::SEQ_REG_START;
          end
        end
        h2rg_pkg::SEQ_READY: begin
          if (reinit) begin
            state <= h2rg_pkg::SEQ_RESET;
          end else if (frame_req || req_pending) begin
            req_pending <= 1'b0;
            frame_start <= 1'b1;
            state       <= h2rg_pkg::SEQ_FRAME;
          end
        end
        h2rg_pkg::SEQ_FRAME: if (frame_done) state <= h2rg_pkg::SEQ_READY;
        default: state <= h2rg_pkg::SEQ_RESET;
      endcase
    end
  end

  assign dac_sel    = dac_idx;
  assign dac_code_o = dac_code[dac_idx];
  assign reg_word   = roic_word[reg_idx];
  assign roic_prog  = (state == h2rg_pkg::SEQ_REG_START) || (state == h2rg_pkg::SEQ_REG_WAIT);
  assign ready      = (state == h2rg_pkg::SEQ_READY);

  // Frame clocking never starts before the ROIC has been configured.
  a_frame_after_init: assert property (@(posedge clk) disable iff (!rst_n)
    frame_start |-> $past(state) == h2rg_pkg::SEQ_READY);

endmodule
