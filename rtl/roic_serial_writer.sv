// roic_serial_writer: writes one word into an H2RG internal register.
//
// The H2RG has programmable registers (number of outputs, output buffer
// selection, window mode and window coordinates) loaded through its serial
// programming interface: CSB enables the interface, DATACLK clocks it and
// DATAIN carries the data. In the prototype controller DATACLK is driven on
// the VClk line and DATAIN on the FSyncB line; the pin sharing is done in the
// top level, this module only produces the three serial signals.
//
// The paper gives the signal names and what CSB does, not the word length or
// bit timing. This design's choices: a ROIC_WORD-bit word (default 16) sent
// MSB first; CSB goes low one half period before the first clock and returns
// high one half period after the last; DATAIN changes while DATACLK is low
// and is stable at DATACLK's rising edge. DATACLK idles low and DATAIN idles
// high, the inactive levels of VClk and FSyncB.
//
// Interface: pulse `start` with `word` valid while `busy` is low; `done`
// pulses for one cycle after CSB has returned high. Timing: one half
// DATACLK period is HALF_DIV system clocks and a write takes
// (2*ROIC_WORD + 2)*HALF_DIV cycles from `start` to `done`.
module roic_serial_writer #(
  parameter int unsigned ROIC_WORD = 16,
  parameter int unsigned HALF_DIV  = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ROIC_WORD-1:0] word,
  output logic                 busy,
  output logic                 done,
  output logic                 csb,
  output logic                 dataclk,
  output logic                 datain
);

  typedef enum logic [2:0] {R_IDLE, R_SETUP, R_LOW, R_HIGH, R_HOLD} rstate_t;

  localparam int unsigned DIV_W = (HALF_DIV > 1) ? $clog2(HALF_DIV) : 1;
  localparam int unsigned BIT_W = $clog2(ROIC_WORD);

  rstate_t              state;
  logic [DIV_W-1:0]     div;
  logic [BIT_W-1:0]     bits_left;
  logic [ROIC_WORD-1:0] shreg;

  wire half_end = (div == DIV_W'(HALF_DIV - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= R_IDLE;
      div       <= '0;
      bits_left <= '0;
      shreg     <= '0;
      done      <= 1'b0;
      csb       <= 1'b1;
      dataclk   <= 1'b0;
      datain    <= 1'b1;
    end else begin
      done <= 1'b0;
      div  <= half_end ? '0 : div + 1'b1;
      unique case (state)
        R_IDLE: begin
          div <= '0;
          if (start) begin
            shreg     <= word;
            bits_left <= BIT_W'(ROIC_WORD - 1);
            csb       <= 1'b0;
            state     <= R_SETUP;
          end
        end
        R_SETUP: if (half_end) begin
          // first data bit is placed while DATACLK is low
          datain <= shreg[ROIC_WORD-1];
          shreg  <= shreg << 1;
          state  <= R_LOW;
        end
        R_LOW: if (half_end) begin
          dataclk <= 1'b1;
          state   <= R_HIGH;
        end
        R_HIGH: if (half_end) begin
          dataclk <= 1'b0;
          if (bits_left == '0) begin
            state <= R_HOLD;
          end else begin
            datain    <= shreg[ROIC_WORD-1];
            shreg     <= shreg << 1;
            bits_left <= bits_left - 1'b1;
            state     <= R_LOW;
          end
        end
        R_HOLD: if (half_end) begin
          csb    <= 1'b1;
          datain <= 1'b1;
          done   <= 1'b1;
          state  <= R_IDLE;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  assign busy = (state != R_IDLE);

  // DATACLK only toggles while the serial interface is enabled.
  a_clk_in_csb: assert property (@(posedge clk) disable iff (!rst_n)
    dataclk |-> !csb);

endmodule
