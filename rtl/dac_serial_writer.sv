// dac_serial_writer: programs one bias/power DAC over a shared serial bus.
//
// The prototype controller generates the H2RG supply and bias voltages with
// 12-bit serial DACs. Each DAC's input register is written with a clock (CLK)
// and serial data (SDI) and the value is latched into the DAC with a LOAD
// pulse. Those three signals and the 12-bit word come from the prototype; the
// rest is this design's choice: all DACs share CLK and SDI and each has its
// own active-low LOAD line, so no address bits are sent. The word goes out
// MSB first; SDI changes while CLK is low and is stable at CLK's rising edge.
// CLK idles low, SDI idles low and all LOAD lines idle high.
//
// Interface: pulse `start` for one cycle with `sel` and `code` valid while
// `busy` is low. `done` pulses for one cycle when the LOAD pulse has ended.
// Timing: each half CLK period lasts HALF_DIV system clocks, so one write
// takes (2*DAC_BITS + 1)*HALF_DIV cycles from `start` to `done`.
// A `start` while `busy` is high is ignored.
module dac_serial_writer #(
  parameter int unsigned N_DAC    = 8,
  parameter int unsigned DAC_BITS = 12,
  parameter int unsigned HALF_DIV = 5,          // 10 MHz / (2*5) = 1 MHz CLK
  localparam int unsigned SEL_W   = (N_DAC > 1) ? $clog2(N_DAC) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [SEL_W-1:0]    sel,
  input  logic [DAC_BITS-1:0] code,
  output logic                busy,
  output logic                done,
  output logic                dac_clk,
  output logic                dac_sdi,
  output logic [N_DAC-1:0]    dac_load_n
);

  typedef enum logic [1:0] {W_IDLE, W_LOW, W_HIGH, W_LOAD} wstate_t;

  localparam int unsigned DIV_W = (HALF_DIV > 1) ? $clog2(HALF_DIV) : 1;
  localparam int unsigned BIT_W = $clog2(DAC_BITS);

  wstate_t             state;
  logic [DIV_W-1:0]    div;
  logic [BIT_W-1:0]    bits_left;
  logic [DAC_BITS-1:0] shreg;
  logic [SEL_W-1:0]    sel_q;

  wire half_end = (div == DIV_W'(HALF_DIV - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= W_IDLE;
      div        <= '0;
      bits_left  <= '0;
      shreg      <= '0;
      sel_q      <= '0;
      done       <= 1'b0;
      dac_clk    <= 1'b0;
      dac_sdi    <= 1'b0;
      dac_load_n <= '1;
    end else begin
      done <= 1'b0;
      div  <= half_end ? '0 : div + 1'b1;
      unique case (state)
        W_IDLE: begin
          div <= '0;
          if (start) begin
            shreg     <= code << 1;
            dac_sdi   <= code[DAC_BITS-1];
            sel_q     <= sel;
            bits_left <= BIT_W'(DAC_BITS - 1);
            state     <= W_LOW;
          end
        end
        W_LOW: if (half_end) begin
          dac_clk <= 1'b1;
          state   <= W_HIGH;
        end
        W_HIGH: if (half_end) begin
          dac_clk <= 1'b0;
          if (bits_left == '0) begin
            dac_sdi           <= 1'b0;
            dac_load_n[sel_q] <= 1'b0;
            state             <= W_LOAD;
          end else begin
            dac_sdi   <= shreg[DAC_BITS-1];
            shreg     <= shreg << 1;
            bits_left <= bits_left - 1'b1;
            state     <= W_LOW;
          end
        end
        W_LOAD: if (half_end) begin
          dac_load_n <= '1;
          done       <= 1'b1;
          state      <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  assign busy = (state != W_IDLE);

  // Only one DAC is ever loaded at a time, and never while CLK is high.
  a_one_load: assert property (@(posedge clk) disable iff (!rst_n)
    $countones(~dac_load_n) <= 1);
  a_load_clk_low: assert property (@(posedge clk) disable iff (!rst_n)
    !(&dac_load_n) |-> !dac_clk);

endmodule
