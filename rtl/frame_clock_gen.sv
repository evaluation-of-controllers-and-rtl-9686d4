// frame_clock_gen: H2RG frame clock pattern for a full-frame readout.
//
// The H2RG is read out by four clocks: FSyncB (frame sync, active low),
// LSyncB (line sync, active low), VClk (vertical scanner clock, one per line)
// and HClk (horizontal scanner clock, pixel clock). In single-output mode a
// line of the 2048-column array needs 2048+ HClk pulses. Those names and
// counts follow the prototype controller; the order and length of the pulses
// are this design's choice, since the published clock trace is only a
// shortened demonstration of the pattern:
//
//   frame : one slot with FSyncB low, then ROWS lines
//   line  : one slot with LSyncB low and VClk high, then COLS pixel slots
//   pixel : HClk high for the first half of the slot, low for the second
//
// A slot lasts PIX_DIV system clocks (100 at the assumed 10 MHz system clock
// gives the H2RG's 100 kHz pixel rate). `sample` pulses SAMPLE_LEAD cycles
// before the end of each pixel slot, late in the slot so that the output has
// settled, but early enough that a converter started two cycles later (the
// ADC sampler's start pulse and the converter's own input register) still
// sees this pixel before the next HClk edge. `row` and `col` name the pixel.
// All outputs come from flip-flops and are in step with each other.
//
// Interface: pulse `start` while `busy` is low. `done` pulses once after the
// last pixel slot. A frame takes PIX_DIV*(1 + ROWS*(1 + COLS)) cycles.
// Outside a frame all four clocks rest at their inactive levels
// (HClk and VClk low, LSyncB and FSyncB high).
module frame_clock_gen #(
  parameter int unsigned COLS    = 2048,
  parameter int unsigned ROWS    = 2048,
  parameter int unsigned PIX_DIV = 100,
  parameter int unsigned SAMPLE_LEAD = 4,
  localparam int unsigned COL_W  = $clog2(COLS),
  localparam int unsigned ROW_W  = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic             hclk,
  output logic             lsyncb,
  output logic             vclk,
  output logic             fsyncb,
  output logic             sample,
  output logic [ROW_W-1:0] row,
  output logic [COL_W-1:0] col
);

  typedef enum logic [1:0] {F_IDLE, F_FSYNC, F_LINE, F_PIX} fstate_t;

  localparam int unsigned DIV_W = $clog2(PIX_DIV);

  fstate_t          state;
  logic [DIV_W-1:0] div;
  logic [ROW_W-1:0] row_q;
  logic [COL_W-1:0] col_q;

  wire slot_end = (div == DIV_W'(PIX_DIV - 1));
  wire smp_pt   = (div == DIV_W'(PIX_DIV - 1 - SAMPLE_LEAD));
  wire last_col = (col_q == COL_W'(COLS - 1));
  wire last_row = (row_q == ROW_W'(ROWS - 1));

  // Slot sequencing.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= F_IDLE;
      div   <= '0;
      row_q <= '0;
      col_q <= '0;
    end else begin
      div <= (state == F_IDLE || slot_end) ? '0 : div + 1'b1;
      unique case (state)
        F_IDLE: if (start) begin
          row_q <= '0;
          col_q <= '0;
          state <= F_FSYNC;
        end
        F_FSYNC: if (slot_end) state <= F_LINE;
        F_LINE:  if (slot_end) state <= F_PIX;
        F_PIX: if (slot_end) begin
          if (last_col) begin
            col_q <= '0;
            if (last_row) begin
              row_q <= '0;
              state <= F_IDLE;
            end else begin
              row_q <= row_q + 1'b1;
              state <= F_LINE;
            end
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  // Output decode, registered so that the pins change only on clock edges.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hclk   <= 1'b0;
      lsyncb <= 1'b1;
      vclk   <= 1'b0;
      fsyncb <= 1'b1;
      sample <= 1'b0;
      done   <= 1'b0;
      row    <= '0;
      col    <= '0;
    end else begin
      fsyncb <= !(state == F_FSYNC);
      lsyncb <= !(state == F_LINE);
      vclk   <=  (state == F_LINE);
      hclk   <=  (state == F_PIX) && (div < DIV_W'(PIX_DIV / 2));
      sample <=  (state == F_PIX) && smp_pt;
      done   <=  (state == F_PIX) && slot_end && last_col && last_row;
      if (smp_pt) begin
        row <= row_q;
        col <= col_q;
      end
    end
  end

  assign busy = (state != F_IDLE);

  // The sample point must fall in the HClk-low half of the slot.
  if (PIX_DIV - 1 - SAMPLE_LEAD < PIX_DIV / 2 || SAMPLE_LEAD < 3) begin : g_bad_lead
    $error("frame_clock_gen: SAMPLE_LEAD must be at least 3 and leave the sample in the HClk-low half");
  end

  // The frame and line syncs never overlap a pixel clock pulse.
  a_sync_no_hclk: assert property (@(posedge clk) disable iff (!rst_n)
    (!lsyncb || !fsyncb) |-> !hclk);

endmodule
