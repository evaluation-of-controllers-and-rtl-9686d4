// sample_fifo: pixel buffer between the ADC sampler and the host link.
//
// Pixels are produced at a fixed rate set by the detector clocks while the
// host link (USB in the prototype controller) takes them in bursts. This
// synchronous first-in first-out buffer absorbs the difference. The paper
// only says that the data is sent to the computer; the buffer, its depth
// (DEPTH words, default 512) and its valid/ready output handshake are this
// design's choice.
//
// The pixel source cannot be stalled: a word written while the buffer is
// full is dropped and `overflow` pulses in the following cycle.
// Timing: a word written in cycle n is visible at the output (out_valid) in
// cycle n+1. A word leaves when out_valid and out_ready are both high.
// `level` is the number of words held.
module sample_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             overflow,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  wire full  = (level == (AW+1)'(DEPTH));
  wire pop   = out_valid && out_ready;
  wire push  = in_valid && (!full || pop);

  assign out_valid = (level != '0);
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      level    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= in_valid && !push;
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_level_bound: assert property (@(posedge clk) disable iff (!rst_n)
    level <= (AW+1)'(DEPTH));

endmodule
