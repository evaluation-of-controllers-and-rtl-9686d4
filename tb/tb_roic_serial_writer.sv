// tb_roic_serial_writer: self-checking test of the ROIC register writer.
//
// A decoder written from the interface rules (while CSB is low, take DATAIN
// at each DATACLK rising edge; the word ends when CSB returns high) receives
// every write and is compared with the word sent, the number of clock pulses
// and the start-to-done cycle count. It also checks that DATACLK never
// pulses with CSB high and that the lines rest at VClk/FSyncB idle levels.
module tb_roic_serial_writer;
  localparam int unsigned W        = 16;
  localparam int unsigned HALF_DIV = 2;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [W-1:0] word = 0;
  logic busy, done, csb, dataclk, datain;
  int checks = 0, failures = 0;

  roic_serial_writer #(.ROIC_WORD(W), .HALF_DIV(HALF_DIV)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] rx_shift = 0;
  int          rx_bits = 0, got_bits = 0, clk_outside = 0;
  logic [W-1:0] got_word;
  logic prev_clk = 0, prev_csb = 1;
  always @(posedge clk) begin
    if (dataclk && !prev_clk) begin
      if (csb) clk_outside <= clk_outside + 1;
      rx_shift <= {rx_shift[30:0], datain};
      rx_bits  <= rx_bits + 1;
    end
    if (csb && !prev_csb) begin
      got_word <= rx_shift[W-1:0];
      got_bits <= rx_bits;
      rx_bits  <= 0;
    end
    prev_clk <= dataclk;
    prev_csb <= csb;
  end

  task automatic write_reg(input logic [W-1:0] v);
    int cyc;
    @(negedge clk);
    word = v; start = 1;
    @(negedge clk);
    start = 0; word = ~v;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc - 1 == (2*W + 2)*HALF_DIV, $sformatf("write time %0d cycles", cyc - 1));
    @(negedge clk);
    check(got_word == v, $sformatf("register word %h expected %h", got_word, v));
    check(got_bits == W, $sformatf("%0d DATACLK pulses", got_bits));
    check(csb && !dataclk && datain && !busy, "lines idle after write");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(csb && !dataclk && datain, "idle levels after reset");
    write_reg(16'h8001);
    write_reg(16'h7FFE);
    for (int i = 0; i < 20; i++) write_reg(16'($urandom));
    check(clk_outside == 0, "DATACLK only with CSB low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
