// tb_dac_serial_writer: self-checking test of the bias DAC serial writer.
//
// A decoder written from the bus rules (shift SDI on each CLK rising edge,
// take the word when a LOAD line goes low) receives every write; the test
// compares the word, the number of CLK pulses, the LOAD line that fired and
// the start-to-done cycle count with the values requested. Random codes go
// to random DACs; a start while busy must be ignored.
module tb_dac_serial_writer;
  localparam int unsigned N_DAC    = 4;
  localparam int unsigned DAC_BITS = 12;
  localparam int unsigned HALF_DIV = 3;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [1:0] sel = 0;
  logic [DAC_BITS-1:0] code = 0;
  logic busy, done, dac_clk, dac_sdi;
  logic [N_DAC-1:0] dac_load_n;
  int checks = 0, failures = 0;

  dac_serial_writer #(.N_DAC(N_DAC), .DAC_BITS(DAC_BITS), .HALF_DIV(HALF_DIV)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Independent bus decoder.
  logic [31:0] rx_shift = 0;
  int          rx_bits  = 0;
  logic [DAC_BITS-1:0] got_code;
  int          got_dac  = -1;
  int          got_bits = 0;
  logic        prev_clk = 0;
  logic [N_DAC-1:0] prev_load = '1;
  always @(posedge clk) begin
    if (dac_clk && !prev_clk) begin
      rx_shift <= {rx_shift[30:0], dac_sdi};
      rx_bits  <= rx_bits + 1;
    end
    for (int k = 0; k < N_DAC; k++)
      if (prev_load[k] && !dac_load_n[k]) begin
        got_dac  <= k;
        got_code <= rx_shift[DAC_BITS-1:0];
        got_bits <= rx_bits;
        rx_bits  <= 0;
      end
    prev_clk  <= dac_clk;
    prev_load <= dac_load_n;
  end

  task automatic write_dac(input int k, input logic [DAC_BITS-1:0] v);
    int cyc = 0;
    @(negedge clk);
    sel = 2'(k); code = v; start = 1;
    @(negedge clk);
    start = 0;
    // a second start while busy must not disturb the write
    sel = 2'(k + 1); code = ~v; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 2;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    // start is sampled at the edge before the first counted negedge
    check(cyc - 1 == (2*DAC_BITS + 1)*HALF_DIV, $sformatf("write time %0d cycles", cyc - 1));
    @(negedge clk);
    check(got_dac == k, $sformatf("LOAD fired on DAC %0d, expected %0d", got_dac, k));
    check(got_code == v, $sformatf("DAC %0d got %h expected %h", k, got_code, v));
    check(got_bits == DAC_BITS, $sformatf("%0d CLK pulses", got_bits));
    check(!busy && dac_load_n == '1 && !dac_clk, "bus idle after write");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(dac_load_n == '1 && !dac_clk && !busy, "idle after reset");
    write_dac(0, 12'hFFF);
    write_dac(3, 12'h000);
    write_dac(1, 12'hA5C);
    for (int i = 0; i < 20; i++) write_dac($urandom_range(0, N_DAC-1), 12'($urandom));
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
