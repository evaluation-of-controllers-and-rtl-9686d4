// tb_sample_fifo: self-checking test of the pixel output buffer.
//
// Random writes and random reader stalls run against a reference queue:
// every word read must be the oldest word accepted, `level` must equal the
// queue length, and a write that finds the buffer full must be dropped with
// an `overflow` pulse in the next cycle. A phase with the reader stopped
// fills the buffer to force overflows; a phase with the reader always ready
// checks that a simultaneous read and write of a full buffer is accepted.
module tb_sample_fifo;
  localparam int unsigned WIDTH = 16, DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0;
  logic [WIDTH-1:0] in_data = 0;
  logic overflow, out_valid;
  logic [WIDTH-1:0] out_data;
  logic [3:0] level;
  int checks = 0, failures = 0;
  int n_overflow = 0, exp_overflow = 0, n_read = 0;

  sample_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [WIDTH-1:0] q[$];
  bit drop_pending = 0;

  // Reference model, evaluated on each rising edge from the values driven.
  always @(posedge clk) if (rst_n) begin
    bit pop, push;
    check(int'(level) == q.size(), $sformatf("level %0d, reference %0d", level, q.size()));
    check(out_valid == (q.size() != 0), "out_valid matches occupancy");
    check(overflow == drop_pending, "overflow pulse");
    if (overflow) n_overflow++;
    pop  = out_valid && out_ready;
    if (pop) begin
      check(out_data == q[0], $sformatf("read %h expected %h", out_data, q[0]));
      n_read++;
    end
    push = in_valid && (q.size() < DEPTH || pop);
    drop_pending = in_valid && !push;
    if (drop_pending) exp_overflow++;
    if (pop) void'(q.pop_front());
    if (push) q.push_back(in_data);
  end

  task automatic phase(input int cycles, input int p_write, input int p_read);
    repeat (cycles) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < p_write);
      in_data   = WIDTH'($urandom);
      out_ready = ($urandom_range(0, 99) < p_read);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    phase(400, 50, 50);
    phase(40, 100, 0);     // fill and overflow
    phase(40, 100, 100);   // full buffer, read and write together
    phase(400, 60, 40);
    phase(60, 0, 100);     // drain
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    check(n_overflow == exp_overflow && n_overflow > 0,
          $sformatf("%0d overflows, expected %0d", n_overflow, exp_overflow));
    check(n_read > 300, $sformatf("%0d words read", n_read));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
