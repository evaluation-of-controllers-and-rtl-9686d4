// tb_ctrl_sequencer: self-checking test of the start-up and frame sequencer.
//
// The three engines are replaced by responders that answer each start pulse
// with a done pulse after a random delay and log what was asked. The test
// checks: no clocking before set-up; every DAC written once, in index order,
// with its own code; then every ROIC register, in order, with `roic_prog`
// high during every register write and low during DAC writes and frames;
// a frame request made during set-up served once set-up ends; one frame per request; and `reinit`
// repeating the whole set-up.
module tb_ctrl_sequencer;
  localparam int unsigned N_DAC = 3, DAC_BITS = 12, N_REG = 2, RW = 16;

  logic clk = 0, rst_n = 0;
  logic frame_req = 0, reinit = 0;
  logic [DAC_BITS-1:0] dac_code [N_DAC];
  logic [RW-1:0] roic_word [N_REG];
  logic dac_start, dac_done = 0, reg_start, reg_done = 0, frame_start, frame_done = 0;
  logic [1:0] dac_sel;
  logic [DAC_BITS-1:0] dac_code_o;
  logic [RW-1:0] reg_word;
  logic roic_prog, ready;
  h2rg_pkg::seq_state_t state;
  int checks = 0, failures = 0;

  ctrl_sequencer #(.N_DAC(N_DAC), .DAC_BITS(DAC_BITS), .N_ROIC_REG(N_REG), .ROIC_WORD(RW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Event log: 'D' dac write, 'R' register write, 'F' frame.
  string log_s = "";
  int    errs_word = 0, prog_outside = 0, n_frames = 0;
  bit    in_reg = 0, in_other = 0;
  int    exp_dac = 0, exp_reg = 0;

  always @(posedge clk) if (rst_n) begin
    if ((in_reg || reg_start) && !roic_prog) prog_outside++;
    if ((in_other || dac_start || frame_start) && roic_prog) prog_outside++;
    if (dac_start) begin
      log_s = {log_s, "D"};
      in_other = 1;
      if (int'(dac_sel) != exp_dac || dac_code_o != dac_code[exp_dac]) errs_word++;
      check(int'(dac_sel) == exp_dac && dac_code_o == dac_code[exp_dac],
            $sformatf("DAC write %0d: sel %0d code %h", exp_dac, dac_sel, dac_code_o));
      exp_dac = (exp_dac + 1) % N_DAC;
      fork begin
        repeat ($urandom_range(2, 9)) @(posedge clk);
        dac_done <= 1; @(posedge clk); dac_done <= 0; in_other = 0;
      end join_none
    end
    if (reg_start) begin
      log_s = {log_s, "R"};
      in_reg = 1;
      if (reg_word != roic_word[exp_reg]) errs_word++;
      check(reg_word == roic_word[exp_reg], $sformatf("register write %0d: %h", exp_reg, reg_word));
      exp_reg = (exp_reg + 1) % N_REG;
      fork begin
        repeat ($urandom_range(2, 9)) @(posedge clk);
        reg_done <= 1; @(posedge clk); reg_done <= 0; in_reg = 0;
      end join_none
    end
    if (frame_start) begin
      log_s = {log_s, "F"};
      check(!roic_prog && !ready, "frame starts outside set-up");
      n_frames++;
      in_other = 1;
      fork begin
        repeat ($urandom_range(5, 20)) @(posedge clk);
        frame_done <= 1; @(posedge clk); frame_done <= 0; in_other = 0;
      end join_none
    end
  end

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic wait_ready();
    while (!ready) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < N_DAC; i++) dac_code[i] = DAC_BITS'($urandom);
    for (int i = 0; i < N_REG; i++) roic_word[i] = RW'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    pulse(frame_req);            // early request: must wait for set-up
    wait_ready();
    repeat (30) @(negedge clk);
    check(log_s == "DDDRRF", {"start-up order ", log_s});
    wait_ready();
    pulse(frame_req);
    repeat (30) @(negedge clk);
    pulse(frame_req);
    repeat (30) @(negedge clk);
    check(log_s == "DDDRRFFF", {"frames on request ", log_s});
    pulse(reinit);
    wait_ready();
    repeat (5) @(negedge clk);
    check(log_s == "DDDRRFFFDDDRR", {"after reinit ", log_s});
    check(n_frames == 3, $sformatf("%0d frames", n_frames));
    check(errs_word == 0, $sformatf("%0d wrong DAC/register words", errs_word));
    check(prog_outside == 0, $sformatf("roic_prog wrong in %0d cycles", prog_outside));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
