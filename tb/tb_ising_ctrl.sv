// tb_ising_ctrl: self-checking test of the run controller.
//
// Starts runs of several lengths and annealing schedules and checks, cycle by
// cycle, that step_en is high for exactly n_steps consecutive cycles starting
// the cycle after start, that the noise amplitude follows
// amp0 - floor(updates so far / amp_period) (floored at 0), that done pulses
// once right after the last update and that step_count ends at n_steps.
module tb_ising_ctrl;
  import fpia_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n, start, busy, done, step_en;
  logic [15:0]      n_steps, amp_period, step_count;
  logic [AMP_W-1:0] amp0, noise_amp;

  ising_ctrl dut (
    .clk(clk), .rst_n(rst_n), .start(start), .n_steps(n_steps), .amp0(amp0),
    .amp_period(amp_period), .busy(busy), .done(done), .step_en(step_en),
    .noise_amp(noise_amp), .step_count(step_count)
  );

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic run(input int n, input int a0, input int per);
    int exp_amp, steps, done_seen;
    n_steps = 16'(n); amp0 = AMP_W'(a0); amp_period = 16'(per);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    steps = 0;
    done_seen = 0;
    // n update cycles, then one cycle for done
    for (int cyc = 0; cyc < n + 3; cyc++) begin
      exp_amp = (per == 0) ? a0 : a0 - steps / per;
      if (exp_amp < 0) exp_amp = 0;
      if (cyc < n) begin
        chk(step_en == 1'b1, $sformatf("step_en in update %0d of %0d", cyc, n));
        chk(int'(noise_amp) == exp_amp,
            $sformatf("amp %0d expected %0d at update %0d", noise_amp, exp_amp, cyc));
        steps++;
      end else begin
        chk(step_en == 1'b0, $sformatf("step_en after run (cycle %0d)", cyc));
      end
      chk(done == (cyc == n), $sformatf("done at cycle %0d of run %0d", cyc, n));
      @(posedge clk);
      #1;
    end
    chk(int'(step_count) == n, $sformatf("step_count %0d expected %0d", step_count, n));
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; n_steps = '0; amp0 = '0; amp_period = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    chk(!busy && !step_en && !done, "idle after reset");
    run(1, 10, 1);
    run(7, 3, 2);
    run(50, 20, 3);
    run(20, 5, 0);
    run(300, 40, 4);
    // start is ignored while running
    n_steps = 16'd10; amp0 = '0; amp_period = '0;
    start = 1'b1;
    @(posedge clk);
    #1;
    repeat (3) @(posedge clk);
    #1;
    n_steps = 16'd100;
    @(posedge clk);
    #1 start = 1'b0;
    repeat (10) @(posedge clk);
    #1;
    chk(!busy && int'(step_count) == 10, "restart ignored while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
