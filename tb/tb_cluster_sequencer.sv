// tb_cluster_sequencer: runs two tiles through the sequencer. For each step
// it predicts the next (pass, pair, phase, line, position, first) from the
// plan written out here - 8 passes, 2 pairs, forward 96 cycles ascending,
// one idle cycle, backward 96 cycles descending, one idle cycle - and
// compares. Checks 3072 valid steps per tile, done 3104 + drain cycles after
// start when not held, and that hold_last stops the sequencer before the
// last pass and for exactly as long as it is held.
module tb_cluster_sequencer;
  import hydra_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, hold_last = 0;
  fu_step_t step;
  logic busy, last_pass, done, holding;
  int checks = 0, failures = 0, cycle = 0;

  cluster_sequencer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int hold_cycles);
    fu_step_t exp_s [$];
    int t0, nvalid, held;
    for (int pass = 0; pass < 8; pass++)
      for (int pair = 0; pair < 2; pair++)
        for (int ph = 0; ph < 2; ph++) begin
          for (int t = 0; t < 96; t++) begin
            fu_step_t e;
            e.valid = 1; e.pass = 3'(pass); e.bwd = ph[0]; e.pair = pair[0];
            e.line = t[0]; e.pos = ph ? 6'(47 - t / 2) : 6'(t / 2); e.first = (t / 2 == 0);
            exp_s.push_back(e);
          end
          exp_s.push_back('0);
        end
    hold_last = (hold_cycles > 0);
    @(negedge clk); start = 1; t0 = cycle;
    @(negedge clk); start = 0;
    nvalid = 0; held = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (holding) begin
        held++;
        if (held == hold_cycles) hold_last = 0;
        continue;
      end
      if (step.valid || exp_s.size() > 0 && exp_s[0] == '0) begin
        if (exp_s.size() > 0) begin
          checks++;
          if (step != exp_s[0]) begin
            failures++;
            if (failures < 10) $display("step %p expected %p", step, exp_s[0]);
          end
          void'(exp_s.pop_front());
        end
        if (step.valid) begin
          nvalid++;
          if (step.pass == 3'd7) begin
            checks++;
            if (held != hold_cycles) begin failures++; $display("last pass started after %0d held cycles", held); end
          end
        end
      end
    end
    checks++;
    if (nvalid != 3072) begin failures++; $display("%0d valid steps", nvalid); end
    checks++;
    if (cycle - t0 != 3104 + 14 + hold_cycles) begin
      failures++; $display("tile took %0d cycles (held %0d)", cycle - t0, hold_cycles);
    end
  endtask

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
