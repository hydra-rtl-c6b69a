// tb_filter_unit: drives one filter unit with two interleaved lines of 48
// random pixels (J, A, pi) in the forward phase, one idle cycle, then the
// backward phase, for several line pairs back to back. Every output J' is
// compared with a real-number evaluation of the forward/backward recursions
// and the combination formula (relative tolerance 1e-3, the FP24 rounding
// error accumulated over a line is far below that). It also checks that the
// first output of a pair is seen 7 testbench cycles (5 register stages
// plus the input register and the sampling offset) after its first backward
// pixel and that a pair occupies 96 + 1 + 96 input cycles.
module tb_filter_unit;
  import fp24_pkg::*;
  import tb_fp24_util::*;

  localparam int N = 48;
  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_bwd = 0, in_first = 0, in_line = 0;
  logic [5:0] in_pos = 0;
  fp24_t in_j = 0, in_a = 0, in_pi = 0, lambda;
  logic out_valid, out_line;
  logic [5:0] out_pos;
  fp24_t out_j;
  int checks = 0, failures = 0, cycle = 0, outs = 0;
  int first_bwd_cycle, first_out_cycle;

  fp24_t J [2][N], A [2][N], P [2][N];
  real   ref_out [2][N];

  filter_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_ref(real lam);
    for (int l = 0; l < 2; l++) begin
      real F [N+1], Fh [N+1], B [N], Bh [N];
      F[0] = 0.0; Fh[0] = 0.0;
      for (int p = 0; p < N; p++) begin
        F[p+1]  = fp2r(P[l][p]) * (F[p] + fp2r(J[l][p]));
        Fh[p+1] = fp2r(P[l][p]) * (Fh[p] + 1.0);
      end
      B[N-1] = 0.0; Bh[N-1] = 0.0;
      for (int p = N-1; p > 0; p--) begin
        B[p-1]  = fp2r(P[l][p-1]) * (B[p] + fp2r(J[l][p]));
        Bh[p-1] = fp2r(P[l][p-1]) * (Bh[p] + 1.0);
      end
      for (int p = 0; p < N; p++)
        ref_out[l][p] = (F[p] + fp2r(J[l][p]) + B[p] + lam * (fp2r(A[l][p]) - fp2r(J[l][p])))
                        / (Fh[p] + 1.0 + Bh[p]);
    end
  endfunction

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    real got, e, err;
    got = fp2r(out_j);
    e   = ref_out[out_line][out_pos];
    err = rabs(got - e) / (rabs(e) + 1e-6);
    checks++;
    outs++;
    if (outs == 1) first_out_cycle = cycle;
    if (err > 1e-3) begin
      failures++;
      if (failures < 10) $display("MISMATCH cycle %0d line %0d pos %0d got %g exp %g J %g A %g", cycle, out_line, out_pos, got, e, fp2r(J[out_line][out_pos]), fp2r(A[out_line][out_pos]));
    end
  end

  initial begin
    real lam;
    int start_cycle;
    lam    = 0.25;
    lambda = r2fp(lam);
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pair = 0; pair < 4; pair++) begin
      for (int l = 0; l < 2; l++)
        for (int p = 0; p < N; p++) begin
          J[l][p] = r2fp(real'($urandom_range(1000)) / 100.0);
          A[l][p] = r2fp(real'($urandom_range(1000)) / 100.0);
          P[l][p] = r2fp(real'($urandom_range(999)) / 1000.0);
        end
      // previous pair's outputs must drain before the reference changes
      repeat (8) @(posedge clk);
      make_ref(lam);
      outs = 0;
      @(negedge clk);
      start_cycle = cycle;
      for (int t = 0; t < 2 * N; t++) begin
        in_valid = 1; in_bwd = 0; in_line = t[0]; in_pos = 6'(t / 2); in_first = (t / 2 == 0);
        in_j = J[t[0]][t/2]; in_a = A[t[0]][t/2]; in_pi = P[t[0]][t/2];
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      for (int t = 0; t < 2 * N; t++) begin
        int p;
        p = N - 1 - t / 2;
        if (t == 0) first_bwd_cycle = cycle;
        in_valid = 1; in_bwd = 1; in_line = t[0]; in_pos = 6'(p); in_first = (p == N - 1);
        in_j = J[t[0]][p]; in_a = A[t[0]][p]; in_pi = P[t[0]][p];
        @(negedge clk);
      end
      in_valid = 0;
      checks++;
      if (cycle - start_cycle != 2 * N + 1 + 2 * N) begin
        failures++;
        $display("pair took %0d input cycles", cycle - start_cycle);
      end
      repeat (8) @(posedge clk);
      checks++;
      if (outs != 2 * N) begin failures++; $display("got %0d outputs", outs); end
      checks++;
      if (first_out_cycle - first_bwd_cycle != 7) begin
        failures++;
        $display("latency %0d", first_out_cycle - first_bwd_cycle);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
