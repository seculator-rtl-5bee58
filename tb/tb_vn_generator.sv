// tb_vn_generator: checks the VN generator against the master equation
// (1^eta, 2^eta ... kappa^eta)^rho, worked out here by three nested loops, for
// a set of fixed and random triplets, including the empty pattern (kappa = 0),
// the linear pattern P3 (eta*kappa... = 1) and the line pattern P5 (kappa = 1).
// Also checks that `first` marks value 1 and `done` rises after exactly
// eta*kappa*rho steps.
//
// The sequence follows the paper's master equation; the first-read output is
// this design's reading of a circuit the paper mentions but does not show.
module tb_vn_generator;
  import seculator_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load = 0, step = 0;
  logic [15:0] eta, kappa, rho;
  logic [31:0] vn;
  logic first, done;
  int checks = 0, failures = 0;

  vn_generator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int e, input int k, input int r);
    int steps;
    @(negedge clk);
    eta = 16'(e); kappa = 16'(k); rho = 16'(r); load = 1;
    @(negedge clk);
    load = 0;
    steps = 0;
    for (int ir = 0; ir < r; ir++)
      for (int v = 1; v <= k; v++)
        for (int ie = 0; ie < e; ie++) begin
          check(!done, $sformatf("done early e=%0d k=%0d r=%0d step %0d", e, k, r, steps));
          check(vn == 32'(v), $sformatf("vn=%0d exp %0d (e=%0d k=%0d r=%0d)", vn, v, e, k, r));
          check(first == (v == 1), "first flag");
          step = 1;
          @(negedge clk);
          step = 0;
          // idle cycles between tiles must not change anything
          if ($urandom_range(0, 3) == 0) @(negedge clk);
          steps++;
        end
    check(done, $sformatf("done not set after %0d steps (e=%0d k=%0d r=%0d)", steps, e, k, r));
  endtask

  initial begin
    eta = 0; kappa = 0; rho = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 2, 1);   // 1^3 2^3, P2 step
    run(2, 3, 2);   // multi-step P1
    run(1, 4, 3);   // sawtooth P4 (alpha_K = 1)
    run(1, 1, 1);   // linear P3
    run(5, 1, 1);   // line P5
    run(1, 1, 7);
    run(0, 3, 1);   // empty: done at once
    run(2, 0, 1);   // empty read pattern
    for (int i = 0; i < 20; i++)
      run($urandom_range(1, 5), $urandom_range(1, 6), $urandom_range(1, 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
