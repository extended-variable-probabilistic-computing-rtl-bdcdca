// tb_beta_anneal -- checks load, the linear per-iteration step (in 2^-20
// units), holding when no step is given, the ceiling, and a constant beta
// with step 0, against an integer model in the testbench.
module tb_beta_anneal;
  import pim_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  beta_t beta0, bmax, beta;
  logic [15:0] bstep;
  longint model;   // beta in 2^-20 units

  beta_anneal dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_beta(input string what);
    checks++;
    if (beta != beta_t'(model >> 8)) begin
      failures++;
      $display("FAIL %s beta=%0d want=%0d", what, beta, model >> 8);
    end
  endtask

  initial begin
    beta0 = 16'd128;        // 1/32
    bmax  = 16'd4096;       // 1.0
    bstep = 16'd4000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; model = 128 << 8;
    expect_beta("load");
    for (int n = 0; n < 600; n++) begin
      step = (n % 3 != 2);
      @(negedge clk);
      if (n % 3 != 2) begin
        model = model + 4000;
        if (model > (4096 << 8)) model = 4096 << 8;
      end
      expect_beta("ramp");
    end
    step = 0;
    // ceiling reached?
    checks++; if (beta != 16'd4096) begin failures++; $display("FAIL ceiling %0d", beta); end
    // constant beta with zero step
    bstep = 0; beta0 = 16'd2000;
    load = 1; @(negedge clk); load = 0; model = 2000 << 8;
    step = 1; repeat (10) @(negedge clk); step = 0;
    expect_beta("zero step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
