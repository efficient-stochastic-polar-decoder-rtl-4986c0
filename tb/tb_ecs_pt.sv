// tb_ecs_pt: the probability tracker against the integer model of
// P(t) = P(t-1) - floor((P(t-1) - x~) / 4) (saturating), cycle by cycle, for random
// x~ in {-2..2}, for long runs of each constant x~ (saturation corners) and for clear.
module tb_ecs_pt;
  import tb_ecs_model_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic signed [2:0] xt = '0;
  logic signed [5:0] p;
  int checks = 0, failures = 0;
  int pm = 0;

  ecs_pt #(.PT_W(6), .ALPHA_M(2)) dut (.clk, .rst_n, .clr, .xt, .p);

  always #5 clk = ~clk;

  task automatic step(int x);
    xt = 3'(x);
    @(posedge clk);
    #1;
    pm = clr ? 0 : pt_next(pm, x);
    checks++;
    if (int'(p) != pm) begin
      failures++;
      $display("FAIL x=%0d p=%0d model=%0d", x, p, pm);
      pm = int'(p);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (p != 0) failures++;
    for (int i = 0; i < 3000; i++) step(int'($urandom_range(4)) - 2);
    for (int v = -2; v <= 2; v++) begin
      for (int i = 0; i < 30; i++) step(v);
      for (int i = 0; i < 30; i++) step(-v);
    end
    // Clear mid-run.
    for (int i = 0; i < 10; i++) step(2);
    clr = 1;
    step(2);
    clr = 0;
    checks++;
    if (p != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
