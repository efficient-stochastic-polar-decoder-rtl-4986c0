// tb_ecs_gm: the G module against the integer model (tracker update and stream rule)
// cycle by cycle, with random input bits and the real Sobol sequence as R(t); then two
// settling checks: x = y = +1 must give a constant +1 stream, x = y = -1 a stream whose
// every bit is -1 or 0 with at least 13/16 of them -1 (the floor of the shift leaves the
// tracker at -13/16 for a target of -1).
module tb_ecs_gm;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  sbit_t x, y, z;
  logic [5:0] r;
  int checks = 0, failures = 0;
  int pm = 0;

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_gm #(.PT_W(6), .ALPHA_M(2), .R_W(6)) dut (.clk, .rst_n, .clr, .x, .y, .r, .z);

  always #5 clk = ~clk;

  task automatic step(int xv, int yv);
    x = to_sbit(xv);
    y = to_sbit(yv);
    #1;
    checks++;
    if (to_int(z) != gm_out(pm, int'(r)) || (pm != 0 && z.sgn != gm_sgn(pm))) begin
      failures++;
      $display("FAIL p_model=%0d r=%0d z=%0d", pm, r, to_int(z));
    end
    @(posedge clk);
    pm = pt_next(pm, xv + yv);
    @(negedge clk);
  endtask

  initial begin
    int cnt;
    x = SBIT_ZERO;
    y = SBIT_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 2000; i++) step(rnd_msg(), rnd_msg());
    for (int i = 0; i < 40; i++) step(1, 1);
    cnt = 0;
    for (int i = 0; i < 64; i++) begin
      step(1, 1);
      cnt += (to_int(z) == 1);
    end
    checks++;
    if (cnt != 64) begin failures++; $display("FAIL +1 stream ones=%0d", cnt); end
    for (int i = 0; i < 40; i++) step(-1, -1);
    cnt = 0;
    for (int i = 0; i < 64; i++) begin
      step(-1, -1);
      cnt += (to_int(z) == -1);
      checks++;
      if (to_int(z) == 1) failures++;
    end
    checks++;
    if (cnt < 52) begin failures++; $display("FAIL -1 stream ones=%0d", cnt); end
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
