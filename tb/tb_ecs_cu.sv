// tb_ecs_cu: the unsimplified computing unit against the model
//   out1 = g(f(a,c), b),  out2 = f(g(d,b), c)
// with two independently modelled trackers, random message bits on all four inputs and
// the Sobol sequence as R(t); outputs are combinational and checked every cycle.
module tb_ecs_cu;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  sbit_t a, b, c, d, out1, out2;
  logic [5:0] r;
  int checks = 0, failures = 0;
  int p1 = 0, p2 = 0;

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_cu dut (.clk, .rst_n, .clr, .r, .a, .b, .c, .d, .out1, .out2);

  always #5 clk = ~clk;

  initial begin
    a = SBIT_ZERO; b = SBIT_ZERO; c = SBIT_ZERO; d = SBIT_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      int av, bv, cv, dv;
      // Bias some phases so that the trackers also reach their corners.
      if (i < 1000) begin av = rnd_msg(); bv = rnd_msg(); cv = rnd_msg(); dv = rnd_msg(); end
      else if (i < 2000) begin av = 1; bv = 1; cv = 1; dv = 1; if (i % 7 == 0) cv = rnd_msg(); end
      else begin av = -1; bv = -1; cv = 1; dv = -1; if (i % 5 == 0) av = rnd_msg(); end
      a = to_sbit(av); b = to_sbit(bv); c = to_sbit(cv); d = to_sbit(dv);
      if (i == 2500) clr = 1;
      #1;
      checks += 2;
      if (to_int(out1) != gm_out(p1, int'(r))) begin
        failures++; $display("FAIL out1 i=%0d %0d vs %0d", i, to_int(out1), gm_out(p1, int'(r)));
      end
      if (to_int(out2) != fm(gm_out(p2, int'(r)), cv)) begin
        failures++; $display("FAIL out2 i=%0d", i);
      end
      @(posedge clk);
      if (clr) begin p1 = 0; p2 = 0; end
      else begin
        p1 = pt_next(p1, fm(av, cv) + bv);
        p2 = pt_next(p2, dv + bv);
      end
      @(negedge clk);
      clr = 0;
    end
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
