// tb_ecs_lcu: all four L-unit types side by side on the same random inputs, each
// against its own model of eq. (2)-(3) with frozen R inputs replaced by "infinity":
//   ORIG  l_jn = g(f(r_j,l_a), l_b)   l_j = f(l_a, g(l_b, r_jn))
//   T1    l_jn = g(l_b, l_a)          l_j = l_a
//   T2    l_jn = g(l_a, l_b)          l_j = f(l_a, g(l_b, r_jn))
//   T3    l_jn = g(f(r_j,l_a), l_b)   l_j = l_a
// Outputs are registered: the value computed in one cycle appears after the clock.
module tb_ecs_lcu;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  sbit_t r_j, r_jn, l_a, l_b;
  sbit_t o_j [4];
  sbit_t o_jn [4];
  logic [5:0] r;
  int checks = 0, failures = 0;
  int p1 [4] = '{0, 0, 0, 0};
  int p2 [4] = '{0, 0, 0, 0};
  int e_j [4] = '{0, 0, 0, 0};
  int e_jn [4] = '{0, 0, 0, 0};

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_lcu #(.TYPE(CU_ORIG)) u0 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .l_j(o_j[0]), .l_jn(o_jn[0]));
  ecs_lcu #(.TYPE(CU_T1))   u1 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .l_j(o_j[1]), .l_jn(o_jn[1]));
  ecs_lcu #(.TYPE(CU_T2))   u2 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .l_j(o_j[2]), .l_jn(o_jn[2]));
  ecs_lcu #(.TYPE(CU_T3))   u3 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .l_j(o_j[3]), .l_jn(o_jn[3]));

  always #5 clk = ~clk;

  initial begin
    r_j = SBIT_ZERO; r_jn = SBIT_ZERO; l_a = SBIT_ZERO; l_b = SBIT_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      int rj, rjn, la, lb, rr;
      rj = rnd_msg(); rjn = rnd_msg(); la = rnd_msg(); lb = rnd_msg();
      if (i >= 1000 && i < 2000) begin rjn = 1; lb = (i % 3 == 0) ? 0 : 1; la = -1; end
      r_j = to_sbit(rj); r_jn = to_sbit(rjn); l_a = to_sbit(la); l_b = to_sbit(lb);
      if (i == 2500) clr = 1;
      #1;
      for (int t = 0; t < 4; t++) begin
        checks += 2;
        if (to_int(o_j[t]) != e_j[t] || to_int(o_jn[t]) != e_jn[t]) begin
          failures++;
          $display("FAIL type %0d i=%0d got %0d/%0d exp %0d/%0d", t, i,
                   to_int(o_j[t]), to_int(o_jn[t]), e_j[t], e_jn[t]);
        end
      end
      rr = int'(r);
      // Outputs for the next cycle from the present tracker states.
      e_jn[0] = gm_out(p1[0], rr); e_j[0] = fm(la, gm_out(p2[0], rr));
      e_jn[1] = gm_out(p1[1], rr); e_j[1] = la;
      e_jn[2] = gm_out(p1[2], rr); e_j[2] = fm(la, gm_out(p2[2], rr));
      e_jn[3] = gm_out(p1[3], rr); e_j[3] = la;
      @(posedge clk);
      if (clr) begin
        p1 = '{0, 0, 0, 0}; p2 = '{0, 0, 0, 0}; e_j = '{0, 0, 0, 0}; e_jn = '{0, 0, 0, 0};
      end else begin
        p1[0] = pt_next(p1[0], fm(rj, la) + lb); p2[0] = pt_next(p2[0], rjn + lb);
        p1[1] = pt_next(p1[1], lb + la);
        p1[2] = pt_next(p1[2], la + lb);         p2[2] = pt_next(p2[2], rjn + lb);
        p1[3] = pt_next(p1[3], fm(rj, la) + lb);
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
