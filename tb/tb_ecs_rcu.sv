// tb_ecs_rcu: all four R-unit types side by side on the same random inputs, each
// against its own model of eq. (4)-(5) with frozen R inputs replaced by "infinity"
// (r_a = R_{i+1,2j-1}, r_b = R_{i+1,2j}, frozen output = constant +1):
//   ORIG  r_b = g(f(r_j,l_a), r_jn)   r_a = f(r_j, g(l_b, r_jn))
//   T1    r_b = +1                    r_a = +1
//   T2    r_b = g(l_a, r_jn)          r_a = g(l_b, r_jn)
//   T3    r_b = +1                    r_a = r_j
// Outputs are registered: the value computed in one cycle appears after the clock.
module tb_ecs_rcu;
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
  int e_j [4] = '{0, 1, 0, 0};
  int e_jn [4] = '{0, 1, 0, 1};

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_rcu #(.TYPE(CU_ORIG)) u0 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .r_a(o_j[0]), .r_b(o_jn[0]));
  ecs_rcu #(.TYPE(CU_T1))   u1 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .r_a(o_j[1]), .r_b(o_jn[1]));
  ecs_rcu #(.TYPE(CU_T2))   u2 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .r_a(o_j[2]), .r_b(o_jn[2]));
  ecs_rcu #(.TYPE(CU_T3))   u3 (.clk, .rst_n, .clr, .r, .r_j, .r_jn, .l_a, .l_b, .r_a(o_j[3]), .r_b(o_jn[3]));

  always #5 clk = ~clk;

  initial begin
    r_j = SBIT_ZERO; r_jn = SBIT_ZERO; l_a = SBIT_ZERO; l_b = SBIT_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      int rj, rjn, la, lb, rr;
      rj = rnd_msg(); rjn = rnd_msg(); la = rnd_msg(); lb = rnd_msg();
      if (i >= 1000 && i < 2000) begin rjn = -1; lb = (i % 3 == 0) ? 0 : -1; la = -1; rj = 1; end
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
      e_jn[0] = gm_out(p1[0], rr); e_j[0] = fm(rj, gm_out(p2[0], rr));
      e_jn[2] = gm_out(p1[2], rr); e_j[2] = gm_out(p2[2], rr);
      e_j[3]  = rj;
      @(posedge clk);
      if (clr) begin
        p1 = '{0, 0, 0, 0}; p2 = '{0, 0, 0, 0}; e_j = '{0, 1, 0, 0}; e_jn = '{0, 1, 0, 1};
      end else begin
        p1[0] = pt_next(p1[0], fm(rj, la) + rjn); p2[0] = pt_next(p2[0], lb + rjn);
        p1[2] = pt_next(p1[2], la + rjn);         p2[2] = pt_next(p2[2], lb + rjn);
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
