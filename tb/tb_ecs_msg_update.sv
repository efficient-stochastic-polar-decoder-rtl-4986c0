// tb_ecs_msg_update: the whole factor graph (N = 16) against a cycle model built
// from eq. (2)-(5) with frozen R messages treated as infinitely reliable. The frozen
// set repeats the pattern u1, u3, u5, u6 of the paper's N = 8 example in each half,
// so every unit type (Original, I, II, III) occurs; the test counts each type and fails
// if one is missing. Random channel bits drive L_{n+1}; L_1 and R_{n+1} are compared
// every cycle, and a clear in the middle restarts everything.
module tb_ecs_msg_update;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  localparam int N  = 16;
  localparam int NS = 4;
  localparam int H  = N / 2;
  localparam logic [N-1:0] FZ = 16'h3535;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [5:0] r;
  sbit_t l_in [N];
  sbit_t l_out [N];
  sbit_t r_out [N];
  int checks = 0, failures = 0;

  // Model state: stage registers and the two trackers of every unit.
  int Lm [NS+1][N];
  int Rm [NS+1][N];
  int p1 [NS][H];
  int p2 [NS][H];
  int fz [NS+1][N];
  int ty [NS][H];   // 0 orig, 1 T1, 2 T2, 3 T3
  int tcount [4];

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_msg_update #(.N(N), .FROZEN(FZ)) dut (.clk, .rst_n, .clr, .r, .l_in, .l_out, .r_out);

  always #5 clk = ~clk;

  task automatic model_clear();
    for (int c = 0; c <= NS; c++)
      for (int k = 0; k < N; k++) begin
        Lm[c][k] = 0;
        Rm[c][k] = (c == 0 && FZ[k]) ? 1 : 0;
      end
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin p1[s][j] = 0; p2[s][j] = 0; end
    // Frozen outputs are constants, not registers.
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin
        if (ty[s][j] == 1) begin Rm[s+1][2*j] = 1; Rm[s+1][2*j+1] = 1; end
        if (ty[s][j] == 3) Rm[s+1][2*j+1] = 1;
      end
  endtask

  // One clock of the model; `lin` is the channel column of this cycle.
  task automatic model_step(int lin [N], int rr);
    int nL [NS+1][N];
    int nR [NS+1][N];
    nL = Lm;
    nR = Rm;
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin
        int rj, rjn, la, lb;
        rj  = Rm[s][j];
        rjn = Rm[s][j+H];
        la  = (s == NS-1) ? lin[2*j]   : Lm[s+1][2*j];
        lb  = (s == NS-1) ? lin[2*j+1] : Lm[s+1][2*j+1];
        unique case (ty[s][j])
          0: begin
            // LCU: l_jn = g(f(rj,la),lb) [p1], l_j = f(la, g(lb,rjn)) [p2]
            // RCU: r_b = g(f(rj,la),rjn) [p1 of RCU], r_a = f(rj, g(lb,rjn)) [p2 of RCU]
            nL[s][j+H]   = gm_out(p1[s][j], rr);
            nL[s][j]     = fm(la, gm_out(p2[s][j], rr));
          end
          1: begin
            nL[s][j+H] = gm_out(p1[s][j], rr);
            nL[s][j]   = la;
          end
          2: begin
            nL[s][j+H] = gm_out(p1[s][j], rr);
            nL[s][j]   = fm(la, gm_out(p2[s][j], rr));
          end
          default: begin
            nL[s][j+H] = gm_out(p1[s][j], rr);
            nL[s][j]   = la;
          end
        endcase
      end
    Lm = nL;
    Rm = nR;
  endtask

  // The RCU trackers are kept in separate arrays.
  int q1 [NS][H];
  int q2 [NS][H];

  task automatic full_step(int lin [N], int rr);
    int oL [NS+1][N];
    int oR [NS+1][N];
    int o1 [NS][H];
    int o2 [NS][H];
    int oq1 [NS][H];
    int oq2 [NS][H];
    oL = Lm; oR = Rm; o1 = p1; o2 = p2; oq1 = q1; oq2 = q2;
    model_step(lin, rr);     // L side outputs from old states
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin
        int rj, rjn, la, lb;
        rj  = oR[s][j];
        rjn = oR[s][j+H];
        la  = (s == NS-1) ? lin[2*j]   : oL[s+1][2*j];
        lb  = (s == NS-1) ? lin[2*j+1] : oL[s+1][2*j+1];
        unique case (ty[s][j])
          0: begin
            Rm[s+1][2*j+1] = gm_out(oq1[s][j], rr);
            Rm[s+1][2*j]   = fm(rj, gm_out(oq2[s][j], rr));
            p1[s][j] = pt_next(o1[s][j], fm(rj, la) + lb);
            p2[s][j] = pt_next(o2[s][j], rjn + lb);
            q1[s][j] = pt_next(oq1[s][j], fm(la, rj) + rjn);
            q2[s][j] = pt_next(oq2[s][j], lb + rjn);
          end
          1: begin
            p1[s][j] = pt_next(o1[s][j], lb + la);
          end
          2: begin
            Rm[s+1][2*j+1] = gm_out(oq1[s][j], rr);
            Rm[s+1][2*j]   = gm_out(oq2[s][j], rr);
            p1[s][j] = pt_next(o1[s][j], la + lb);
            p2[s][j] = pt_next(o2[s][j], rjn + lb);
            q1[s][j] = pt_next(oq1[s][j], la + rjn);
            q2[s][j] = pt_next(oq2[s][j], lb + rjn);
          end
          default: begin
            Rm[s+1][2*j] = rj;
            p1[s][j] = pt_next(o1[s][j], fm(rj, la) + lb);
          end
        endcase
      end
  endtask

  initial begin
    int lin [N];
    // Unit types from the frozen set, derived here independently of the RTL.
    for (int k = 0; k < N; k++) fz[0][k] = FZ[k];
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin
        ty[s][j] = fz[s][j] ? (fz[s][j+H] ? 1 : 2) : (fz[s][j+H] ? 3 : 0);
        tcount[ty[s][j]]++;
        fz[s+1][2*j]   = fz[s][j] & fz[s][j+H];
        fz[s+1][2*j+1] = fz[s][j+H];
      end
    for (int t = 0; t < 4; t++) begin
      checks++;
      if (tcount[t] == 0) begin failures++; $display("FAIL unit type %0d never used", t); end
    end
    model_clear();
    for (int s = 0; s < NS; s++) for (int j = 0; j < H; j++) begin q1[s][j] = 0; q2[s][j] = 0; end
    for (int k = 0; k < N; k++) l_in[k] = SBIT_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 1500; i++) begin
      // Channel: a fixed noisy pattern per position plus random bits.
      for (int k = 0; k < N; k++) begin
        lin[k] = (($urandom_range(3) != 0) ? ((k % 3 == 0) ? -1 : 1) : rnd_msg());
        l_in[k] = to_sbit(lin[k]);
      end
      if (i == 900) clr = 1;
      #1;
      for (int k = 0; k < N; k++) begin
        checks += 2;
        if (to_int(l_out[k]) != Lm[0][k] || to_int(r_out[k]) != Rm[NS][k]) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d k=%0d L1 %0d/%0d Rn %0d/%0d", i, k,
                                      to_int(l_out[k]), Lm[0][k], to_int(r_out[k]), Rm[NS][k]);
        end
      end
      begin
        int rr;
        rr = int'(r);
        @(posedge clk);
        if (clr) begin
          model_clear();
          for (int s = 0; s < NS; s++) for (int j = 0; j < H; j++) begin q1[s][j] = 0; q2[s][j] = 0; end
        end else full_step(lin, rr);
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
