// tb_ecs_bsg: the channel bit stream generator. For random 7-bit values (and the
// corners 0, +1, -1, +63, -64) every output bit is checked against eq. (11) with the
// live R(t); over one 64-cycle Sobol period the number of non-zero bits must be
// min(|y|+1, 64) for positive y and |y| for negative y. A second load must replace
// the stored values.
module tb_ecs_bsg;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, load = 0, sload = 0;
  logic signed [6:0] y [N];
  logic [5:0] r;
  sbit_t l_out [N];
  int checks = 0, failures = 0;
  int yv [N];
  int ones [N];

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(sload), .r);
  ecs_bsg #(.N(N)) dut (.clk, .rst_n, .load, .y, .r, .l_out);

  always #5 clk = ~clk;

  task automatic frame(int pass);
    for (int k = 0; k < N; k++) begin
      case (k + pass * N)
        0: yv[k] = 0;   1: yv[k] = 1;   2: yv[k] = -1;  3: yv[k] = 63;  4: yv[k] = -64;
        default: yv[k] = int'($urandom_range(127)) - 64;
      endcase
      y[k] = 7'(yv[k]);
    end
    load = 1; sload = 1;
    @(negedge clk);
    load = 0; sload = 0;
    for (int k = 0; k < N; k++) begin
      y[k] = '0;   // the stored copy must be used
      ones[k] = 0;
    end
    for (int t = 0; t < 64; t++) begin
      for (int k = 0; k < N; k++) begin
        int e;
        e = (yv[k] > 0 && int'(r) <= yv[k]) ? 1 : (yv[k] < 0 && int'(r) < -yv[k]) ? -1 : 0;
        checks++;
        if (to_int(l_out[k]) != e) begin
          failures++;
          $display("FAIL y=%0d r=%0d out=%0d", yv[k], r, to_int(l_out[k]));
        end
        ones[k] += (l_out[k].sn ? 1 : 0);
      end
      @(negedge clk);
    end
    for (int k = 0; k < N; k++) begin
      int e;
      e = (yv[k] > 0) ? ((yv[k] + 1 > 64) ? 64 : yv[k] + 1) : -yv[k];
      checks++;
      if (ones[k] != e) begin failures++; $display("FAIL count y=%0d ones=%0d", yv[k], ones[k]); end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) y[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(0);
    frame(1);
    frame(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
