// tb_ecs_control: frame control. Checks the one-clock load on start, that start is
// ignored while busy, that a pass from either side ends the frame with the cycle count
// of the clock the pass arrived in (u side wins a tie), and that without a pass the
// frame stops after exactly MAX_CYCLES clocks with success = 0.
module tb_ecs_control;
  localparam int MAXC = 40;
  logic clk = 0, rst_n = 0, start = 0, pass_l = 0, pass_r = 0;
  logic load, busy, done, sel_r, success;
  logic [5:0] cycles;
  int checks = 0, failures = 0;
  int loads = 0;

  ecs_control #(.MAX_CYCLES(MAXC)) dut (.clk, .rst_n, .start, .pass_l, .pass_r, .load, .busy,
                                        .done, .sel_r, .success, .cycles);

  always #5 clk = ~clk;
  always @(posedge clk) if (load) loads++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Start a frame, raise (pl, pr) in run cycle `at` (0 = never), return the clocks
  // until done.
  task automatic run(int at, bit pl, bit pr, int exp_cycles, bit exp_ok, bit exp_r);
    int t;
    int l0;
    l0 = loads;
    start = 1;
    #1 chk(load == 1, "load with start");
    @(negedge clk);
    start = 1;                      // held high: must not reload while busy
    t = 1;
    while (!done && t < 200) begin
      pass_l = (t == at) && pl;
      pass_r = (t == at) && pr;
      chk(busy == 1 && load == 0, "busy without load");
      @(negedge clk);
      pass_l = 0;
      pass_r = 0;
      t++;
    end
    start = 0;
    chk(loads == l0 + 1, "exactly one load per frame");
    chk(int'(cycles) == exp_cycles, $sformatf("cycles %0d exp %0d", cycles, exp_cycles));
    chk(success == exp_ok, "success");
    chk(sel_r == exp_r, "sel_r");
    @(negedge clk);
    chk(done == 0 && busy == 0, "done is one pulse");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(busy == 0 && done == 0, "idle after reset");
    run(5, 1, 0, 5, 1, 0);
    run(9, 0, 1, 9, 1, 1);
    run(3, 1, 1, 3, 1, 0);
    run(0, 0, 0, MAXC, 0, 0);
    run(MAXC, 0, 1, MAXC, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
