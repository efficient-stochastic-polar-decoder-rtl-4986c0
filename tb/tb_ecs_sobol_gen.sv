// tb_ecs_sobol_gen: checks the shared random source. The first eight outputs after a
// load must be the first-dimension Sobol points 0, 1/2, 3/4, 1/4, 3/8, 7/8, 5/8, 1/8
// (times 64); every aligned block of 2^k outputs must hit each of the 2^k equal
// intervals exactly once (k = 1..6); the period is 64; `load` restarts the sequence.
module tb_ecs_sobol_gen;
  localparam int W = 6;
  logic clk = 0, rst_n = 0, load = 0;
  logic [W-1:0] r;
  int checks = 0, failures = 0;
  int seq [128];
  int first8 [8] = '{0, 32, 48, 16, 24, 56, 40, 8};

  ecs_sobol_gen #(.W(W)) dut (.clk, .rst_n, .load, .r);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int t = 0; t < 128; t++) begin
      seq[t] = int'(r);
      @(negedge clk);
    end
    for (int t = 0; t < 8; t++) chk(seq[t] == first8[t], $sformatf("point %0d = %0d", t, seq[t]));
    for (int k = 1; k <= W; k++) begin
      automatic int blk = 1 << k;
      for (int b = 0; b < 64 / blk; b++) begin
        automatic bit [63:0] seen = '0;
        for (int t = 0; t < blk; t++) seen[seq[b*blk+t] >> (W-k)] = 1'b1;
        chk(seen == (64'(1) << blk) - 1, $sformatf("k=%0d block %0d not stratified", k, b));
      end
    end
    for (int t = 0; t < 64; t++) chk(seq[t] == seq[t+64], "period 64");
    // Restart in the middle of the sequence.
    repeat (13) @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int t = 0; t < 8; t++) begin
      chk(int'(r) == first8[t], "after reload");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
