// tb_ecs_pd: end-to-end test of the decoder on a (64, 32) polar code (N = 64 is one
// of the code lengths the paper reports; the default N = 256 works the same way but its
// C++ model takes several minutes to compile) with CRC-16 (16 data bits), BPSK over
// AWGN. To run at the default size, set N = 256, NS = 8, FZ = the default FROZEN of
// ecs_pd and remove the parameter override on the instance.
//
// Each frame: random data, CRC, information positions filled, encoded over the
// decoder's own factor graph, mapped to +1/-1, noise added, the channel value y turned
// into LLR' = 4y and quantised as round(4y * QS) limited to [-64, 63] (QS = 16, so a
// noiseless symbol is at full scale). Frames of three kinds are sent:
//   clean   no noise: must succeed;
//   noisy   Eb/N0 = EBN0_DB: a reported success must carry the sent bits (a wrong
//           word with success = 1 counts as a failure); the frame-error rate and the
//           mean decoding latency are printed;
//   garbage channel values unrelated to any codeword: must stop after exactly
//           MAX_CYCLES clocks with success = 0.
// Every frame must end within MAX_CYCLES clocks and `cycles` must match the clocks
// counted here. The run counts how often each mechanism happened and fails if one
// never did: termination by the u-side check, by the x-side check, and by the
// maximum latency.
module tb_ecs_pd;
  import ecs_pkg::*;
  localparam int    N        = 64;
  localparam int    NS       = 6;
  localparam int    MAXC     = 800;
  localparam int    QS       = 16;
  localparam real   EBN0_DB  = 3.5;
  localparam int    N_NOISY  = 30;
  localparam logic [N-1:0] FZ = 64'h011717571517177f;
  localparam int    K        = N - $countones(FZ);
  localparam int    KD       = K - 16;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [6:0] y [N];
  logic busy, done, success, sel_r;
  logic [9:0] cycles;
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;
  int n_left = 0, n_right = 0, n_timeout = 0, n_fer = 0, lat_sum = 0, n_ok = 0;

  ecs_pd #(.N(N), .FROZEN(FZ)) dut (.clk, .rst_n, .start, .y, .busy, .done, .success, .sel_r, .cycles, .u_hat);

  always #5 clk = ~clk;

  function automatic logic [15:0] crc16(logic [KD-1:0] d);
    logic [15:0] c;
    c = 16'hFFFF;
    for (int i = KD-1; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ d[i];
      c = {c[14:0], 1'b0};
      if (fb) c ^= 16'h1021;
    end
    return c;
  endfunction

  function automatic logic [N-1:0] encode(logic [N-1:0] u);
    logic [N-1:0] v, w;
    v = u;
    for (int s = 0; s < NS; s++) begin
      for (int j = 0; j < N/2; j++) begin
        w[2*j]   = v[j] ^ v[j+N/2];
        w[2*j+1] = v[j+N/2];
      end
      v = w;
    end
    return v;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // kind: 0 clean, 1 noisy, 2 garbage
  task automatic frame(int kind);
    logic [KD-1:0] d;
    logic [15:0]  c;
    logic [N-1:0] u, x;
    real sigma;
    int idx, t;
    for (int i = 0; i < KD; i++) d[i] = 1'($urandom);
    c = crc16(d);
    u = '0;
    idx = 0;
    for (int k = 0; k < N; k++)
      if (!FZ[k]) begin
        u[k] = (idx < KD) ? d[KD-1-idx] : c[15-(idx-KD)];
        idx++;
      end
    x = encode(u);
    sigma = $sqrt(1.0 / (2.0 * (real'(K) / real'(N)) * $pow(10.0, EBN0_DB / 10.0)));
    for (int k = 0; k < N; k++) begin
      real yv;
      int q;
      yv = x[k] ? -1.0 : 1.0;
      if (kind == 1) yv += sigma * gauss();
      if (kind == 2) yv = 2.0 * gauss();
      q = int'($floor(4.0 * yv * QS + 0.5));
      if (q > 63) q = 63;
      if (q < -64) q = -64;
      y[k] = 7'(q);
    end
    start = 1;
    @(negedge clk);
    start = 0;
    t = 0;
    while (!done && t < MAXC + 10) begin
      @(negedge clk);
      t++;
    end
    chk(done == 1, "frame ended");
    chk(int'(cycles) == t, $sformatf("cycles %0d vs counted %0d", cycles, t));
    chk(int'(cycles) <= MAXC, "latency bound");
    if (success) begin
      if (sel_r) n_right++; else n_left++;
      n_ok++;
      lat_sum += int'(cycles);
      chk(u_hat == u, $sformatf("kind %0d: CRC passed on a wrong word", kind));
    end else begin
      n_timeout++;
      chk(int'(cycles) == MAXC, "timeout at MAX_CYCLES");
    end
    if (kind == 0) chk(success == 1, "clean frame decodes");
    if (kind == 1 && !success) n_fer++;
    if (kind == 2) chk(success == 0, "garbage frame must not pass");
    $display("frame kind=%0d success=%0b side=%s cycles=%0d", kind, success,
             success ? (sel_r ? "x" : "u") : "-", cycles);
  endtask

  initial begin
    for (int k = 0; k < N; k++) y[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(0);
    for (int i = 0; i < N_NOISY; i++) frame(1);
    frame(2);
    frame(0);
    $display("noisy frames: %0d, failed %0d; successful frames: %0d, mean latency %0d clocks",
             N_NOISY, n_fer, n_ok, (n_ok > 0) ? lat_sum / n_ok : 0);
    $display("terminations: u side %0d, x side %0d, max latency %0d", n_left, n_right, n_timeout);
    chk(n_left > 0, "u-side early termination happened");
    chk(n_right > 0, "x-side early termination happened");
    chk(n_timeout > 0, "max-latency stop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
