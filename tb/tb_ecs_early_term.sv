// tb_ecs_early_term: both early-termination variants on a (64, 32) code with the
// default CRC-16 (16 data + 16 check bits). The reference CRC is checked first on the
// standard "123456789" vector (0x29B1). Then, for random data:
//   u side: streams of the correct u (+1 for bit 0, -1 for bit 1) against R_1 must
//           give pass = 1 and u_hat = u; one flipped information bit must give 0;
//   x side: streams of the encoded x against a zero R_{n+1} must give pass = 1 and
//           u_hat = u; a flipped code bit must give 0; a word encoded with a frozen
//           bit set (but a correct CRC) must give 0.
// pass must rise within 3 clocks of the new streams and must be 0 right after clear.
module tb_ecs_early_term;
  import ecs_pkg::*;
  import tb_ecs_model_pkg::*;
  localparam int N = 64;
  localparam int NS = 6;
  localparam logic [N-1:0] FZ = 64'h011717571517177f;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [5:0] r;
  sbit_t a [N];
  sbit_t b [N];
  sbit_t bz [N];
  logic [N-1:0] u_l, u_r;
  logic pass_l, pass_r;
  int checks = 0, failures = 0;

  ecs_sobol_gen #(.W(6)) u_src (.clk, .rst_n, .load(1'b0), .r);
  ecs_early_term #(.N(N), .FROZEN(FZ), .FROM_X(1'b0)) dut_l (.clk, .rst_n, .clr, .r, .a, .b, .u_hat(u_l), .pass(pass_l));
  ecs_early_term #(.N(N), .FROZEN(FZ), .FROM_X(1'b1)) dut_r (.clk, .rst_n, .clr, .r, .a, .b(bz), .u_hat(u_r), .pass(pass_r));

  always #5 clk = ~clk;

  function automatic logic [15:0] crc16(logic bits [$]);
    logic [15:0] c;
    c = 16'hFFFF;
    foreach (bits[i]) begin
      logic fb;
      fb = c[15] ^ bits[i];
      c = {c[14:0], 1'b0};
      if (fb) c ^= 16'h1021;
    end
    return c;
  endfunction

  // Encoder over the graph: v[s+1][2j] = v[s][j] ^ v[s][j+N/2], v[s+1][2j+1] = v[s][j+N/2].
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

  function automatic logic [N-1:0] make_u(logic [15:0] data);
    logic bits [$];
    logic [15:0] c;
    logic [N-1:0] u;
    int idx;
    for (int i = 15; i >= 0; i--) bits.push_back(data[i]);
    c = crc16(bits);
    u = '0;
    idx = 0;
    for (int k = 0; k < N; k++)
      if (!FZ[k]) begin
        u[k] = (idx < 16) ? data[15-idx] : c[15-(idx-16)];
        idx++;
      end
    return u;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Apply streams for the u side (a = u streams, b = R_1) or the x side (a = x streams).
  task automatic apply(logic [N-1:0] bits, bit exp_l, logic [N-1:0] exp_u, bit side_r, bit exp_pass);
    clr = 1;
    @(negedge clk);
    clr = 0;
    chk(pass_l == 0 && pass_r == 0, "pass low after clear");
    for (int k = 0; k < N; k++) a[k] = to_sbit(bits[k] ? -1 : 1);
    repeat (3) @(negedge clk);
    for (int t = 0; t < 8; t++) begin
      if (!side_r) begin
        chk(pass_l == exp_pass, $sformatf("u-side pass=%0b exp %0b", pass_l, exp_pass));
        if (exp_pass) chk(u_l == exp_u, "u-side u_hat");
      end else begin
        chk(pass_r == exp_pass, $sformatf("x-side pass=%0b exp %0b", pass_r, exp_pass));
        if (exp_pass) chk(u_r == exp_u, "x-side u_hat");
      end
      @(negedge clk);
    end
  endtask

  initial begin
    logic bits [$];
    string s;
    s = "123456789";
    for (int i = 0; i < s.len(); i++)
      for (int k = 7; k >= 0; k--) bits.push_back(s[i][k]);
    chk(crc16(bits) == 16'h29B1, "reference CRC-16/CCITT-FALSE");
    for (int k = 0; k < N; k++) begin
      b[k]  = FZ[k] ? SBIT_FROZEN : SBIT_ZERO;
      bz[k] = SBIT_ZERO;
      a[k]  = SBIT_ZERO;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < 6; f++) begin
      logic [15:0] d;
      logic [N-1:0] u, x, ub;
      int pos;
      d = 16'($urandom);
      u = make_u(d);
      x = encode(u);
      apply(u, 1, u, 0, 1);
      // flip one information bit
      do pos = int'($urandom_range(N-1)); while (FZ[pos]);
      ub = u;
      ub[pos] = ~ub[pos];
      apply(ub, 1, u, 0, 0);
      apply(x, 1, u, 1, 1);
      ub = x;
      ub[pos] = ~ub[pos];
      apply(ub, 1, u, 1, 0);
      // frozen bit set: CRC still right but not a codeword of this code
      do pos = int'($urandom_range(N-1)); while (!FZ[pos]);
      ub = u;
      ub[pos] = 1'b1;
      apply(encode(ub), 1, u, 1, 0);
    end
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
