// tb_ecs_model_pkg: integer reference models used by the decoder testbenches.
//
// Written from the arithmetic, not from the RTL structure: a message bit is an int in
// {-1,0,+1}; a probability tracker is an int P in LSBs of 1/16 (value 1 = 16), limited
// to [-32, 31], updated as P - floor((P - 16*x) / 4); a G module turns P into a stream
// bit with the rule "+1 if P > 0 and R <= 4P, -1 if P < 0 and R < -4P, else 0" (value 1
// of the tracker = 64 in units of the 6-bit random number R).
package tb_ecs_model_pkg;
  import ecs_pkg::*;

  function automatic int pt_next(int p, int xt);
    int d, s, n;
    d = p - 16 * xt;
    s = (d >= 0) ? d / 4 : -((-d + 3) / 4);   // floor(d / 4)
    n = p - s;
    if (n > 31)  n = 31;
    if (n < -32) n = -32;
    return n;
  endfunction

  function automatic int gm_out(int p, int r);
    if (p > 0 && r <= 4 * p) return 1;
    if (p < 0 && r < -4 * p) return -1;
    return 0;
  endfunction

  function automatic int fm(int x, int y);
    return x * y;
  endfunction

  function automatic int to_int(sbit_t b);
    return b.sn ? (b.sgn ? -1 : 1) : 0;
  endfunction

  function automatic sbit_t to_sbit(int v);
    sbit_t b;
    b.sn  = (v != 0);
    b.sgn = (v < 0);
    return b;
  endfunction

  // Sign bit the RTL shows for a G-module output: the tracker's sign.
  function automatic logic gm_sgn(int p);
    return p < 0;
  endfunction

  // Random message bit in {-1,0,+1}.
  function automatic int rnd_msg();
    return int'($urandom_range(2)) - 1;
  endfunction
endpackage
