// tb_ecs_fm: exhaustive check of the stochastic f() gate pair: for every pair of
// message bits in {-1,0,+1} (and the sign bit carried by a zero), the product value
// and the XOR of the signs must appear at the output.
module tb_ecs_fm;
  import ecs_pkg::*;
  sbit_t x, y, z;
  int checks = 0, failures = 0;

  ecs_fm dut (.x, .y, .z);

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        x = sbit_t'(i[1:0]);
        y = sbit_t'(j[1:0]);
        #1;
        checks++;
        if (z.sn !== (x.sn && y.sn) || z.sgn !== (x.sgn != y.sgn)) begin
          failures++;
          $display("FAIL x=%b y=%b z=%b", x, y, z);
        end
        // Value view: min of magnitudes times product of signs.
        checks++;
        if (x.sn && y.sn && (z.sgn != ((x.sgn ^ y.sgn) == 1'b1))) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
