// tb_atms_unit: drives the ATMS unit with directed corner cases and random
// (Z, S, log2 T0, alpha) and compares dX and the flip detector with the
// reference formula of tb_ref_pkg.
module tb_atms_unit;
  import tb_ref_pkg::*;
  logic signed [18:0] z;
  logic s;
  logic [4:0] log2_t0;
  logic [5:0] alpha;
  logic [9:0] dx;
  logic flip_det;
  int checks = 0, failures = 0;

  atms_unit dut (.z, .s, .log2_t0, .alpha, .dx, .flip_det);

  task automatic check(int zi, bit si, int l, int a);
    int exp_dx; bit exp_det;
    z = 19'(zi); s = si; log2_t0 = 5'(l); alpha = 6'(a);
    #1;
    exp_dx = ref_dx(zi, si, l, a);
    exp_det = ref_det(zi, si, l);
    checks++;
    if (int'(dx) != exp_dx || flip_det != exp_det) begin
      failures++;
      $display("FAIL z=%0d s=%0d l=%0d a=%0d dx=%0d exp=%0d det=%0d exp=%0d", zi, si, l, a, dx, exp_dx, flip_det, exp_det);
    end
  endtask

  initial begin
    // the deterministic flip boundary: (1-2S) Z / T0 = 7 and 8
    check(7*16, 0, 4, 1);  check(8*16, 0, 4, 1);  check(8*16 - 1, 0, 4, 1);
    check(-8*16, 1, 4, 1); check(-8*16 + 1, 1, 4, 1);
    // alpha decides below the boundary
    check(3*4, 0, 2, 2);   check(3*4, 0, 2, 3);   check(1, 0, 0, 7); check(1, 0, 0, 8);
    check(0, 0, 3, 40);    check(-1, 0, 0, 1);    check(-100000, 0, 0, 63);
    check(200000, 1, 0, 63); check(262143, 0, 0, 1); check(-200000, 1, 0, 1);
    for (int n = 0; n < 4000; n++)
      check(int'($urandom_range(0, 8000)) - 4000, 1'($urandom), int'($urandom_range(0, 10)),
            int'($urandom_range(1, 63)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
