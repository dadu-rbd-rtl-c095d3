// tb_recip_unit: applies a sweep of positive and negative Q16.16 values
// from 2^-10 to 2^14 plus random values to the reciprocal unit and compares
// each result with 1/x computed in double precision: relative error below
// 1e-4 or absolute error below 2 LSB. Zero must saturate.
module tb_recip_unit;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  fx_t x, y;
  recip_unit dut (.x, .y);
  int checks = 0, failures = 0;

  task automatic try_one(fx_t v);
    real e;
    x = v;
    #1;
    e = 1.0 / fx2r(v);
    checks++;
    if (!close(fx2r(y), e, 1.0e-4, 3.0e-5)) begin
      failures++;
      $display("x=%f got %f exp %f", fx2r(v), fx2r(y), e);
    end
  endtask

  initial begin
    for (int sh = 6; sh < 30; sh++) begin
      try_one(fx_t'(32'sd1 <<< sh));
      try_one(-fx_t'(32'sd1 <<< sh));
      try_one(fx_t'((32'sd3 <<< sh) / 2));
    end
    for (int k = 0; k < 300; k++) try_one(fx_t'($urandom_range(64, 32'h3FFF_FFFF)));
    x = '0;
    #1;
    checks++;
    if (y != fx_t'(32'h7FFF_FFFF)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
