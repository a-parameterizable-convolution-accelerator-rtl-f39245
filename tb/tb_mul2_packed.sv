// tb_mul2_packed -- exhaustive check of the two-products-per-multiplier
// packing: every activation a and weight w0, with w1 drawn at random plus
// the corner values, against plain signed products.
module tb_mul2_packed;
  logic signed [7:0]  a, w0, w1;
  logic signed [15:0] p0, p1;
  int checks = 0, failures = 0;

  mul2_packed u_dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -128; ia < 128; ia++)
      for (int iw = -128; iw < 128; iw++)
        for (int r = 0; r < 3; r++) begin
          a  = 8'(ia);
          w0 = 8'(iw);
          w1 = (r == 0) ? -8'sd128 : (r == 1) ? 8'sd127 : 8'($urandom);
          #1;
          checks++;
          if (p0 != 16'(ia * iw) || p1 != 16'(ia * int'(w1))) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d w0=%0d w1=%0d p0=%0d p1=%0d", a, w0, w1, p0, p1);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
