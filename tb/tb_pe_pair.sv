// tb_pe_pair -- checks both PE pair variants (DSP-packed and LUT
// multipliers): random K-word dot products accumulated with first/en,
// including idle cycles with en low, against a software sum.
module tb_pe_pair;
  import accel_pkg::*;
  localparam int ICP = 8;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [ICP-1:0][7:0] act, w0, w1;
  acc_t a0p, a1p, a0l, a1l;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  pe_pair #(.ICP(ICP), .PACKED(1'b1)) u_dsp (.clk, .rst_n, .en, .first, .act, .w0, .w1,
                                             .acc0(a0p), .acc1(a1p));
  pe_pair #(.ICP(ICP), .PACKED(1'b0)) u_lut (.clk, .rst_n, .en, .first, .act, .w0, .w1,
                                             .acc0(a0l), .acc1(a1l));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e0, e1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int kw;
      kw = $urandom_range(1, 9);
      e0 = 0; e1 = 0;
      for (int k = 0; k < kw; k++) begin
        while ($urandom_range(3) == 0) begin en = 0; act = $urandom; @(negedge clk); end
        for (int i = 0; i < ICP; i++) begin
          act[i] = (t == 0) ? 8'h80 : 8'($urandom);
          w0[i]  = (t == 0) ? 8'h80 : 8'($urandom);
          w1[i]  = (t == 0) ? 8'h7f : 8'($urandom);
          e0 += longint'($signed(act[i])) * longint'($signed(w0[i]));
          e1 += longint'($signed(act[i])) * longint'($signed(w1[i]));
        end
        en = 1; first = (k == 0);
        @(negedge clk);
      end
      en = 0;
      checks += 4;
      if (a0p != 32'(e0)) failures++;
      if (a1p != 32'(e1)) failures++;
      if (a0l != 32'(e0)) failures++;
      if (a1l != 32'(e1)) failures++;
      if (a0p != 32'(e0) || a1l != 32'(e1))
        $display("FAIL t=%0d exp %0d %0d got dsp %0d %0d lut %0d %0d", t, e0, e1, a0p, a1p, a0l, a1l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
