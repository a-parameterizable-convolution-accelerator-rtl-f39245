// tb_pe_array -- OCP = 6 PEs of ICP = 4 multipliers, the first PE_DSP = 3
// rounded to one DSP-packed pair, the rest LUT pairs: random window and
// weight words over several accumulation lengths, every PE checked.
module tb_pe_array;
  import accel_pkg::*;
  localparam int ICP = 4, OCP = 6;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [ICP-1:0][7:0] act;
  logic [OCP-1:0][ICP-1:0][7:0] wts;
  acc_t acc [OCP];
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  pe_array #(.ICP(ICP), .OCP(OCP), .PE_DSP(3)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e [OCP];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int kw;
      kw = $urandom_range(1, 12);
      foreach (e[p]) e[p] = 0;
      for (int k = 0; k < kw; k++) begin
        act = {ICP{8'($urandom)}};
        for (int i = 0; i < ICP; i++) act[i] = 8'($urandom);
        for (int p = 0; p < OCP; p++)
          for (int i = 0; i < ICP; i++) begin
            wts[p][i] = 8'($urandom);
            e[p] += longint'($signed(act[i])) * longint'($signed(wts[p][i]));
          end
        en = 1; first = (k == 0);
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      for (int p = 0; p < OCP; p++) begin
        checks++;
        if (acc[p] != 32'(e[p])) begin
          failures++;
          $display("FAIL t=%0d pe %0d exp %0d got %0d", t, p, e[p], acc[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
