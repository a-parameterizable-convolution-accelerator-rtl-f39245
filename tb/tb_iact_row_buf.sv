// tb_iact_row_buf -- IACT-ROW: fills every row slot with random words
// written as APACK-byte parts, then reads every word back, and checks that
// writing one slot leaves the others unchanged.
module tb_iact_row_buf;
  localparam int APACK = 4, ICP = 8, FM = 3, WC = 64, RW = WC / ICP;
  logic clk = 0, wr_en = 0;
  logic [1:0] wr_slot = 0, rd_slot = 0;
  logic [2:0] wr_addr = 0, rd_addr = 0;
  logic wr_lane = 0;
  logic [APACK-1:0][7:0] wr_data = 0;
  logic [ICP-1:0][7:0] rd_data;
  logic [ICP*8-1:0] model [FM][RW];
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  iact_row_buf #(.APACK(APACK), .ICP(ICP), .FILTER_MAX(FM), .WINxCHIN_PAD_MAX(WC)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int s);
    for (int a = 0; a < RW; a++)
      for (int l = 0; l < ICP / APACK; l++) begin
        @(negedge clk);
        wr_en = 1; wr_slot = 2'(s); wr_addr = 3'(a); wr_lane = l[0]; wr_data = $urandom;
        model[s][a][l*APACK*8 +: APACK*8] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    for (int s = 0; s < FM; s++)
      for (int a = 0; a < RW; a++) begin
        rd_slot = 2'(s); rd_addr = 3'(a);
        #1;
        checks++;
        if (rd_data != model[s][a]) begin
          failures++;
          $display("FAIL slot %0d word %0d", s, a);
        end
      end
  endtask

  initial begin
    for (int s = 0; s < FM; s++) fill(s);
    check_all();
    fill(1);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
