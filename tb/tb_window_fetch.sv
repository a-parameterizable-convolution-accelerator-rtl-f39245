// tb_window_fetch -- IACT-ROW loading and window copy: for several layer
// shapes (1x1, 3x3, padding 0/1, stride 1/2) streams a random input with
// gaps, accepts windows with a random win_ready, and checks each window
// word against the window of Eq. (1) (zeros in the padding), the window
// count and order, and that done comes after the whole stream was read.
module tb_window_fetch;
  import accel_pkg::*;
  localparam int APACK = 4, ICP = 8, FM = 3, WC = 128, FFC = 216, KMAX = FFC / ICP;
  logic clk = 0, rst_n = 0, start = 0, done;
  layer_cfg_t cfg = '0;
  logic s_valid = 0, s_ready;
  logic [APACK-1:0][7:0] s_data = 0;
  logic win_ready = 0, win_en, win_commit;
  logic [4:0] win_addr;
  logic [ICP-1:0][7:0] win_data;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  window_fetch #(.APACK(APACK), .ICP(ICP), .FILTER_MAX(FM), .WINxCHIN_PAD_MAX(WC),
                 .FILTERxFILTERxCHIN_MAX(FFC)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int h, input int w, input int ci, input int f, input int s, input int p);
    byte ia[];
    int ho, wo, nwin, kw, nbeats;
    bit got_done;
    logic [ICP*8-1:0] cur [KMAX];
    ia = new[h * w * ci];
    foreach (ia[i]) ia[i] = byte'($urandom);
    ho = (h + 2 * p - f) / s + 1;
    wo = (w + 2 * p - f) / s + 1;
    kw = f * f * ci / ICP;
    nbeats = h * w * ci / APACK;
    @(negedge clk);
    cfg = '0;
    cfg.in_h = 16'(h); cfg.in_w = 16'(w); cfg.in_c = 16'(ci); cfg.out_c = 16'(8);
    cfg.fsize = 2'(f); cfg.stride = 2'(s); cfg.pad = p[0];
    start = 1;
    @(negedge clk);
    start = 0;
    got_done = 0;
    fork
      begin
        for (int i = 0; i < nbeats; i++) begin
          while ($urandom_range(4) == 0) begin s_valid = 0; @(negedge clk); end
          for (int j = 0; j < APACK; j++) s_data[j] = ia[i * APACK + j];
          s_valid = 1;
          @(posedge clk);
          while (!s_ready) @(posedge clk);
          @(negedge clk);
        end
        s_valid = 0;
      end
      begin
        nwin = 0;
        while (!got_done) begin
          win_ready = ($urandom_range(3) != 0);
          @(posedge clk);
          if (done) got_done = 1;
          if (win_en) begin
            checks++;
            if (!win_ready) begin failures++; $display("FAIL write while not ready"); end
            cur[win_addr] = win_data;
          end
          if (win_commit) begin
            int yo, xo;
            yo = nwin / wo; xo = nwin % wo;
            for (int fh = 0; fh < f; fh++)
              for (int fw = 0; fw < f; fw++)
                for (int c = 0; c < ci; c++) begin
                  int y, x;
                  byte e;
                  y = yo * s - p + fh; x = xo * s - p + fw;
                  e = (y >= 0 && y < h && x >= 0 && x < w) ? ia[(y * w + x) * ci + c] : 8'sd0;
                  checks++;
                  if (cur[(fh * f + fw) * (ci / ICP) + c / ICP][(c % ICP) * 8 +: 8] != e) begin
                    failures++;
                    if (failures < 10) $display("FAIL win %0d fh %0d fw %0d c %0d", nwin, fh, fw, c);
                  end
                end
            nwin++;
          end
          @(negedge clk);
        end
        win_ready = 0;
      end
    join
    checks += 2;
    if (nwin != ho * wo) begin failures++; $display("FAIL %0d windows, expected %0d", nwin, ho * wo); end
    if (s_valid) begin failures++; $display("FAIL done before the stream ended"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 6, 16, 3, 1, 1);
    run(8, 7, 8, 3, 2, 0);
    run(7, 8, 8, 3, 2, 1);
    run(4, 5, 16, 1, 1, 0);
    run(6, 5, 8, 1, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
