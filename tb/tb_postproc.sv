// tb_postproc -- OACT-PIXEL and post-processing: random groups of OCP
// accumulators (including values that overflow and underflow 8 bits),
// random biases and shifts, ReLU on and off, random stalls on the write
// port. Each written value, its channel index and the last-of-pixel flag
// are checked against the reference arithmetic.
module tb_postproc;
  import accel_pkg::*;
  localparam int OCP = 4, CHOUT_MAX = 64, CW = 6;
  logic clk = 0, rst_n = 0;
  logic [4:0] bias_shift = 0, out_shift = 0;
  logic relu_en = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  acc_t in_acc [OCP];
  logic [CW-1:0] in_base = 0, bias_addr, wr_idx;
  act_t bias_data, wr_data;
  logic wr_valid, wr_ready = 0, wr_last;
  byte signed biases [CHOUT_MAX];
  int checks = 0, failures = 0;

  always #5 clk = !clk;
  assign bias_data = biases[bias_addr];

  postproc #(.OCP(OCP), .CHOUT_MAX(CHOUT_MAX)) u_dut (.*);

  typedef struct { int idx; byte signed v; bit last; } exp_t;
  exp_t q[$];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  initial begin
    forever begin
      @(negedge clk);
      wr_ready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (wr_valid && wr_ready) begin
        exp_t e;
        checks++;
        if (q.size() == 0) begin failures++; $display("FAIL unexpected write"); end
        else begin
          e = q.pop_front();
          if (wr_idx != CW'(e.idx) || wr_data != e.v || wr_last != e.last) begin
            failures++;
            if (failures < 10) $display("FAIL idx %0d/%0d data %0d/%0d last %0d/%0d", wr_idx, e.idx, wr_data, e.v, wr_last, e.last);
          end
        end
      end
    end
  end

  initial begin
    foreach (biases[i]) biases[i] = byte'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int px = 0; px < 40; px++) begin
      bias_shift = 5'($urandom_range(0, 8));
      out_shift  = 5'($urandom_range(0, 12));
      relu_en    = px[0];
      for (int g = 0; g < CHOUT_MAX / OCP / 4; g++) begin
        for (int i = 0; i < OCP; i++) begin
          exp_t e;
          in_acc[i] = acc_t'($urandom_range(0, 1) ? $signed($urandom) >>> $urandom_range(8, 30)
                                                  : $signed($urandom) >>> 20);
          e.idx  = g * OCP + i;
          e.v    = tb_ref_pkg::post(longint'(in_acc[i]), biases[g * OCP + i], bias_shift,
                                    out_shift, relu_en);
          e.last = (g == CHOUT_MAX / OCP / 4 - 1) && (i == OCP - 1);
          q.push_back(e);
        end
        in_base = CW'(g * OCP);
        in_last = (g == CHOUT_MAX / OCP / 4 - 1);
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
      while (q.size() != 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
