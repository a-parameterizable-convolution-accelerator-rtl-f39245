// postproc -- OACT-PIXEL registers and the bias / rescale / round / saturate
// / ReLU stage of the CONV-PART.
//
// After the PEs finish a group of OCP output channels, their accumulators
// are captured in the OACT-PIXEL registers (paper, Fig. 4). The values are
// then processed one per cycle, as the figure's single-value path shows:
//   v = acc + (bias << bias_shift)            add the aligned DFP bias
//   v = (v + 2^(out_shift-1)) >>> out_shift   rescale, round half up
//   v = clamp(v, -128, 127)                   over/under-flow
//   v = relu_en ? max(v, 0) : v               optional ReLU
// and written to the OUT-PIXEL OCM at channel index group_base + i. The
// paper names these steps; the rounding rule, the shift encoding and the
// place of ReLU in this stage are this design's choices.
//
// Interface: in_valid/in_ready hand over OCP accumulators with the channel
// index of the first (in_base) and in_last, which marks the last group of
// an output pixel. A new group is accepted while the last value of the
// previous one is written. bias_addr/bias_data read the Biases OCM
// (asynchronous read). Output is a write port with wr_valid/wr_ready; wr_last
// marks the last value of an output pixel.
module postproc
  import accel_pkg::*;
#(
  parameter int OCP       = 16,
  parameter int CHOUT_MAX = 1024,
  localparam int CW       = $clog2(CHOUT_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [4:0]    bias_shift,
  input  logic [4:0]    out_shift,
  input  logic          relu_en,
  // accumulators in
  input  logic          in_valid,
  output logic          in_ready,
  input  acc_t          in_acc [OCP],
  input  logic [CW-1:0] in_base,
  input  logic          in_last,
  // Biases OCM read port
  output logic [CW-1:0] bias_addr,
  input  act_t          bias_data,
  // OUT-PIXEL write port
  output logic          wr_valid,
  input  logic          wr_ready,
  output logic [CW-1:0] wr_idx,
  output act_t          wr_data,
  output logic          wr_last
);
  localparam int IW = (OCP > 1) ? $clog2(OCP) : 1;

  acc_t          oact [OCP];
  logic          busy;
  logic [IW-1:0] cnt;
  logic [CW-1:0] base;
  logic          last;

  logic wr_fire, done_grp;
  assign wr_fire  = wr_valid && wr_ready;
  assign done_grp = wr_fire && (cnt == IW'(OCP - 1));
  assign in_ready = !busy || done_grp;
  assign wr_valid = busy;
  assign wr_idx   = base + CW'(cnt);
  assign wr_last  = last && (cnt == IW'(OCP - 1));
  assign bias_addr = wr_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      base <= '0;
      last <= 1'b0;
      for (int i = 0; i < OCP; i++) oact[i] <= '0;
    end else begin
      if (wr_fire) cnt <= cnt + 1'b1;
      if (done_grp) begin
        busy <= 1'b0;
        cnt  <= '0;
      end
      if (in_valid && in_ready) begin
        busy <= 1'b1;
        cnt  <= '0;
        base <= in_base;
        last <= in_last;
        for (int i = 0; i < OCP; i++) oact[i] <= in_acc[i];
      end
    end
  end

  // Arithmetic for the value at cnt.
  logic signed [47:0] v_bias, v_round, v_shift;
  always_comb begin
    v_bias  = 48'(oact[cnt]) + (48'(bias_data) <<< bias_shift);
    v_round = (out_shift == 5'd0) ? v_bias : v_bias + (48'sd1 <<< (out_shift - 5'd1));
    v_shift = v_round >>> out_shift;
    if (v_shift > 48'sd127)       wr_data = 8'sd127;
    else if (v_shift < -48'sd128) wr_data = -8'sd128;
    else                          wr_data = 8'(v_shift);
    if (relu_en && wr_data[7])    wr_data = '0;
  end
endmodule
