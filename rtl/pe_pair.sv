// pe_pair -- two processing elements (PEs) sharing one input window word.
//
// A PE multiplies ICP input activations by ICP weights of its output
// channel, sums the products in an adder tree and accumulates the sum over
// the words of the window (paper, Fig. 4: MUL units, adder tree and the
// feedback loop). PEs come in pairs because two PEs see the same
// activations: with PACKED = 1 each activation lane uses one mul2_packed,
// i.e. one DSP block for both PEs (the paper's two-multiplications-per-DSP
// optimisation); with PACKED = 0 the 2*ICP multipliers are marked for LUT
// implementation (the paper's PE_DSP split between DSP and LUT PEs).
//
// Interface: when en is high, each accumulator loads (first = 1) or adds
// (first = 0) the dot product of act with its weights at the next clock
// edge; it holds otherwise. One window word per cycle; the result of the
// last word is visible on acc0/acc1 one cycle after it was presented.
// Accumulator width (32 bits) and the single-cycle MAC are this design's
// choices. Reset clears the accumulators.
module pe_pair
  import accel_pkg::*;
#(
  parameter int ICP    = 32,
  parameter bit PACKED = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic [ICP-1:0][7:0]  act,
  input  logic [ICP-1:0][7:0]  w0,
  input  logic [ICP-1:0][7:0]  w1,
  output acc_t                 acc0,
  output acc_t                 acc1
);
  logic signed [15:0] prod0 [ICP];
  logic signed [15:0] prod1 [ICP];
  logic signed [ACC_W-1:0] sum0, sum1;

  for (genvar i = 0; i < ICP; i++) begin : g_lane
    if (PACKED) begin : g_dsp
      mul2_packed u_mul (
        .a (act[i]), .w0(w0[i]), .w1(w1[i]),
        .p0(prod0[i]), .p1(prod1[i])
      );
    end else begin : g_lut
      (* use_dsp = "no" *) logic signed [15:0] m0;
      (* use_dsp = "no" *) logic signed [15:0] m1;
      assign m0 = $signed(act[i]) * $signed(w0[i]);
      assign m1 = $signed(act[i]) * $signed(w1[i]);
      assign prod0[i] = m0;
      assign prod1[i] = m1;
    end
  end

  adder_tree #(.N(ICP), .IN_W(16), .OUT_W(ACC_W)) u_tree0 (.din(prod0), .sum(sum0));
  adder_tree #(.N(ICP), .IN_W(16), .OUT_W(ACC_W)) u_tree1 (.din(prod1), .sum(sum1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc0 <= '0;
      acc1 <= '0;
    end else if (en) begin
      acc0 <= (first ? '0 : acc0) + sum0;
      acc1 <= (first ? '0 : acc1) + sum1;
    end
  end
endmodule
