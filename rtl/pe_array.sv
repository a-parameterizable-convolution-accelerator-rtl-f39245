// pe_array -- the OCP processing elements of the CONV-PART.
//
// All OCP PEs take the same ICP-wide word of the current input window and
// each takes its own ICP-wide word from its Weights OCM bank, so one cycle
// performs OCP x ICP multiply-accumulates (paper, Sec. III-D and Fig. 4).
// PEs are built as OCP/2 pe_pair instances; the first PE_DSP PEs (rounded
// down to whole pairs) use DSP-packed multipliers, the rest LUT multipliers.
// OCP must be even (this design's choice, needed for the pairing).
//
// Interface: en/first as in pe_pair, shared by all PEs; act is the window
// word; wts[p] is PE p's weight word; acc[p] is PE p's accumulator.
module pe_array
  import accel_pkg::*;
#(
  parameter int ICP    = 32,
  parameter int OCP    = 16,
  parameter int PE_DSP = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          first,
  input  logic [ICP-1:0][7:0]           act,
  input  logic [OCP-1:0][ICP-1:0][7:0]  wts,
  output acc_t                          acc [OCP]
);
  for (genvar j = 0; j < OCP / 2; j++) begin : g_pair
    pe_pair #(.ICP(ICP), .PACKED(2 * j + 1 < PE_DSP)) u_pair (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (en),
      .first(first),
      .act  (act),
      .w0   (wts[2*j]),
      .w1   (wts[2*j+1]),
      .acc0 (acc[2*j]),
      .acc1 (acc[2*j+1])
    );
  end
endmodule
