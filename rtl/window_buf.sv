// window_buf -- the two Window OCMs (ping-pong) of the CONV-PART.
//
// A Window OCM holds one input window IW: F x F x C_i activations stored as
// K = F*F*C_i/ICP words of ICP bytes, in [F_h, F_w, C_i] order, the same
// order as the weights. The paper partitions the Window OCM by ICP so the
// PEs get ICP values per cycle, and doubles it so the next window is copied
// in while the PEs work on the current one (Sec. III-D, Fig. 2).
//
// Interface: the writer checks wr_ready (the OCM it fills is empty), writes
// words with wr_en/wr_addr/wr_data and pulses wr_commit after the last word,
// which marks the OCM full and moves the writer to the other OCM. The reader
// sees rd_valid while its OCM is full, reads rd_data at rd_addr
// (combinational read) and pulses rd_release when done, which empties that
// OCM and moves the reader on. Reset empties both OCMs.
module window_buf #(
  parameter int ICP                   = 32,
  parameter int FILTERxFILTERxCHIN_MAX = 4608,
  localparam int KMAX                 = FILTERxFILTERxCHIN_MAX / ICP,
  localparam int AW                   = (KMAX > 1) ? $clog2(KMAX) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // writer
  output logic                  wr_ready,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [ICP-1:0][7:0]   wr_data,
  input  logic                  wr_commit,
  // reader
  output logic                  rd_valid,
  input  logic [AW-1:0]         rd_addr,
  output logic [ICP-1:0][7:0]   rd_data,
  input  logic                  rd_release
);
  logic [ICP-1:0][7:0] mem [2][KMAX];
  logic [1:0] full;
  logic       wsel, rsel;

  assign wr_ready = !full[wsel];
  assign rd_valid = full[rsel];
  assign rd_data  = mem[rsel][rd_addr];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wsel][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wsel] <= 1'b1;
        wsel       <= !wsel;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0;
        rsel       <= !rsel;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (wr_en || wr_commit) |-> !full[wsel]);
  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rsel]);
endmodule
