// out_pixel_buf -- the two OUT-PIXEL OCMs (ping-pong) of the CONV-PART.
//
// Each OCM holds the C_o output channels of one output pixel. While the
// post-processing stage writes pixel n+1 into one OCM, the other OCM streams
// pixel n out towards the MPOOL-PART, APACK channels per beat. This is the
// paper's double buffering of the OUT-PIXEL OCM (Sec. III-D, Fig. 2).
//
// Interface: write port wr_valid/wr_ready/wr_idx/wr_data/wr_last; wr_ready is
// high while the OCM being filled is free; the write carrying wr_last hands
// that OCM to the read side. Read side: an APACK-wide valid/ready stream;
// a pixel is out_c/APACK beats, channel 0 first. Reads are asynchronous
// (memory modelled as an array with a combinational read port). Reset marks
// both OCMs empty. APACK must be a power of two and divide C_o and CHOUT_MAX.
module out_pixel_buf
  import accel_pkg::*;
#(
  parameter int APACK     = 16,
  parameter int CHOUT_MAX = 1024,
  localparam int CW       = $clog2(CHOUT_MAX),
  localparam int NW       = CHOUT_MAX / APACK,
  localparam int AW       = (NW > 1) ? $clog2(NW) : 1,
  localparam int LW       = (APACK > 1) ? $clog2(APACK) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [DIM_W-1:0]       out_c,
  // write side
  input  logic                   wr_valid,
  output logic                   wr_ready,
  input  logic [CW-1:0]          wr_idx,
  input  act_t                   wr_data,
  input  logic                   wr_last,
  // read side (stream)
  output logic                   m_valid,
  input  logic                   m_ready,
  output logic [APACK-1:0][7:0]  m_data
);
  logic [APACK-1:0][7:0] mem [2][NW];
  logic [1:0]  full;
  logic        wsel, rsel;
  logic [AW-1:0] rbeat;
  logic [DIM_W-1:0] nbeats;

  assign nbeats   = out_c / DIM_W'(APACK);
  assign wr_ready = !full[wsel];
  assign m_valid  = full[rsel];
  assign m_data   = mem[rsel][rbeat];

  logic wfire, rfire, rlast;
  assign wfire = wr_valid && wr_ready;
  assign rfire = m_valid && m_ready;
  assign rlast = (DIM_W'(rbeat) == nbeats - 1'b1);

  always_ff @(posedge clk) begin
    if (wfire) mem[wsel][AW'(wr_idx >> LW)][LW'(wr_idx)] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= '0;
      wsel  <= 1'b0;
      rsel  <= 1'b0;
      rbeat <= '0;
    end else begin
      if (wfire && wr_last) begin
        full[wsel] <= 1'b1;
        wsel       <= !wsel;
      end
      if (rfire) begin
        if (rlast) begin
          rbeat      <= '0;
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
        end else begin
          rbeat <= rbeat + 1'b1;
        end
      end
    end
  end

  // A full OCM is never written.
  assert property (@(posedge clk) disable iff (!rst_n) wfire |-> !full[wsel]);
endmodule
