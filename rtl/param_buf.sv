// param_buf -- the Weights and Biases OCMs of the CONV-PART and their loader.
//
// The PARAMS stream carries PPACK 8-bit values per beat. For one layer it
// holds first the C_o biases, then the weights in [C_o, F_h, F_w, C_i] order
// (C_i fastest), the order the paper gives. The Weights OCM is split into OCP
// banks (the paper's array partitioning): output channel co goes to bank
// co % OCP, so the OCP PEs each read their own bank in the same cycle. Within
// a bank, channel group g = co / OCP starts at word g*K, K = F*F*C_i/ICP, and
// each word holds ICP consecutive input channels. Biases before weights, and
// the bank layout, are this design's choices.
//
// Interface: load (one cycle, with out_c, in_c, fsize) starts a new layer
// and clears loaded; the stream s_valid/s_ready/s_data is then accepted
// until all values are in, when loaded rises. Read ports are combinational:
// w_addr selects the same word in all OCP banks, b_addr one bias.
// ICP must be a multiple of PPACK, and C_o a multiple of OCP and PPACK.
module param_buf
  import accel_pkg::*;
#(
  parameter int PPACK                        = 16,
  parameter int ICP                          = 32,
  parameter int OCP                          = 16,
  parameter int CHOUTxFILTERxFILTERxCHIN_MAX = 524288,
  parameter int CHOUT_MAX                    = 1024,
  localparam int WDEPTH = CHOUTxFILTERxFILTERxCHIN_MAX / (OCP * ICP),
  localparam int WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int CW     = $clog2(CHOUT_MAX),
  localparam int NL     = ICP / PPACK,                 // beats per weight word
  localparam int LW     = (NL > 1) ? $clog2(NL) : 1,
  localparam int PW     = (OCP > 1) ? $clog2(OCP) : 1,
  localparam int BW     = CHOUT_MAX / PPACK,
  localparam int BAW    = (BW > 1) ? $clog2(BW) : 1,
  localparam int BLW    = (PPACK > 1) ? $clog2(PPACK) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [DIM_W-1:0]              out_c,
  input  logic [DIM_W-1:0]              in_c,
  input  logic [1:0]                    fsize,
  output logic                          loaded,
  // PARAMS stream
  input  logic                          s_valid,
  output logic                          s_ready,
  input  logic [PPACK-1:0][7:0]         s_data,
  // read ports
  input  logic [WAW-1:0]                w_addr,
  output logic [OCP-1:0][ICP-1:0][7:0]  w_data,
  input  logic [CW-1:0]                 b_addr,
  output act_t                          b_data
);
  typedef enum logic [1:0] {IDLE, BIAS, WGT} state_t;

  logic [NL-1:0][PPACK-1:0][7:0] wmem [OCP][WDEPTH];
  logic [PPACK-1:0][7:0]         bmem [BW];

  state_t            state;
  logic [DIM_W-1:0]  kwords;      // K = F*F*C_i/ICP
  logic [DIM_W-1:0]  ngroups;     // C_o / OCP
  logic [DIM_W-1:0]  bbeats;      // C_o / PPACK
  logic [DIM_W-1:0]  bcnt;
  logic [LW-1:0]     lane;
  logic [DIM_W-1:0]  k;
  logic [PW-1:0]     p;
  logic [DIM_W-1:0]  g;
  logic [WAW-1:0]    gbase;

  assign s_ready = (state != IDLE);
  logic fire;
  assign fire = s_valid && s_ready;

  // Bias and weight OCM writes.
  always_ff @(posedge clk) begin
    if (fire && state == BIAS) bmem[BAW'(bcnt)] <= s_data;
    if (fire && state == WGT)  wmem[p][gbase + WAW'(k)][lane] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      loaded  <= 1'b0;
      kwords  <= '0;
      ngroups <= '0;
      bbeats  <= '0;
      bcnt    <= '0;
      lane    <= '0;
      k       <= '0;
      p       <= '0;
      g       <= '0;
      gbase   <= '0;
    end else if (load) begin
      state   <= BIAS;
      loaded  <= 1'b0;
      kwords  <= DIM_W'(fsize) * DIM_W'(fsize) * (in_c / DIM_W'(ICP));
      ngroups <= out_c / DIM_W'(OCP);
      bbeats  <= out_c / DIM_W'(PPACK);
      bcnt    <= '0;
      lane    <= '0;
      k       <= '0;
      p       <= '0;
      g       <= '0;
      gbase   <= '0;
    end else if (fire) begin
      if (state == BIAS) begin
        bcnt <= bcnt + 1'b1;
        if (bcnt == bbeats - 1'b1) state <= WGT;
      end else begin
        // lane -> k -> p -> g, i.e. [C_o, F_h, F_w, C_i] order
        lane <= lane + 1'b1;
        if (lane == LW'(NL - 1)) begin
          lane <= '0;
          k    <= k + 1'b1;
          if (k == kwords - 1'b1) begin
            k <= '0;
            p <= p + 1'b1;
            if (p == PW'(OCP - 1)) begin
              p     <= '0;
              g     <= g + 1'b1;
              gbase <= gbase + WAW'(kwords);
              if (g == ngroups - 1'b1) begin
                state  <= IDLE;
                loaded <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

  for (genvar q = 0; q < OCP; q++) begin : g_rd
    assign w_data[q] = wmem[q][w_addr];
  end
  always_comb begin
    logic [PPACK-1:0][7:0] bw;
    bw     = bmem[BAW'(b_addr >> BLW)];
    b_data = bw[BLW'(b_addr)];
  end
endmodule
