// conv_compute -- sequencer of the PE array.
//
// For every output pixel (one full Window OCM), the OCP PEs compute C_o/OCP
// groups of OCP output channels. For group g they read the K = F*F*C_i/ICP
// window words one per cycle together with word g*K + k of every Weights
// bank, accumulating (paper, Fig. 4, upper pipelined box). When a group is
// finished its OCP sums are handed to post-processing (the OACT-PIXEL
// registers); after the last group the Window OCM is released to the
// window copy. Compute starts only once all parameters of the layer are in.
// The paper gives the loops' parallelism; the schedule (one hand-over cycle
// per group, waiting for post-processing when it is busy) is this design's.
//
// Timing: a group takes K cycles of MAC plus one hand-over cycle when
// post-processing is ready, so a pixel takes (C_o/OCP)*(K+1) cycles when
// K+1 >= OCP.
//
// Interface: start (with cfg) begins a layer; done pulses after the last
// group of the last pixel has been handed over. pe_en/pe_first drive the PE
// array, win_addr/w_addr the OCM read ports; pp_valid/pp_ready/pp_base/
// pp_last are the hand-over to postproc.
module conv_compute
  import accel_pkg::*;
#(
  parameter int ICP                          = 32,
  parameter int OCP                          = 16,
  parameter int FILTERxFILTERxCHIN_MAX       = 4608,
  parameter int CHOUTxFILTERxFILTERxCHIN_MAX = 524288,
  parameter int CHOUT_MAX                    = 1024,
  localparam int KMAX   = FILTERxFILTERxCHIN_MAX / ICP,
  localparam int KAW    = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int WDEPTH = CHOUTxFILTERxFILTERxCHIN_MAX / (OCP * ICP),
  localparam int WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int CW     = $clog2(CHOUT_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  input  logic           params_loaded,
  output logic           done,
  // Window OCM read side
  input  logic           win_valid,
  output logic [KAW-1:0] win_addr,
  output logic           win_release,
  // Weights OCM read address
  output logic [WAW-1:0] w_addr,
  // PE array control
  output logic           pe_en,
  output logic           pe_first,
  // hand-over to postproc
  output logic           pp_valid,
  input  logic           pp_ready,
  output logic [CW-1:0]  pp_base,
  output logic           pp_last
);
  typedef enum logic [1:0] {IDLE, WAIT, MAC, HAND} state_t;

  state_t           state;
  logic [DIM_W-1:0] kwords, ngroups;
  logic [31:0]      npix, pix;
  logic [DIM_W-1:0] k, g;
  logic [WAW-1:0]   gbase;
  logic [CW-1:0]    cobase;

  assign win_addr    = KAW'(k);
  assign w_addr      = gbase + WAW'(k);
  assign pe_en       = (state == MAC);
  assign pe_first    = (k == '0);
  assign pp_valid    = (state == HAND);
  assign pp_base     = cobase;
  assign pp_last     = (g == ngroups - 1'b1);
  assign win_release = (state == HAND) && pp_ready && pp_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      done    <= 1'b0;
      kwords  <= '0;
      ngroups <= '0;
      npix    <= '0;
      pix     <= '0;
      k       <= '0;
      g       <= '0;
      gbase   <= '0;
      cobase  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state   <= WAIT;
          kwords  <= DIM_W'(cfg.fsize) * DIM_W'(cfg.fsize) * (cfg.in_c / DIM_W'(ICP));
          ngroups <= cfg.out_c / DIM_W'(OCP);
          npix    <= 32'(conv_out_dim(cfg.in_h, cfg.fsize, cfg.stride, cfg.pad)) *
                     32'(conv_out_dim(cfg.in_w, cfg.fsize, cfg.stride, cfg.pad));
          pix     <= '0;
          k       <= '0;
          g       <= '0;
          gbase   <= '0;
          cobase  <= '0;
        end
        WAIT: if (params_loaded && win_valid) state <= MAC;
        MAC: begin
          k <= k + 1'b1;
          if (k == kwords - 1'b1) begin
            k     <= '0;
            state <= HAND;
          end
        end
        HAND: if (pp_ready) begin
          if (pp_last) begin
            g      <= '0;
            gbase  <= '0;
            cobase <= '0;
            pix    <= pix + 1'b1;
            if (pix == npix - 1'b1) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= WAIT;
            end
          end else begin
            g      <= g + 1'b1;
            gbase  <= gbase + WAW'(kwords);
            cobase <= cobase + CW'(OCP);
            state  <= MAC;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
