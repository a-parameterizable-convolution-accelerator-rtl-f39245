// conv_accel -- parameterizable convolution accelerator, top level.
//
// Computes one convolution layer per start:
//   OACT = MPOOL( ReLU( CONV(IA, W, B) ) )      (MPOOL and ReLU optional)
// on 8-bit dynamic fixed-point data. The CONV-PART (conv_part) streams the
// input activations through a row buffer and double-buffered window memories
// into OCP processing elements of ICP multipliers each; biases are added,
// results rescaled, rounded, saturated and optionally rectified. Its output
// pixels flow through a stream FIFO into the MPOOL-PART (mpool_part), which
// max-pools them or bypasses. The parameters are the paper's design
// parameters (Table I); the defaults are the paper's configuration #6
// (ICP = 32, OCP = 16, 16 values per transfer). Memory sizes are not given
// numerically in the paper; the defaults here are chosen to hold the
// largest layers of the paper's four CNNs, with the weights of big layers
// split over output channels by the host.
//
// Interface:
//   start, cfg      one-cycle start with the layer description (accel_pkg)
//   busy, done      busy from start until the last OACT beat has left and
//                   all CONV-PART output is consumed; done then pulses
//   s_par_*         PARAMS stream: C_o biases, then the weights in
//                   [C_o, F_h, F_w, C_i] order, PPACK values per beat
//   s_iact_*        IACT stream, [H_i, X_i, C_i] order, APACK values per beat
//   m_oact_*        OACT stream, [H, W, C_o] order, APACK values per beat;
//                   m_oact_last marks the layer's last beat
// All streams use valid/ready (AXI-Stream tvalid/tready) handshakes. FREQ
// (the paper's clock frequency parameter) is a property of the clock, not of
// the RTL.
module conv_accel
  import accel_pkg::*;
#(
  parameter int APACK                        = 16,
  parameter int PPACK                        = 16,
  parameter int ICP                          = 32,
  parameter int OCP                          = 16,
  parameter int PE_DSP                       = 16,
  parameter int FILTER_MAX                   = 3,
  parameter int WINxCHIN_PAD_MAX             = 16384,
  parameter int FILTERxFILTERxCHIN_MAX       = 4608,
  parameter int CHOUTxFILTERxFILTERxCHIN_MAX = 524288,
  parameter int CHOUT_MAX                    = 1024,
  parameter int PWINxPCH_MAX                 = 16384,
  parameter int PCH_MAX                      = 512,
  parameter int FIFO_DEPTH                   = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  busy,
  output logic                  done,
  input  logic                  s_par_valid,
  output logic                  s_par_ready,
  input  logic [PPACK-1:0][7:0] s_par_data,
  input  logic                  s_iact_valid,
  output logic                  s_iact_ready,
  input  logic [APACK-1:0][7:0] s_iact_data,
  output logic                  m_oact_valid,
  input  logic                  m_oact_ready,
  output logic [APACK-1:0][7:0] m_oact_data,
  output logic                  m_oact_last
);
  logic                  c_valid, c_ready, f_valid, f_ready, conv_done;
  logic [APACK-1:0][7:0] c_data, f_data;
  logic                  go;

  assign go = start && !busy;

  conv_part #(
    .APACK(APACK), .PPACK(PPACK), .ICP(ICP), .OCP(OCP), .PE_DSP(PE_DSP),
    .FILTER_MAX(FILTER_MAX), .WINxCHIN_PAD_MAX(WINxCHIN_PAD_MAX),
    .FILTERxFILTERxCHIN_MAX(FILTERxFILTERxCHIN_MAX),
    .CHOUTxFILTERxFILTERxCHIN_MAX(CHOUTxFILTERxFILTERxCHIN_MAX), .CHOUT_MAX(CHOUT_MAX)
  ) u_conv (
    .clk(clk), .rst_n(rst_n), .start(go), .cfg(cfg), .done(conv_done),
    .s_iact_valid(s_iact_valid), .s_iact_ready(s_iact_ready), .s_iact_data(s_iact_data),
    .s_par_valid(s_par_valid), .s_par_ready(s_par_ready), .s_par_data(s_par_data),
    .m_valid(c_valid), .m_ready(c_ready), .m_data(c_data)
  );

  stream_fifo #(.WIDTH(APACK * 8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .s_valid(c_valid), .s_ready(c_ready), .s_data(c_data),
    .m_valid(f_valid), .m_ready(f_ready), .m_data(f_data)
  );

  mpool_part #(.APACK(APACK), .PWINxPCH_MAX(PWINxPCH_MAX), .PCH_MAX(PCH_MAX)) u_pool (
    .clk(clk), .rst_n(rst_n), .start(go), .cfg(cfg),
    .s_valid(f_valid), .s_ready(f_ready), .s_data(f_data),
    .m_valid(m_oact_valid), .m_ready(m_oact_ready), .m_data(m_oact_data)
  );

  // The layer ends when every OACT beat has left and the MPOOL-PART has taken
  // every CONV-PART beat (floor-mode pooling drops the last rows/columns, so
  // the last OACT beat can leave before the CONV-PART has finished).
  logic [31:0] nbeats, cnt, nconv, ccnt;
  logic [DIM_W-1:0] cho, cwo, ho, wo;
  always_comb begin
    cho = conv_out_dim(cfg.in_h, cfg.fsize, cfg.stride, cfg.pad);
    cwo = conv_out_dim(cfg.in_w, cfg.fsize, cfg.stride, cfg.pad);
    ho  = cfg.pool_en ? pool_out_dim(cho, cfg.pool_k) : cho;
    wo  = cfg.pool_en ? pool_out_dim(cwo, cfg.pool_k) : cwo;
  end

  logic ofire, cfire, out_end, conv_end;
  assign ofire       = m_oact_valid && m_oact_ready;
  assign cfire       = f_valid && f_ready;
  assign m_oact_last = (cnt == nbeats - 1);
  assign out_end     = (cnt == nbeats);
  assign conv_end    = (ccnt == nconv);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      ccnt   <= '0;
      nbeats <= '0;
      nconv  <= '0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy   <= 1'b1;
        cnt    <= '0;
        ccnt   <= '0;
        nbeats <= 32'(ho) * 32'(wo) * 32'(cfg.out_c / DIM_W'(APACK));
        nconv  <= 32'(cho) * 32'(cwo) * 32'(cfg.out_c / DIM_W'(APACK));
      end else if (busy) begin
        if (ofire) cnt  <= cnt + 1;
        if (cfire) ccnt <= ccnt + 1;
        if (out_end && conv_end) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Output only while a layer runs; the CONV-PART ends before the last beat.
  assert property (@(posedge clk) disable iff (!rst_n) m_oact_valid |-> busy);
  assert property (@(posedge clk) disable iff (!rst_n) conv_done |-> busy);
endmodule
