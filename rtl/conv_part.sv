// conv_part -- the CONV-PART of the accelerator: CONV, bias, rescale, ReLU.
//
// Structure (paper, Fig. 2 and Fig. 4):
//   PARAMS -> param_buf (Weights & Biases OCMs, OCP banks)  --+
//   IACT   -> window_fetch (IACT-ROW) -> window_buf (2x Window) -> pe_array
//   pe_array -> postproc (OACT-PIXEL, bias/rescale/round/saturate/ReLU)
//            -> out_pixel_buf (2x OUT-PIXEL) -> output stream
// conv_compute sequences the PEs. The stages run concurrently and hand data
// over through the ping-pong OCMs, so the copy of the next window, the MACs
// of the current pixel and the output of the previous pixel overlap; this
// is the paper's dataflow/double-buffering scheme written as RTL. Output
// pixels leave in raster order, C_o values each, APACK per beat.
//
// Interface: start (one cycle) with cfg begins a layer. s_iact_* and
// s_par_* are the input streams, m_* the output stream (all valid/ready).
// done pulses once the last input has been read and the last group of
// channels handed to post-processing; the last output beats follow.
module conv_part
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
  parameter int CHOUT_MAX                    = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  done,
  input  logic                  s_iact_valid,
  output logic                  s_iact_ready,
  input  logic [APACK-1:0][7:0] s_iact_data,
  input  logic                  s_par_valid,
  output logic                  s_par_ready,
  input  logic [PPACK-1:0][7:0] s_par_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [APACK-1:0][7:0] m_data
);
  localparam int KMAX   = FILTERxFILTERxCHIN_MAX / ICP;
  localparam int KAW    = (KMAX > 1) ? $clog2(KMAX) : 1;
  localparam int WDEPTH = CHOUTxFILTERxFILTERxCHIN_MAX / (OCP * ICP);
  localparam int WAW    = (WDEPTH > 1) ? $clog2(WDEPTH) : 1;
  localparam int CW     = $clog2(CHOUT_MAX);

  layer_cfg_t cfg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cfg_q <= '0;
    else if (start) cfg_q <= cfg;
  end

  // Weights & Biases
  logic                         params_loaded;
  logic [WAW-1:0]               w_addr;
  logic [OCP-1:0][ICP-1:0][7:0] w_data;
  logic [CW-1:0]                b_addr;
  act_t                         b_data;

  param_buf #(
    .PPACK(PPACK), .ICP(ICP), .OCP(OCP),
    .CHOUTxFILTERxFILTERxCHIN_MAX(CHOUTxFILTERxFILTERxCHIN_MAX), .CHOUT_MAX(CHOUT_MAX)
  ) u_params (
    .clk(clk), .rst_n(rst_n),
    .load(start), .out_c(cfg.out_c), .in_c(cfg.in_c), .fsize(cfg.fsize),
    .loaded(params_loaded),
    .s_valid(s_par_valid), .s_ready(s_par_ready), .s_data(s_par_data),
    .w_addr(w_addr), .w_data(w_data), .b_addr(b_addr), .b_data(b_data)
  );

  // IACT-ROW and window copy
  logic                win_wready, win_wen, win_commit, fetch_done;
  logic [KAW-1:0]      win_waddr;
  logic [ICP-1:0][7:0] win_wdata;

  window_fetch #(
    .APACK(APACK), .ICP(ICP), .FILTER_MAX(FILTER_MAX),
    .WINxCHIN_PAD_MAX(WINxCHIN_PAD_MAX), .FILTERxFILTERxCHIN_MAX(FILTERxFILTERxCHIN_MAX)
  ) u_fetch (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .done(fetch_done),
    .s_valid(s_iact_valid), .s_ready(s_iact_ready), .s_data(s_iact_data),
    .win_ready(win_wready), .win_en(win_wen), .win_addr(win_waddr),
    .win_data(win_wdata), .win_commit(win_commit)
  );

  // Window OCMs
  logic                win_rvalid, win_release;
  logic [KAW-1:0]      win_raddr;
  logic [ICP-1:0][7:0] win_rdata;

  window_buf #(.ICP(ICP), .FILTERxFILTERxCHIN_MAX(FILTERxFILTERxCHIN_MAX)) u_win (
    .clk(clk), .rst_n(rst_n),
    .wr_ready(win_wready), .wr_en(win_wen), .wr_addr(win_waddr),
    .wr_data(win_wdata), .wr_commit(win_commit),
    .rd_valid(win_rvalid), .rd_addr(win_raddr), .rd_data(win_rdata),
    .rd_release(win_release)
  );

  // PE sequencing and PEs
  logic          pe_en, pe_first, pp_valid, pp_ready, pp_last, comp_done;
  logic [CW-1:0] pp_base;
  acc_t          acc [OCP];

  conv_compute #(
    .ICP(ICP), .OCP(OCP), .FILTERxFILTERxCHIN_MAX(FILTERxFILTERxCHIN_MAX),
    .CHOUTxFILTERxFILTERxCHIN_MAX(CHOUTxFILTERxFILTERxCHIN_MAX), .CHOUT_MAX(CHOUT_MAX)
  ) u_comp (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg),
    .params_loaded(params_loaded), .done(comp_done),
    .win_valid(win_rvalid), .win_addr(win_raddr), .win_release(win_release),
    .w_addr(w_addr), .pe_en(pe_en), .pe_first(pe_first),
    .pp_valid(pp_valid), .pp_ready(pp_ready), .pp_base(pp_base), .pp_last(pp_last)
  );

  pe_array #(.ICP(ICP), .OCP(OCP), .PE_DSP(PE_DSP)) u_pes (
    .clk(clk), .rst_n(rst_n), .en(pe_en), .first(pe_first),
    .act(win_rdata), .wts(w_data), .acc(acc)
  );

  // OACT-PIXEL and post-processing
  logic          op_valid, op_ready, op_last;
  logic [CW-1:0] op_idx;
  act_t          op_data;

  postproc #(.OCP(OCP), .CHOUT_MAX(CHOUT_MAX)) u_post (
    .clk(clk), .rst_n(rst_n),
    .bias_shift(cfg_q.bias_shift), .out_shift(cfg_q.out_shift), .relu_en(cfg_q.relu_en),
    .in_valid(pp_valid), .in_ready(pp_ready), .in_acc(acc), .in_base(pp_base),
    .in_last(pp_last),
    .bias_addr(b_addr), .bias_data(b_data),
    .wr_valid(op_valid), .wr_ready(op_ready), .wr_idx(op_idx), .wr_data(op_data),
    .wr_last(op_last)
  );

  // OUT-PIXEL OCMs
  out_pixel_buf #(.APACK(APACK), .CHOUT_MAX(CHOUT_MAX)) u_opix (
    .clk(clk), .rst_n(rst_n), .out_c(cfg_q.out_c),
    .wr_valid(op_valid), .wr_ready(op_ready), .wr_idx(op_idx), .wr_data(op_data),
    .wr_last(op_last),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data)
  );

  // done once both the input side and the PE side have finished
  logic fetch_seen, comp_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_seen <= 1'b0;
      comp_seen  <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        fetch_seen <= 1'b0;
        comp_seen  <= 1'b0;
      end else begin
        if (fetch_done) fetch_seen <= 1'b1;
        if (comp_done)  comp_seen  <= 1'b1;
        if ((fetch_seen || fetch_done) && (comp_seen || comp_done) &&
            !(fetch_seen && comp_seen)) done <= 1'b1;
      end
    end
  end
endmodule
