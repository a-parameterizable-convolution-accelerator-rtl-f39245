// mpool_part -- the MPOOL-PART: optional max-pool and the bypass MUX.
//
// The CONV-PART result arrives as a stream of APACK-channel beats in
// [H_o, W_o, C_o] order. With pooling enabled it passes two pool_stage
// instances: the row stage (Current-Row / Result-Row, Result buffer of
// PWINxPCH_MAX values) takes the maximum over K rows, the pixel stage
// (Current-Pixel / Result-Pixel, PCH_MAX values) over K pixels of each
// pooled row, both with stride 2 (paper, Fig. 2 and Fig. 3). With pooling
// disabled the bypass MUX passes the CONV-PART result straight to OACT.
// Pooling works on APACK channels in parallel, the paper's channel
// parallelism for this part.
//
// Interface: start (one cycle, with cfg) latches the layer; valid/ready
// streams in and out. Pooled output is ((H_o-K)/2+1) x ((W_o-K)/2+1) pixels
// (floor mode, this design's choice). Pool sizes supported: K = 2 or 3.
module mpool_part
  import accel_pkg::*;
#(
  parameter int APACK        = 16,
  parameter int PWINxPCH_MAX = 16384,
  parameter int PCH_MAX      = 512
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [APACK-1:0][7:0] s_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [APACK-1:0][7:0] m_data
);
  logic             pool_en;
  logic [1:0]       pk;
  logic [DIM_W-1:0] ho, wo, cbeats, rbeats;
  logic             start_q;

  // Latch the layer; the stages start one cycle later with stable sizes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_en <= 1'b0;
      pk      <= 2'd2;
      ho      <= '0;
      wo      <= '0;
      cbeats  <= '0;
      rbeats  <= '0;
      start_q <= 1'b0;
    end else begin
      start_q <= start;
      if (start) begin
        pool_en <= cfg.pool_en;
        pk      <= cfg.pool_k;
        ho      <= conv_out_dim(cfg.in_h, cfg.fsize, cfg.stride, cfg.pad);
        wo      <= conv_out_dim(cfg.in_w, cfg.fsize, cfg.stride, cfg.pad);
        cbeats  <= cfg.out_c / DIM_W'(APACK);
        rbeats  <= conv_out_dim(cfg.in_w, cfg.fsize, cfg.stride, cfg.pad) *
                   (cfg.out_c / DIM_W'(APACK));
      end
    end
  end

  // row stage
  logic                  r_in_valid, r_in_ready, r_valid, r_ready;
  logic [APACK-1:0][7:0] r_data;
  assign r_in_valid = s_valid && pool_en && !start_q;

  pool_stage #(.APACK(APACK), .DEPTH(PWINxPCH_MAX / APACK)) u_row (
    .clk(clk), .rst_n(rst_n), .start(start_q),
    .ubeats(rbeats), .nunits(ho), .k(pk),
    .s_valid(r_in_valid), .s_ready(r_in_ready), .s_data(s_data),
    .m_valid(r_valid), .m_ready(r_ready), .m_data(r_data)
  );

  // pixel stage
  logic                  p_valid, p_ready;
  logic [APACK-1:0][7:0] p_data;

  pool_stage #(.APACK(APACK), .DEPTH(PCH_MAX / APACK)) u_pix (
    .clk(clk), .rst_n(rst_n), .start(start_q),
    .ubeats(cbeats), .nunits(wo), .k(pk),
    .s_valid(r_valid), .s_ready(r_ready), .s_data(r_data),
    .m_valid(p_valid), .m_ready(p_ready), .m_data(p_data)
  );

  // Bypass MUX
  assign m_valid = pool_en ? p_valid : (s_valid && !start_q);
  assign m_data  = pool_en ? p_data  : s_data;
  assign s_ready = !start_q && (pool_en ? r_in_ready : m_ready);
  assign p_ready = pool_en && m_ready;
endmodule
