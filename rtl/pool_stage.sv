// pool_stage -- one dimension of the MPOOL-PART's max-pool.
//
// The paper pools in two steps (Fig. 3): first between 3D rows in the height
// dimension (Current-Row, Result-Row, MAX), then between 3D pixels in the
// width dimension (Current-Pixel, Result-Pixel, MAX), with APACK channels
// compared in parallel. Both steps have the same shape, so one module serves
// for both: the input is a sequence of "units" (a row of W_o*C_o values, or
// a pixel of C_o values), each ubeats beats of APACK channels, and nunits
// units make a line (H_o rows, or W_o pixels). The Current unit is the beat
// that arrives; the Result buffer keeps the running maximum of the open
// window, one word per beat position. For window size K (2 or 3) and
// stride 2, unit u
//   starts window u/2        if u is even,
//   ends   window (u-K+1)/2  if u-K+1 is even and >= 0,
// and units after the last whole window are dropped (floor mode). At a unit
// that ends a window, max(Result, Current) is sent out; if it also starts
// the next window (K = 3), Result is then set to Current. The paper gives
// the buffers and MAX units; the floor-mode window rule and the streaming
// schedule are this design's.
//
// Interface: start (one cycle, with ubeats, nunits and k) resets the
// counters. Valid/ready streams in and out; values are signed 8-bit.
// DEPTH is the Result buffer size in words (>= ubeats).
module pool_stage
  import accel_pkg::*;
#(
  parameter int APACK = 16,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [DIM_W-1:0]      ubeats,
  input  logic [DIM_W-1:0]      nunits,
  input  logic [1:0]            k,
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [APACK-1:0][7:0] s_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [APACK-1:0][7:0] m_data
);
  logic [APACK-1:0][7:0] result [DEPTH];
  logic [DIM_W-1:0] b, u, nout;
  logic [1:0]       kq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     nout <= '0;
    else if (start) nout <= pool_out_dim(nunits, k);
  end

  logic [DIM_W-1:0] ue;
  logic is_start, is_end, in_win;
  always_comb begin
    ue       = u - DIM_W'(kq - 2'd1);
    is_start = !u[0] && ((u >> 1) < nout);
    is_end   = (u >= DIM_W'(kq - 2'd1)) && !ue[0] && ((ue >> 1) < nout);
    in_win   = (u <= ((nout - 1'b1) << 1) + DIM_W'(kq - 2'd1));
  end

  logic [APACK-1:0][7:0] cur, res, mx;
  assign cur = s_data;
  assign res = result[AW'(b)];
  always_comb begin
    for (int i = 0; i < APACK; i++)
      mx[i] = ($signed(cur[i]) > $signed(res[i])) ? cur[i] : res[i];
  end

  assign m_valid = s_valid && is_end;
  assign m_data  = mx;
  assign s_ready = !is_end || m_ready;

  logic fire;
  assign fire = s_valid && s_ready;

  always_ff @(posedge clk) begin
    if (fire) begin
      if (is_start)                     result[AW'(b)] <= cur;
      else if (in_win && !is_end)       result[AW'(b)] <= mx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b  <= '0;
      u  <= '0;
      kq <= 2'd2;
    end else if (start) begin
      b  <= '0;
      u  <= '0;
      kq <= k;
    end else if (fire) begin
      b <= b + 1'b1;
      if (b == ubeats - 1'b1) begin
        b <= '0;
        u <= (u == nunits - 1'b1) ? '0 : u + 1'b1;
      end
    end
  end
endmodule
