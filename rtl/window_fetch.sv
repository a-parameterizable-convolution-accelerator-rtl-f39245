// window_fetch -- streams input rows into IACT-ROW and copies input windows
// into the Window OCMs.
//
// This is the input side of the CONV-PART (paper, Fig. 2: IACT -> IACT-ROW
// -> Window). The IACT stream carries the input activations in [H_i, X_i,
// C_i] order, APACK values per beat. For output row y_o the window rows are
// y_o*S - pad .. y_o*S - pad + F - 1; before the row's windows are copied,
// every input row up to the last of these is read from the stream into
// IACT-ROW, which keeps FILTER_MAX rows in a ring (row r in slot r mod
// FILTER_MAX). Then, for each x_o, the F x F x C_i window of Eq. (1) is
// copied word by word (one ICP-wide word per cycle, [F_h, F_w, C_i] order)
// into a free Window OCM, with zero words where the window reaches into the
// padding. Rows that no window uses are still read from the stream and
// dropped. The paper describes the buffers; this sequencing, which loads the
// rows of one output row before copying its windows, is this design's
// choice.
//
// Interface: start (one cycle, with the layer fields) begins a layer; done
// pulses after the last window has been handed over and the whole IACT
// stream has been read. The stream is s_valid/s_ready/s_data. The window
// write port is that of window_buf. C_i must be a multiple of ICP and ICP a
// multiple of APACK.
module window_fetch
  import accel_pkg::*;
#(
  parameter int APACK                  = 16,
  parameter int ICP                    = 32,
  parameter int FILTER_MAX             = 3,
  parameter int WINxCHIN_PAD_MAX       = 16384,
  parameter int FILTERxFILTERxCHIN_MAX = 4608,
  localparam int KMAX = FILTERxFILTERxCHIN_MAX / ICP,
  localparam int KAW  = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int RW   = WINxCHIN_PAD_MAX / ICP,
  localparam int RAW  = (RW > 1) ? $clog2(RW) : 1,
  localparam int SW   = (FILTER_MAX > 1) ? $clog2(FILTER_MAX) : 1,
  localparam int NL   = ICP / APACK,
  localparam int LW   = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  done,
  // IACT stream
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [APACK-1:0][7:0] s_data,
  // Window OCM write port
  input  logic                  win_ready,
  output logic                  win_en,
  output logic [KAW-1:0]        win_addr,
  output logic [ICP-1:0][7:0]   win_data,
  output logic                  win_commit
);
  typedef enum logic [2:0] {IDLE, LOAD, FILL, DRAIN} state_t;
  typedef logic signed [DIM_W+1:0] sdim_t;

  state_t           state;
  // layer
  logic [DIM_W-1:0] h, w, cwn, ho, wo;
  logic [1:0]       f, s;
  logic             pad;
  // row loading
  logic [DIM_W-1:0] rows_loaded, row_words, wcnt;
  logic [LW-1:0]    lane;
  logic [SW-1:0]    ld_slot;
  // window copy
  logic [DIM_W-1:0] yo, xo, cw;
  logic [1:0]       fh, fw;
  sdim_t            first_row;
  logic [SW-1:0]    first_slot;
  logic [KAW-1:0]   k;

  // ---------------------------------------------------------------- rows
  sdim_t need_last;
  always_comb begin
    need_last = first_row + sdim_t'(f) - 1;
    if (need_last > sdim_t'(h) - 1) need_last = sdim_t'(h) - 1;
  end
  logic need_row;
  assign need_row = (state == LOAD)  ? (sdim_t'(rows_loaded) <= need_last) :
                    (state == DRAIN) ? (rows_loaded < h) : 1'b0;
  assign s_ready  = need_row;

  logic sfire, row_end;
  assign sfire   = s_valid && s_ready;
  assign row_end = (lane == LW'(NL - 1)) && (wcnt == row_words - 1'b1);

  // --------------------------------------------------------------- window
  sdim_t row, col;
  logic  in_win;
  logic [SW:0] slot_sum;
  logic [SW-1:0] rd_slot;
  logic [RAW-1:0] rd_addr;
  logic [ICP-1:0][7:0] rd_data;
  always_comb begin
    row      = first_row + sdim_t'(fh);
    col      = sdim_t'(xo) * sdim_t'(s) - sdim_t'(pad) + sdim_t'(fw);
    in_win   = (row >= 0) && (row < sdim_t'(h)) && (col >= 0) && (col < sdim_t'(w));
    slot_sum = (SW+1)'(first_slot) + (SW+1)'(fh);
    rd_slot  = (slot_sum >= (SW+1)'(FILTER_MAX)) ? SW'(slot_sum - (SW+1)'(FILTER_MAX))
                                                 : SW'(slot_sum);
    rd_addr  = RAW'(col[DIM_W-1:0] * cwn + cw);
  end

  iact_row_buf #(
    .APACK(APACK), .ICP(ICP), .FILTER_MAX(FILTER_MAX), .WINxCHIN_PAD_MAX(WINxCHIN_PAD_MAX)
  ) u_rows (
    .clk    (clk),
    .wr_en  (sfire),
    .wr_slot(ld_slot),
    .wr_addr(RAW'(wcnt)),
    .wr_lane(lane),
    .wr_data(s_data),
    .rd_slot(rd_slot),
    .rd_addr(rd_addr),
    .rd_data(rd_data)
  );

  logic copy, last_word;
  assign copy      = (state == FILL) && win_ready;
  assign last_word = (fh == f - 1'b1) && (fw == f - 1'b1) && (cw == cwn - 1'b1);
  assign win_en     = copy;
  assign win_addr   = k;
  assign win_data   = in_win ? rd_data : '0;
  assign win_commit = copy && last_word;

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      done  <= 1'b0;
      {h, w, cwn, ho, wo} <= '0;
      {f, s, pad} <= '0;
      {rows_loaded, row_words, wcnt} <= '0;
      lane <= '0;
      ld_slot <= '0;
      {yo, xo, cw} <= '0;
      {fh, fw} <= '0;
      first_row <= '0;
      first_slot <= '0;
      k <= '0;
    end else begin
      done <= 1'b0;
      // stream into IACT-ROW
      if (sfire) begin
        lane <= lane + 1'b1;
        if (lane == LW'(NL - 1)) begin
          lane <= '0;
          wcnt <= wcnt + 1'b1;
        end
        if (row_end) begin
          wcnt        <= '0;
          rows_loaded <= rows_loaded + 1'b1;
          ld_slot     <= (ld_slot == SW'(FILTER_MAX - 1)) ? '0 : ld_slot + 1'b1;
        end
      end
      case (state)
        IDLE: if (start) begin
          state       <= LOAD;
          h           <= cfg.in_h;
          w           <= cfg.in_w;
          cwn         <= cfg.in_c / DIM_W'(ICP);
          row_words   <= cfg.in_w * (cfg.in_c / DIM_W'(ICP));
          f           <= cfg.fsize;
          s           <= cfg.stride;
          pad         <= cfg.pad;
          ho          <= conv_out_dim(cfg.in_h, cfg.fsize, cfg.stride, cfg.pad);
          wo          <= conv_out_dim(cfg.in_w, cfg.fsize, cfg.stride, cfg.pad);
          rows_loaded <= '0;
          wcnt        <= '0;
          lane        <= '0;
          ld_slot     <= '0;
          yo          <= '0;
          xo          <= '0;
          {fh, fw}    <= '0;
          cw          <= '0;
          k           <= '0;
          first_row   <= cfg.pad ? -sdim_t'(1) : sdim_t'(0);
          first_slot  <= cfg.pad ? SW'(FILTER_MAX - 1) : '0;
        end
        LOAD: if (!need_row) state <= FILL;
        FILL: if (copy) begin
          k  <= k + 1'b1;
          cw <= cw + 1'b1;
          if (cw == cwn - 1'b1) begin
            cw <= '0;
            fw <= fw + 1'b1;
            if (fw == f - 1'b1) begin
              fw <= '0;
              fh <= fh + 1'b1;
              if (fh == f - 1'b1) begin
                fh <= '0;
                k  <= '0;
                xo <= xo + 1'b1;
                if (xo == wo - 1'b1) begin
                  xo         <= '0;
                  yo         <= yo + 1'b1;
                  first_row  <= first_row + sdim_t'(s);
                  first_slot <= ((SW+1)'(first_slot) + (SW+1)'(s) >= (SW+1)'(FILTER_MAX))
                                ? SW'((SW+1)'(first_slot) + (SW+1)'(s) - (SW+1)'(FILTER_MAX))
                                : SW'((SW+1)'(first_slot) + (SW+1)'(s));
                  state      <= (yo == ho - 1'b1) ? DRAIN : LOAD;
                end
              end
            end
          end
        end
        DRAIN: if (!need_row) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
