// iact_row_buf -- the IACT-ROW OCM of the CONV-PART.
//
// Holds FILTER_MAX input rows, each a 3D row of X_i pixels x C_i channels
// stored as ICP-byte words (word x*C_i/ICP + c/ICP holds channels c..c+ICP-1
// of pixel x). Rows are written APACK bytes at a time, as they arrive on the
// IACT stream, and read one ICP-wide word at a time by the window copy. The
// paper sizes it by FILTER_MAX rows and WINxCHIN_PAD_MAX values per row
// (Table I) and partitions it by ICP; storing rows without their zero
// padding (padding is inserted when a window is read) is this design's
// choice.
//
// Interface: write port (wr_en, wr_slot = row slot, wr_addr = word,
// wr_lane = which APACK-byte part of the word, wr_data); read port
// (rd_slot, rd_addr -> rd_data, combinational). No reset: the contents are
// only read after being written.
module iact_row_buf #(
  parameter int APACK            = 16,
  parameter int ICP              = 32,
  parameter int FILTER_MAX       = 3,
  parameter int WINxCHIN_PAD_MAX = 16384,
  localparam int RW  = WINxCHIN_PAD_MAX / ICP,
  localparam int AW  = (RW > 1) ? $clog2(RW) : 1,
  localparam int SW  = (FILTER_MAX > 1) ? $clog2(FILTER_MAX) : 1,
  localparam int NL  = ICP / APACK,
  localparam int LW  = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [SW-1:0]         wr_slot,
  input  logic [AW-1:0]         wr_addr,
  input  logic [LW-1:0]         wr_lane,
  input  logic [APACK-1:0][7:0] wr_data,
  input  logic [SW-1:0]         rd_slot,
  input  logic [AW-1:0]         rd_addr,
  output logic [ICP-1:0][7:0]   rd_data
);
  logic [NL-1:0][APACK-1:0][7:0] mem [FILTER_MAX][RW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot][wr_addr][wr_lane] <= wr_data;
  end

  assign rd_data = mem[rd_slot][rd_addr];
endmodule
