// stream_fifo -- valid/ready FIFO between the CONV-PART and the MPOOL-PART.
//
// The paper connects the two parts with an AXI-Stream FIFO so that the
// MPOOL-PART consumes output channels as soon as the CONV-PART produces them
// (Fig. 2, HLS stream/dataflow). This is a plain synchronous FIFO with
// AXI-Stream style tvalid/tready handshakes on both sides; its depth is this
// design's choice.
//
// Timing: a beat written in one cycle can be read in the next; full
// throughput of one beat per cycle. Reset empties the FIFO.
module stream_fifo #(
  parameter int WIDTH = 128,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;

  assign s_ready = (count != (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rp];

  logic wfire, rfire;
  assign wfire = s_valid && s_ready;
  assign rfire = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (wfire) mem[wp] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wfire) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rfire) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wfire) - (AW+1)'(rfire);
    end
  end

  // AXI-Stream rule: a producer holds its beat until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (m_valid && !m_ready) |=> (m_valid && $stable(m_data)));
endmodule
