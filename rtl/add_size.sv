// add_size: last stage of the GAScore egress path.
//
// The network layer needs each packet's length in words on the TUSER side channel
// of every beat, which is only known once the packet has ended. add_size therefore
// stores each packet whole: beats go into a data FIFO while a counter counts them,
// and on the last beat the count is pushed into a small size FIFO. A packet is sent
// out once its size is known, with that size on TUSER of all its beats; TDATA,
// TLAST and TDEST are unchanged. Store-and-forward latency is one packet; throughput
// is one beat per cycle. A packet longer than DEPTH words would never be sent: DEPTH
// (2048 words, 16 KiB) exceeds the 9000-byte jumbo frame the network carries.
// The buffer sizes are this design's choice.
module add_size
  import shoal_pkg::*;
#(
  parameter int DEPTH    = 2048,
  parameter int PKT_DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  axis_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output axis_t m_data
);
  logic [USER_W-1:0] cnt;
  logic d_in_ready, d_out_valid, d_out_ready;
  logic z_in_ready, z_out_valid, z_out_ready;
  axis_t d_out;
  logic [USER_W-1:0] z_out;

  assign s_ready = d_in_ready && z_in_ready;

  axis_fifo #(.WIDTH(AXIS_W), .DEPTH(DEPTH)) u_data (
    .clk, .rst_n,
    .in_valid(s_valid && s_ready), .in_ready(d_in_ready), .in_data(s_data),
    .out_valid(d_out_valid), .out_ready(d_out_ready), .out_data(d_out));

  axis_fifo #(.WIDTH(USER_W), .DEPTH(PKT_DEPTH)) u_size (
    .clk, .rst_n,
    .in_valid(s_valid && s_ready && s_data.last), .in_ready(z_in_ready), .in_data(cnt + 1'b1),
    .out_valid(z_out_valid), .out_ready(z_out_ready), .out_data(z_out));

  always_ff @(posedge clk) begin
    if (!rst_n) cnt <= '0;
    else if (s_valid && s_ready) cnt <= s_data.last ? '0 : cnt + 1'b1;
  end

  assign m_valid     = d_out_valid && z_out_valid;
  assign d_out_ready = m_ready && z_out_valid;
  assign z_out_ready = m_ready && d_out_valid && d_out.last;
  always_comb begin
    m_data      = d_out;
    m_data.user = z_out;
  end
endmodule
