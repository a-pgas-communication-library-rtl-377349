// hold_buffer: FIFO between am_rx and xpams_rx that can hold a beat back.
//
// A Long AM's header must not reach xpams_rx (which raises the handler event and
// the reply) before its payload is in memory. am_rx tags such a header `held`.
// Beats are stored in order in a FIFO of DEPTH entries together with that tag;
// a counter keeps the number of releases (write completions) not yet used. The
// head beat leaves when it is untagged, or when it is tagged and the counter is not
// zero, which then drops by one. Release pulses may come before or after the header
// is stored. Everything else behind a held header waits too, so order is kept.
// The tag-and-credit mechanism and DEPTH are this design's choices.
module hold_buffer
  import shoal_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  axis_t s_data,
  input  logic  s_held,
  input  logic  release_i,
  output logic  m_valid,
  input  logic  m_ready,
  output axis_t m_data
);
  localparam int CW = $clog2(DEPTH + 1) + 1;

  logic  f_valid, f_ready, f_held;
  axis_t f_data;
  logic [CW-1:0] credits;
  logic  take;

  axis_fifo #(.WIDTH(AXIS_W + 1), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data({s_held, s_data}),
    .out_valid(f_valid), .out_ready(f_ready), .out_data({f_held, f_data}));

  assign m_valid = f_valid && (!f_held || credits != '0);
  assign m_data  = f_data;
  assign f_ready = m_ready && (!f_held || credits != '0);
  assign take    = f_valid && f_ready && f_held;

  always_ff @(posedge clk) begin
    if (!rst_n) credits <= '0;
    else        credits <= credits + CW'(release_i) - CW'(take);
  end
endmodule
