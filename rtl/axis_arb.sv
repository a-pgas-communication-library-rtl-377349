// axis_arb: two-input packet arbiter for valid/ready streams.
//
// The three multiplexers of the GAScore (into am_tx, onto To-Kernels and into the
// handler wrapper) each merge a stream from xpams_tx with one from xpams_rx. A
// grant is taken when the output is idle and held until the granted input delivers
// the beat marked last, so packets are never interleaved. When both inputs request
// a new packet, the one not served last wins (round robin). The output is
// combinational from the granted input (no added latency). The `last` position
// inside the WIDTH-bit beat is LAST_BIT. The policy is this design's choice.
module axis_arb #(
  parameter int WIDTH    = 97,
  parameter int LAST_BIT = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       in_valid,
  output logic [1:0]       in_ready,
  input  logic [WIDTH-1:0] in_data [2],
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic       busy, busy_q;    // a packet is in progress
  logic       sel, sel_q;      // granted input
  logic       prio_q;          // input preferred at the next new grant

  always_comb begin
    busy = busy_q;
    sel  = sel_q;
    if (!busy_q) begin
      if (in_valid[0] && in_valid[1]) sel = prio_q;
      else                            sel = in_valid[1];
      busy = |in_valid;
    end
  end

  assign out_valid   = busy && in_valid[sel];
  assign out_data    = in_data[sel];
  assign in_ready[0] = busy && !sel && out_ready;
  assign in_ready[1] = busy &&  sel && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      sel_q  <= 1'b0;
      prio_q <= 1'b0;
    end else begin
      busy_q <= busy;
      sel_q  <= sel;
      if (out_valid && out_ready && out_data[LAST_BIT]) begin
        busy_q <= 1'b0;
        prio_q <= ~sel;
      end
    end
  end
endmodule
