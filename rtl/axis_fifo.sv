// axis_fifo: synchronous first-word-fall-through FIFO with valid/ready handshakes.
//
// Used in the GAScore wherever the block diagram shows a FIFO: behind the
// From-Kernels port and on the two DataMover command paths. Storage is a plain
// array (a block RAM when deep) with a write address, a read address and an
// occupancy counter. in_ready is low when the FIFO holds DEPTH entries; out_valid is
// high whenever it holds one. A beat written in cycle n can be read in cycle n+1.
// Width and depth are this design's choice; reset empties the FIFO.
module axis_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] waddr, raddr;
  logic [CW-1:0] count;
  logic push, pop;

  assign in_ready  = count != CW'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[raddr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[waddr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      waddr <= '0;
      raddr <= '0;
      count <= '0;
    end else begin
      if (push) waddr <= (waddr == AW'(DEPTH-1)) ? '0 : waddr + 1'b1;
      if (pop)  raddr <= (raddr == AW'(DEPTH-1)) ? '0 : raddr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  // Occupancy never exceeds DEPTH.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule
