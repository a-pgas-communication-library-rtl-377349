// handler: the built-in handler of one local kernel.
//
// In Shoal, replies are Short messages whose handler increments a counter, so a
// kernel can send many messages and then wait until that many replies have come
// back. This block is that counter. Every cycle with `event_i` high adds one.
// The kernel reaches the counter through an AXI-Lite slave (32-bit data):
//   offset 0x0  read:  current count
//               write: subtract the written value (an event in the same cycle still
//                      counts, so none is lost while the kernel consumes replies)
// Other offsets read as zero and ignore writes; responses are always OKAY.
// Write address and data are taken together, one transaction at a time; a read
// answers in the cycle after its address is accepted. The register map is this
// design's choice; the counting handler and the AXI-Lite access follow Shoal.
module handler (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        event_i,
  output logic [31:0] count,
  input  logic        awvalid,
  output logic        awready,
  input  logic [3:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [3:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp
);
  logic wr_fire, sub;

  assign awready = awvalid && wvalid && !bvalid;
  assign wready  = awready;
  assign wr_fire = awvalid && awready;
  assign sub     = wr_fire && awaddr[3:2] == 2'd0;
  assign arready = !rvalid;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count  <= '0;
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      count <= count + 32'(event_i) - (sub ? wdata : 32'd0);
      if (wr_fire)     bvalid <= 1'b1;
      else if (bready) bvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        rdata  <= (araddr[3:2] == 2'd0) ? count : 32'd0;
      end else if (rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  // AXI-Lite: a response stays valid, with stable data, until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
