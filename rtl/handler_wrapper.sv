// handler_wrapper: one built-in handler per local kernel.
//
// Handler events arrive as a kernel ID with valid/ready (always ready, one event per
// cycle). The wrapper compares the ID with KERNEL_BASE + k and raises the event
// input of that kernel's handler; an ID outside KERNEL_BASE .. KERNEL_BASE +
// NUM_KERNELS - 1 is dropped. Each handler has its own AXI-Lite slave, brought out
// here as arrays indexed by local kernel number, and its count is also visible on
// `count`. One handler per kernel and per-kernel AXI-Lite ports follow the GAScore;
// dropping stray IDs is this design's choice.
module handler_wrapper
  import shoal_pkg::*;
#(
  parameter int KERNEL_BASE = 0,
  parameter int NUM_KERNELS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ev_valid,
  output logic             ev_ready,
  input  logic [KID_W-1:0] ev_kid,
  output logic [31:0]      count   [NUM_KERNELS],
  input  logic             awvalid [NUM_KERNELS],
  output logic             awready [NUM_KERNELS],
  input  logic [3:0]       awaddr  [NUM_KERNELS],
  input  logic             wvalid  [NUM_KERNELS],
  output logic             wready  [NUM_KERNELS],
  input  logic [31:0]      wdata   [NUM_KERNELS],
  output logic             bvalid  [NUM_KERNELS],
  input  logic             bready  [NUM_KERNELS],
  output logic [1:0]       bresp   [NUM_KERNELS],
  input  logic             arvalid [NUM_KERNELS],
  output logic             arready [NUM_KERNELS],
  input  logic [3:0]       araddr  [NUM_KERNELS],
  output logic             rvalid  [NUM_KERNELS],
  input  logic             rready  [NUM_KERNELS],
  output logic [31:0]      rdata   [NUM_KERNELS],
  output logic [1:0]       rresp   [NUM_KERNELS]
);
  assign ev_ready = 1'b1;

  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_h
    logic ev;
    assign ev = ev_valid && (ev_kid == KID_W'(KERNEL_BASE + k));
    handler u_handler (
      .clk, .rst_n, .event_i(ev), .count(count[k]),
      .awvalid(awvalid[k]), .awready(awready[k]), .awaddr(awaddr[k]),
      .wvalid(wvalid[k]), .wready(wready[k]), .wdata(wdata[k]),
      .bvalid(bvalid[k]), .bready(bready[k]), .bresp(bresp[k]),
      .arvalid(arvalid[k]), .arready(arready[k]), .araddr(araddr[k]),
      .rvalid(rvalid[k]), .rready(rready[k]), .rdata(rdata[k]), .rresp(rresp[k]));
  end
endmodule
