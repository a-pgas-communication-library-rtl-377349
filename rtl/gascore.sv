// gascore: the hardware runtime of a Shoal node (PGAS Active Message engine).
//
// One GAScore serves all kernels on an FPGA. It sits between the kernels, the
// network and shared memory, and carries out Active Messages (AMs): Short messages
// that only trigger a handler, Medium messages whose payload goes to a kernel, Long
// messages whose payload is written into remote memory, and get requests that bring
// remote data back. Every received AM is answered with a reply unless it is marked
// asynchronous; replies are counted per kernel by the built-in handlers, which the
// kernels read over AXI-Lite.
//
// Egress: From-Kernels -> FIFO -> xpams_tx -> arbiter -> am_tx -> add_size -> network.
//   xpams_tx delivers Short and Medium FIFO messages between local kernels itself;
//   am_tx reads payload from memory (DataMover read channel) where the AM asks for
//   it; add_size puts each packet's length in words on TUSER.
// Ingress: network -> am_rx -> hold_buffer -> xpams_rx -> To-Kernels / handlers /
//   arbiter -> am_tx. am_rx writes Long payloads to memory (DataMover write channel; one
//   write command per segment for Strided and Vectored Long)
//   and the hold_buffer keeps the Long header back until the write status returns;
//   xpams_rx raises handler events, forwards Medium payloads, sends replies and
//   answers get requests.
//
// The memory side is the command/data/status streams of an AXI DataMover, which is
// outside this module. All streams are valid/ready with packed-struct beats (see
// shoal_pkg). The block structure and the jobs of the blocks follow the Shoal
// GAScore; message formats, buffer depths, arbitration and the handler register map
// are this design's choices. One clock, synchronous active-low reset.
module gascore
  import shoal_pkg::*;
#(
  parameter int KERNEL_BASE = 0,
  parameter int NUM_KERNELS = 1,
  parameter int KFIFO_DEPTH = 512,
  parameter int CMD_DEPTH   = 16,
  parameter int BUF_DEPTH   = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  // From Kernels
  input  logic              s_kern_valid,
  output logic              s_kern_ready,
  input  axis_t             s_kern_data,
  // To Kernels
  output logic              m_kern_valid,
  input  logic              m_kern_ready,
  output axis_t             m_kern_data,
  // From Network
  input  logic              s_net_valid,
  output logic              s_net_ready,
  input  axis_t             s_net_data,
  // To Network
  output logic              m_net_valid,
  input  logic              m_net_ready,
  output axis_t             m_net_data,
  // DataMover read channel
  output logic              dm_rdcmd_valid,
  input  logic              dm_rdcmd_ready,
  output dm_cmd_t           dm_rdcmd,
  input  logic              dm_rd_valid,
  output logic              dm_rd_ready,
  input  logic [DATA_W-1:0] dm_rd_data,
  // DataMover write channel
  output logic              dm_wrcmd_valid,
  input  logic              dm_wrcmd_ready,
  output dm_cmd_t           dm_wrcmd,
  output logic              dm_wr_valid,
  input  logic              dm_wr_ready,
  output logic [DATA_W-1:0] dm_wr_data,
  output logic              dm_wr_last,
  input  logic              dm_wrsts_valid,
  output logic              dm_wrsts_ready,
  input  logic              dm_wrsts_okay,
  // Handlers: count and one AXI-Lite slave per local kernel
  output logic [31:0]       h_count   [NUM_KERNELS],
  input  logic              h_awvalid [NUM_KERNELS],
  output logic              h_awready [NUM_KERNELS],
  input  logic [3:0]        h_awaddr  [NUM_KERNELS],
  input  logic              h_wvalid  [NUM_KERNELS],
  output logic              h_wready  [NUM_KERNELS],
  input  logic [31:0]       h_wdata   [NUM_KERNELS],
  output logic              h_bvalid  [NUM_KERNELS],
  input  logic              h_bready  [NUM_KERNELS],
  output logic [1:0]        h_bresp   [NUM_KERNELS],
  input  logic              h_arvalid [NUM_KERNELS],
  output logic              h_arready [NUM_KERNELS],
  input  logic [3:0]        h_araddr  [NUM_KERNELS],
  output logic              h_rvalid  [NUM_KERNELS],
  input  logic              h_rready  [NUM_KERNELS],
  output logic [31:0]       h_rdata   [NUM_KERNELS],
  output logic [1:0]        h_rresp   [NUM_KERNELS]
);
  localparam int LAST_BIT = 2 * 16;   // position of `last` in axis_t
  localparam int EV_W     = KID_W + 1;

  // ---------------- egress ----------------
  logic  kf_valid, kf_ready;
  axis_t kf_data;

  axis_fifo #(.WIDTH(AXIS_W), .DEPTH(KFIFO_DEPTH)) u_kern_fifo (
    .clk, .rst_n,
    .in_valid(s_kern_valid), .in_ready(s_kern_ready), .in_data(s_kern_data),
    .out_valid(kf_valid), .out_ready(kf_ready), .out_data(kf_data));

  logic             xt_tx_valid, xt_tx_ready, xt_k_valid, xt_k_ready, xt_ev_valid, xt_ev_ready;
  axis_t            xt_tx_data, xt_k_data;
  logic [KID_W-1:0] xt_ev_kid;

  xpams_tx #(.KERNEL_BASE(KERNEL_BASE), .NUM_KERNELS(NUM_KERNELS)) u_xpams_tx (
    .clk, .rst_n,
    .s_valid(kf_valid), .s_ready(kf_ready), .s_data(kf_data),
    .m_tx_valid(xt_tx_valid), .m_tx_ready(xt_tx_ready), .m_tx_data(xt_tx_data),
    .m_k_valid(xt_k_valid), .m_k_ready(xt_k_ready), .m_k_data(xt_k_data),
    .m_ev_valid(xt_ev_valid), .m_ev_ready(xt_ev_ready), .m_ev_kid(xt_ev_kid));

  logic             xr_tx_valid, xr_tx_ready, xr_k_valid, xr_k_ready, xr_ev_valid, xr_ev_ready;
  axis_t            xr_tx_data, xr_k_data;
  logic [KID_W-1:0] xr_ev_kid;

  // Mux into am_tx: kernel commands (0) and replies / get answers (1).
  logic [1:0]        atx_in_ready;
  logic [AXIS_W-1:0] atx_in_data [2];
  logic              atx_valid, atx_ready;
  axis_t             atx_data;
  assign atx_in_data[0] = xt_tx_data;
  assign atx_in_data[1] = xr_tx_data;
  assign xt_tx_ready    = atx_in_ready[0];
  assign xr_tx_ready    = atx_in_ready[1];

  axis_arb #(.WIDTH(AXIS_W), .LAST_BIT(LAST_BIT)) u_arb_tx (
    .clk, .rst_n,
    .in_valid({xr_tx_valid, xt_tx_valid}), .in_ready(atx_in_ready), .in_data(atx_in_data),
    .out_valid(atx_valid), .out_ready(atx_ready), .out_data(atx_data));

  logic    rc_valid, rc_ready;
  dm_cmd_t rc_data;
  logic    tx_valid, tx_ready;
  axis_t   tx_data;

  am_tx u_am_tx (
    .clk, .rst_n,
    .s_valid(atx_valid), .s_ready(atx_ready), .s_data(atx_data),
    .m_valid(tx_valid), .m_ready(tx_ready), .m_data(tx_data),
    .rdcmd_valid(rc_valid), .rdcmd_ready(rc_ready), .rdcmd(rc_data),
    .rd_valid(dm_rd_valid), .rd_ready(dm_rd_ready), .rd_data(dm_rd_data));

  axis_fifo #(.WIDTH(DMCMD_W), .DEPTH(CMD_DEPTH)) u_rdcmd_fifo (
    .clk, .rst_n,
    .in_valid(rc_valid), .in_ready(rc_ready), .in_data(rc_data),
    .out_valid(dm_rdcmd_valid), .out_ready(dm_rdcmd_ready), .out_data(dm_rdcmd));

  add_size #(.DEPTH(BUF_DEPTH)) u_add_size (
    .clk, .rst_n,
    .s_valid(tx_valid), .s_ready(tx_ready), .s_data(tx_data),
    .m_valid(m_net_valid), .m_ready(m_net_ready), .m_data(m_net_data));

  // ---------------- ingress ----------------
  logic    rx_valid, rx_ready, rx_held, rel;
  axis_t   rx_data;
  logic    wc_valid, wc_ready;
  dm_cmd_t wc_data;

  am_rx u_am_rx (
    .clk, .rst_n,
    .s_valid(s_net_valid), .s_ready(s_net_ready), .s_data(s_net_data),
    .m_valid(rx_valid), .m_ready(rx_ready), .m_data(rx_data), .m_held(rx_held),
    .wrcmd_valid(wc_valid), .wrcmd_ready(wc_ready), .wrcmd(wc_data),
    .wr_valid(dm_wr_valid), .wr_ready(dm_wr_ready), .wr_data(dm_wr_data), .wr_last(dm_wr_last),
    .wrsts_valid(dm_wrsts_valid), .wrsts_ready(dm_wrsts_ready), .wrsts_okay(dm_wrsts_okay),
    .release_o(rel));

  axis_fifo #(.WIDTH(DMCMD_W), .DEPTH(CMD_DEPTH)) u_wrcmd_fifo (
    .clk, .rst_n,
    .in_valid(wc_valid), .in_ready(wc_ready), .in_data(wc_data),
    .out_valid(dm_wrcmd_valid), .out_ready(dm_wrcmd_ready), .out_data(dm_wrcmd));

  logic  hb_valid, hb_ready;
  axis_t hb_data;

  hold_buffer #(.DEPTH(BUF_DEPTH)) u_hold_buffer (
    .clk, .rst_n,
    .s_valid(rx_valid), .s_ready(rx_ready), .s_data(rx_data), .s_held(rx_held),
    .release_i(rel),
    .m_valid(hb_valid), .m_ready(hb_ready), .m_data(hb_data));

  xpams_rx u_xpams_rx (
    .clk, .rst_n,
    .s_valid(hb_valid), .s_ready(hb_ready), .s_data(hb_data),
    .m_tx_valid(xr_tx_valid), .m_tx_ready(xr_tx_ready), .m_tx_data(xr_tx_data),
    .m_k_valid(xr_k_valid), .m_k_ready(xr_k_ready), .m_k_data(xr_k_data),
    .m_ev_valid(xr_ev_valid), .m_ev_ready(xr_ev_ready), .m_ev_kid(xr_ev_kid));

  // ---------------- To Kernels mux ----------------
  logic [1:0]        k_in_ready;
  logic [AXIS_W-1:0] k_in_data [2];
  assign k_in_data[0] = xt_k_data;
  assign k_in_data[1] = xr_k_data;
  assign xt_k_ready   = k_in_ready[0];
  assign xr_k_ready   = k_in_ready[1];

  axis_arb #(.WIDTH(AXIS_W), .LAST_BIT(LAST_BIT)) u_arb_kern (
    .clk, .rst_n,
    .in_valid({xr_k_valid, xt_k_valid}), .in_ready(k_in_ready), .in_data(k_in_data),
    .out_valid(m_kern_valid), .out_ready(m_kern_ready), .out_data(m_kern_data));

  // ---------------- handler mux and handlers ----------------
  logic [1:0]      ev_in_ready;
  logic [EV_W-1:0] ev_in_data [2];
  logic            ev_valid, ev_ready;
  logic [EV_W-1:0] ev_data;
  assign ev_in_data[0] = {1'b1, xt_ev_kid};
  assign ev_in_data[1] = {1'b1, xr_ev_kid};
  assign xt_ev_ready   = ev_in_ready[0];
  assign xr_ev_ready   = ev_in_ready[1];

  axis_arb #(.WIDTH(EV_W), .LAST_BIT(KID_W)) u_arb_ev (
    .clk, .rst_n,
    .in_valid({xr_ev_valid, xt_ev_valid}), .in_ready(ev_in_ready), .in_data(ev_in_data),
    .out_valid(ev_valid), .out_ready(ev_ready), .out_data(ev_data));

  handler_wrapper #(.KERNEL_BASE(KERNEL_BASE), .NUM_KERNELS(NUM_KERNELS)) u_handlers (
    .clk, .rst_n,
    .ev_valid, .ev_ready, .ev_kid(ev_data[KID_W-1:0]), .count(h_count),
    .awvalid(h_awvalid), .awready(h_awready), .awaddr(h_awaddr),
    .wvalid(h_wvalid), .wready(h_wready), .wdata(h_wdata),
    .bvalid(h_bvalid), .bready(h_bready), .bresp(h_bresp),
    .arvalid(h_arvalid), .arready(h_arready), .araddr(h_araddr),
    .rvalid(h_rvalid), .rready(h_rready), .rdata(h_rdata), .rresp(h_rresp));
endmodule
