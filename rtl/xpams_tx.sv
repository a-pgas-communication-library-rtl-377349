// xpams_tx: first stage of the GAScore egress path.
//
// Reads command packets that local kernels send (via the From-Kernels FIFO) and
// decodes the header word. Two cases are served without memory access, as the
// Shoal GAScore does: a Short message to a local kernel becomes a handler event for
// that kernel, and a Medium FIFO message to a local kernel is copied (header and
// payload) to the To-Kernels port. In both cases a non-asynchronous message is then
// acknowledged by a handler event to the sending kernel, which stands in for the
// reply packet (this shortcut is this design's choice). Every other packet is
// passed on unaltered to am_tx.
//
// Interface: s_* in from the FIFO; m_tx_* to the am_tx arbiter; m_k_* to the
// To-Kernels arbiter; m_ev_* (kernel ID) to the handler arbiter. All are
// valid/ready. The header is taken in one cycle and re-issued from a register, so
// each packet costs one extra cycle; payload beats then pass combinationally.
// A kernel is local when KERNEL_BASE <= ID < KERNEL_BASE + NUM_KERNELS.
module xpams_tx
  import shoal_pkg::*;
#(
  parameter int KERNEL_BASE = 0,
  parameter int NUM_KERNELS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  axis_t            s_data,
  output logic             m_tx_valid,
  input  logic             m_tx_ready,
  output axis_t            m_tx_data,
  output logic             m_k_valid,
  input  logic             m_k_ready,
  output axis_t            m_k_data,
  output logic             m_ev_valid,
  input  logic             m_ev_ready,
  output logic [KID_W-1:0] m_ev_kid
);
  typedef enum logic [2:0] {IDLE, EV_DST, EV_SRC, K_HDR, K_PAY, F_HDR, F_PAY} state_e;
  state_e  state;
  am_hdr_t hdr, in_hdr;
  logic    hdr_last;
  logic    in_local;

  assign in_hdr   = am_hdr_t'(s_data.data);
  assign in_local = (int'(in_hdr.dst) >= KERNEL_BASE) && (int'(in_hdr.dst) < KERNEL_BASE + NUM_KERNELS);

  always_comb begin
    s_ready    = 1'b0;
    m_tx_valid = 1'b0;
    m_k_valid  = 1'b0;
    m_ev_valid = 1'b0;
    m_ev_kid   = hdr.dst;
    m_tx_data  = '{data: DATA_W'(hdr), last: hdr_last, dest: hdr.dst, user: '0};
    m_k_data   = m_tx_data;
    unique case (state)
      IDLE:   s_ready = 1'b1;
      EV_DST: m_ev_valid = 1'b1;
      EV_SRC: begin m_ev_valid = 1'b1; m_ev_kid = hdr.src; end
      K_HDR:  m_k_valid = 1'b1;
      K_PAY:  begin
        m_k_valid = s_valid;
        s_ready   = m_k_ready;
        m_k_data  = '{data: s_data.data, last: s_data.last, dest: hdr.dst, user: '0};
      end
      F_HDR:  m_tx_valid = 1'b1;
      F_PAY:  begin
        m_tx_valid = s_valid;
        s_ready    = m_tx_ready;
        m_tx_data  = '{data: s_data.data, last: s_data.last, dest: hdr.dst, user: '0};
      end
      default: ;
    endcase
  end

  logic want_reply;
  assign want_reply = !hdr.flags[FLAG_ASYNC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      hdr      <= '0;
      hdr_last <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (s_valid) begin
          hdr      <= in_hdr;
          hdr_last <= s_data.last;
          if (in_local && in_hdr.typ == AM_SHORT)            state <= EV_DST;
          else if (in_local && in_hdr.typ == AM_MEDIUM_FIFO) state <= K_HDR;
          else                                               state <= F_HDR;
        end
        EV_DST: if (m_ev_ready) state <= want_reply ? EV_SRC : IDLE;
        EV_SRC: if (m_ev_ready) state <= IDLE;
        K_HDR:  if (m_k_ready) begin
          if (hdr_last) state <= want_reply ? EV_SRC : IDLE;
          else          state <= K_PAY;
        end
        K_PAY:  if (s_valid && m_k_ready && s_data.last) state <= want_reply ? EV_SRC : IDLE;
        F_HDR:  if (m_tx_ready) state <= hdr_last ? IDLE : F_PAY;
        F_PAY:  if (s_valid && m_tx_ready && s_data.last) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
