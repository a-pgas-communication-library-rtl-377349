// xpams_rx: last stage of the GAScore ingress path.
//
// Takes packets from the hold_buffer (a Long header arrives only after its payload
// is in memory) and, by header:
//   reply (flag bit 1)           -> handler event for the destination kernel
//   Short, Long, Long FIFO,      -> handler event for the destination kernel,
//   Strided and Vectored Long
//                                   then a reply unless asynchronous
//   Medium, Medium FIFO          -> header and payload to the To-Kernels port,
//                                   then a reply unless asynchronous
//   Medium get [hdr][src_addr]   -> command to am_tx: Medium [hdr'][src_addr]
//   Long get [hdr][src][dst]     -> command to am_tx: Long [hdr'][src][dst]
// A reply is a one-word Short AM with the reply and asynchronous flags set and the
// source and destination swapped; it goes to am_tx and out to the sender, whose
// handler counts it. Get answers carry the requested length, come from this node's
// memory and are asynchronous. Behaviour per type follows the GAScore description;
// the event for a Long arrival, the reply and get-answer formats are this design's
// choice. The header is taken in one cycle; each output step is one handshake.
module xpams_rx
  import shoal_pkg::*;
(
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
  typedef enum logic [2:0] {IDLE, EVT, REPLY, K_HDR, K_PAY, G_HDR, G_PAY, DROP} state_e;
  state_e  state;
  am_hdr_t hdr, in_hdr, reply_hdr, get_hdr;
  logic    hdr_last;
  logic    want_reply;

  assign in_hdr     = am_hdr_t'(s_data.data);
  assign want_reply = !hdr.flags[FLAG_ASYNC] && !hdr.flags[FLAG_REPLY];
  assign reply_hdr  = make_hdr(AM_SHORT, 8'b11, hdr.dst, hdr.src, 16'd0);
  assign get_hdr    = make_hdr(hdr.typ == AM_MEDIUM_GET ? AM_MEDIUM : AM_LONG, 8'b01,
                               hdr.dst, hdr.src, hdr.words);

  always_comb begin
    s_ready    = 1'b0;
    m_tx_valid = 1'b0;
    m_k_valid  = 1'b0;
    m_ev_valid = 1'b0;
    m_ev_kid   = hdr.dst;
    m_tx_data  = '{data: DATA_W'(reply_hdr), last: 1'b1, dest: hdr.src, user: '0};
    m_k_data   = '{data: DATA_W'(hdr), last: hdr_last, dest: hdr.dst, user: '0};
    unique case (state)
      IDLE:  s_ready = 1'b1;
      EVT:   m_ev_valid = 1'b1;
      REPLY: m_tx_valid = 1'b1;
      K_HDR: m_k_valid = 1'b1;
      K_PAY: begin
        m_k_valid = s_valid;
        s_ready   = m_k_ready;
        m_k_data  = '{data: s_data.data, last: s_data.last, dest: hdr.dst, user: '0};
      end
      G_HDR: begin
        m_tx_valid = 1'b1;
        m_tx_data  = '{data: DATA_W'(get_hdr), last: hdr_last, dest: hdr.src, user: '0};
      end
      G_PAY: begin
        m_tx_valid = s_valid;
        s_ready    = m_tx_ready;
        m_tx_data  = '{data: s_data.data, last: s_data.last, dest: hdr.src, user: '0};
      end
      DROP:  s_ready = 1'b1;
      default: ;
    endcase
  end

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
          if (in_hdr.flags[FLAG_REPLY])                           state <= EVT;
          else if (in_hdr.typ == AM_SHORT || is_long(in_hdr.typ)) state <= EVT;
          else if (is_medium(in_hdr.typ))                         state <= K_HDR;
          else if (in_hdr.typ == AM_MEDIUM_GET || in_hdr.typ == AM_LONG_GET) state <= G_HDR;
          else                                                    state <= s_data.last ? IDLE : DROP;
        end
        EVT:   if (m_ev_ready) state <= want_reply ? REPLY : IDLE;
        REPLY: if (m_tx_ready) state <= IDLE;
        K_HDR: if (m_k_ready) begin
          if (hdr_last) state <= want_reply ? REPLY : IDLE;
          else          state <= K_PAY;
        end
        K_PAY: if (s_valid && m_k_ready && s_data.last) state <= want_reply ? REPLY : IDLE;
        G_HDR: if (m_tx_ready) state <= hdr_last ? IDLE : G_PAY;
        G_PAY: if (s_valid && m_tx_ready && s_data.last) state <= IDLE;
        DROP:  if (s_valid && s_data.last) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
