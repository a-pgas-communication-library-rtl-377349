// am_tx: builds outgoing AM packets, fetching payload from shared memory.
//
// Input is a command packet (from xpams_tx or, for replies and get answers, from
// xpams_rx). am_tx reads the header word and, by message type:
//   Short, Medium FIFO, Long FIFO, Strided/Vectored Long, Medium/Long get:
//                                     forwards the packet as it is.
//   Medium  [hdr][src_addr]           -> [hdr][payload from memory]
//   Long    [hdr][src_addr][dst_addr] -> [hdr][dst_addr][payload from memory]
// For the two memory types it sends one DataMover read command {src_addr,
// 8*words bytes} and appends the `words` read beats to the packet, setting last on
// the final one. Unknown types are dropped. Output TDEST is the header's dst.
// The command layouts are this design's own; the read-then-append behaviour is the
// GAScore's. The header passes combinationally (no added cycle); read data passes
// at one beat per cycle when the DataMover and the output allow.
module am_tx
  import shoal_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  axis_t             s_data,
  output logic              m_valid,
  input  logic              m_ready,
  output axis_t             m_data,
  output logic              rdcmd_valid,
  input  logic              rdcmd_ready,
  output dm_cmd_t           rdcmd,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [DATA_W-1:0] rd_data
);
  typedef enum logic [2:0] {IDLE, PASS, DROP, SRC, DST, DATA} state_e;
  state_e     state;
  am_hdr_t    hdr, in_hdr;
  logic [15:0] cnt;
  logic       known, mem_type;

  assign in_hdr   = am_hdr_t'(s_data.data);
  assign mem_type = in_hdr.typ == AM_MEDIUM || in_hdr.typ == AM_LONG;
  assign known    = is_known(in_hdr.typ);

  always_comb begin
    s_ready     = 1'b0;
    m_valid     = 1'b0;
    m_data      = '{data: s_data.data, last: s_data.last, dest: hdr.dst, user: '0};
    rdcmd_valid = 1'b0;
    rdcmd       = '{addr: s_data.data[ADDR_W-1:0], btt: BTT_W'({hdr.words, 3'b000})};
    rd_ready    = 1'b0;
    unique case (state)
      IDLE: begin
        m_data.dest = in_hdr.dst;
        if (in_hdr.typ == AM_MEDIUM)    m_data.last = in_hdr.words == '0;
        else if (in_hdr.typ == AM_LONG) m_data.last = 1'b0;
        m_valid = s_valid && known;
        s_ready = known ? m_ready : 1'b1;
      end
      PASS: begin
        m_valid = s_valid;
        s_ready = m_ready;
      end
      DROP: s_ready = 1'b1;
      SRC: begin
        rdcmd_valid = s_valid && hdr.words != '0;
        s_ready     = hdr.words == '0 || rdcmd_ready;
      end
      DST: begin
        m_data.last = hdr.words == '0;
        m_valid     = s_valid;
        s_ready     = m_ready;
      end
      DATA: begin
        m_data   = '{data: rd_data, last: cnt == hdr.words - 16'd1, dest: hdr.dst, user: '0};
        m_valid  = rd_valid;
        rd_ready = m_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      hdr   <= '0;
      cnt   <= '0;
    end else begin
      unique case (state)
        IDLE: if (s_valid && s_ready) begin
          hdr <= in_hdr;
          cnt <= '0;
          if (!known)        state <= s_data.last ? IDLE : DROP;
          else if (mem_type) state <= SRC;
          else               state <= s_data.last ? IDLE : PASS;
        end
        PASS, DROP: if (s_valid && s_ready && s_data.last) state <= IDLE;
        SRC: if (s_valid && s_ready) begin
          if (hdr.typ == AM_LONG)   state <= DST;
          else if (hdr.words == '0) state <= IDLE;
          else                      state <= DATA;
        end
        DST: if (s_valid && s_ready) state <= (hdr.words == '0) ? IDLE : DATA;
        DATA: if (rd_valid && rd_ready) begin
          cnt <= cnt + 16'd1;
          if (cnt == hdr.words - 16'd1) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
