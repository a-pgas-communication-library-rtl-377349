// am_rx: first stage of the GAScore ingress path.
//
// Parses packets from the network. Messages whose payload belongs in memory (Long,
// Long FIFO, Strided Long, Vectored Long; see shoal_pkg for their layouts) are split
// into one or more *segments*. For each segment am_rx sends a DataMover write command
// {address, 8*words bytes} and then streams that segment's payload words into the
// write-data port, with last on the segment's final word:
//   Long / Long FIFO  one segment at dst_addr of hdr.words words;
//   Strided Long      blocks of blk_words words at dst_addr + i*stride, until
//                     hdr.words words have been carried (nblk is not needed here);
//   Vectored Long     a descriptor word before each segment gives its address and
//                     length, until hdr.words words have been carried.
// Only the header word of such a message is forwarded to the hold_buffer, tagged
// `held`. When the message's last payload word is accepted, the number of write
// commands it used is pushed into a small FIFO. DataMover write statuses are counted;
// once the count reaches the number at the head of that FIFO, `release_o` pulses for
// one cycle and the held header may go on. Statuses return in command order, so
// headers are released in order and only after all of their payload is in memory.
// All other known packets (Short, Medium, gets) are forwarded whole and untagged.
// Unknown types and zero-length memory messages are dropped after their header
// (a zero-length one still forwards its header, untagged). The sender must keep the
// segment lengths consistent with hdr.words; a segment cut short by hdr.words ends
// without last on the write-data port.
// Holding the header until the write completes follows the GAScore; the segment
// formats, the status counting and error handling (a failed status still counts)
// are this design's choices. One beat per cycle; one idle cycle per write command.
// m_data and wr_data are wires from s_data (only m_data.last is forced on a held
// header); wrsts_ready is tied high and the low three btt bits are zero by design.
module am_rx
  import shoal_pkg::*;
#(
  parameter int MSG_DEPTH = 16   // messages whose writes may be outstanding
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  axis_t             s_data,
  output logic              m_valid,
  input  logic              m_ready,
  output axis_t             m_data,
  output logic              m_held,
  output logic              wrcmd_valid,
  input  logic              wrcmd_ready,
  output dm_cmd_t           wrcmd,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [DATA_W-1:0] wr_data,
  output logic              wr_last,
  input  logic              wrsts_valid,
  output logic              wrsts_ready,
  input  logic              wrsts_okay,
  output logic              release_o
);
  typedef enum logic [2:0] {IDLE, PASS, DROP, ADDR, DESC, CMD, DATA} state_e;
  state_e      state;
  am_hdr_t     hdr, in_hdr;
  logic        known, long_t;
  logic [ADDR_W-1:0] seg_addr;
  logic [31:0] stride;
  logic [15:0] seg_words;   // words in the current segment
  logic [15:0] seg_cnt;     // words of the current segment already written
  logic [15:0] total_cnt;   // payload words of the message written so far
  logic [15:0] ncmd;        // write commands issued for this message
  logic        seg_end, msg_end;

  assign in_hdr = am_hdr_t'(s_data.data);
  assign long_t = is_long(in_hdr.typ);
  assign known  = is_known(in_hdr.typ);

  assign seg_end = seg_cnt == seg_words - 16'd1;
  assign msg_end = total_cnt == hdr.words - 16'd1;

  // ---- per-message status counting ----
  logic        cf_in_ready, cf_out_valid, cf_push;
  logic [15:0] cf_out;
  logic [15:0] sts_acc, sts_next;

  axis_fifo #(.WIDTH(16), .DEPTH(MSG_DEPTH)) u_cmd_count (
    .clk, .rst_n,
    .in_valid(cf_push), .in_ready(cf_in_ready), .in_data(ncmd + 16'd1),
    .out_valid(cf_out_valid), .out_ready(release_o), .out_data(cf_out));

  assign wrsts_ready = 1'b1;
  assign sts_next    = sts_acc + 16'(wrsts_valid);
  assign release_o   = cf_out_valid && sts_next >= cf_out;

  always_ff @(posedge clk) begin
    if (!rst_n)         sts_acc <= '0;
    else if (release_o) sts_acc <= sts_next - cf_out;
    else                sts_acc <= sts_next;
  end

  // ---- datapath control ----
  always_comb begin
    s_ready     = 1'b0;
    m_valid     = 1'b0;
    m_data      = s_data;
    m_held      = 1'b0;
    wrcmd_valid = 1'b0;
    wrcmd       = '{addr: seg_addr, btt: BTT_W'({seg_words, 3'b000})};
    wr_valid    = 1'b0;
    wr_data     = s_data.data;
    wr_last     = seg_end;
    cf_push     = 1'b0;
    unique case (state)
      IDLE: begin
        if (long_t) begin
          m_data.last = 1'b1;
          m_held      = in_hdr.words != '0;
        end
        m_valid = s_valid && known;
        s_ready = known ? m_ready : 1'b1;
      end
      PASS: begin
        m_valid = s_valid;
        s_ready = m_ready;
      end
      DROP, ADDR, DESC: s_ready = 1'b1;
      CMD:  wrcmd_valid = 1'b1;
      DATA: begin
        wr_valid = s_valid && (!msg_end || cf_in_ready);
        s_ready  = wr_ready && (!msg_end || cf_in_ready);
        cf_push  = s_valid && s_ready && msg_end;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      hdr       <= '0;
      seg_addr  <= '0;
      stride    <= '0;
      seg_words <= '0;
      seg_cnt   <= '0;
      total_cnt <= '0;
      ncmd      <= '0;
    end else begin
      unique case (state)
        IDLE: if (s_valid && s_ready) begin
          hdr       <= in_hdr;
          total_cnt <= '0;
          ncmd      <= '0;
          if (!known || (long_t && in_hdr.words == '0)) state <= s_data.last ? IDLE : DROP;
          else if (long_t)                               state <= ADDR;
          else                                           state <= s_data.last ? IDLE : PASS;
        end
        PASS, DROP: if (s_valid && s_ready && s_data.last) state <= IDLE;
        ADDR: if (s_valid) begin
          seg_cnt <= '0;
          if (hdr.typ == AM_LONG_VECTORED) begin
            // a zero-length descriptor is skipped
            seg_addr  <= s_data.data[63:32];
            seg_words <= s_data.data[31:16];
            if (s_data.data[31:16] != '0) state <= CMD;
          end else if (hdr.typ == AM_LONG_STRIDED) begin
            seg_addr <= s_data.data[ADDR_W-1:0];
            state    <= DESC;
          end else begin
            seg_addr  <= s_data.data[ADDR_W-1:0];
            seg_words <= hdr.words;
            state     <= CMD;
          end
        end
        DESC: if (s_valid) begin
          stride    <= s_data.data[63:32];
          seg_words <= s_data.data[31:16];
          state     <= CMD;
        end
        CMD: if (wrcmd_ready) state <= DATA;
        DATA: if (s_valid && s_ready) begin
          seg_cnt   <= seg_cnt + 16'd1;
          total_cnt <= total_cnt + 16'd1;
          if (msg_end) begin
            state <= s_data.last ? IDLE : DROP;
          end else if (seg_end) begin
            ncmd    <= ncmd + 16'd1;
            seg_cnt <= '0;
            if (hdr.typ == AM_LONG_VECTORED) begin
              state <= ADDR;
            end else begin
              // strided: next block (a plain Long has one segment, so msg_end fires first)
              seg_addr  <= seg_addr + stride;
              state     <= CMD;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The DataMover write-data port sees last exactly on segment ends.
  a_seg_fits: assert property (@(posedge clk) disable iff (!rst_n)
    state == CMD |-> seg_words != '0);
endmodule
