// shoal_pkg: types and constants shared by the GAScore blocks.
//
// The GAScore moves Active Messages (AMs) between local kernels, the network and
// shared memory. Every AM starts with one 64-bit header word; the layout below is
// this design's own (no header layout is published for it):
//
//   [63:48] words  payload length in 64-bit words
//   [47:32] dst    destination kernel ID
//   [31:16] src    source kernel ID
//   [15:8]  flags  bit 0 = asynchronous (no reply wanted), bit 1 = this is a reply
//   [7:0]   type   AM type, see am_type_e
//
// The message classes (Short, Medium, Long, their FIFO variants, the Medium/Long
// gets and the Strided and Vectored Long) follow the Shoal API; their numeric codes
// and the layouts below are a choice of this design.
//
// Strided Long:  [hdr][dst_addr][stride(63:32) | blk_words(31:16) | nblk(15:0)][payload]
//                payload block i (blk_words words) goes to dst_addr + i*stride bytes.
// Vectored Long: [hdr][seg 0 desc][seg 0 payload][seg 1 desc][seg 1 payload]...
//                desc = addr(63:32) | words(31:16); segments continue until hdr.words
//                payload words have been carried.
// Both carry their payload from the kernel (FIFO flavour); hdr.words is the total
// and the receiver goes by it (for Strided, nblk*blk_words must equal hdr.words).
// A stream beat (axis_t) carries TDATA, TLAST, TDEST (destination kernel) and TUSER
// (packet size in words, filled in by add_size on the way to the network).
package shoal_pkg;

  localparam int DATA_W = 64;
  localparam int KID_W  = 16;
  localparam int USER_W = 16;
  localparam int ADDR_W = 32;
  localparam int BTT_W  = 23;

  typedef enum logic [7:0] {
    AM_NONE        = 8'd0,
    AM_SHORT       = 8'd1,  // no payload, triggers a handler
    AM_MEDIUM_FIFO = 8'd2,  // payload from the kernel, delivered to the kernel
    AM_MEDIUM      = 8'd3,  // payload read from shared memory, delivered to the kernel
    AM_LONG_FIFO   = 8'd4,  // payload from the kernel, written to remote memory
    AM_LONG        = 8'd5,  // payload read from shared memory, written to remote memory
    AM_MEDIUM_GET  = 8'd6,  // ask the remote node for a Medium message from its memory
    AM_LONG_GET    = 8'd7,  // ask the remote node to write its memory into ours
    AM_LONG_STRIDED  = 8'd8,  // kernel payload written as equal blocks at a fixed stride
    AM_LONG_VECTORED = 8'd9   // kernel payload written as segments, each with its own address
  } am_type_e;

  localparam int FLAG_ASYNC = 0;
  localparam int FLAG_REPLY = 1;

  typedef struct packed {
    logic [15:0]      words;
    logic [KID_W-1:0] dst;
    logic [KID_W-1:0] src;
    logic [7:0]       flags;
    am_type_e         typ;
  } am_hdr_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              last;
    logic [KID_W-1:0]  dest;
    logic [USER_W-1:0] user;
  } axis_t;

  localparam int AXIS_W = $bits(axis_t);

  // DataMover command: start address and number of bytes to transfer.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [BTT_W-1:0]  btt;
  } dm_cmd_t;

  localparam int DMCMD_W = $bits(dm_cmd_t);

  // Message types whose payload is written to the receiver's memory.
  function automatic logic is_long(am_type_e t);
    return t == AM_LONG || t == AM_LONG_FIFO || t == AM_LONG_STRIDED || t == AM_LONG_VECTORED;
  endfunction

  function automatic logic is_known(am_type_e t);
    return t inside {AM_SHORT, AM_MEDIUM_FIFO, AM_MEDIUM, AM_LONG_FIFO, AM_LONG,
                     AM_MEDIUM_GET, AM_LONG_GET, AM_LONG_STRIDED, AM_LONG_VECTORED};
  endfunction

  function automatic logic is_medium(am_type_e t);
    return t == AM_MEDIUM || t == AM_MEDIUM_FIFO;
  endfunction

  function automatic am_hdr_t make_hdr(am_type_e t, logic [7:0] flags,
                                       logic [KID_W-1:0] src, logic [KID_W-1:0] dst,
                                       logic [15:0] words);
    am_hdr_t h;
    h.typ = t; h.flags = flags; h.src = src; h.dst = dst; h.words = words;
    return h;
  endfunction

endpackage
