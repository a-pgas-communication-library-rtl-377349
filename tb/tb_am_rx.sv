// tb_am_rx: am_rx with the behavioural DataMover. Sends every packet type with random
// gaps and stalls. Checks what reaches the hold_buffer side (beats and the `held`
// tag: only a non-empty Long header is held, and a Long contributes only its header),
// that Long, Strided and Vectored payloads land in memory at the right addresses (and
// the gaps between strided blocks are untouched), that one write command is issued per
// segment with a correct write-data last flag, and that exactly one release pulse is
// produced per memory message, however many segments it had.
module tb_am_rx;
  import shoal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_held;
  axis_t s_data = '0, m_data;
  logic wrcmd_valid, wrcmd_ready, wr_valid, wr_ready, wr_last;
  dm_cmd_t wrcmd;
  logic [63:0] wr_data, rd_data;
  logic wrsts_valid, wrsts_ready, wrsts_okay, release_o;
  logic rdcmd_ready, rd_valid;
  am_rx dut (.*);
  datamover_model #(.MEM_WORDS(1024), .LAT(4), .STALL(1'b1)) u_dm (
    .clk, .rst_n, .rdcmd_valid(1'b0), .rdcmd_ready, .rdcmd('0), .rd_valid, .rd_ready(1'b0), .rd_data,
    .wrcmd_valid, .wrcmd_ready, .wrcmd, .wr_valid, .wr_ready, .wr_data, .wr_last,
    .wrsts_valid, .wrsts_ready, .wrsts_okay);

  axis_t q[$], exp_b[$], got[$];
  bit exp_h[$], got_h[$];
  bit hs = 0;
  int releases = 0, exp_writes = 0, exp_msgs = 0;

  function automatic logic [63:0] H(int t, int f, int src, int dst, int words);
    return {16'(words), 16'(dst), 16'(src), 8'(f), 8'(t)};
  endfunction
  function automatic void pkt(ref axis_t qq[$], input logic [63:0] w[$], input int dest);
    foreach (w[i]) qq.push_back('{data: w[i], last: i == w.size() - 1, dest: KID_W'(dest), user: '0});
  endfunction
  function automatic void expect_fwd(input logic [63:0] w[$], input bit held);
    pkt(exp_b, w, 2);
    foreach (w[i]) exp_h.push_back(held);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w[$];
    for (int i = 0; i < 1024; i++) u_dm.mem[i] = '0;
    for (int rep = 0; rep < 8; rep++) begin
      w = '{H(1, 0, 9, 2, 0)};                       pkt(q, w, 2); expect_fwd(w, 0);
      w = '{H(2, 0, 9, 2, 2), 64'h5, 64'(rep)};      pkt(q, w, 2); expect_fwd(w, 0);
      pkt(q, '{H(4, 0, 9, 2, 3), 64'((100 + 8 * rep) * 8), 64'(rep * 10 + 1), 64'(rep * 10 + 2), 64'(rep * 10 + 3)}, 2);
      expect_fwd('{H(4, 0, 9, 2, 3)}, 1); exp_writes++; exp_msgs++;
      pkt(q, '{H(5, 1, 9, 2, 1), 64'((200 + rep) * 8), 64'(rep + 500)}, 2);
      expect_fwd('{H(5, 1, 9, 2, 1)}, 1); exp_writes++; exp_msgs++;
      // strided: 3 blocks of 2 words, 32 bytes apart
      pkt(q, '{H(8, 0, 9, 2, 6), 64'((300 + 16 * rep) * 8), {32'd32, 16'd2, 16'd3},
               64'(rep * 10 + 1001), 64'(rep * 10 + 1002), 64'(rep * 10 + 1003),
               64'(rep * 10 + 1004), 64'(rep * 10 + 1005), 64'(rep * 10 + 1006)}, 2);
      expect_fwd('{H(8, 0, 9, 2, 6)}, 1); exp_writes += 3; exp_msgs++;
      // vectored: 2 words, an empty descriptor, then 1 word
      pkt(q, '{H(9, 1, 9, 2, 3), {32'((500 + 8 * rep) * 8), 16'd2, 16'd0}, 64'(rep + 2001), 64'(rep + 2002),
               {32'd0, 16'd0, 16'd0}, {32'((600 + rep) * 8), 16'd1, 16'd0}, 64'(rep + 3001)}, 2);
      expect_fwd('{H(9, 1, 9, 2, 3)}, 1); exp_writes += 2; exp_msgs++;
      w = '{H(7, 0, 9, 2, 2), 64'h10, 64'h20};       pkt(q, w, 2); expect_fwd(w, 0);
      pkt(q, '{H(8'h33, 0, 9, 2, 1), 64'h1}, 2);                                          // dropped
      pkt(q, '{H(4, 0, 9, 2, 0), 64'h8}, 2);         expect_fwd('{H(4, 0, 9, 2, 0)}, 0);  // empty Long
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      @(negedge clk);
      if (hs) void'(q.pop_front());
      if (!(s_valid && !hs)) s_valid = q.size() > 0 && $urandom_range(0, 3) != 0;
      if (q.size() > 0) s_data = q[0];
      m_ready = $urandom_range(0, 3) != 0;
      #1;
      hs = s_valid && s_ready;
      if (m_valid && m_ready) begin got.push_back(m_data); got_h.push_back(m_held); end
      if (release_o) releases++;
    end
    check(got.size() == exp_b.size(), $sformatf("beats %0d/%0d", got.size(), exp_b.size()));
    foreach (got[i]) if (i < exp_b.size()) begin
      check(got[i] == exp_b[i], $sformatf("beat %0d", i));
      check(got_h[i] == exp_h[i], $sformatf("held tag %0d", i));
    end
    for (int rep = 0; rep < 8; rep++) begin
      for (int k = 0; k < 3; k++)
        check(u_dm.mem[100 + 8 * rep + k] == 64'(rep * 10 + k + 1), $sformatf("Long FIFO payload %0d.%0d", rep, k));
      check(u_dm.mem[200 + rep] == 64'(rep + 500), $sformatf("Long payload %0d", rep));
      for (int b = 0; b < 3; b++) begin
        for (int k = 0; k < 2; k++)
          check(u_dm.mem[300 + 16 * rep + 4 * b + k] == 64'(rep * 10 + 1001 + 2 * b + k),
                $sformatf("Strided payload %0d.%0d.%0d", rep, b, k));
        check(u_dm.mem[300 + 16 * rep + 4 * b + 2] == '0, $sformatf("Strided gap %0d.%0d", rep, b));
      end
      check(u_dm.mem[500 + 8 * rep] == 64'(rep + 2001) && u_dm.mem[501 + 8 * rep] == 64'(rep + 2002),
            $sformatf("Vectored segment 0 of %0d", rep));
      check(u_dm.mem[600 + rep] == 64'(rep + 3001), $sformatf("Vectored segment 1 of %0d", rep));
    end
    check(u_dm.writes == exp_writes, $sformatf("write commands %0d/%0d", u_dm.writes, exp_writes));
    check(releases == exp_msgs, $sformatf("releases %0d/%0d", releases, exp_msgs));
    check(!u_dm.wr_last_err, "write-data last flag on the final word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
