// tb_gascore: end-to-end test of one GAScore at its default parameters.
//
// The GAScore serves local kernel 0. Its network output goes to a small switch in
// the testbench: packets for kernel 0 are looped back into the network input (as the
// network router would route them back to this node); packets for any other kernel
// are captured as if received by a remote node, and the testbench plays remote
// kernel 5 by injecting packets into the network input. A behavioural DataMover with
// memory sits on the memory side. The test runs every message type in both
// directions, checks memory, kernel deliveries, network packets (including TUSER
// sizes) and the reply counter read over AXI-Lite, and counts how often each
// mechanism occurred: local delivery, memory reads and writes, segmented (Strided and
// Vectored) writes, header hold, replies, gets, asynchronous messages, arbitration
// conflicts and back-pressure.
// Random valid gaps and random ready drops are applied on all external streams.
module tb_gascore;
  import shoal_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- DUT and memory model ----------------
  logic s_kern_valid = 0, s_kern_ready, m_kern_valid, m_kern_ready = 0;
  logic s_net_valid = 0, s_net_ready, m_net_valid, m_net_ready = 0;
  axis_t s_kern_data = '0, m_kern_data, s_net_data = '0, m_net_data;
  logic dm_rdcmd_valid, dm_rdcmd_ready, dm_rd_valid, dm_rd_ready;
  dm_cmd_t dm_rdcmd, dm_wrcmd;
  logic [63:0] dm_rd_data, dm_wr_data;
  logic dm_wrcmd_valid, dm_wrcmd_ready, dm_wr_valid, dm_wr_ready, dm_wr_last;
  logic dm_wrsts_valid, dm_wrsts_ready, dm_wrsts_okay;
  logic [31:0] h_count [1];
  logic h_awvalid [1], h_awready [1], h_wvalid [1], h_wready [1], h_bvalid [1], h_bready [1];
  logic h_arvalid [1], h_arready [1], h_rvalid [1], h_rready [1];
  logic [3:0] h_awaddr [1], h_araddr [1];
  logic [31:0] h_wdata [1], h_rdata [1];
  logic [1:0] h_bresp [1], h_rresp [1];

  gascore dut (.*);

  datamover_model u_dm (
    .clk, .rst_n,
    .rdcmd_valid(dm_rdcmd_valid), .rdcmd_ready(dm_rdcmd_ready), .rdcmd(dm_rdcmd),
    .rd_valid(dm_rd_valid), .rd_ready(dm_rd_ready), .rd_data(dm_rd_data),
    .wrcmd_valid(dm_wrcmd_valid), .wrcmd_ready(dm_wrcmd_ready), .wrcmd(dm_wrcmd),
    .wr_valid(dm_wr_valid), .wr_ready(dm_wr_ready), .wr_data(dm_wr_data), .wr_last(dm_wr_last),
    .wrsts_valid(dm_wrsts_valid), .wrsts_ready(dm_wrsts_ready), .wrsts_okay(dm_wrsts_okay));

  // ---------------- stream drivers and monitors ----------------
  axis_t kq[$], nq[$];            // beats waiting to enter the kernel / network ports
  logic [63:0] rem_w[$];          // words of packets captured for remote kernels
  logic [KID_W-1:0] rem_dest[$];
  int rem_len[$];
  logic [63:0] kern_w[$];         // words delivered to the local kernel
  bit kern_l[$];
  axis_t cur[$];                  // network packet being assembled
  bit k_hs = 0, n_hs = 0;

  // mechanism counters
  int n_hold = 0, n_conflict = 0, n_net_bp = 0, n_loop = 0, n_remote = 0, n_tuser = 0;
  int n_local_ev = 0, n_local_k = 0, n_reply_out = 0, n_ev_rx = 0, n_seg_wr = 0;

  always @(negedge clk) begin
    if (k_hs) void'(kq.pop_front());
    if (n_hs) void'(nq.pop_front());
    if (!(s_kern_valid && !k_hs)) s_kern_valid = kq.size() > 0 && $urandom_range(0, 3) != 0;
    if (kq.size() > 0) s_kern_data = kq[0];
    if (!(s_net_valid && !n_hs)) s_net_valid = nq.size() > 0 && $urandom_range(0, 3) != 0;
    if (nq.size() > 0) s_net_data = nq[0];
    m_net_ready  = $urandom_range(0, 4) != 0;
    m_kern_ready = $urandom_range(0, 4) != 0;
    #1;
    k_hs = s_kern_valid && s_kern_ready;
    n_hs = s_net_valid && s_net_ready;
    if (m_kern_valid && m_kern_ready) begin
      kern_w.push_back(m_kern_data.data);
      kern_l.push_back(m_kern_data.last);
    end
    if (m_net_valid && !m_net_ready) n_net_bp++;
    if (m_net_valid && m_net_ready) begin
      cur.push_back(m_net_data);
      if (m_net_data.last) begin
        bit ok;
        ok = 1;
        foreach (cur[i]) if (int'(cur[i].user) != cur.size() || cur[i].dest != cur[0].dest) ok = 0;
        check(ok, "TUSER carries the packet size on every beat");
        n_tuser++;
        if (cur[0].dest == 16'd0) begin
          foreach (cur[i]) begin
            axis_t b;
            b = cur[i];
            b.user = '0;
            nq.push_back(b);
          end
          n_loop++;
        end else begin
          foreach (cur[i]) rem_w.push_back(cur[i].data);
          rem_dest.push_back(cur[0].dest);
          rem_len.push_back(cur.size());
          n_remote++;
        end
        cur.delete();
      end
    end
    if (rst_n) begin
      if (dut.u_hold_buffer.f_valid && dut.u_hold_buffer.f_held && dut.u_hold_buffer.credits == 0) n_hold++;
      if (dut.u_arb_tx.in_valid == 2'b11) n_conflict++;
      if (dut.u_xpams_tx.m_ev_valid && dut.u_xpams_tx.m_ev_ready) n_local_ev++;
      if (dut.u_xpams_tx.m_k_valid && dut.u_xpams_tx.m_k_ready) n_local_k++;
      if (dut.u_xpams_rx.m_ev_valid && dut.u_xpams_rx.m_ev_ready) n_ev_rx++;
      if (dut.u_xpams_rx.m_tx_valid && dut.u_xpams_rx.m_tx_ready &&
          dut.u_xpams_rx.state == 3'd2) n_reply_out++;
    end
  end

  // ---------------- helpers ----------------
  function automatic logic [63:0] H(am_type_e t, logic [7:0] f, int src, int dst, int words);
    return 64'(make_hdr(t, f, KID_W'(src), KID_W'(dst), 16'(words)));
  endfunction

  task automatic put(ref axis_t q[$], input logic [63:0] w[$], input int dest);
    foreach (w[i]) q.push_back('{data: w[i], last: i == w.size() - 1, dest: KID_W'(dest), user: '0});
  endtask

  task automatic wait_for(ref int cnt, input int target, input string what);
    int t = 0;
    while (cnt < target && t < 5000) begin @(negedge clk); t++; end
    check(cnt >= target, {"timeout waiting for ", what});
    repeat (20) @(negedge clk);
  endtask

  int rem_pos = 0, rem_pkt = 0;
  task automatic expect_remote(input logic [63:0] w[$], input int dest, input string what);
    int got;
    wait_for(n_remote, rem_pkt + 1, what);
    got = rem_pkt < rem_len.size() ? rem_len[rem_pkt] : -1;
    check(got == w.size(), {what, ": packet length"});
    check(rem_pkt < rem_dest.size() && int'(rem_dest[rem_pkt]) == dest, {what, ": TDEST"});
    if (got == w.size())
      foreach (w[i]) check(rem_w[rem_pos + i] == w[i], $sformatf("%s: word %0d", what, i));
    if (got > 0) rem_pos += got;
    rem_pkt++;
  endtask

  int kpos = 0;
  task automatic expect_kern(input logic [63:0] w[$], input string what);
    int t = 0;
    while (kern_w.size() < kpos + w.size() && t < 5000) begin @(negedge clk); t++; end
    check(kern_w.size() >= kpos + w.size(), {what, ": delivered to kernel"});
    if (kern_w.size() >= kpos + w.size()) begin
      foreach (w[i]) begin
        check(kern_w[kpos + i] == w[i], $sformatf("%s: kernel word %0d", what, i));
        check(kern_l[kpos + i] == (i == w.size() - 1), $sformatf("%s: kernel last %0d", what, i));
      end
    end
    kpos += w.size();
  endtask

  task automatic axil_read(output logic [31:0] d);
    @(negedge clk);
    h_arvalid[0] = 1; h_araddr[0] = 4'h0;
    do begin #1; if (h_arready[0]) break; @(negedge clk); end while (1);
    @(negedge clk); h_arvalid[0] = 0; h_rready[0] = 1;
    #1; while (!h_rvalid[0]) begin @(negedge clk); #1; end
    d = h_rdata[0];
    @(negedge clk); h_rready[0] = 0;
  endtask

  task automatic axil_sub(input logic [31:0] v);
    @(negedge clk);
    h_awvalid[0] = 1; h_wvalid[0] = 1; h_awaddr[0] = 4'h0; h_wdata[0] = v; h_bready[0] = 1;
    do begin #1; if (h_awready[0]) break; @(negedge clk); end while (1);
    @(negedge clk); h_awvalid[0] = 0; h_wvalid[0] = 0;
    #1; while (!h_bvalid[0]) begin @(negedge clk); #1; end
    @(negedge clk); h_bready[0] = 0;
  endtask

  task automatic wait_count(input int v, input string what);
    int t = 0;
    while (h_count[0] != 32'(v) && t < 5000) begin @(negedge clk); t++; end
    check(h_count[0] == 32'(v), $sformatf("%s: handler count %0d, expected %0d", what, h_count[0], v));
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scenario ----------------
  initial begin
    logic [63:0] w[$];
    logic [31:0] r;
    int expc, wr0;
    logic [63:0] gap;
    h_awvalid[0] = 0; h_wvalid[0] = 0; h_bready[0] = 0; h_arvalid[0] = 0; h_rready[0] = 0;
    h_awaddr[0] = 0; h_araddr[0] = 0; h_wdata[0] = 0;
    for (int i = 0; i < 4096; i++) u_dm.mem[i] = {32'hA5A5_0000, 32'(i)} ^ 64'(i * 64'h9E37_79B9_7F4A_7C15);
    repeat (5) @(negedge clk);
    rst_n = 1;
    expc = 0;

    // 1. local Short 0 -> 0: handler event for the destination and one for the reply
    put(kq, '{H(AM_SHORT, 8'h0, 0, 0, 0)}, 0);
    expc += 2; wait_count(expc, "local Short");

    // 2. local Medium FIFO 0 -> 0 with 3 words: straight back to the kernel
    w = '{H(AM_MEDIUM_FIFO, 8'h0, 0, 0, 3), 64'h11, 64'h22, 64'h33};
    put(kq, w, 0);
    expect_kern(w, "local Medium FIFO");
    expc += 1; wait_count(expc, "local Medium FIFO reply");

    // 3. Short 0 -> 5, then the remote node's reply
    put(kq, '{H(AM_SHORT, 8'h0, 0, 5, 0)}, 5);
    expect_remote('{H(AM_SHORT, 8'h0, 0, 5, 0)}, 5, "remote Short");
    put(nq, '{H(AM_SHORT, 8'h3, 5, 0, 0)}, 0);
    expc += 1; wait_count(expc, "reply from remote");

    // 4. Medium 0 -> 5, payload read from memory words 100..103
    put(kq, '{H(AM_MEDIUM, 8'h0, 0, 5, 4), 64'(100 * 8)}, 5);
    expect_remote('{H(AM_MEDIUM, 8'h0, 0, 5, 4), u_dm.mem[100], u_dm.mem[101], u_dm.mem[102], u_dm.mem[103]},
                  5, "Medium from memory");

    // 5. Long FIFO 0 -> 5
    put(kq, '{H(AM_LONG_FIFO, 8'h0, 0, 5, 2), 64'(64 * 8), 64'hBEEF1, 64'hBEEF2}, 5);
    expect_remote('{H(AM_LONG_FIFO, 8'h0, 0, 5, 2), 64'(64 * 8), 64'hBEEF1, 64'hBEEF2}, 5, "Long FIFO out");

    // 6. Long 0 -> 0: read words 100..104, loop back, write to 200..204, event and reply
    put(kq, '{H(AM_LONG, 8'h0, 0, 0, 5), 64'(100 * 8), 64'(200 * 8)}, 0);
    expc += 2; wait_count(expc, "local Long via network");
    for (int i = 0; i < 5; i++) check(u_dm.mem[200 + i] == u_dm.mem[100 + i], $sformatf("Long copy word %0d", i));

    // 7. Long FIFO 5 -> 0 from the network: written to 300..302, event, reply to 5
    put(nq, '{H(AM_LONG_FIFO, 8'h0, 5, 0, 3), 64'(300 * 8), 64'hC1, 64'hC2, 64'hC3}, 0);
    expect_remote('{H(AM_SHORT, 8'h3, 0, 5, 0)}, 5, "reply to remote Long FIFO");
    expc += 1; wait_count(expc, "remote Long FIFO event");
    check(u_dm.mem[300] == 64'hC1 && u_dm.mem[301] == 64'hC2 && u_dm.mem[302] == 64'hC3, "Long FIFO data in memory");

    // 8. Medium FIFO 5 -> 0: to the kernel, reply to 5
    w = '{H(AM_MEDIUM_FIFO, 8'h0, 5, 0, 2), 64'hD1, 64'hD2};
    put(nq, w, 0);
    expect_kern(w, "remote Medium FIFO");
    expect_remote('{H(AM_SHORT, 8'h3, 0, 5, 0)}, 5, "reply to remote Medium FIFO");

    // 9. Medium get from 5: answered with an asynchronous Medium from words 100..102
    put(nq, '{H(AM_MEDIUM_GET, 8'h0, 5, 0, 3), 64'(100 * 8)}, 0);
    expect_remote('{H(AM_MEDIUM, 8'h1, 0, 5, 3), u_dm.mem[100], u_dm.mem[101], u_dm.mem[102]}, 5, "Medium get answer");

    // 10. Long get from 5: answered with an asynchronous Long to its address 4000
    put(nq, '{H(AM_LONG_GET, 8'h0, 5, 0, 2), 64'(110 * 8), 64'd4000}, 0);
    expect_remote('{H(AM_LONG, 8'h1, 0, 5, 2), 64'd4000, u_dm.mem[110], u_dm.mem[111]}, 5, "Long get answer");

    // 10a. Strided Long 5 -> 0: 3 blocks of 2 words, 4 words apart, from word 1000
    wr0 = u_dm.writes;
    gap = u_dm.mem[1002];
    put(nq, '{H(AM_LONG_STRIDED, 8'h0, 5, 0, 6), 64'(1000 * 8), {32'd32, 16'd2, 16'd3},
              64'hE1, 64'hE2, 64'hE3, 64'hE4, 64'hE5, 64'hE6}, 0);
    expect_remote('{H(AM_SHORT, 8'h3, 0, 5, 0)}, 5, "reply to remote Strided Long");
    expc += 1; wait_count(expc, "remote Strided Long event");
    for (int b = 0; b < 3; b++)
      check(u_dm.mem[1000 + 4 * b] == 64'(8'hE1 + 2 * b) && u_dm.mem[1001 + 4 * b] == 64'(8'hE2 + 2 * b),
            $sformatf("Strided block %0d in memory", b));
    check(u_dm.mem[1002] == gap, "Strided gap untouched");
    n_seg_wr += u_dm.writes - wr0;

    // 10b. Vectored Long 5 -> 0: 2 words to 1100, 1 word to 1200
    wr0 = u_dm.writes;
    put(nq, '{H(AM_LONG_VECTORED, 8'h0, 5, 0, 3), {32'(1100 * 8), 16'd2, 16'd0}, 64'hF1, 64'hF2,
              {32'(1200 * 8), 16'd1, 16'd0}, 64'hF3}, 0);
    expect_remote('{H(AM_SHORT, 8'h3, 0, 5, 0)}, 5, "reply to remote Vectored Long");
    expc += 1; wait_count(expc, "remote Vectored Long event");
    check(u_dm.mem[1100] == 64'hF1 && u_dm.mem[1101] == 64'hF2 && u_dm.mem[1200] == 64'hF3,
          "Vectored segments in memory");
    n_seg_wr += u_dm.writes - wr0;

    // 10c. Strided Long 0 -> 0 from the kernel: through the network and back, 2 blocks
    put(kq, '{H(AM_LONG_STRIDED, 8'h0, 0, 0, 2), 64'(1300 * 8), {32'd24, 16'd1, 16'd2}, 64'hA1, 64'hA2}, 0);
    expc += 2; wait_count(expc, "local Strided Long via network");
    check(u_dm.mem[1300] == 64'hA1 && u_dm.mem[1303] == 64'hA2, "looped-back Strided blocks in memory");

    // 11. asynchronous Short 5 -> 0: event, no reply
    put(nq, '{H(AM_SHORT, 8'h1, 5, 0, 0)}, 0);
    expc += 1; wait_count(expc, "async Short");
    repeat (50) @(negedge clk);
    check(n_remote == rem_pkt, "no reply to an asynchronous message");

    // 12. handler register over AXI-Lite: read, consume, read
    axil_read(r);
    check(r == 32'(expc), $sformatf("AXI-Lite count %0d, expected %0d", r, expc));
    axil_sub(32'(expc - 1));
    axil_read(r);
    check(r == 32'd1, "AXI-Lite count after subtract");
    expc = 1;

    // 13. contention: kernel Long FIFOs out while remote Shorts ask for replies
    for (int i = 0; i < 8; i++) begin
      put(kq, '{H(AM_LONG_FIFO, 8'h1, 0, 5, 2), 64'(i * 8), 64'(i), 64'(i + 100)}, 5);
      put(nq, '{H(AM_SHORT, 8'h0, 5, 0, 0)}, 0);
    end
    expc += 8; wait_count(expc, "burst events");
    wait_for(n_remote, rem_pkt + 16, "burst packets");
    begin
      int longs = 0, replies = 0;
      for (int p = rem_pkt; p < rem_len.size(); p++) begin
        logic [63:0] h;
        h = rem_w[rem_pos];
        if (rem_len[p] == 4 && h == H(AM_LONG_FIFO, 8'h1, 0, 5, 2) && rem_w[rem_pos + 3] == rem_w[rem_pos + 2] + 100) longs++;
        if (rem_len[p] == 1 && h == H(AM_SHORT, 8'h3, 0, 5, 0)) replies++;
        rem_pos += rem_len[p];
      end
      rem_pkt = rem_len.size();
      check(longs == 8, $sformatf("burst: %0d intact Long FIFO packets", longs));
      check(replies == 8, $sformatf("burst: %0d replies", replies));
    end

    // mechanism coverage
    $display("mechanisms: local_events=%0d local_kernel_beats=%0d mem_reads=%0d mem_writes=%0d segment_writes=%0d held_cycles=%0d",
             n_local_ev, n_local_k, u_dm.reads, u_dm.writes, n_seg_wr, n_hold);
    $display("            replies_sent=%0d rx_events=%0d loopback_pkts=%0d remote_pkts=%0d arb_conflicts=%0d net_backpressure=%0d",
             n_reply_out, n_ev_rx, n_loop, n_remote, n_conflict, n_net_bp);
    check(n_local_ev > 0, "mechanism: local Short/Medium FIFO delivery");
    check(n_local_k > 0, "mechanism: local payload to To-Kernels");
    check(u_dm.reads >= 4, "mechanism: memory reads");
    check(u_dm.writes >= 2, "mechanism: memory writes");
    check(n_hold > 0, "mechanism: header held until write completes");
    check(n_seg_wr == 5, $sformatf("mechanism: one write per Strided/Vectored segment (%0d)", n_seg_wr));
    check(n_reply_out > 0, "mechanism: reply generation");
    check(n_loop > 0, "mechanism: loopback through the network");
    check(n_conflict > 0, "mechanism: arbitration conflict at am_tx");
    check(n_net_bp > 0, "mechanism: network back-pressure");
    check(n_tuser > 0, "mechanism: size on TUSER");
    check(!u_dm.wr_last_err, "write-data last flag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
