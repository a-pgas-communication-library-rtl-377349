// tb_xpams_tx: local kernels 2 and 3. Sends each kind of command packet with random
// input gaps and random output stalls and checks, per output (am_tx, To-Kernels,
// handler events), the exact sequence expected: local Short and Medium FIFO handled
// internally with their reply events, everything else forwarded unaltered.
module tb_xpams_tx;
  import shoal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic s_valid = 0, s_ready, m_tx_valid, m_tx_ready = 0, m_k_valid, m_k_ready = 0;
  logic m_ev_valid, m_ev_ready = 0;
  axis_t s_data = '0, m_tx_data, m_k_data;
  logic [KID_W-1:0] m_ev_kid;
  xpams_tx #(.KERNEL_BASE(2), .NUM_KERNELS(2)) dut (.*);

  axis_t q[$], exp_tx[$], exp_k[$], got_tx[$], got_k[$];
  int exp_ev[$], got_ev[$];
  bit hs = 0;

  function automatic logic [63:0] H(am_type_e t, logic [7:0] f, int src, int dst, int words);
    return 64'(make_hdr(t, f, KID_W'(src), KID_W'(dst), 16'(words)));
  endfunction
  function automatic void pkt(ref axis_t qq[$], input logic [63:0] w[$], input int dest);
    foreach (w[i]) qq.push_back('{data: w[i], last: i == w.size() - 1, dest: KID_W'(dest), user: '0});
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w[$];
    for (int rep = 0; rep < 10; rep++) begin
      pkt(q, '{H(AM_SHORT, 0, 2, 3, 0)}, 3);                  exp_ev.push_back(3); exp_ev.push_back(2);
      pkt(q, '{H(AM_SHORT, 1, 2, 3, 0)}, 3);                  exp_ev.push_back(3);
      w = '{H(AM_MEDIUM_FIFO, 0, 3, 2, 2), 64'(rep), 64'hAB};
      pkt(q, w, 2); pkt(exp_k, w, 2);                          exp_ev.push_back(3);
      w = '{H(AM_MEDIUM_FIFO, 1, 2, 2, 0)};
      pkt(q, w, 2); pkt(exp_k, w, 2);
      w = '{H(AM_SHORT, 0, 2, 9, 0)};             pkt(q, w, 9); pkt(exp_tx, w, 9);
      w = '{H(AM_MEDIUM_FIFO, 0, 2, 9, 3), 1, 2, 64'(rep)}; pkt(q, w, 9); pkt(exp_tx, w, 9);
      w = '{H(AM_LONG_FIFO, 0, 2, 3, 1), 64'h40, 7}; pkt(q, w, 3); pkt(exp_tx, w, 3);
      w = '{H(AM_MEDIUM, 0, 2, 3, 4), 64'h80};   pkt(q, w, 3); pkt(exp_tx, w, 3);
      w = '{H(AM_SHORT, 0, 2, 4, 0)};             pkt(q, w, 4); pkt(exp_tx, w, 4);   // ID 4 is not local
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (hs) void'(q.pop_front());
      if (!(s_valid && !hs)) s_valid = q.size() > 0 && $urandom_range(0, 3) != 0;
      if (q.size() > 0) s_data = q[0];
      m_tx_ready = $urandom_range(0, 2) != 0;
      m_k_ready  = $urandom_range(0, 2) != 0;
      m_ev_ready = $urandom_range(0, 2) != 0;
      #1;
      hs = s_valid && s_ready;
      if (m_tx_valid && m_tx_ready) got_tx.push_back(m_tx_data);
      if (m_k_valid && m_k_ready)   got_k.push_back(m_k_data);
      if (m_ev_valid && m_ev_ready) got_ev.push_back(int'(m_ev_kid));
    end
    check(got_tx.size() == exp_tx.size(), $sformatf("am_tx beats %0d/%0d", got_tx.size(), exp_tx.size()));
    check(got_k.size() == exp_k.size(), $sformatf("kernel beats %0d/%0d", got_k.size(), exp_k.size()));
    check(got_ev.size() == exp_ev.size(), $sformatf("events %0d/%0d", got_ev.size(), exp_ev.size()));
    foreach (got_tx[i]) if (i < exp_tx.size()) check(got_tx[i] == exp_tx[i], $sformatf("am_tx beat %0d", i));
    foreach (got_k[i])  if (i < exp_k.size())  check(got_k[i] == exp_k[i], $sformatf("kernel beat %0d", i));
    foreach (got_ev[i]) if (i < exp_ev.size()) check(got_ev[i] == exp_ev[i], $sformatf("event %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
