// tb_xpams_rx: feeds every kind of packet that leaves the hold_buffer (local kernel 2,
// remote kernel 9) with random gaps and stalls, and checks the exact sequences on the
// three outputs: handler events, To-Kernels beats, and replies and get answers to
// am_tx (headers built independently here). Unknown types must vanish.
module tb_xpams_rx;
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
  xpams_rx dut (.*);

  axis_t q[$], exp_tx[$], exp_k[$], got_tx[$], got_k[$];
  int exp_ev[$], got_ev[$];
  bit hs = 0;

  // header word built bit by bit, independently of the package function
  function automatic logic [63:0] H(int t, int f, int src, int dst, int words);
    return {16'(words), 16'(dst), 16'(src), 8'(f), 8'(t)};
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
    logic [63:0] reply;
    reply = H(1, 3, 2, 9, 0);
    for (int rep = 0; rep < 10; rep++) begin
      pkt(q, '{H(1, 3, 9, 2, 0)}, 2);                    exp_ev.push_back(2);              // a reply
      pkt(q, '{H(1, 0, 9, 2, 0)}, 2);                    exp_ev.push_back(2); pkt(exp_tx, '{reply}, 9);
      pkt(q, '{H(1, 1, 9, 2, 0)}, 2);                    exp_ev.push_back(2);              // async
      pkt(q, '{H(5, 0, 9, 2, 6)}, 2);                    exp_ev.push_back(2); pkt(exp_tx, '{reply}, 9);
      pkt(q, '{H(4, 1, 9, 2, 6)}, 2);                    exp_ev.push_back(2);
      w = '{H(2, 0, 9, 2, 2), 64'(rep), 64'h77};
      pkt(q, w, 2); pkt(exp_k, w, 2);                    pkt(exp_tx, '{reply}, 9);
      w = '{H(3, 1, 9, 2, 1), 64'h99};
      pkt(q, w, 2); pkt(exp_k, w, 2);
      pkt(q, '{H(6, 0, 9, 2, 4), 64'h100}, 2);           pkt(exp_tx, '{H(3, 1, 2, 9, 4), 64'h100}, 9);
      pkt(q, '{H(7, 0, 9, 2, 2), 64'h200, 64'h300}, 2);  pkt(exp_tx, '{H(5, 1, 2, 9, 2), 64'h200, 64'h300}, 9);
      pkt(q, '{H(8'h55, 0, 9, 2, 1), 64'h1}, 2);                                          // unknown
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
