// tb_add_size: random packets (1..40 beats) through add_size with random valid and
// ready. Checks that every output beat carries its packet's length on TUSER, that
// data, last and dest are unchanged and in order, and that the first beat of a
// packet never leaves before the packet's last beat has entered (store and forward).
module tb_add_size;
  import shoal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  axis_t s_data = '0, m_data;
  add_size #(.DEPTH(64), .PKT_DEPTH(4)) dut (.*);

  axis_t q[$];          // beats to send
  axis_t exp_b[$];      // expected output beats
  int    pkt_len[$];    // length of each packet, in order
  int    in_pkts = 0, out_pkts = 0, out_pos = 0;
  bit    hs = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 120; p++) begin
      int n;
      n = (p % 10 == 0) ? 1 : $urandom_range(1, 40);
      pkt_len.push_back(n);
      for (int i = 0; i < n; i++) begin
        axis_t b;
        b.data = {16'(p), 16'(i), 32'($urandom)};
        b.last = i == n - 1;
        b.dest = 16'(p * 3);
        b.user = 16'hFFFF;     // must be replaced
        q.push_back(b);
        b.user = 16'(n);
        exp_b.push_back(b);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (out_pos < exp_b.size()) begin
      @(negedge clk);
      if (hs) void'(q.pop_front());
      if (!(s_valid && !hs)) s_valid = q.size() > 0 && $urandom_range(0, 3) != 0;
      if (q.size() > 0) s_data = q[0];
      m_ready = $urandom_range(0, 3) != 0;
      #1;
      hs = s_valid && s_ready;
      if (hs && s_data.last) in_pkts++;
      if (m_valid && m_ready) begin
        check(m_data == exp_b[out_pos], $sformatf("beat %0d", out_pos));
        if (out_pos == 0 || exp_b[out_pos - 1].last)
          check(in_pkts > out_pkts || (hs && s_data.last && in_pkts == out_pkts + 1),
                "packet complete before it is sent");
        if (m_data.last) out_pkts++;
        out_pos++;
      end
    end
    check(out_pkts == 120, "all packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
