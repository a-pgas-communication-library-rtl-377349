// tb_am_tx: am_tx with the behavioural DataMover. Sends every command type with
// random gaps and stalls; checks the outgoing packets beat by beat (payload taken
// from the model's memory), the number of read commands issued, and the time from a
// Medium command to its first payload beat when nothing stalls.
module tb_am_tx;
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
  logic rdcmd_valid, rdcmd_ready, rd_valid, rd_ready;
  dm_cmd_t rdcmd, wrcmd;
  logic [63:0] rd_data;
  logic wrsts_valid, wrsts_okay, wrcmd_ready, wr_ready;
  am_tx dut (.*);
  datamover_model #(.MEM_WORDS(256), .LAT(3), .STALL(1'b1)) u_dm (
    .clk, .rst_n, .rdcmd_valid, .rdcmd_ready, .rdcmd, .rd_valid, .rd_ready, .rd_data,
    .wrcmd_valid(1'b0), .wrcmd_ready, .wrcmd('0), .wr_valid(1'b0), .wr_ready, .wr_data('0),
    .wr_last(1'b0), .wrsts_valid, .wrsts_ready(1'b1), .wrsts_okay);

  axis_t q[$], exp_b[$], got[$];
  bit hs = 0;
  int exp_reads = 0;

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
    for (int i = 0; i < 256; i++) u_dm.mem[i] = 64'h1000 + 64'(i * 7);
    for (int rep = 0; rep < 8; rep++) begin
      w = '{H(1, 0, 1, 5, 0)};                               pkt(q, w, 0); pkt(exp_b, w, 5);
      w = '{H(2, 0, 1, 5, 2), 64'(rep), 64'h5};              pkt(q, w, 0); pkt(exp_b, w, 5);
      pkt(q, '{H(3, 0, 1, 6, 3), 64'((10 + rep) * 8)}, 0);
      pkt(exp_b, '{H(3, 0, 1, 6, 3), u_dm.mem[10 + rep], u_dm.mem[11 + rep], u_dm.mem[12 + rep]}, 6);
      exp_reads++;
      pkt(q, '{H(5, 1, 1, 7, 2), 64'((20 + rep) * 8), 64'd999}, 0);
      pkt(exp_b, '{H(5, 1, 1, 7, 2), 64'd999, u_dm.mem[20 + rep], u_dm.mem[21 + rep]}, 7);
      exp_reads++;
      w = '{H(4, 0, 1, 5, 1), 64'h40, 64'h41};               pkt(q, w, 0); pkt(exp_b, w, 5);
      w = '{H(6, 0, 1, 5, 4), 64'h48};                       pkt(q, w, 0); pkt(exp_b, w, 5);
      w = '{H(7, 0, 1, 5, 4), 64'h48, 64'h50};               pkt(q, w, 0); pkt(exp_b, w, 5);
      pkt(q, '{H(8'h44, 0, 1, 5, 1), 64'h1}, 0);                                    // dropped
      pkt(q, '{H(3, 0, 1, 5, 0), 64'h8}, 0);  pkt(exp_b, '{H(3, 0, 1, 5, 0)}, 5);    // empty Medium
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if (hs) void'(q.pop_front());
      if (!(s_valid && !hs)) s_valid = q.size() > 0 && $urandom_range(0, 3) != 0;
      if (q.size() > 0) s_data = q[0];
      m_ready = $urandom_range(0, 3) != 0;
      #1;
      hs = s_valid && s_ready;
      if (m_valid && m_ready) got.push_back(m_data);
    end
    check(got.size() == exp_b.size(), $sformatf("beats %0d/%0d", got.size(), exp_b.size()));
    foreach (got[i]) if (i < exp_b.size()) check(got[i] == exp_b[i], $sformatf("beat %0d", i));
    check(u_dm.reads == exp_reads, $sformatf("read commands %0d/%0d", u_dm.reads, exp_reads));

    // latency: no stalls, Medium of 2 words. Header leaves in the cycle it arrives;
    // the first payload beat follows the DataMover latency (3) plus command cycles.
    begin
      int t0, t1, n;
      n = got.size();
      m_ready = 1;
      @(negedge clk);
      s_valid = 1; s_data = '{data: H(3, 0, 1, 5, 2), last: 1'b0, dest: '0, user: '0};
      #1; check(m_valid && m_data.data == H(3, 0, 1, 5, 2), "header passes in the same cycle");
      t0 = 0;
      @(negedge clk); s_data = '{data: 64'h0, last: 1'b1, dest: '0, user: '0};
      @(negedge clk); s_valid = 0;
      t1 = 1;
      while (!(m_valid && m_ready) && t1 < 50) begin @(negedge clk); #1; t1++; end
      $display("Medium: first payload beat %0d cycles after the address word", t1);
      check(t1 >= 3 && t1 <= 12, "read latency: DataMover latency plus command cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
