// tb_axis_arb: two random packet sources into axis_arb. Checks that packets never
// interleave, that each source's beats come out in order, and that when both inputs
// wait for a new packet the grant alternates (round robin).
module tb_axis_arb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // beat: [16] last, [15] source, [14:0] sequence number
  logic [1:0]  in_valid = 0, in_ready;
  logic [16:0] in_data [2];
  logic        out_valid, out_ready = 0;
  logic [16:0] out_data;
  axis_arb #(.WIDTH(17), .LAST_BIT(16)) dut (.*);

  int seq [2] = '{0, 0};
  int left [2] = '{0, 0};
  int exp_seq [2] = '{0, 0};
  bit hs [2] = '{0, 0};
  int cur_src = -1, last_src = -1, alt_ok = 0, alt_seen = 0, pkts = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data[0] = 0; in_data[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < 2; s++) begin
        if (!(in_valid[s] && !hs[s])) begin
          if (left[s] == 0) left[s] = $urandom_range(1, 4);
          in_valid[s] = (cyc > 2000) ? 1'b1 : ($urandom_range(0, 2) != 0);
          in_data[s]  = {left[s] == 1, 1'(s), 15'(seq[s])};
        end
      end
      out_ready = $urandom_range(0, 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        int s;
        s = int'(out_data[15]);
        if (cur_src == -1) begin
          // first beat of a packet: with both inputs saturated the grant alternates
          if (cyc > 2010) begin
            alt_seen++;
            if (s != last_src) alt_ok++;
          end
          cur_src = s;
        end
        check(s == cur_src, "no interleaving inside a packet");
        check(int'(out_data[14:0]) == exp_seq[s], "per-source order");
        exp_seq[s]++;
        if (out_data[16]) begin last_src = s; cur_src = -1; pkts++; end
      end
      for (int s = 0; s < 2; s++) begin
        hs[s] = in_valid[s] && in_ready[s];
        if (hs[s]) begin seq[s]++; left[s]--; end
      end
    end
    check(pkts > 500, "packets delivered");
    check(alt_seen > 50 && alt_ok == alt_seen, $sformatf("round robin %0d/%0d", alt_ok, alt_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
