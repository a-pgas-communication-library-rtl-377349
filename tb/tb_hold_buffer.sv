// tb_hold_buffer: checks that a held beat and everything behind it wait until a
// release arrives, that untagged beats pass freely, that releases given before the
// held beat arrives are remembered, and that order is kept.
module tb_hold_buffer;
  import shoal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic s_valid = 0, s_ready, s_held = 0, release_i = 0, m_valid, m_ready = 1;
  axis_t s_data = '0, m_data;
  hold_buffer #(.DEPTH(16)) dut (.*);

  logic [63:0] got[$];

  always @(negedge clk) begin
    #1;
    if (m_valid && m_ready) got.push_back(m_data.data);
  end

  task automatic push(logic [63:0] d, bit held);
    @(negedge clk);
    s_valid = 1; s_data = '{data: d, last: 1'b1, dest: '0, user: '0}; s_held = held;
    #1; while (!s_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_valid = 0; s_held = 0;
  endtask

  task automatic pulse;
    @(negedge clk); release_i = 1;
    @(negedge clk); release_i = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    push(64'h1, 0);
    repeat (3) @(negedge clk);
    check(got.size() == 1 && got[0] == 64'h1, "untagged beat passes");
    push(64'h2, 1);          // held header
    push(64'h3, 0);          // waits behind it
    repeat (10) @(negedge clk);
    check(got.size() == 1, "held beat and its successor wait");
    pulse();
    repeat (5) @(negedge clk);
    check(got.size() == 3 && got[1] == 64'h2 && got[2] == 64'h3, "released in order");
    pulse(); pulse();        // two early releases
    push(64'h4, 1);
    push(64'h5, 1);
    push(64'h6, 1);
    repeat (10) @(negedge clk);
    check(got.size() == 5 && got[3] == 64'h4 && got[4] == 64'h5, "early releases are remembered");
    pulse();
    repeat (5) @(negedge clk);
    check(got.size() == 6 && got[5] == 64'h6, "third held beat after third release");
    // back-pressure: nothing lost while the output is stalled
    m_ready = 0;
    for (int i = 0; i < 8; i++) push(64'(100 + i), 0);
    repeat (5) @(negedge clk);
    check(got.size() == 6, "stalled output holds data");
    m_ready = 1;
    repeat (15) @(negedge clk);
    check(got.size() == 14, "all stalled beats delivered");
    for (int i = 0; i < 8 && got.size() == 14; i++) check(got[6 + i] == 64'(100 + i), "stalled order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
