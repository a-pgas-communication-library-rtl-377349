// tb_axis_fifo: checks axis_fifo (depth 5, not a power of two) against a queue model.
// Random valid and ready; checks data order, that in_ready falls exactly when five
// entries are held, and that out_valid falls when empty.
module tb_axis_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int D = 5;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  axis_fifo #(.WIDTH(16), .DEPTH(D)) dut (.*);

  logic [15:0] model[$];
  bit hs = 0;
  int sent = 0, got = 0, full_seen = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (!(in_valid && !hs)) begin
        in_valid = $urandom_range(0, 2) != 0 && sent < 1000;
        in_data  = 16'($urandom);
      end
      out_ready = (cyc < 300) ? ($urandom_range(0, 5) == 0) : ($urandom_range(0, 2) != 0);
      #1;
      check(in_ready == (model.size() < D), "in_ready matches occupancy");
      check(out_valid == (model.size() > 0), "out_valid matches occupancy");
      if (model.size() == D) full_seen++;
      if (out_valid && out_ready) begin
        check(out_data == model[0], "data order");
        void'(model.pop_front());
        got++;
      end
      hs = in_valid && in_ready;
      if (hs) begin
        model.push_back(in_data);
        sent++;
      end
    end
    check(got > 900, "throughput");
    check(full_seen > 0, "FIFO filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
