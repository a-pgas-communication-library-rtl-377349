// tb_handler: drives random handler events and AXI-Lite accesses and compares the
// count with a model: events add one each, a write to offset 0 subtracts its data
// (also in a cycle with an event), other offsets read zero. Checks the AXI-Lite
// handshake: responses come one cycle after the address and stay until taken.
module tb_handler;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic event_i = 0;
  logic [31:0] count;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [3:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  handler dut (.*);

  int model = 0;
  bit ev_on = 0;

  // free-running random events, counted into the model at each rising edge
  always @(negedge clk) begin
    event_i = ev_on && $urandom_range(0, 2) == 0;
  end
  always @(posedge clk) if (rst_n && event_i) model++;

  task automatic rd(input logic [3:0] a, output logic [31:0] d, output int snap);
    @(negedge clk); arvalid = 1; araddr = a;
    #1; check(arready, "arready when idle");
    snap = model;     // value before this edge's events
    @(negedge clk); arvalid = 0;
    #1; check(rvalid, "read data one cycle after the address");
    d = rdata;
    repeat ($urandom_range(0, 3)) begin @(negedge clk); #1; check(rvalid && rdata == d, "read data held until taken"); end
    rready = 1;
    @(negedge clk); rready = 0;
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] v);
    @(negedge clk); awvalid = 1; wvalid = 1; awaddr = a; wdata = v;
    #1; check(awready && wready, "write accepted when idle");
    @(posedge clk); #1;
    if (a == 4'h0) model -= int'(v);
    @(negedge clk); awvalid = 0; wvalid = 0;
    #1; check(bvalid && bresp == 2'b00, "write response");
    repeat ($urandom_range(0, 2)) begin @(negedge clk); #1; check(bvalid, "bvalid held"); end
    bready = 1;
    @(negedge clk); bready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int snap;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(4'h0, d, snap);
    check(d == 0, "count is zero after reset");
    ev_on = 1;
    for (int i = 0; i < 200; i++) begin
      repeat ($urandom_range(0, 6)) @(negedge clk);
      case ($urandom_range(0, 3))
        0, 1: begin
          rd(4'h0, d, snap);
          check(d == 32'(snap), $sformatf("count %0d, model %0d", d, snap));
        end
        2: begin
          @(negedge clk); #1;
          if (model > 0) wr(4'h0, 32'($urandom_range(0, model)));
        end
        default: begin
          rd(4'h4, d, snap);
          check(d == 0, "other offsets read zero");
          wr(4'h8, 32'd5);   // ignored
        end
      endcase
    end
    ev_on = 0;
    repeat (3) @(negedge clk);
    check(count == 32'(model), $sformatf("final count %0d model %0d", count, model));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
