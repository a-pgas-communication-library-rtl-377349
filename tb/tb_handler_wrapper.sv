// tb_handler_wrapper: three kernels with IDs 4, 5 and 6. Random events for IDs 3..8
// must increment only the matching handler (3, 7, 8 are not local and are dropped).
// Each handler's AXI-Lite port is then read and one of them is decremented through
// its own port without touching the others.
module tb_handler_wrapper;
  import shoal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N = 3, BASE = 4;
  logic ev_valid = 0, ev_ready;
  logic [KID_W-1:0] ev_kid = 0;
  logic [31:0] count [N];
  logic awvalid [N], awready [N], wvalid [N], wready [N], bvalid [N], bready [N];
  logic arvalid [N], arready [N], rvalid [N], rready [N];
  logic [3:0] awaddr [N], araddr [N];
  logic [31:0] wdata [N], rdata [N];
  logic [1:0] bresp [N], rresp [N];
  handler_wrapper #(.KERNEL_BASE(BASE), .NUM_KERNELS(N)) dut (.*);

  int model [N] = '{0, 0, 0};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) begin
      awvalid[k] = 0; wvalid[k] = 0; bready[k] = 1; arvalid[k] = 0; rready[k] = 1;
      awaddr[k] = 0; araddr[k] = 0; wdata[k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      ev_valid = $urandom_range(0, 1);
      ev_kid   = KID_W'($urandom_range(3, 8));
      #1;
      check(ev_ready, "always ready");
      if (ev_valid && ev_kid >= BASE && ev_kid < BASE + N) model[ev_kid - BASE]++;
    end
    @(negedge clk); ev_valid = 0;
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      check(count[k] == 32'(model[k]), $sformatf("count[%0d] %0d model %0d", k, count[k], model[k]));
      @(negedge clk); arvalid[k] = 1;
      @(negedge clk); arvalid[k] = 0; #1;
      check(rvalid[k] && rdata[k] == 32'(model[k]), $sformatf("AXI-Lite read of kernel %0d", k));
    end
    @(negedge clk); awvalid[1] = 1; wvalid[1] = 1; wdata[1] = 32'd10;
    @(negedge clk); awvalid[1] = 0; wvalid[1] = 0;
    @(negedge clk);
    check(count[1] == 32'(model[1] - 10), "write to kernel 1 subtracts");
    check(count[0] == 32'(model[0]) && count[2] == 32'(model[2]), "other kernels untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
