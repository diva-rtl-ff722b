// tb_input_buffer: writes random lines at random addresses of the default
// 16384-line buffer, then reads them back and checks data, the one-clock
// read latency (rvalid) and that a simultaneous write to another line does
// not disturb a read.
module tb_input_buffer;
  localparam int LANES = 128, DEPTH = 16384, AW = 14;
  logic clk = 0, rst_n = 0, we = 0, re = 0, rvalid;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [LANES-1:0][15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [LANES-1:0][15:0] model [int];
  int addrs [$];

  input_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int a;
      @(negedge clk);
      a = (n < 2) ? (n == 0 ? 0 : DEPTH - 1) : int'($urandom % DEPTH);
      we = 1; waddr = AW'(a);
      for (int l = 0; l < LANES; l++) wdata[l] = 16'($urandom);
      model[a] = wdata;
      addrs.push_back(a);
    end
    @(negedge clk);
    we = 0;
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 1; raddr = AW'(addrs[i]);
      we = 1; waddr = AW'(addrs[i] ^ 1);       // write a neighbour meanwhile
      wdata = '1;
      model[addrs[i] ^ 1] = '1;
      @(posedge clk);
      #1;
      checks += 2;
      if (!rvalid) begin failures++; $display("FAIL rvalid"); end
      if (rdata !== model[addrs[i]]) begin failures++; $display("FAIL line %0d", addrs[i]); end
    end
    @(negedge clk);
    re = 0; we = 0;
    @(posedge clk);
    #1;
    checks++;
    if (rvalid) begin failures++; $display("FAIL rvalid without re"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
