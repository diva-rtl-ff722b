// tb_vector_queue: random push/pop traffic against a queue model. Checks the
// head vector, empty, full and afull (fewer than two free entries) every
// cycle, and that a pushed vector is visible at the head one cycle later.
module tb_vector_queue;
  localparam int LANES = 4, DEPTH = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [LANES-1:0][15:0] din, dout;
  logic empty, full, afull;
  int checks = 0, failures = 0;
  logic [LANES-1:0][15:0] model [$];

  vector_queue #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full  == (model.size() == DEPTH), "full");
      chk(afull == (model.size() > DEPTH - 2), "afull");
      if (model.size() > 0) chk(dout == model[0], "head data");
      push = (model.size() < DEPTH) && ($urandom % 3 != 0);
      pop  = (model.size() > 0) && ($urandom % (t < 1500 ? 4 : 2) == 0);
      for (int l = 0; l < LANES; l++) din[l] = 16'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
