// tb_output_buffer: writes groups of R = 8 FP32 rows (random masks) at random
// R-aligned row addresses of the default 16384-row buffer, then reads every
// touched row back one per clock and checks it, including rows left out by
// the mask, which must keep their old contents.
module tb_output_buffer;
  localparam int R = 8, PE_W = 128, ROWS = 16384, AW = 14;
  logic clk = 0, rst_n = 0, we = 0, re = 0, rvalid;
  logic [R-1:0] wmask = '0;
  logic [AW-1:0] wrow = 0, raddr = 0;
  logic [R-1:0][PE_W-1:0][31:0] wdata = '0;
  logic [PE_W-1:0][31:0] rdata;
  int checks = 0, failures = 0;
  logic [PE_W-1:0][31:0] model [int];

  output_buffer #(.R(R), .PE_W(PE_W), .ROWS(ROWS)) dut (.*);

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
    // first pass: full groups; second pass: random masks over the same groups
    for (int pass = 0; pass < 2; pass++) begin
      for (int n = 0; n < 40; n++) begin
        int g;
        @(negedge clk);
        g = (n * 97 + 5) % (ROWS / R);
        we = 1; wrow = AW'(g * R);
        wmask = (pass == 0) ? '1 : R'($urandom);
        for (int r = 0; r < R; r++) begin
          for (int j = 0; j < PE_W; j++) wdata[r][j] = $urandom;
          if (wmask[r]) model[g * R + r] = wdata[r];
        end
      end
    end
    @(negedge clk);
    we = 0;
    foreach (model[a]) begin
      @(negedge clk);
      re = 1; raddr = AW'(a);
      @(posedge clk);
      #1;
      checks += 2;
      if (!rvalid) begin failures++; $display("FAIL rvalid"); end
      if (rdata !== model[a]) begin failures++; $display("FAIL row %0d", a); end
    end
    re = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
