// tb_ppu: feeds the default PPU (R = 8 rows of 128 FP32 values per beat) with
// three per-example gradient tiles of 16, 16 and 5 beats, one beat per clock
// with in_first on each example's first beat, and checks the squared norm
// against a reference (square, per-row pairwise tree, tree over the R row
// sums, running accumulation). Also checks that the result is complete and
// busy falls 1 + 7 + 3 + 1 = 12 clocks after the last beat, and that a new
// example replaces rather than adds to the previous norm.
module tb_ppu;
  import tb_fp_pkg::*;
  localparam int R = 8, PE_W = 128, LAT = 1 + 7 + 3;

  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, busy;
  logic [R-1:0][PE_W-1:0][31:0] in_rows = '0;
  logic [31:0] norm_sq;
  int checks = 0, failures = 0;

  ppu #(.R(R), .PE_W(PE_W)) dut (.*);

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

  task automatic example(input int beats, input bit gap);
    logic [31:0] acc, tot;
    logic [31:0] sq [];
    logic [31:0] rs [];
    int lat;
    sq = new[PE_W];
    rs = new[R];
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      if (gap && b == 2) begin
        in_valid = 0;
        @(negedge clk);
      end
      for (int r = 0; r < R; r++) begin
        for (int j = 0; j < PE_W; j++) begin
          in_rows[r][j] = rand_fp32(105, 135);
          sq[j] = ref_mul(in_rows[r][j], in_rows[r][j]);
        end
        rs[r] = ref_tree(sq, PE_W);
      end
      tot = ref_tree(rs, R);
      acc = (b == 0) ? tot : ref_add(acc, tot);
      in_valid = 1;
      in_first = (b == 0);
    end
    @(negedge clk);
    in_valid = 0;
    in_first = 0;
    lat = 0;
    do begin
      @(posedge clk);
      #1;
      lat++;
    end while (busy && lat < 100);
    chk(lat + 1 == LAT + 1, $sformatf("result %0d clocks after last beat", lat + 1));
    checks++;
    if (norm_sq !== acc) begin
      failures++;
      $display("FAIL norm_sq got %h exp %h", norm_sq, acc);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    example(16, 0);
    example(16, 1);
    example(5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
