// tb_transpose_unit: in transpose mode writes a random tile of n rows
// (n = 128 and n = 37), reads all 128 columns and checks that column c holds
// element c of every written row and zero for rows never written after the
// clear; also checks the one-clock column latency and, in pass-through mode,
// that vectors appear unchanged in the same clock.
module tb_transpose_unit;
  localparam int LANES = 128, IW = 7;
  logic clk = 0, rst_n = 0, clear = 0, mode_tr = 0, in_valid = 0, col_req = 0, out_valid;
  logic [LANES-1:0][15:0] in_vec = '0, out_vec;
  logic [IW-1:0] col_idx = 0;
  int checks = 0, failures = 0;

  transpose_unit #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(input int n);
    logic [15:0] T [LANES][LANES];
    @(negedge clk);
    clear = 1; mode_tr = 1;
    @(negedge clk);
    clear = 0;
    for (int r = 0; r < n; r++) begin
      for (int l = 0; l < LANES; l++) begin
        T[r][l] = 16'($urandom);
        in_vec[l] = T[r][l];
      end
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    for (int r = n; r < LANES; r++) for (int l = 0; l < LANES; l++) T[r][l] = '0;
    for (int c = 0; c < LANES; c++) begin
      col_req = 1; col_idx = IW'(c);
      @(posedge clk);
      #1;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      for (int r = 0; r < LANES; r++)
        if (out_vec[r] !== T[r][c]) begin
          failures++;
          $display("FAIL n=%0d col %0d row %0d", n, c, r);
          break;
        end
      @(negedge clk);
    end
    col_req = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    tile(128);
    tile(37);
    // pass-through
    @(negedge clk);
    mode_tr = 0;
    for (int n = 0; n < 10; n++) begin
      for (int l = 0; l < LANES; l++) in_vec[l] = 16'($urandom);
      in_valid = n[0];
      #1;
      checks += 2;
      if (out_valid !== in_valid) begin failures++; $display("FAIL pass valid"); end
      if (out_vec !== in_vec) begin failures++; $display("FAIL pass data"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
