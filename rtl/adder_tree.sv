// adder_tree: pipelined binary FP32 adder tree, the reduction core of the PPU.
//
// N = 2^L inputs are summed in L levels of two-input FP32 adders; level l
// adds neighbouring pairs (2i, 2i+1) of the previous level's results. A
// register follows every level, so a new vector can enter each clock and its
// sum appears L clocks later (7 clocks for N = 128), with out_valid marking
// it. The tree shape and its log2(N) depth follow the paper; one register per
// level and the pairing order are this design's choices.
module adder_tree #(
  parameter int unsigned N = 128,
  localparam int unsigned L = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N-1:0][31:0] in_vec,
  output logic              out_valid,
  output logic [31:0]       sum
);
  import fp_pkg::*;

  // level l holds N >> l partial sums; level 0 is the input
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    logic [(N >> l)-1:0][31:0] v;
    logic                      vld;
    if (l == 0) begin : g_in
      assign v   = in_vec;
      assign vld = in_valid;
    end else begin : g_add
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_lvl[l-1].vld;
      end
      always_ff @(posedge clk) begin
        for (int i = 0; i < int'(N >> l); i++)
          v[i] <= fp32_add(g_lvl[l-1].v[2*i], g_lvl[l-1].v[2*i+1]);
      end
    end
  end

  assign out_valid = g_lvl[L].vld;
  assign sum       = g_lvl[L].v[0];

  initial assert (N == (1 << L)) else $error("adder_tree: N must be a power of two");

endmodule
