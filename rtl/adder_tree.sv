// adder_tree: pipelined binary adder tree.
//
// Sums N signed inputs. Inputs are paired level by level and every level is
// registered, so the sum appears LAT = max(1, ceil(log2 N)) clocks after the
// inputs; a new set of inputs may enter every clock. Odd inputs of a level
// are paired with zero, which plays the role of the pass-through registers
// drawn in the paper's adder trees. The paper uses the same kind of tree
// twice in a PE: over the K x K products of a kernel and over the N input
// feature maps of one output map. OW must hold the sum of N inputs of IW
// bits (IW + ceil(log2 N) bits suffice).
module adder_tree #(
  parameter int unsigned N  = 9,
  parameter int unsigned IW = 26,
  parameter int unsigned OW = 30
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);
  localparam int unsigned LAT = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP  = 1 << LAT;

  for (genvar l = 0; l <= LAT; l++) begin : g_lvl
    logic signed [OW-1:0] v [NP >> l];
    if (l == 0) begin : g_in
      always_comb
        for (int i = 0; i < NP; i++) v[i] = (i < N) ? OW'(in[i]) : '0;
    end else begin : g_add
      always_ff @(posedge clk)
        for (int i = 0; i < (NP >> l); i++) v[i] <= g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
    end
  end

  assign sum = g_lvl[LAT].v[0];
endmodule
