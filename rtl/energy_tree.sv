// energy_tree: pipelined binary adder tree.
//
// Adds N unsigned inputs of W bits every clock. The inputs are padded with
// zeros to the next power of two and reduced pairwise, one tree level per
// pipeline stage, so the sum of the inputs presented with `in_valid` appears
// LEVELS = ceil(log2 N) clocks later with `sum_valid`. A new set of inputs can
// be accepted every clock. The paper uses such a tree to add up to 1024 local
// energies per clock during the energy sweep of parallel tempering; the
// one-level-per-stage pipelining is this design's choice.
module energy_tree #(
  parameter int unsigned N  = 400,
  parameter int unsigned W  = 3,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NP     = 1 << LEVELS,
  localparam int unsigned OW     = W + LEVELS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][W-1:0] in,
  output logic                sum_valid,
  output logic [OW-1:0]       sum
);

  // lvl[k] holds the partial sums after k additions; level k uses NP >> k entries
  logic [OW-1:0]     lvl [LEVELS+1][NP];
  logic [LEVELS-1:0] vld;

  always_comb begin
    for (int i = 0; i < int'(NP); i++)
      lvl[0][i] = (i < int'(N)) ? OW'(in[i]) : '0;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < int'(LEVELS); k++)
      for (int i = 0; i < int'(NP); i++)
        if (i < int'(NP >> (k + 1))) lvl[k+1][i] <= lvl[k][2*i] + lvl[k][2*i+1];
        else                         lvl[k+1][i] <= '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld[0] <= in_valid;
      for (int k = 1; k < int'(LEVELS); k++) vld[k] <= vld[k-1];
    end
  end

  assign sum       = lvl[LEVELS][0];
  assign sum_valid = vld[LEVELS-1];

endmodule
