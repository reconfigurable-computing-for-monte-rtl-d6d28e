// lattice_bank: one bank of lattice bits (a spin bank P or Q, or one direction
// of the coupling memory).
//
// A word holds R lattice rows of L bits: the R rows y = yb*R .. yb*R+R-1 of
// plane z. On the FPGA this is R block RAMs of width L driven by one common
// address; here it is one array of R x L bit words. Word address is
// (pair*NYB + yb)*L + z, with NYB = L/R blocks of rows per plane; a
// parallel-tempering run stores further pairs of systems deeper in the bank.
//
// Interface: NRD read ports, each with a registered (one-clock) read, and one
// write port with a per-row mask so that the host can write single rows while
// the update pipeline writes whole words. Reads and writes to the same word in
// the same clock return the old data. Contents are not reset.
//
// The paper gives the 80-bit width, the 10 memories and the 10-bit address of
// the L = 80 case; the several read ports (own word, planes z-1, z, z+1 and the
// two halo rows of the neighbouring row blocks) are this design's way of
// fetching every neighbour of a word in one clock.
module lattice_bank #(
  parameter int unsigned L     = 80,
  parameter int unsigned R     = 10,
  parameter int unsigned DEPTH = 640,
  parameter int unsigned NRD   = 6,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                         clk,
  input  logic [NRD-1:0][AW-1:0]       rd_addr,
  output logic [NRD-1:0][R-1:0][L-1:0] rd_data,
  input  logic                         we,
  input  logic [AW-1:0]                wr_addr,
  input  logic [R-1:0]                 wr_rowmask,
  input  logic [R-1:0][L-1:0]          wr_data
);

  logic [R-1:0][L-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NRD); p++) rd_data[p] <= mem[rd_addr[p]];
    if (we) begin
      for (int r = 0; r < int'(R); r++)
        if (wr_rowmask[r]) mem[wr_addr][r] <= wr_data[r];
    end
  end

endmodule
