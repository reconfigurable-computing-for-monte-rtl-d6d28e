// neighbor_gather: routes fetched lattice words to the inputs of the R x L
// update cells.
//
// Storage layout ("meshed" replicas). Two systems A and B (two replicas, or two
// tempering copies) share banks P and Q. In every row of a word, bits
// 0..L/2-1 belong to system A and bits L/2..L-1 to system B. Bank P holds the
// even sites (x+y+z even) of A and the odd sites of B; bank Q the odd sites of
// A and the even sites of B. Index i of a half-row of colour c in row (y,z) is
// the site x = 2i + ((c+y+z) mod 2). All neighbours of a site are in the other
// bank, in the same half, at index i (for y and z neighbours) or at i or i+-1
// (for x neighbours, depending on the row parity). So while bank P is updated
// from bank Q, each cell always works on one system, and vice versa.
//
// Couplings are stored by plain x position, Jx(x,y,z) on the link to x+1, Jy
// on the link to y+1, Jz on the link to z+1. Boundaries are periodic.
//
// Inputs: the target word (own spins), the neighbour-bank words of planes z-1,
// z, z+1, the neighbour-bank row y-1 of row 0 and row y+1 of row R-1 (taken
// from the adjacent row blocks), the Jx, Jy, Jz words of the target address,
// the Jy row y-1 of row 0 and the Jz word of plane z-1. `tgt_is_q` says which
// bank is updated, `row0_par` is (yb*R + z) mod 2. Purely combinational.
// Neighbour order in `nb`/`jc` is x-1, x+1, y-1, y+1, z-1, z+1.
// Being pure wiring, most outputs are straight copies of input bits (the own
// spins and the y and z neighbours); synthesis finds no logic behind them.
module neighbor_gather
  import janus_pkg::*;
#(
  parameter int unsigned L = 80,
  parameter int unsigned R = 10
) (
  input  logic                              tgt_is_q,
  input  logic                              row0_par,
  input  logic [R-1:0][L-1:0]               own_w,
  input  logic [R-1:0][L-1:0]               nzm_w,
  input  logic [R-1:0][L-1:0]               nz0_w,
  input  logic [R-1:0][L-1:0]               nzp_w,
  input  logic [L-1:0]                      halo_ym,
  input  logic [L-1:0]                      halo_yp,
  input  logic [R-1:0][L-1:0]               jx_w,
  input  logic [R-1:0][L-1:0]               jy_w,
  input  logic [R-1:0][L-1:0]               jz_w,
  input  logic [L-1:0]                      jy_halo_ym,
  input  logic [R-1:0][L-1:0]               jz_zm_w,
  output logic [R-1:0][L-1:0]               own,
  output logic [R-1:0][L-1:0][NNB-1:0]      nb,
  output logic [R-1:0][L-1:0][NNB-1:0]      jc
);

  localparam int unsigned H  = L / 2;
  localparam int unsigned XW = (L > 1) ? $clog2(L) : 1;

  always_comb begin
    for (int r = 0; r < int'(R); r++) begin
      for (int h = 0; h < 2; h++) begin
        for (int i = 0; i < int'(H); i++) begin
          automatic int unsigned b   = h * H + i;
          // colour of this half in the target bank, then x of the site
          automatic logic        c   = logic'(h[0]) ^ tgt_is_q;
          automatic logic        q   = c ^ row0_par ^ logic'(r[0]);
          automatic int unsigned x   = 2 * i + int'(q);
          automatic logic [XW-1:0] xm = XW'((x + L - 1) % L);
          // neighbour-bank indices of the x-1 and x+1 sites
          automatic int unsigned im  = q ? i : (i + H - 1) % H;
          automatic int unsigned ip  = q ? (i + 1) % H : i;
          own[r][b]        = own_w[r][b];
          nb[r][b][NB_XM]  = nz0_w[r][h * H + im];
          nb[r][b][NB_XP]  = nz0_w[r][h * H + ip];
          nb[r][b][NB_YM]  = (r == 0)          ? halo_ym[b] : nz0_w[r - 1][b];
          nb[r][b][NB_YP]  = (r == int'(R) - 1) ? halo_yp[b] : nz0_w[r + 1][b];
          nb[r][b][NB_ZM]  = nzm_w[r][b];
          nb[r][b][NB_ZP]  = nzp_w[r][b];
          jc[r][b][NB_XM]  = jx_w[r][xm];
          jc[r][b][NB_XP]  = jx_w[r][x];
          jc[r][b][NB_YM]  = (r == 0) ? jy_halo_ym[x] : jy_w[r - 1][x];
          jc[r][b][NB_YP]  = jy_w[r][x];
          jc[r][b][NB_ZM]  = jz_zm_w[r][x];
          jc[r][b][NB_ZP]  = jz_w[r][x];
        end
      end
    end
  end

endmodule
