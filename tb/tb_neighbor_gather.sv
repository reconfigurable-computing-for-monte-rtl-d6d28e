// tb_neighbor_gather: builds a random 8^3 lattice of two systems and random
// couplings, stores them in banks P and Q and the coupling words with the
// documented layout (computed here from site coordinates: system s, colour
// c = (x+y+z) mod 2, bank P for (s=A,c=0) and (s=B,c=1), bit s*L/2 + x/2), then
// for random words and both target banks compares every neighbour and coupling
// bit delivered to every cell with a direct lookup in the 3D arrays.
module tb_neighbor_gather;
  import janus_pkg::*;
  localparam int L = 8, R = 4, NYB = L / R, H = L / 2;

  logic tgt_is_q, row0_par;
  logic [R-1:0][L-1:0] own_w, nzm_w, nz0_w, nzp_w, jx_w, jy_w, jz_w, jz_zm_w;
  logic [L-1:0] halo_ym, halo_yp, jy_halo_ym;
  logic [R-1:0][L-1:0] own;
  logic [R-1:0][L-1:0][NNB-1:0] nb, jc;

  bit spin [2][L][L][L];         // [system][x][y][z]
  bit jx [L][L][L], jy [L][L][L], jz [L][L][L];
  bit [R-1:0][L-1:0] bank [2][NYB][L];   // [bank][yb][z]
  bit [R-1:0][L-1:0] jwx [NYB][L], jwy [NYB][L], jwz [NYB][L];
  // inverse map of a bank bit to its site
  int site_x [2][L][L][L], site_s [2][L][L][L];  // [bank][y][z][bit]
  int checks = 0, failures = 0;

  neighbor_gather #(.L(L), .R(R)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int md(int a); return (a + L) % L; endfunction

  initial begin
    for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      spin[0][x][y][z] = 1'($urandom); spin[1][x][y][z] = 1'($urandom);
      jx[x][y][z] = 1'($urandom); jy[x][y][z] = 1'($urandom); jz[x][y][z] = 1'($urandom);
    end
    for (int s = 0; s < 2; s++) for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      int c, bk, bit_pos;
      c = (x + y + z) % 2;
      bk = (s == 0) ? c : 1 - c;
      bit_pos = s * H + x / 2;
      bank[bk][y / R][z][y % R][bit_pos] = spin[s][x][y][z];
      site_x[bk][y][z][bit_pos] = x;
      site_s[bk][y][z][bit_pos] = s;
      if (s == 0) begin
        jwx[y / R][z][y % R][x] = jx[x][y][z];
        jwy[y / R][z][y % R][x] = jy[x][y][z];
        jwz[y / R][z][y % R][x] = jz[x][y][z];
      end
    end
    for (int t = 0; t < 64; t++) begin
      int yb, z, tb_, nbk;
      yb = $urandom_range(0, NYB - 1); z = $urandom_range(0, L - 1); tb_ = t % 2; nbk = 1 - tb_;
      tgt_is_q = 1'(tb_);
      row0_par = 1'((yb * R + z) % 2);
      own_w = bank[tb_][yb][z];
      nzm_w = bank[nbk][yb][md(z - 1)];
      nz0_w = bank[nbk][yb][z];
      nzp_w = bank[nbk][yb][md(z + 1)];
      halo_ym = bank[nbk][(yb + NYB - 1) % NYB][z][R - 1];
      halo_yp = bank[nbk][(yb + 1) % NYB][z][0];
      jx_w = jwx[yb][z]; jy_w = jwy[yb][z]; jz_w = jwz[yb][z];
      jy_halo_ym = jwy[(yb + NYB - 1) % NYB][z][R - 1];
      jz_zm_w = jwz[yb][md(z - 1)];
      #1;
      for (int r = 0; r < R; r++) for (int b = 0; b < L; b++) begin
        int x, y, s;
        bit [5:0] enb, ejc;
        y = yb * R + r; x = site_x[tb_][y][z][b]; s = site_s[tb_][y][z][b];
        enb = {spin[s][x][y][md(z+1)], spin[s][x][y][md(z-1)], spin[s][x][md(y+1)][z],
               spin[s][x][md(y-1)][z], spin[s][md(x+1)][y][z], spin[s][md(x-1)][y][z]};
        ejc = {jz[x][y][z], jz[x][y][md(z-1)], jy[x][y][z], jy[x][md(y-1)][z],
               jx[x][y][z], jx[md(x-1)][y][z]};
        checks += 3;
        if (own[r][b] !== spin[s][x][y][z]) failures++;
        if (nb[r][b] !== enb) begin
          failures++;
          if (failures < 10) $display("nb r=%0d b=%0d x=%0d got %b exp %b", r, b, x, nb[r][b], enb);
        end
        if (jc[r][b] !== ejc) begin
          failures++;
          if (failures < 10) $display("jc r=%0d b=%0d got %b exp %b", r, b, jc[r][b], ejc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
