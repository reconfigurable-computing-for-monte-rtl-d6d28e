// tb_janus_sp: end-to-end test of the simulation processor at reduced size (L = 8, R = 4, two pairs of systems).
//
// The testbench loads random spins for NT = 2*NPAIRS configurations, random
// couplings, heat-bath tables for NT temperatures, BETAINDEX and all
// generator seeds through the host port, then runs ROUNDS runs of NSWEEPS
// Monte Carlo sweeps with parallel tempering. A reference model kept here
// performs the same heat-bath sweeps site by site on 3D arrays (its own
// sequential Parisi-Rapuano generators, generator r serving row r of each
// word, numbers taken in bit order), computes each configuration's energy
// from the link sum H = -sum sigma_i J_ij sigma_j and decides the tempering
// swaps with real arithmetic. After every run all spins, energies and
// BETAINDEX entries are read back and compared. It counts how often each
// mechanism happened (table loads, P and Q half-sweeps, energy sweeps,
// energy stores, accepted and rejected swaps, row-block halo reads) and
// counts a failure for any that never did, and it checks the number of
// word-issue clocks: one word of R*L spins per clock.
module tb_janus_sp;
  import janus_pkg::*;
  import janus_ref_pkg::*;

  localparam int L = 8, R = 4, NPAIRS = 2;
  localparam int NSWEEPS = 2, ROUNDS = 6;
  localparam int NYB = L / R, H = L / 2, NT = 2 * NPAIRS;
  localparam int IO_W = (L > 32) ? L : 32;
  localparam bit NEED_BOTH_SWAPS = 1;

  logic clk = 0, rst_n = 0;
  logic io_we = 0, io_re = 0;
  io_sel_e io_sel = IO_SPIN_P;
  logic [31:0] io_addr = '0;
  logic [IO_W-1:0] io_wdata = '0, io_rdata;
  logic io_rvalid;
  logic run_start = 0, run_pt_en = 0;
  logic [15:0] run_nsweeps = '0;
  logic busy, run_done;
  logic [31:0] pt_accepts, pt_rejects;

  janus_sp #(.L(L), .R(R), .NPAIRS(NPAIRS)) dut (.*);

  always #5 clk = ~clk;

  bit spin [NT][L][L][L];                 // [config][x][y][z], 1 = sigma -1
  bit jx [L][L][L], jy [L][L][L], jz [L][L][L];
  real beta [NT];
  bit [31:0] tab [NT][7];
  int bidx [NT], cfg_of [NT];
  int energy [NT];
  pr_model rng [R];
  pr_model ptr;
  int checks = 0, failures = 0;
  int cnt_lut = 0, cnt_p = 0, cnt_q = 0, cnt_esweep = 0, cnt_estore = 0, cnt_acc = 0, cnt_rej = 0, cnt_halo = 0;
  int upd_words = 0, en_words = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, from the controller's outputs
  logic prev_lut = 0, prev_v = 0, prev_q = 0, prev_e = 0;
  always @(posedge clk) begin
    prev_lut <= dut.lut_we;
    prev_v   <= dut.iss_valid;
    prev_q   <= dut.iss_is_q;
    prev_e   <= dut.iss_energy;
    if (dut.lut_we && !prev_lut) cnt_lut++;
    if (dut.iss_valid && !dut.iss_energy) upd_words++;
    if (dut.iss_valid &&  dut.iss_energy) en_words++;
    if (dut.iss_valid && !dut.iss_energy && (!prev_v || prev_e || prev_q != dut.iss_is_q)) begin
      if (dut.iss_is_q) cnt_q++; else cnt_p++;
    end
    if (dut.iss_valid && dut.iss_energy && !(prev_v && prev_e)) cnt_esweep++;
    if (dut.e_store) cnt_estore++;
    if (dut.iss_valid && NYB > 1 && int'(dut.iss_yb) != 0) cnt_halo++;
  end

  function automatic int md(int a); return (a + L) % L; endfunction

  // bank (0 = P, 1 = Q) and bit of a site of configuration c (pair c/2, system c%2)
  function automatic int bank_of(int c, int x, int y, int z);
    int col = (x + y + z) % 2;
    return (c % 2 == 0) ? col : 1 - col;
  endfunction

  task automatic hw(io_sel_e s, int a, logic [IO_W-1:0] d);
    @(negedge clk); io_we = 1; io_sel = s; io_addr = 32'(a); io_wdata = d;
    @(negedge clk); io_we = 0;
  endtask

  task automatic hr(io_sel_e s, int a, output logic [IO_W-1:0] d);
    @(negedge clk); io_re = 1; io_sel = s; io_addr = 32'(a);
    @(negedge clk); io_re = 0;
    d = io_rdata;
    checks++;
    if (!io_rvalid) failures++;
  endtask

  // build the row of bank bk, pair p, lattice row (y,z) from the model
  function automatic logic [L-1:0] bank_row(int bk, int p, int y, int z);
    logic [L-1:0] row = '0;
    for (int s = 0; s < 2; s++) for (int x = 0; x < L; x++) begin
      int c = 2 * p + s;
      if (bank_of(c, x, y, z) == bk) row[s * H + x / 2] = spin[c][x][y][z];
    end
    return row;
  endfunction

  function automatic logic [L-1:0] j_row(int d, int y, int z);
    logic [L-1:0] row;
    for (int x = 0; x < L; x++) row[x] = (d == 0) ? jx[x][y][z] : (d == 1) ? jy[x][y][z] : jz[x][y][z];
    return row;
  endfunction

  function automatic int word_addr(int p, int y, int z);
    return (p * NYB + y / R) * L + z;
  endfunction

  task automatic load_all();
    for (int bk = 0; bk < 2; bk++) for (int p = 0; p < NPAIRS; p++)
      for (int y = 0; y < L; y++) for (int z = 0; z < L; z++)
        hw(bk == 0 ? IO_SPIN_P : IO_SPIN_Q, word_addr(p, y, z) * R + y % R, IO_W'(bank_row(bk, p, y, z)));
    for (int d = 0; d < 3; d++)
      for (int y = 0; y < L; y++) for (int z = 0; z < L; z++)
        hw(d == 0 ? IO_JX : d == 1 ? IO_JY : IO_JZ, word_addr(0, y, z) * R + y % R, IO_W'(j_row(d, y, z)));
    for (int t = 0; t < NT; t++) begin
      hw(IO_BETA, t, IO_W'(longint'(beta[t] * 65536.0)));
      for (int f = 0; f < 7; f++) hw(IO_LUT, t * 8 + f, IO_W'(tab[t][f]));
    end
    for (int c = 0; c < NT; c++) hw(IO_BETAIDX, c, IO_W'(bidx[c]));
    for (int g = 0; g <= R; g++)
      for (int i = 0; i < 62; i++) begin
        bit [31:0] v = $urandom;
        if (g < R) rng[g].set(i, v); else ptr.set(i, v);
        hw(IO_SEED, g * 64 + i, IO_W'(v));
      end
  endtask

  // one half-sweep of the model: every site of configuration pair p held in bank bk
  task automatic model_half(int p, int bk);
    for (int yb = 0; yb < NYB; yb++) for (int z = 0; z < L; z++)
      for (int r = 0; r < R; r++) begin
        int y = yb * R + r;
        for (int b = 0; b < L; b++) begin
          bit [31:0] rv = rng[r].next();
          int s = b / H, i = b % H, c = 2 * p + s;
          int col = (c % 2 == 0) ? bk : 1 - bk;
          int x = 2 * i + ((col + y + z) % 2);
          int phi = 0, f;
          phi += (jx[md(x-1)][y][z] ? -1 : 1) * (spin[c][md(x-1)][y][z] ? -1 : 1);
          phi += (jx[x][y][z]       ? -1 : 1) * (spin[c][md(x+1)][y][z] ? -1 : 1);
          phi += (jy[x][md(y-1)][z] ? -1 : 1) * (spin[c][x][md(y-1)][z] ? -1 : 1);
          phi += (jy[x][y][z]       ? -1 : 1) * (spin[c][x][md(y+1)][z] ? -1 : 1);
          phi += (jz[x][y][md(z-1)] ? -1 : 1) * (spin[c][x][y][md(z-1)] ? -1 : 1);
          phi += (jz[x][y][z]       ? -1 : 1) * (spin[c][x][y][md(z+1)] ? -1 : 1);
          f = (6 - phi) / 2;
          spin[c][x][y][z] = (rv < tab[bidx[c]][f]) ? 1'b0 : 1'b1;
        end
      end
  endtask

  function automatic int model_energy(int c);
    int e = 0;
    for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      int s0 = spin[c][x][y][z] ? -1 : 1;
      e -= s0 * (jx[x][y][z] ? -1 : 1) * (spin[c][md(x+1)][y][z] ? -1 : 1);
      e -= s0 * (jy[x][y][z] ? -1 : 1) * (spin[c][x][md(y+1)][z] ? -1 : 1);
      e -= s0 * (jz[x][y][z] ? -1 : 1) * (spin[c][x][y][md(z+1)] ? -1 : 1);
    end
    return e;
  endfunction

  task automatic compare_all(int round);
    logic [IO_W-1:0] d;
    int bad = 0;
    for (int bk = 0; bk < 2; bk++) for (int p = 0; p < NPAIRS; p++)
      for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
        hr(bk == 0 ? IO_SPIN_P : IO_SPIN_Q, word_addr(p, y, z) * R + y % R, d);
        checks++;
        if (d[L-1:0] !== bank_row(bk, p, y, z)) begin
          failures++; bad++;
          if (bad < 5) $display("round %0d bank %0d pair %0d row y=%0d z=%0d: got %h exp %h",
                                round, bk, p, y, z, d[L-1:0], bank_row(bk, p, y, z));
        end
      end
  endtask

  initial begin
    logic [IO_W-1:0] d;
    automatic int exp_acc = 0, exp_rej = 0;
    for (int g = 0; g < R; g++) rng[g] = new();
    ptr = new();
    for (int c = 0; c < NT; c++) begin
      beta[c] = 0.5 + 0.04 * real'(c);
      for (int f = 0; f < 7; f++) tab[c][f] = hb_prob(beta[c], f);
      bidx[c] = (c + 1) % NT;
      cfg_of[bidx[c]] = c;
    end
    for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      jx[x][y][z] = 1'($urandom); jy[x][y][z] = 1'($urandom); jz[x][y][z] = 1'($urandom);
      for (int c = 0; c < NT; c++) spin[c][x][y][z] = 1'($urandom);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    compare_all(-1);
    for (int round = 0; round < ROUNDS; round++) begin
      automatic real lnr [NT];
      automatic bit resync = 0;
      automatic int u0 = upd_words, e0 = en_words;
      for (int t = 0; t < NT - 1; t++) lnr[t] = $ln(real'(ptr.next()) / 4294967296.0);
      @(negedge clk); run_start = 1; run_nsweeps = 16'(NSWEEPS); run_pt_en = 1;
      @(negedge clk); run_start = 0;
      while (!run_done) @(negedge clk);
      // model
      for (int p = 0; p < NPAIRS; p++) begin
        for (int s = 0; s < NSWEEPS; s++) begin
          model_half(p, 0);
          model_half(p, 1);
        end
        energy[2 * p] = model_energy(2 * p);
        energy[2 * p + 1] = model_energy(2 * p + 1);
      end
      for (int t = 0; t < NT - 1; t++) begin
        automatic int ca = cfg_of[t], cb = cfg_of[t + 1];
        automatic real prod = (beta[t + 1] - beta[t]) * real'(energy[cb] - energy[ca]);
        if ((lnr[t] - prod < 1e-3) && (prod - lnr[t] < 1e-3)) resync = 1;
        if (lnr[t] <= prod) begin
          exp_acc++;
          bidx[ca] = t + 1; bidx[cb] = t;
          cfg_of[t] = cb; cfg_of[t + 1] = ca;
        end else exp_rej++;
      end
      // word-issue clocks: one word per clock
      checks += 2;
      if (upd_words - u0 != NPAIRS * NSWEEPS * 2 * NYB * L) begin
        failures++; $display("update words %0d", upd_words - u0);
      end
      if (en_words - e0 != NPAIRS * 2 * NYB * L) failures++;
      compare_all(round);
      for (int c = 0; c < NT; c++) begin
        hr(IO_ENERGY, c, d);
        checks++;
        if (32'(d) !== 32'(energy[c])) begin
          failures++; $display("energy cfg %0d got %0d exp %0d", c, int'(signed'(32'(d))), energy[c]);
        end
        hr(IO_BETAIDX, c, d);
        if (!resync) begin
          checks++;
          if (int'(d) != bidx[c]) begin failures++; $display("betaidx cfg %0d got %0d exp %0d", c, int'(d), bidx[c]); end
        end
        bidx[c] = int'(d);
        cfg_of[bidx[c]] = c;
      end
      if (resync) begin exp_acc = int'(pt_accepts); exp_rej = int'(pt_rejects); end
    end
    checks += 2;
    if (pt_accepts !== 32'(exp_acc)) failures++;
    if (pt_rejects !== 32'(exp_rej)) failures++;
    cnt_acc = int'(pt_accepts); cnt_rej = int'(pt_rejects);
    $display("mechanisms: lut_loads=%0d p_half=%0d q_half=%0d energy_sweeps=%0d energy_stores=%0d swaps_accepted=%0d swaps_rejected=%0d halo_words=%0d",
             cnt_lut, cnt_p, cnt_q, cnt_esweep, cnt_estore, cnt_acc, cnt_rej, cnt_halo);
    checks += 6;
    if (cnt_lut == 0) failures++;
    if (cnt_p == 0 || cnt_q == 0) failures++;
    if (cnt_esweep == 0) failures++;
    if (cnt_estore == 0) failures++;
    if (NEED_BOTH_SWAPS ? (cnt_acc == 0 || cnt_rej == 0) : (cnt_acc + cnt_rej == 0)) failures++;
    if (NYB > 1 && cnt_halo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
