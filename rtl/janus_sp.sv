// janus_sp: one simulation processor (SP) configured for heat-bath Monte Carlo
// of the three-dimensional Edwards-Anderson spin glass, with optional parallel
// tempering inside the processor.
//
// Datapath. A lattice of L^3 sites is stored as words of R rows by L bits
// (default 10 x 80 = 800 spins). Two systems A and B are meshed in two spin
// banks P and Q (see neighbor_gather for the layout): P holds the even sites
// of A and the odd sites of B, Q the others. One clock updates one word, i.e.
// R*L spins: while P is the target, the five neighbour words of bank Q (planes
// z-1, z, z+1 and the halo rows of the row blocks above and below) and the
// coupling words are read, the gather network hands each of the R*L update
// cells its six neighbours, six couplings and one random number from the R
// Parisi-Rapuano generators (generator r feeds row r, L numbers per clock), and
// the new spins are written back to the same address of P. Then Q is updated
// from P. A sweep of both banks is one Monte Carlo step of both systems.
//
// Pipeline: issue (address) -> bank read registered -> gather, cells and
// write-back in the next clock. Two clocks from issue to write; one word per
// clock in steady state, plus DRAIN idle clocks between half-sweeps.
//
// Parallel tempering: NPAIRS pairs of systems (NT = 2*NPAIRS configurations)
// are stored at increasing depth in the banks. Each cell keeps its own table;
// cells of half A are loaded with the table of the temperature BETAINDEX gives
// configuration 2p, cells of half B with that of 2p+1. With `run_pt_en` each
// pair is followed by an energy sweep (no write-back): the cells report their
// unsatisfied links, two adder trees (one per system) add them every clock, and
// E = sum(U) - 3 L^3 is stored in the tempering engine. After the last pair
// the engine decides the swaps of neighbouring temperatures.
//
// Host port (from the I/O processor): `io_we`/`io_re` with `io_sel`
// (janus_pkg::io_sel_e), `io_addr` and `io_wdata`; read data appear on
// `io_rdata` with `io_rvalid` one clock after `io_re`. The host may only use
// the port while `busy` is low. `run_start` with `run_nsweeps` and `run_pt_en`
// starts a run; `run_done` pulses when it ends.
//
// Follows the paper: 80 x 10 spins per word and 800 cells at L = 80, one
// 32-bit random number per cell from 10 generators of 80 outputs, P/Q meshing
// of two replicas, one table per cell, on-chip tables for all temperatures with
// BETAINDEX, energy by a pipelined adder tree over a non-writing sweep, and the
// ln r <= dBeta*dE swap test. This design's own choices: bit order inside a
// word, multi-ported bank reads, periodic boundaries, the host register map and
// all fixed-point formats. The nearest-neighbour links to other SPs are not
// used in this configuration (each SP simulates its own sample).
//
// The three coupling memories Jx, Jy, Jz hold one sample (NYB*L words) and are
// shared by every pair: tempering copies differ only in their spins. The
// paper quotes about 1000 spins per clock for the SP; at the defaults this
// design updates R*L = 800, the number of update cells the paper gives.
//
// Lint notes: the upper bits of the y+1 halo words are not needed (only row 0
// of the block below is a neighbour), so part of that read port is unused;
// `pt_busy` of the tempering engine is only checked by an assertion (the
// controller waits for `pt_done`); the assertions are disabled by `rst_n`,
// which also resets the control flops asynchronously, hence the lint note
// that `rst_n` is used both ways.
module janus_sp
  import janus_pkg::*;
#(
  parameter int unsigned L      = 80,
  parameter int unsigned R      = 10,
  parameter int unsigned NPAIRS = 1,
  localparam int unsigned NYB   = L / R,
  localparam int unsigned H     = L / 2,
  localparam int unsigned NT    = 2 * NPAIRS,
  localparam int unsigned DEPTH = NPAIRS * NYB * L,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned JDEPTH = NYB * L,
  localparam int unsigned JAW   = (JDEPTH > 1) ? $clog2(JDEPTH) : 1,
  localparam int unsigned ZW    = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned YW    = (NYB > 1) ? $clog2(NYB) : 1,
  localparam int unsigned PW    = (NPAIRS > 1) ? $clog2(NPAIRS) : 1,
  localparam int unsigned TW    = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned IO_W  = (L > 32) ? L : 32,
  localparam int unsigned TREE_N   = R * H,
  localparam int unsigned TREE_LAT = (TREE_N > 1) ? $clog2(TREE_N) : 1,
  localparam int unsigned TREE_OW  = 3 + TREE_LAT
) (
  input  logic              clk,
  input  logic              rst_n,
  // host port
  input  logic              io_we,
  input  logic              io_re,
  input  io_sel_e           io_sel,
  input  logic [31:0]       io_addr,
  input  logic [IO_W-1:0]   io_wdata,
  output logic [IO_W-1:0]   io_rdata,
  output logic              io_rvalid,
  // run control
  input  logic              run_start,
  input  logic [15:0]       run_nsweeps,
  input  logic              run_pt_en,
  output logic              busy,
  output logic              run_done,
  output logic [31:0]       pt_accepts,
  output logic [31:0]       pt_rejects
);

  typedef logic [R-1:0][L-1:0] word_t;

  // ------------------------------------------------------------ controller
  logic           iss_valid, iss_is_q, iss_energy;
  logic [PW-1:0]  iss_pair;
  logic [YW-1:0]  iss_yb;
  logic [ZW-1:0]  iss_z;
  logic           lut_we;
  logic [2:0]     lut_entry;
  logic           e_clear, e_store, e_sel;
  logic           log_start, logs_ready, pt_start, pt_busy, pt_done;

  sp_controller #(.L(L), .R(R), .NPAIRS(NPAIRS), .DRAIN(2), .TREE_LAT(TREE_LAT)) u_ctrl (
    .clk, .rst_n,
    .start      (run_start),
    .n_sweeps   (run_nsweeps),
    .pt_en      (run_pt_en),
    .busy       (busy),
    .done       (run_done),
    .iss_valid, .iss_is_q, .iss_energy, .iss_pair, .iss_yb, .iss_z,
    .lut_we, .lut_entry,
    .e_clear, .e_store, .e_sel,
    .log_start, .logs_ready, .pt_start, .pt_done
  );

  // ------------------------------------------------------------ addresses
  function automatic logic [AW-1:0] waddr(input int unsigned p, input int unsigned y, input int unsigned zz);
    return AW'((p * NYB + y) * L + zz);
  endfunction

  int unsigned ip, iy, iz, iym, iyp, izm, izp;
  logic [AW-1:0] a_own, a_zm, a_zp, a_ym, a_yp;
  logic [JAW-1:0] j_own, j_zm, j_ym;
  logic [AW-1:0] host_word;
  logic [$clog2(R+1)-1:0] host_row;

  always_comb begin
    ip  = int'(iss_pair);
    iy  = int'(iss_yb);
    iz  = int'(iss_z);
    iym = (iy + NYB - 1) % NYB;
    iyp = (iy + 1) % NYB;
    izm = (iz + L - 1) % L;
    izp = (iz + 1) % L;
    a_own = waddr(ip, iy, iz);
    a_zm  = waddr(ip, iy, izm);
    a_zp  = waddr(ip, iy, izp);
    a_ym  = waddr(ip, iym, iz);
    a_yp  = waddr(ip, iyp, iz);
    // one coupling memory serves every pair: same sample, pair offset dropped
    j_own = JAW'(waddr(0, iy, iz));
    j_zm  = JAW'(waddr(0, iy, izm));
    j_ym  = JAW'(waddr(0, iym, iz));
    host_word = AW'(io_addr / R);
    host_row  = ($clog2(R+1))'(io_addr % R);
  end

  // ------------------------------------------------------------ pipeline stage 1
  logic          v1, q1, en1, par1;
  logic [AW-1:0] a1;
  logic          host_rd1;
  io_sel_e       host_sel1;
  logic [$clog2(R+1)-1:0] host_row1;
  logic [TW-1:0] host_cfg1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; q1 <= 1'b0; en1 <= 1'b0; par1 <= 1'b0; a1 <= '0;
      host_rd1 <= 1'b0; host_sel1 <= IO_SPIN_P; host_row1 <= '0; host_cfg1 <= '0;
    end else begin
      v1        <= iss_valid;
      q1        <= iss_is_q;
      en1       <= iss_energy;
      par1      <= iss_yb[0] & R[0] ^ iss_z[0];
      a1        <= a_own;
      host_rd1  <= io_re && !busy;
      host_sel1 <= io_sel;
      host_row1 <= host_row;
      host_cfg1 <= TW'(io_addr);
    end
  end

  // ------------------------------------------------------------ banks
  logic [5:0][AW-1:0] sp_rd_addr;
  word_t [5:0]        p_rd, q_rd;
  logic [1:0][JAW-1:0] jy_rd_addr, jz_rd_addr;
  word_t [1:0]        jy_rd, jz_rd;
  logic [0:0][JAW-1:0] jx_rd_addr;
  word_t [0:0]        jx_rd;
  word_t              new_word, wr_word;
  logic               upd_we, p_we, q_we, jx_we, jy_we, jz_we;
  logic [AW-1:0]      wr_addr;
  logic [R-1:0]       wr_mask;

  always_comb begin
    sp_rd_addr    = '{a_yp, a_ym, a_zp, a_own, a_zm, a_own};
    jx_rd_addr[0] = j_own;
    jy_rd_addr    = '{j_ym, j_own};
    jz_rd_addr    = '{j_zm, j_own};
    if (!busy) begin
      sp_rd_addr[0] = host_word;
    end
  end

  assign upd_we = v1 && !en1;
  always_comb begin
    wr_word = new_word;
    wr_addr = a1;
    wr_mask = '1;
    if (!busy) begin
      wr_addr = host_word;
      wr_mask = '0;
      wr_mask[host_row] = 1'b1;
      for (int r = 0; r < int'(R); r++) wr_word[r] = io_wdata[L-1:0];
    end
  end
  assign p_we  = busy ? (upd_we && !q1) : (io_we && io_sel == IO_SPIN_P);
  assign q_we  = busy ? (upd_we &&  q1) : (io_we && io_sel == IO_SPIN_Q);
  assign jx_we = !busy && io_we && io_sel == IO_JX;
  assign jy_we = !busy && io_we && io_sel == IO_JY;
  assign jz_we = !busy && io_we && io_sel == IO_JZ;

  lattice_bank #(.L(L), .R(R), .DEPTH(DEPTH), .NRD(6)) u_bank_p (
    .clk, .rd_addr(sp_rd_addr), .rd_data(p_rd),
    .we(p_we), .wr_addr(wr_addr), .wr_rowmask(wr_mask), .wr_data(wr_word));
  lattice_bank #(.L(L), .R(R), .DEPTH(DEPTH), .NRD(6)) u_bank_q (
    .clk, .rd_addr(sp_rd_addr), .rd_data(q_rd),
    .we(q_we), .wr_addr(wr_addr), .wr_rowmask(wr_mask), .wr_data(wr_word));
  lattice_bank #(.L(L), .R(R), .DEPTH(JDEPTH), .NRD(1)) u_j_x (
    .clk, .rd_addr(jx_rd_addr), .rd_data(jx_rd),
    .we(jx_we), .wr_addr(JAW'(wr_addr)), .wr_rowmask(wr_mask), .wr_data(wr_word));
  lattice_bank #(.L(L), .R(R), .DEPTH(JDEPTH), .NRD(2)) u_j_y (
    .clk, .rd_addr(jy_rd_addr), .rd_data(jy_rd),
    .we(jy_we), .wr_addr(JAW'(wr_addr)), .wr_rowmask(wr_mask), .wr_data(wr_word));
  lattice_bank #(.L(L), .R(R), .DEPTH(JDEPTH), .NRD(2)) u_j_z (
    .clk, .rd_addr(jz_rd_addr), .rd_data(jz_rd),
    .we(jz_we), .wr_addr(JAW'(wr_addr)), .wr_rowmask(wr_mask), .wr_data(wr_word));

  // ------------------------------------------------------------ gather
  word_t tgt_w, nb_zm, nb_z0, nb_zp;
  logic [L-1:0] nb_ym, nb_yp;   // halo rows: last row of the block below, first of the block above
  word_t own;
  logic [R-1:0][L-1:0][NNB-1:0] nb, jc;

  always_comb begin
    tgt_w = q1 ? q_rd[0] : p_rd[0];
    nb_zm = q1 ? p_rd[1] : q_rd[1];
    nb_z0 = q1 ? p_rd[2] : q_rd[2];
    nb_zp = q1 ? p_rd[3] : q_rd[3];
    nb_ym = q1 ? p_rd[4][R-1] : q_rd[4][R-1];
    nb_yp = q1 ? p_rd[5][0]   : q_rd[5][0];
  end

  neighbor_gather #(.L(L), .R(R)) u_gather (
    .tgt_is_q   (q1),
    .row0_par   (par1),
    .own_w      (tgt_w),
    .nzm_w      (nb_zm),
    .nz0_w      (nb_z0),
    .nzp_w      (nb_zp),
    .halo_ym    (nb_ym),
    .halo_yp    (nb_yp),
    .jx_w       (jx_rd[0]),
    .jy_w       (jy_rd[0]),
    .jz_w       (jz_rd[0]),
    .jy_halo_ym (jy_rd[1][R-1]),
    .jz_zm_w    (jz_rd[1]),
    .own        (own),
    .nb         (nb),
    .jc         (jc)
  );

  // ------------------------------------------------------------ random numbers
  logic [R-1:0][L-1:0][RAND_W-1:0] rnd;
  logic [5:0]  seed_idx;
  logic [25:0] seed_gen;

  assign seed_idx = io_addr[5:0];
  assign seed_gen = io_addr[31:6];

  for (genvar g = 0; g < int'(R); g++) begin : g_rng
    pr_rng #(.NOUT(L)) u_rng (
      .clk       (clk),
      .en        (upd_we),
      .seed_we   (!busy && io_we && io_sel == IO_SEED && seed_gen == 26'(g)),
      .seed_idx  (seed_idx),
      .seed_data (io_wdata[31:0]),
      .rnd       (rnd[g])
    );
  end

  // ------------------------------------------------------------ tables + cells
  logic [RAND_W-1:0] lut_a, lut_b;
  logic [R-1:0][L-1:0][2:0] unsat;
  logic [R-1:0][H-1:0][2:0] unsat_a, unsat_b;

  for (genvar r = 0; r < int'(R); r++) begin : g_row
    for (genvar b = 0; b < int'(L); b++) begin : g_cell
      hb_update_cell u_cell (
        .clk       (clk),
        .spin      (own[r][b]),
        .nb        (nb[r][b]),
        .jc        (jc[r][b]),
        .rnd       (rnd[r][b]),
        .lut_we    (lut_we),
        .lut_waddr (lut_entry),
        .lut_wdata ((b < int'(H)) ? lut_a : lut_b),
        .new_spin  (new_word[r][b]),
        .unsat     (unsat[r][b])
      );
      if (b < int'(H)) begin : g_a
        assign unsat_a[r][b] = unsat[r][b];
      end else begin : g_b
        assign unsat_b[r][b - H] = unsat[r][b];
      end
    end
  end

  // ------------------------------------------------------------ energy
  logic                        sum_a_v, sum_b_v;
  logic [TREE_OW-1:0]          sum_a, sum_b;
  logic [31:0]                 acc_a, acc_b;
  logic                        e_we;
  logic [TW-1:0]               e_cfg;
  logic signed [31:0]          e_val;

  energy_tree #(.N(TREE_N), .W(3)) u_tree_a (
    .clk, .rst_n, .in_valid(v1 && en1), .in(unsat_a), .sum_valid(sum_a_v), .sum(sum_a));
  energy_tree #(.N(TREE_N), .W(3)) u_tree_b (
    .clk, .rst_n, .in_valid(v1 && en1), .in(unsat_b), .sum_valid(sum_b_v), .sum(sum_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_a <= '0;
      acc_b <= '0;
    end else if (e_clear) begin
      acc_a <= '0;
      acc_b <= '0;
    end else begin
      if (sum_a_v) acc_a <= acc_a + 32'(sum_a);
      if (sum_b_v) acc_b <= acc_b + 32'(sum_b);
    end
  end

  assign e_we  = e_store;
  assign e_cfg = TW'({iss_pair, e_sel});
  assign e_val = signed'((e_sel ? acc_b : acc_a) - 32'(3 * L * L * L));

  // ------------------------------------------------------------ tempering engine
  logic [TW-1:0]      rd_betaidx;
  logic signed [31:0] rd_energy;
  logic               pt_host_we;

  assign pt_host_we = !busy && io_we && !(io_sel == IO_SEED && seed_gen != 26'(R));

  pt_engine #(.NT(NT)) u_pt (
    .clk, .rst_n,
    .host_we    (pt_host_we),
    .host_sel   (io_sel),
    .host_addr  (io_addr[15:0]),
    .host_wdata (io_wdata[31:0]),
    .rd_cfg     (host_cfg1),
    .rd_betaidx (rd_betaidx),
    .rd_energy  (rd_energy),
    .e_we       (e_we),
    .e_cfg      (e_cfg),
    .e_val      (e_val),
    .lut_cfg_a  (TW'({iss_pair, 1'b0})),
    .lut_cfg_b  (TW'({iss_pair, 1'b1})),
    .lut_entry  (lut_entry),
    .lut_data_a (lut_a),
    .lut_data_b (lut_b),
    .log_start, .logs_ready, .pt_start, .pt_busy, .pt_done,
    .n_accept   (pt_accepts),
    .n_reject   (pt_rejects)
  );

  // ------------------------------------------------------------ host read
  always_comb begin
    io_rdata  = '0;
    io_rvalid = host_rd1;
    unique case (host_sel1)
      IO_SPIN_P:  io_rdata = IO_W'(p_rd[0][host_row1]);
      IO_SPIN_Q:  io_rdata = IO_W'(q_rd[0][host_row1]);
      IO_BETAIDX: io_rdata = IO_W'(rd_betaidx);
      IO_ENERGY:  io_rdata = IO_W'(unsigned'(rd_energy));
      default:    io_rdata = '0;
    endcase
  end

  // The host must not write while a run is in progress.
  a_no_host_write_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !io_we);
  // the controller starts the swap decisions only while the engine is idle
  a_pt_start_idle: assert property (@(posedge clk) disable iff (!rst_n) pt_start |-> !pt_busy);

endmodule
