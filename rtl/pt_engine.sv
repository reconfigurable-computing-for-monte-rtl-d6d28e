// pt_engine: parallel-tempering bookkeeping and swap decisions.
//
// Holds, for NT configurations and NT temperatures:
//   * the temperature table: beta[t] (unsigned 16.16) and the seven-entry
//     heat-bath table of each temperature (the "LUT RAM");
//   * BETAINDEX[c], the temperature at which configuration c is simulated, and
//     its inverse CFG_OF[t] (written together by the host);
//   * the energy E[c] of every configuration, written by the energy sweep;
//   * a buffer of NT-1 values ln r, one per pair of neighbouring temperatures.
//
// `log_start` makes the engine draw NT-1 numbers from its own one-output
// Parisi-Rapuano generator and run them through ln_unit, one after another, in
// the background of the sweeps; `logs_ready` rises when all are in. `pt_start`
// then walks the temperature pairs (t, t+1) for t = 0..NT-2, one pair per clock:
// with ca = CFG_OF[t], cb = CFG_OF[t+1], the swap is accepted when
// ln r_t <= (beta[t+1] - beta[t]) * (E[cb] - E[ca]); an accepted swap exchanges
// BETAINDEX[ca] and BETAINDEX[cb] (and CFG_OF[t], CFG_OF[t+1]) before the next
// pair is looked at. `pt_done` pulses at the end. `n_accept`/`n_reject` count
// decisions since reset.
//
// The lookup port `lut_cfg_a/b, lut_entry -> lut_data_a/b` gives the table
// entry of the temperature that configurations a and b currently have; it is
// combinational and is used to copy the two tables into the update cells.
//
// Follows the paper: tables of all temperatures kept on chip, BETAINDEX
// pointing at them, ln r computed in advance with one 32-bit generator,
// comparison of ln r with dBeta*dE, swaps by exchanging indices and moving to
// the next pair of neighbouring temperatures. Number formats, the sequential
// pair order and the host access are this design's choices. The handshake
// assertion is disabled by the asynchronous reset `rst_n`, which is why lint
// reports `rst_n` as used both synchronously and asynchronously.
module pt_engine
  import janus_pkg::*;
#(
  parameter int unsigned NT = 2,
  localparam int unsigned TW = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host writes
  input  logic                     host_we,
  input  io_sel_e                  host_sel,
  input  logic [15:0]              host_addr,
  input  logic [31:0]              host_wdata,
  // host reads (combinational)
  input  logic [TW-1:0]            rd_cfg,
  output logic [TW-1:0]            rd_betaidx,
  output logic signed [31:0]       rd_energy,
  // energies from the energy sweep
  input  logic                     e_we,
  input  logic [TW-1:0]            e_cfg,
  input  logic signed [31:0]       e_val,
  // table lookup for the update cells
  input  logic [TW-1:0]            lut_cfg_a,
  input  logic [TW-1:0]            lut_cfg_b,
  input  logic [LUT_AW-1:0]        lut_entry,
  output logic [RAND_W-1:0]        lut_data_a,
  output logic [RAND_W-1:0]        lut_data_b,
  // sequencing
  input  logic                     log_start,
  output logic                     logs_ready,
  input  logic                     pt_start,
  output logic                     pt_busy,
  output logic                     pt_done,
  output logic [31:0]              n_accept,
  output logic [31:0]              n_reject
);

  localparam int unsigned NPAIR_T = (NT > 1) ? NT - 1 : 1;

  logic [RAND_W-1:0]        lut_ram  [NT][LUT_DEPTH];
  logic [31:0]              beta     [NT];
  logic [TW-1:0]            betaidx  [NT];
  logic [TW-1:0]            cfg_of   [NT];
  logic signed [31:0]       energy   [NT];
  logic signed [31:0]       lnr      [NPAIR_T];

  // ---------------------------------------------------------------- logs
  logic [0:0][RAND_W-1:0] rnd1;
  logic                   rng_en, ln_start, ln_busy, ln_done;
  logic signed [31:0]     ln_val;
  logic [TW:0]            log_cnt;     // logs requested so far
  logic [TW:0]            log_got;     // logs received so far
  logic                   log_run;
  logic                   seed_we;

  assign seed_we = host_we && (host_sel == IO_SEED);

  pr_rng #(.NOUT(1)) u_rng (
    .clk       (clk),
    .en        (rng_en),
    .seed_we   (seed_we),
    .seed_idx  (host_addr[5:0]),
    .seed_data (host_wdata),
    .rnd       (rnd1)
  );

  ln_unit u_ln (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (ln_start),
    .rin    (rnd1[0]),
    .busy   (ln_busy),
    .done   (ln_done),
    .ln_out (ln_val)
  );

  assign ln_start = log_run && !ln_busy && !ln_done && (log_cnt < (TW+1)'(NPAIR_T));
  assign rng_en   = ln_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log_run    <= 1'b0;
      log_cnt    <= '0;
      log_got    <= '0;
      logs_ready <= 1'b0;
    end else begin
      if (log_start) begin
        log_run    <= 1'b1;
        log_cnt    <= '0;
        log_got    <= '0;
        logs_ready <= 1'b0;
      end else begin
        if (ln_start) log_cnt <= log_cnt + 1'b1;
        if (ln_done) begin
          log_got <= log_got + 1'b1;
          if (log_got == (TW+1)'(NPAIR_T - 1)) begin
            log_run    <= 1'b0;
            logs_ready <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- decisions
  logic [TW-1:0]          t_cur;
  logic [TW-1:0]          ca, cb;
  logic signed [32:0]     dbeta;
  logic signed [32:0]     de;
  logic signed [65:0]     prod;
  logic                   accept;

  assign ca     = cfg_of[t_cur];
  assign cb     = cfg_of[TW'(t_cur + 1'b1)];
  assign dbeta  = signed'({1'b0, beta[TW'(t_cur + 1'b1)]}) - signed'({1'b0, beta[t_cur]});
  assign de     = 33'(energy[cb]) - 33'(energy[ca]);
  assign prod   = 66'(dbeta) * 66'(de);
  assign accept = (66'(lnr[t_cur]) <= prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pt_busy  <= 1'b0;
      pt_done  <= 1'b0;
      t_cur    <= '0;
      n_accept <= '0;
      n_reject <= '0;
    end else begin
      pt_done <= 1'b0;
      if (pt_start && !pt_busy) begin
        pt_busy <= (NT > 1);
        pt_done <= (NT <= 1);
        t_cur   <= '0;
      end else if (pt_busy) begin
        if (accept) begin
          n_accept <= n_accept + 1;
        end else begin
          n_reject <= n_reject + 1;
        end
        if (t_cur == TW'(NT - 2)) begin
          pt_busy <= 1'b0;
          pt_done <= 1'b1;
        end
        t_cur <= t_cur + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- tables
  always_ff @(posedge clk) begin
    if (host_we) begin
      unique case (host_sel)
        IO_LUT:     if (host_addr[2:0] < 3'(LUT_DEPTH))
                      lut_ram[TW'(host_addr[15:3])][host_addr[2:0]] <= host_wdata;
        IO_BETA:    beta[TW'(host_addr)] <= host_wdata;
        IO_BETAIDX: begin
                      betaidx[TW'(host_addr)]       <= TW'(host_wdata);
                      cfg_of[TW'(host_wdata)]       <= TW'(host_addr);
                    end
        default: ;
      endcase
    end else if (pt_busy && accept) begin
      betaidx[ca]                <= betaidx[cb];
      betaidx[cb]                <= betaidx[ca];
      cfg_of[t_cur]              <= cb;
      cfg_of[TW'(t_cur + 1'b1)]  <= ca;
    end
    if (e_we) energy[e_cfg] <= e_val;
    if (ln_done && log_run) lnr[log_got[TW-1:0]] <= ln_val;
  end

  assign rd_betaidx = betaidx[rd_cfg];
  assign rd_energy  = energy[rd_cfg];
  assign lut_data_a = (lut_entry < LUT_AW'(LUT_DEPTH)) ? lut_ram[betaidx[lut_cfg_a]][lut_entry[2:0]] : '0;
  assign lut_data_b = (lut_entry < LUT_AW'(LUT_DEPTH)) ? lut_ram[betaidx[lut_cfg_b]][lut_entry[2:0]] : '0;

  // A decision must not start while the logarithms are still being produced.
  a_logs_before_pt: assert property (@(posedge clk) disable iff (!rst_n)
                                     (pt_start && !pt_busy) |-> logs_ready);

endmodule
