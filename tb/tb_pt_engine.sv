// tb_pt_engine: four configurations at four temperatures (beta = 0.5, 0.7,
// 0.9, 1.1), starting from the BETAINDEX permutation C0->T0, C1->T2, C2->T3,
// C3->T1. Each round writes random energies, lets the engine compute its
// logarithms and decide the three neighbouring-temperature swaps, and compares
// the resulting BETAINDEX with a model that draws the same random numbers
// from a sequential generator and decides with real arithmetic
// (ln r <= dBeta*dE). Decisions within 1e-3 of the threshold are not checked.
// Also checks the table lookup through BETAINDEX and the accept/reject counts.
module tb_pt_engine;
  import janus_pkg::*;
  import janus_ref_pkg::*;
  localparam int NT = 4, TW = 2;

  logic clk = 0, rst_n = 0;
  logic host_we = 0;
  io_sel_e host_sel = IO_BETA;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic [TW-1:0] rd_cfg = '0, rd_betaidx;
  logic signed [31:0] rd_energy;
  logic e_we = 0;
  logic [TW-1:0] e_cfg = '0;
  logic signed [31:0] e_val = '0;
  logic [TW-1:0] lut_cfg_a = '0, lut_cfg_b = '0;
  logic [LUT_AW-1:0] lut_entry = '0;
  logic [31:0] lut_data_a, lut_data_b;
  logic log_start = 0, logs_ready, pt_start = 0, pt_busy, pt_done;
  logic [31:0] n_accept, n_reject;

  real beta [NT] = '{0.5, 0.7, 0.9, 1.1};
  int  bidx [NT] = '{0, 2, 3, 1};
  int  cfg_of [NT];
  int  energy [NT];
  bit [31:0] lut_ref [NT][7];
  int checks = 0, failures = 0, exp_acc = 0, exp_rej = 0;
  pr_model m;

  pt_engine #(.NT(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(io_sel_e s, int a, bit [31:0] d);
    @(negedge clk); host_we = 1; host_sel = s; host_addr = 16'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  initial begin
    bit resync;
    m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      hw(IO_BETA, t, 32'(longint'(beta[t] * 65536.0)));
      for (int f = 0; f < 7; f++) begin
        lut_ref[t][f] = hb_prob(beta[t], f);
        hw(IO_LUT, t * 8 + f, lut_ref[t][f]);
      end
    end
    for (int c = 0; c < NT; c++) begin
      hw(IO_BETAIDX, c, 32'(bidx[c]));
      cfg_of[bidx[c]] = c;
    end
    for (int i = 0; i < 62; i++) begin
      bit [31:0] v = $urandom;
      m.set(i, v);
      hw(IO_SEED, i, v);
    end
    // table lookup through BETAINDEX
    for (int c = 0; c < NT; c++) for (int f = 0; f < 7; f++) begin
      lut_cfg_a = TW'(c); lut_cfg_b = TW'(NT - 1 - c); lut_entry = 3'(f);
      #1; checks += 2;
      if (lut_data_a !== lut_ref[bidx[c]][f]) failures++;
      if (lut_data_b !== lut_ref[bidx[NT - 1 - c]][f]) failures++;
    end
    for (int round = 0; round < 40; round++) begin
      real lnr [NT-1];
      resync = 0;
      for (int c = 0; c < NT; c++) begin
        energy[c] = $urandom_range(0, 60) - 30;
        @(negedge clk); e_we = 1; e_cfg = TW'(c); e_val = 32'(energy[c]);
      end
      @(negedge clk); e_we = 0;
      for (int t = 0; t < NT - 1; t++) lnr[t] = $ln((real'(m.next()) + 0.0) / 4294967296.0);
      log_start = 1; @(negedge clk); log_start = 0;
      while (!logs_ready) @(negedge clk);
      pt_start = 1; @(negedge clk); pt_start = 0;
      while (!pt_done) @(negedge clk);
      // reference decisions
      for (int t = 0; t < NT - 1; t++) begin
        int ca, cb;
        real prod;
        ca = cfg_of[t]; cb = cfg_of[t + 1];
        prod = (beta[t + 1] - beta[t]) * real'(energy[cb] - energy[ca]);
        if ((lnr[t] - prod < 1e-3) && (prod - lnr[t] < 1e-3)) resync = 1;
        if (lnr[t] <= prod) begin
          exp_acc++;
          bidx[ca] = t + 1; bidx[cb] = t;
          cfg_of[t] = cb; cfg_of[t + 1] = ca;
        end else exp_rej++;
      end
      for (int c = 0; c < NT; c++) begin
        rd_cfg = TW'(c); #1;
        if (!resync) begin
          checks += 2;
          if (rd_betaidx !== TW'(bidx[c])) begin
            failures++;
            $display("round %0d cfg %0d betaidx %0d exp %0d", round, c, rd_betaidx, bidx[c]);
          end
          if (rd_energy !== 32'(energy[c])) failures++;
        end
        bidx[c] = int'(rd_betaidx);
        cfg_of[bidx[c]] = c;
      end
      if (resync) begin exp_acc = int'(n_accept); exp_rej = int'(n_reject); end
    end
    checks += 3;
    if (n_accept !== 32'(exp_acc)) failures++;
    if (n_reject !== 32'(exp_rej)) failures++;
    if (n_accept == 0 || n_reject == 0) failures++;
    $display("accepted %0d rejected %0d", n_accept, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
