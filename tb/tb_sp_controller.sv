// tb_sp_controller: runs the sequencer for L = 8, R = 4 (two row blocks), two
// pairs, two sweeps and tempering on, records what it does in every clock
// (table load entry, issued word, energy store, idle) and compares that
// trace, clock by clock, with the schedule written out here: per pair 7 table
// clocks, then per sweep a P half-sweep of 16 words, 2 drain clocks, a Q
// half-sweep, 2 drain clocks, then a 32-word energy sweep, 2+4 clocks of tree
// drain and two energy stores. After the last pair it must wait for
// logs_ready, pulse pt_start, wait for pt_done and pulse done. Also checks
// log_start at the start of the run and a run without tempering.
module tb_sp_controller;
  localparam int L = 8, R = 4, NPAIRS = 2, DRAIN = 2, TREE_LAT = 4, NYB = L / R;
  logic clk = 0, rst_n = 0, start = 0, pt_en = 0;
  logic [15:0] n_sweeps = 16'd2;
  logic busy, done, iss_valid, iss_is_q, iss_energy;
  logic [0:0] iss_pair;
  logic [0:0] iss_yb;
  logic [2:0] iss_z;
  logic lut_we;
  logic [2:0] lut_entry;
  logic e_clear, e_store, e_sel, log_start, pt_start;
  logic logs_ready = 0, pt_done = 0;
  string got [$];
  string expq [$];
  int checks = 0, failures = 0;
  int n_log_start = 0, n_pt_start = 0, n_done = 0;
  bit rec = 0;

  sp_controller #(.L(L), .R(R), .NPAIRS(NPAIRS), .DRAIN(DRAIN), .TREE_LAT(TREE_LAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (log_start) n_log_start++;
    if (pt_start) n_pt_start++;
    if (done) n_done++;
    if (rec) begin
      if (lut_we) got.push_back($sformatf("L%0d", lut_entry));
      else if (iss_valid) got.push_back($sformatf("I%0d%0d p%0d y%0d z%0d", iss_is_q, iss_energy, iss_pair, iss_yb, iss_z));
      else if (e_store) got.push_back($sformatf("S%0d p%0d", e_sel, iss_pair));
      else got.push_back("-");
    end
  end

  task automatic build(bit pt, int nsw);
    expq.push_back("-");     // clock in which start is seen
    for (int p = 0; p < NPAIRS; p++) begin
      for (int e = 0; e < 7; e++) expq.push_back($sformatf("L%0d", e));
      for (int s = 0; s < nsw; s++)
        for (int h = 0; h < 2; h++) begin
          for (int y = 0; y < NYB; y++) for (int z = 0; z < L; z++)
            expq.push_back($sformatf("I%0d0 p%0d y%0d z%0d", h, p, y, z));
          for (int d = 0; d < DRAIN; d++) expq.push_back("-");
        end
      if (pt) begin
        for (int h = 0; h < 2; h++) for (int y = 0; y < NYB; y++) for (int z = 0; z < L; z++)
          expq.push_back($sformatf("I%0d1 p%0d y%0d z%0d", h, p, y, z));
        for (int d = 0; d < DRAIN + TREE_LAT; d++) expq.push_back("-");
        expq.push_back($sformatf("S0 p%0d", p));
        expq.push_back($sformatf("S1 p%0d", p));
      end
      expq.push_back("-");   // pair change
    end
  endtask

  task automatic compare();
    checks++;
    if (got.size() < expq.size()) begin
      failures++;
      $display("trace too short: %0d < %0d", got.size(), expq.size());
    end
    for (int i = 0; i < expq.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != expq[i]) begin
        failures++;
        if (failures < 10) $display("clock %0d: got '%s' exp '%s'", i, got[i], expq[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // run 1: tempering on
    pt_en = 1; start = 1; rec = 1;
    @(negedge clk); start = 0;
    build(1, 2);
    repeat (expq.size()) @(negedge clk);
    rec = 0;
    compare();
    repeat (5) @(negedge clk);
    checks += 3;
    if (n_pt_start != 0) failures++;        // must wait for the logarithms
    if (!busy) failures++;
    logs_ready = 1;
    repeat (3) @(negedge clk);
    if (n_pt_start != 1) failures++;
    pt_done = 1; @(negedge clk); pt_done = 0;
    repeat (3) @(negedge clk);
    checks += 3;
    if (n_done != 1) failures++;
    if (busy) failures++;
    if (n_log_start != 1) failures++;
    // run 2: no tempering, one sweep
    got = {}; expq = {};
    logs_ready = 0; pt_en = 0; n_sweeps = 16'd1;
    start = 1; rec = 1;
    @(negedge clk); start = 0;
    build(0, 1);
    repeat (expq.size()) @(negedge clk);
    rec = 0;
    compare();
    repeat (3) @(negedge clk);
    checks += 3;
    if (n_done != 2) failures++;
    if (n_log_start != 1) failures++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
