// tb_hb_update_cell: loads a heat-bath table for beta = 0.8, then applies
// random neighbours, couplings, own spin and random numbers. The expected new
// spin is computed from the local field phi = sum J*sigma in +-1 arithmetic
// (not from the XOR count) and the expected unsatisfied-link count from
// sigma_k*J*sigma_m = -1.
module tb_hb_update_cell;
  import janus_pkg::*;
  import janus_ref_pkg::*;
  logic clk = 0;
  logic spin = 0;
  logic [5:0] nb = '0, jc = '0;
  logic [31:0] rnd = '0;
  logic lut_we = 0;
  logic [2:0] lut_waddr = '0;
  logic [31:0] lut_wdata = '0;
  logic new_spin;
  logic [2:0] unsat;
  bit [31:0] tab [7];
  int checks = 0, failures = 0;

  hb_update_cell dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 7; f++) begin
      tab[f] = hb_prob(0.8, f);
      @(negedge clk); lut_we = 1; lut_waddr = 3'(f); lut_wdata = tab[f];
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 4000; t++) begin
      int phi, u, sk;
      bit exp_spin;
      @(negedge clk);
      nb = 6'($urandom); jc = 6'($urandom); spin = 1'($urandom);
      // half the time pick r close to the threshold
      phi = 0; u = 0;
      sk = spin ? -1 : 1;
      for (int m = 0; m < 6; m++) begin
        int sj, jj;
        sj = nb[m] ? -1 : 1;
        jj = jc[m] ? -1 : 1;
        phi += jj * sj;
        if (sk * jj * sj < 0) u++;
      end
      if (t % 2 == 0) rnd = $urandom;
      else rnd = tab[(6 - phi) / 2] + 32'($urandom_range(0, 2)) - 32'd1;
      #1;
      exp_spin = (rnd < tab[(6 - phi) / 2]) ? 1'b0 : 1'b1;
      checks += 2;
      if (new_spin !== exp_spin) begin
        failures++;
        if (failures < 10) $display("spin: phi=%0d rnd=%h got %b", phi, rnd, new_spin);
      end
      if (unsat !== 3'(u)) begin
        failures++;
        if (failures < 10) $display("unsat: got %0d exp %0d", unsat, u);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
