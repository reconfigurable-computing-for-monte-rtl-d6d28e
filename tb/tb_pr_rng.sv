// tb_pr_rng: checks the 80-output Parisi-Rapuano generator against a
// sequential model, clock by clock, including a clock with the enable low
// (no advance) and a reseed in the middle of the run.
module tb_pr_rng;
  import janus_pkg::*;
  import janus_ref_pkg::*;

  localparam int NOUT = 80;
  logic clk = 0;
  logic en = 0, seed_we = 0;
  logic [5:0] seed_idx = '0;
  logic [31:0] seed_data = '0;
  logic [NOUT-1:0][31:0] rnd;
  int checks = 0, failures = 0;
  pr_model m;

  pr_rng #(.NOUT(NOUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic seed_all();
    for (int i = 0; i < 62; i++) begin
      bit [31:0] v = $urandom;
      m.set(i, v);
      @(negedge clk); seed_we = 1; seed_idx = 6'(i); seed_data = v;
    end
    @(negedge clk); seed_we = 0;
  endtask

  task automatic check_step(bit advance);
    bit [31:0] exp_v;
    bit [31:0] save [$];
    @(negedge clk);
    for (int n = 0; n < NOUT; n++) begin
      exp_v = m.next();
      save.push_back(exp_v);
      checks++;
      if (rnd[n] !== exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d got %h exp %h", n, rnd[n], exp_v);
      end
    end
    en = advance;
    @(negedge clk);
    en = 0;
    if (!advance) begin
      // outputs must be unchanged; rewind the model by re-checking first output
      checks++;
      if (rnd[0] !== save[0]) failures++;
      // model advanced, hardware did not: resynchronise by reseeding both
    end
  endtask

  initial begin
    m = new();
    seed_all();
    for (int s = 0; s < 6; s++) check_step(1'b1);
    check_step(1'b0);
    m = new();
    seed_all();
    for (int s = 0; s < 4; s++) check_step(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
