// tb_ln_unit: random and corner-case inputs (1, 2^31, 2^32-1, 0), result
// compared with the real-valued ln(r/2^32) to within 2e-4; the latency from
// start to done must be 18 clocks (1 + 16 + 1).
module tb_ln_unit;
  import janus_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] rin = '0;
  logic busy, done;
  logic signed [31:0] ln_out;
  int checks = 0, failures = 0;

  ln_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(bit [31:0] v);
    int n;
    real expv, got;
    @(negedge clk); rin = v; start = 1;
    @(negedge clk); start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks += 2;
    if (n != 18) begin failures++; $display("latency %0d", n); end
    if (v == 0) begin
      if (ln_out !== 32'sh8000_0000) failures++;
    end else begin
      expv = $ln(real'(v) / 4294967296.0);
      got  = real'(ln_out) / 65536.0;
      if ((got - expv > 2e-4) || (expv - got > 2e-4)) begin
        failures++;
        if (failures < 10) $display("ln(%h): got %f exp %f", v, got, expv);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(32'd1); one(32'h8000_0000); one(32'hffff_ffff); one(32'd0); one(32'd3);
    for (int t = 0; t < 2000; t++) one((t % 3 == 0) ? ($urandom >> $urandom_range(0, 31)) : $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
