// tb_energy_tree: streams random sets of 400 three-bit values (one set per
// clock, with gaps) into the tree and checks each sum and that it arrives
// exactly ceil(log2 400) = 9 clocks after its inputs.
module tb_energy_tree;
  localparam int N = 400, W = 3, LAT = 9;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [N-1:0][W-1:0] in = '0;
  logic sum_valid;
  logic [W+LAT-1:0] sum;
  int exp_sum [$];
  int exp_time [$];
  int cyc = 0;
  int checks = 0, failures = 0;

  energy_tree #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && sum_valid) begin
    checks += 2;
    if (exp_sum.size() == 0) failures++;
    else begin
      begin automatic int e = exp_sum.pop_front(); if (sum !== (W+LAT)'(e)) begin failures++; if (failures < 5) $display("sum %0d exp %0d", sum, e); end end
      if (cyc - exp_time.pop_front() != LAT) begin
        failures++;
        $display("latency wrong at cycle %0d", cyc);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = (t % 7 != 3);
      begin
        automatic int s = 0;
        for (int i = 0; i < N; i++) begin
          in[i] = W'($urandom_range(0, (t % 5 == 0) ? 7 : 6));
          s += in[i];
        end
        if (in_valid) begin exp_sum.push_back(s); exp_time.push_back(cyc); end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_sum.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
