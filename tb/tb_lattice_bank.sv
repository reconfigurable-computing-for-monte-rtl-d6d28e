// tb_lattice_bank: random row-masked writes and three-port reads on a small
// bank, compared with a model array. Checks the one-clock read latency and
// that a read in the clock of a write to the same word returns the old data.
module tb_lattice_bank;
  localparam int L = 8, R = 4, DEPTH = 16, NRD = 3, AW = 4;
  logic clk = 0;
  logic [NRD-1:0][AW-1:0] rd_addr = '0;
  logic [NRD-1:0][R-1:0][L-1:0] rd_data;
  logic we = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [R-1:0] wr_rowmask = '0;
  logic [R-1:0][L-1:0] wr_data = '0;
  logic [R-1:0][L-1:0] model [DEPTH];
  logic [R-1:0][L-1:0] expect_q [NRD];
  int checks = 0, failures = 0;

  lattice_bank #(.L(L), .R(R), .DEPTH(DEPTH), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; wr_addr = AW'(a); wr_rowmask = '1;
      for (int r = 0; r < R; r++) wr_data[r] = L'($urandom);
      model[a] = wr_data;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        rd_addr[p] = AW'($urandom_range(0, DEPTH - 1));
        expect_q[p] = model[rd_addr[p]];
      end
      we = 1'($urandom);
      wr_addr = (t % 3 == 0) ? rd_addr[0] : AW'($urandom_range(0, DEPTH - 1));
      wr_rowmask = R'($urandom);
      for (int r = 0; r < R; r++) wr_data[r] = L'($urandom);
      if (we) for (int r = 0; r < R; r++) if (wr_rowmask[r]) model[wr_addr][r] = wr_data[r];
      @(posedge clk); #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rd_data[p] !== expect_q[p]) begin
          failures++;
          if (failures < 10) $display("port %0d addr %0d got %h exp %h", p, rd_addr[p], rd_data[p], expect_q[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
