// tb_hb_lut: writes the seven table entries, reads them back at every
// address, checks that address 7 reads zero and that a write to address 7 is
// ignored.
module tb_hb_lut;
  import janus_pkg::*;
  logic clk = 0, we = 0;
  logic [2:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref_mem [7];
  int checks = 0, failures = 0;

  hb_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 3; round++) begin
      for (int a = 0; a < 7; a++) begin
        ref_mem[a] = $urandom;
        @(negedge clk); we = 1; waddr = 3'(a); wdata = ref_mem[a];
      end
      @(negedge clk); we = 1; waddr = 3'd7; wdata = 32'hdead_beef;
      @(negedge clk); we = 0;
      for (int a = 0; a < 8; a++) begin
        raddr = 3'(a);
        #1;
        checks++;
        if (rdata !== ((a < 7) ? ref_mem[a] : 32'd0)) begin
          failures++;
          $display("addr %0d got %h", a, rdata);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
