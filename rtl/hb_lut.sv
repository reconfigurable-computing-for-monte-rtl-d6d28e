// hb_lut: heat-bath probability table of one update cell.
//
// Seven 32-bit entries, one per value of F = (6 - phi)/2, each holding
// P(sigma = +1) = exp(phi/T) / (exp(phi/T) + exp(-phi/T)) as an unsigned
// fraction of 2^32. Reading is combinational (distributed RAM); writing is
// synchronous through `we/waddr/wdata`. An address of 7 reads 0. Contents are
// undefined until written. One table per cell, as in the paper, so every table
// has a single reader; the table is filled by the controller from the
// per-temperature table memory before a sweep.
module hb_lut
  import janus_pkg::*;
(
  input  logic              clk,
  input  logic              we,
  input  logic [LUT_AW-1:0] waddr,
  input  logic [RAND_W-1:0] wdata,
  input  logic [LUT_AW-1:0] raddr,
  output logic [RAND_W-1:0] rdata
);

  logic [RAND_W-1:0] mem [LUT_DEPTH];

  always_ff @(posedge clk) begin
    if (we && (waddr < LUT_AW'(LUT_DEPTH))) mem[waddr[2:0]] <= wdata;
  end

  assign rdata = (raddr < LUT_AW'(LUT_DEPTH)) ? mem[raddr[2:0]] : '0;

endmodule
