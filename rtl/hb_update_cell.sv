// hb_update_cell: heat-bath update of one Ising spin.
//
// Inputs are the six neighbour spin bits S_m, the six coupling bits Jhat_km of
// the links to them and one 32-bit random number r. The cell forms
// F = sum_m (Jhat_km xor S_m) (0..6), reads P(sigma=+1) from its own table at
// address F, and sets the new spin to +1 (bit 0) when r < P, else -1 (bit 1).
// It also reports the number of unsatisfied links of the current spin,
// U = sum_m (Jhat_km xor S_m xor S_k), from which the local energy is 2U - 6;
// this is what the energy sweep of parallel tempering adds up.
//
// Timing: the update is combinational; only the table write is clocked. The
// caller registers or writes back `new_spin` at its clock edge.
module hb_update_cell
  import janus_pkg::*;
(
  input  logic              clk,
  input  logic              spin,       // current S_k (used for the energy)
  input  logic [NNB-1:0]    nb,         // neighbour spins S_m
  input  logic [NNB-1:0]    jc,         // couplings Jhat_km
  input  logic [RAND_W-1:0] rnd,
  input  logic              lut_we,
  input  logic [LUT_AW-1:0] lut_waddr,
  input  logic [RAND_W-1:0] lut_wdata,
  output logic              new_spin,
  output logic [2:0]        unsat
);

  logic [LUT_AW-1:0] f;
  logic [RAND_W-1:0] p_up;

  always_comb begin
    f     = '0;
    unsat = '0;
    for (int m = 0; m < int'(NNB); m++) begin
      f     = f + {2'b00, jc[m] ^ nb[m]};
      unsat = unsat + {2'b00, jc[m] ^ nb[m] ^ spin};
    end
  end

  hb_lut u_lut (
    .clk   (clk),
    .we    (lut_we),
    .waddr (lut_waddr),
    .wdata (lut_wdata),
    .raddr (f),
    .rdata (p_up)
  );

  assign new_spin = !(rnd < p_up);

endmodule
