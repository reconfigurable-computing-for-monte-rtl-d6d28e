// ln_unit: natural logarithm of a 32-bit uniform random number.
//
// Computes ln(r) for r = rin / 2^32 in (0,1) as a signed fixed-point number
// with FIX_FRAC (16) fractional bits; the result lies in [-22.18, 0]. rin = 0
// returns the most negative value, which the tempering test treats as an
// acceptance. Method: a priority encoder finds the leading one p, the
// normalised mantissa m in [1,2) gives log2(rin) = p - 32 + log2(m), and the
// bits of log2(m) are produced one per clock by repeated squaring (m*m >= 2
// sets the bit and halves m). The binary logarithm is finally multiplied by
// ln 2. Latency: FIX_FRAC + 2 clocks from `start` to `done`; one value at a
// time, which is why the engine computes the logarithms in the background of
// the Monte Carlo sweeps. The paper states only that ln r is computed slowly
// and overlapped with the sweeps; the algorithm here is this design's choice.
// The low 31 bits of the 64-bit square are dropped on purpose (the mantissa
// keeps 32 bits), so lint lists them as unused.
module ln_unit
  import janus_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [RAND_W-1:0]        rin,
  output logic                     busy,
  output logic                     done,
  output logic signed [31:0]       ln_out
);

  localparam logic [31:0] LN2_Q = 32'd45426;   // round(ln 2 * 2^16)

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_SCALE} state_e;
  state_e             state;
  logic [31:0]        mant;        // 1.31 mantissa
  logic [4:0]         iter;
  logic [FIX_FRAC-1:0] frac;
  logic signed [7:0]  expo;        // p - 32
  logic               zero_in;
  logic [4:0]         lead;
  logic [63:0]        sq;

  always_comb begin
    lead = '0;
    for (int i = 0; i < 32; i++) if (rin[i]) lead = 5'(i);
  end

  assign sq = 64'(mant) * 64'(mant);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      ln_out  <= '0;
      mant    <= '0;
      iter    <= '0;
      frac    <= '0;
      expo    <= '0;
      zero_in <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          zero_in <= (rin == '0);
          mant    <= rin << (5'd31 - lead);
          expo    <= 8'(signed'({1'b0, lead})) - 8'sd32;
          frac    <= '0;
          iter    <= '0;
          state   <= S_ITER;
        end
        S_ITER: begin
          if (sq[63]) begin
            frac <= {frac[FIX_FRAC-2:0], 1'b1};
            mant <= sq[63:32];
          end else begin
            frac <= {frac[FIX_FRAC-2:0], 1'b0};
            mant <= sq[62:31];
          end
          iter <= iter + 5'd1;
          if (iter == 5'(FIX_FRAC - 1)) state <= S_SCALE;
        end
        S_SCALE: begin
          if (zero_in) ln_out <= 32'sh8000_0000;
          else         ln_out <= 32'((64'(signed'({expo, frac})) * 64'(signed'({1'b0, LN2_Q}))) >>> FIX_FRAC);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
