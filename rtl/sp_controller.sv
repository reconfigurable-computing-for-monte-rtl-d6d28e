// sp_controller: sequencer of the simulation processor.
//
// A run, started by `start`, goes through the NPAIRS pairs of systems stored in
// the banks. For each pair it
//   1. copies the heat-bath tables of the two systems' temperatures into the
//      update cells (LUT state, one table entry per clock, 7 clocks);
//   2. performs `n_sweeps` Monte Carlo sweeps; a sweep is a half-sweep that
//      updates bank P from bank Q followed by one that updates Q from P. A
//      half-sweep issues one word address per clock, z fastest, then row block
//      yb, and is followed by DRAIN idle clocks so the last write-back lands
//      before the other bank is read;
//   3. when `pt_en` is set, runs one energy sweep over both banks without
//      writing, waits for the adder trees to empty and stores the two energies.
// After the last pair, with `pt_en`, it waits for the engine's logarithms and
// starts the tempering decisions; `done` pulses at the end. `log_start` is
// given when the run starts so that the logarithms are computed during the
// sweeps.
//
// Issue outputs (`iss_*`) are registered state and describe the word handled
// in this clock; the datapath registers them once more to line up with the
// one-clock read latency of the banks. The pair-by-pair schedule and the
// one-word-per-clock rate follow the paper; state encoding, drain lengths and
// the ordering within a run are this design's choices.
module sp_controller #(
  parameter int unsigned L        = 80,
  parameter int unsigned R        = 10,
  parameter int unsigned NPAIRS   = 1,
  parameter int unsigned DRAIN    = 2,
  parameter int unsigned TREE_LAT = 9,
  localparam int unsigned NYB = L / R,
  localparam int unsigned ZW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned YW  = (NYB > 1) ? $clog2(NYB) : 1,
  localparam int unsigned PW  = (NPAIRS > 1) ? $clog2(NPAIRS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [15:0]    n_sweeps,
  input  logic           pt_en,
  output logic           busy,
  output logic           done,
  // word issue
  output logic           iss_valid,
  output logic           iss_is_q,
  output logic           iss_energy,
  output logic [PW-1:0]  iss_pair,
  output logic [YW-1:0]  iss_yb,
  output logic [ZW-1:0]  iss_z,
  // table loading
  output logic           lut_we,
  output logic [2:0]     lut_entry,
  // energies
  output logic           e_clear,
  output logic           e_store,
  output logic           e_sel,
  // tempering engine
  output logic           log_start,
  input  logic           logs_ready,
  output logic           pt_start,
  input  logic           pt_done
);

  typedef enum logic [3:0] {
    S_IDLE, S_LUT, S_SWEEP, S_DRAIN, S_ESWEEP, S_EDRAIN, S_ESTORE, S_NEXT, S_WAITLOG, S_PT, S_DONE
  } state_e;

  state_e        state;
  logic [PW-1:0] pair;
  logic [YW-1:0] yb;
  logic [ZW-1:0] z;
  logic          half;
  logic [15:0]   sweep;
  logic [2:0]    lut_e;
  logic [7:0]    wait_cnt;
  logic          last_word;
  logic          pt_run;

  assign last_word = (z == ZW'(L - 1)) && (yb == YW'(NYB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pair      <= '0;
      yb        <= '0;
      z         <= '0;
      half      <= 1'b0;
      sweep     <= '0;
      lut_e     <= '0;
      wait_cnt  <= '0;
      done      <= 1'b0;
      log_start <= 1'b0;
      pt_start  <= 1'b0;
      e_sel     <= 1'b0;
      pt_run    <= 1'b0;
    end else begin
      done      <= 1'b0;
      log_start <= 1'b0;
      pt_start  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pair      <= '0;
          lut_e     <= '0;
          pt_run    <= pt_en;
          log_start <= pt_en;
          state     <= S_LUT;
        end
        S_LUT: begin
          lut_e <= lut_e + 3'd1;
          if (lut_e == 3'd6) begin
            lut_e <= '0;
            sweep <= '0;
            half  <= 1'b0;
            yb    <= '0;
            z     <= '0;
            if (n_sweeps != 16'd0) state <= S_SWEEP;
            else if (pt_run)       state <= S_ESWEEP;
            else                   state <= S_NEXT;
          end
        end
        S_SWEEP, S_ESWEEP: begin
          if (z == ZW'(L - 1)) begin
            z  <= '0;
            yb <= (yb == YW'(NYB - 1)) ? '0 : yb + 1'b1;
          end else begin
            z <= z + 1'b1;
          end
          if (last_word) begin
            if (state == S_SWEEP) begin
              wait_cnt <= 8'(DRAIN);
              state    <= S_DRAIN;
            end else if (!half) begin
              half <= 1'b1;              // energy sweep: Q follows P at once
            end else begin
              wait_cnt <= 8'(DRAIN + TREE_LAT);
              state    <= S_EDRAIN;
            end
          end
        end
        S_DRAIN: begin
          wait_cnt <= wait_cnt - 8'd1;
          if (wait_cnt == 8'd1) begin
            if (!half) begin
              half  <= 1'b1;
              state <= S_SWEEP;
            end else begin
              half  <= 1'b0;
              sweep <= sweep + 16'd1;
              if (sweep + 16'd1 < n_sweeps) state <= S_SWEEP;
              else if (pt_run)              state <= S_ESWEEP;
              else                          state <= S_NEXT;
            end
          end
        end
        S_EDRAIN: begin
          wait_cnt <= wait_cnt - 8'd1;
          if (wait_cnt == 8'd1) begin
            e_sel <= 1'b0;
            state <= S_ESTORE;
          end
        end
        S_ESTORE: begin
          e_sel <= 1'b1;
          if (e_sel) state <= S_NEXT;
        end
        S_NEXT: begin
          half <= 1'b0;
          if (pair == PW'(NPAIRS - 1)) begin
            state <= pt_run ? S_WAITLOG : S_DONE;
          end else begin
            pair  <= pair + 1'b1;
            state <= S_LUT;
          end
        end
        S_WAITLOG: if (logs_ready) begin
          pt_start <= 1'b1;
          state    <= S_PT;
        end
        S_PT: if (pt_done) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign iss_valid  = (state == S_SWEEP) || (state == S_ESWEEP);
  assign iss_is_q   = half;
  assign iss_energy = (state == S_ESWEEP);
  assign iss_pair   = pair;
  assign iss_yb     = yb;
  assign iss_z      = z;
  assign lut_we     = (state == S_LUT);
  assign lut_entry  = lut_e;
  assign e_clear    = (state == S_LUT);
  assign e_store    = (state == S_ESTORE);

endmodule
