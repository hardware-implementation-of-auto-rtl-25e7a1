// amif_ctrl: per-sample sequencer of the real-time AMIF calculator.
//
// After reset, and whenever `restart` is pulsed (a change of input source),
// the controller spends N_LEVELS^2/2 cycles in ST_INIT zeroing the joint
// histogram memories of all lanes through both RAM ports, and holds `clr`
// high so that the marginal histograms, the sample buffer and the AMIF sums
// are cleared too. Then, for every sample:
//   ST_IDLE   sample_ready = 1; a sample with sample_valid is taken (shift)
//   ST_PREP   issue the reads of the fixed marginal counts (prep); if the
//             sample buffer reports that no sample enters the window yet
//             (in_valid = 0), return to ST_IDLE with nothing to update
//   ST_ROWS   N_LEVELS cycles: scan_issue, phase PH_ROWS, idx = 0..N-1
//   ST_COLS   N_LEVELS cycles: scan_issue, phase PH_COLS, idx = 0..N-1
//   ST_DRAIN  the last read returns
//   ST_COMMIT write back histograms (commit); the AMIF sums are final; done
// so a sample costs 2*N_LEVELS + 4 cycles when samples arrive back to back.
// The memories answer one cycle after the address, so the controller also
// gives the delayed copies d_en / d_phase / d_idx that go with the returning
// data, and cap_const in the cycle the fixed marginal counts return.
// The paper describes what happens per sample; this schedule is this
// design's own.
module amif_ctrl
  import amif_pkg::*;
#(
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned BW       = $clog2(N_LEVELS),
  parameter int unsigned AW       = 2 * $clog2(N_LEVELS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          sample_valid,
  output logic          sample_ready,
  output logic          shift,
  input  logic          in_valid,
  // initialisation of the joint histograms
  output logic          clr,
  output logic          init_we,
  output logic [AW-1:0] init_addr0,
  output logic [AW-1:0] init_addr1,
  // issue side
  output logic          prep,
  output logic          scan_issue,
  output scan_phase_e   phase,
  output logic [BW-1:0] idx,
  // data side (one cycle later)
  output logic          cap_const,
  output logic          d_en,
  output scan_phase_e   d_phase,
  output logic [BW-1:0] d_idx,
  output logic          commit,
  output logic          done,
  output logic          busy
);

  typedef enum logic [2:0] {
    ST_INIT, ST_IDLE, ST_PREP, ST_ROWS, ST_COLS, ST_DRAIN, ST_COMMIT
  } state_e;

  localparam int unsigned HALF = (N_LEVELS * N_LEVELS) / 2;

  state_e        state;
  logic [AW-1:0] init_cnt;
  logic [BW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_INIT;
      init_cnt <= '0;
      cnt      <= '0;
    end else if (restart) begin
      state    <= ST_INIT;
      init_cnt <= '0;
      cnt      <= '0;
    end else begin
      unique case (state)
        ST_INIT: begin
          if (32'(init_cnt) == HALF - 1) begin
            init_cnt <= '0;
            state    <= ST_IDLE;
          end else begin
            init_cnt <= init_cnt + 1'b1;
          end
        end
        ST_IDLE:   if (sample_valid) state <= ST_PREP;
        ST_PREP: begin
          cnt   <= '0;
          state <= in_valid ? ST_ROWS : ST_IDLE;
        end
        ST_ROWS: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N_LEVELS - 1) state <= ST_COLS;
        end
        ST_COLS: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N_LEVELS - 1) state <= ST_DRAIN;
        end
        ST_DRAIN:  state <= ST_COMMIT;
        ST_COMMIT: state <= ST_IDLE;
        default:   state <= ST_INIT;
      endcase
    end
  end

  always_comb begin
    sample_ready = (state == ST_IDLE) && !restart;
    shift        = sample_ready && sample_valid;
    clr          = (state == ST_INIT) || restart;
    init_we      = (state == ST_INIT) && !restart;
    init_addr0   = init_cnt;
    init_addr1   = init_cnt + AW'(HALF);
    prep         = (state == ST_PREP);
    scan_issue   = (state == ST_ROWS) || (state == ST_COLS);
    phase        = (state == ST_COLS) ? PH_COLS : PH_ROWS;
    idx          = cnt;
    commit       = (state == ST_COMMIT);
    done         = commit;
    busy         = (state != ST_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_const <= 1'b0;
      d_en      <= 1'b0;
      d_phase   <= PH_ROWS;
      d_idx     <= '0;
    end else begin
      cap_const <= prep;
      d_en      <= scan_issue && !restart;
      d_phase   <= phase;
      d_idx     <= idx;
    end
  end

`ifndef SYNTHESIS
  a_shift_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    shift |-> state == ST_IDLE);
`endif

endmodule
