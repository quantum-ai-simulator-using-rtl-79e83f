// qk_ctrl: sequencer of the quantum-kernel accelerator.
//
// One run has three phases.
//  LOAD   The data divider may take the stream. The phase ends when the
//         divider reports the last word of n_samples samples.
//  PREP   The angle RAMs are read once per sample, 0 .. n_samples-1, one
//         sample per clock. Each read feeds the CORDIC and U_q/V_q pipeline.
//         That pipeline writes chi/phi of the sample into the chi/phi RAMs.
//         PREP_WAIT waits until all n_samples have been written.
//  PAIRS  The controller steps through the upper triangle of the kernel
//         matrix, i = 0 .. n-1 and j = i .. n-1, in row order. Each pair
//         takes two cycles: beat 0 reads the chi/phi RAMs at i and beat 1
//         reads them at j. That gives one kernel entry every 2 clocks, so
//         n(n+1)/2 pairs take n(n+1) cycles.
// Back-pressure: a pair starts only if the output FIFO has room for it after
// all pairs still in flight. The condition is fifo_count + inflight < FIFO_DEPTH.
// Otherwise the controller holds in beat 0 and raises `stall`. From the beat-1
// read to the FIFO write takes about NQ+4 clocks, so up to (NQ+4)/2 pairs are
// in flight. FIFO_DEPTH must be larger than that to keep the full rate. DRAIN waits
// for the last result to reach the FIFO, pulses `done` and returns to LOAD.
// The phases, the upper-triangle order and the credit rule are this
// implementation's choices. The source gives only the per-pair datapath, its
// repetition over all pairs, and that all data stay in on-chip memory.
module qk_ctrl #(
  parameter int unsigned MAX_SAMPLES = 1024,
  parameter int unsigned FIFO_DEPTH  = 512,
  localparam int unsigned AW = $clog2(MAX_SAMPLES),
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW:0]   n_samples,
  // data divider
  output logic          div_en,
  input  logic          load_done,
  // preparation pipeline
  output logic          prep_rd,
  output logic [AW-1:0] prep_addr,
  input  logic          prep_wr,       // one chi/phi word written
  // pair pipeline
  output logic          pair_rd,
  output logic [AW-1:0] pair_addr,
  output logic          pair_beat,
  output logic          pair_last,
  input  logic          k_done,        // one kernel value entered the FIFO
  input  logic [CW-1:0] fifo_count,
  // status
  output logic          busy,
  output logic          stall,
  output logic          done
);
  typedef enum logic [2:0] {S_LOAD, S_PREP, S_PREP_WAIT, S_PAIRS, S_DRAIN} state_t;
  state_t state;

  logic [AW-1:0] pcnt, i, j;
  logic [AW:0]   wcnt;
  logic [CW:0]   inflight;
  logic          beat;
  logic          credit_ok, i_last, j_last;

  assign credit_ok = ({1'b0, fifo_count} + inflight) < (CW+1)'(FIFO_DEPTH);
  assign i_last    = ({1'b0, i} == n_samples - 1'b1);
  assign j_last    = ({1'b0, j} == n_samples - 1'b1);

  always_comb begin
    div_en    = (state == S_LOAD);
    prep_rd   = (state == S_PREP);
    prep_addr = pcnt;
    pair_rd   = (state == S_PAIRS) && (beat || credit_ok);
    pair_addr = beat ? j : i;
    pair_beat = beat;
    pair_last = beat && i_last && j_last;
    stall     = (state == S_PAIRS) && !beat && !credit_ok;
    busy      = (state != S_LOAD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      pcnt     <= '0;
      wcnt     <= '0;
      i        <= '0;
      j        <= '0;
      beat     <= 1'b0;
      inflight <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (prep_wr) wcnt <= wcnt + 1'b1;
      inflight <= inflight + (CW+1)'(pair_rd && beat) - (CW+1)'(k_done);
      unique case (state)
        S_LOAD: if (load_done) begin
          state <= S_PREP;
          pcnt  <= '0;
          wcnt  <= '0;
        end
        S_PREP: begin
          pcnt <= pcnt + 1'b1;
          if ({1'b0, pcnt} == n_samples - 1'b1) state <= S_PREP_WAIT;
        end
        S_PREP_WAIT: if (wcnt == n_samples) begin
          state <= S_PAIRS;
          i     <= '0;
          j     <= '0;
          beat  <= 1'b0;
        end
        S_PAIRS: if (pair_rd) begin
          beat <= !beat;
          if (beat) begin
            if (j_last) begin
              if (i_last) state <= S_DRAIN;
              i <= i + 1'b1;
              j <= i + 1'b1;
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        S_DRAIN: if (inflight == '0) begin
          state <= S_LOAD;
          done  <= 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
