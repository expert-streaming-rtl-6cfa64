// expert_pairing: turns the sorted expert list into the scheduling queue.
//
// Input is the list sorted by token count, largest first. Experts with at
// least theta_min tokens are hot; the other experts that have tokens are cold.
// Hot experts are paired from the two ends of the hot part of the list: the
// hottest with the coolest hot expert, the second with the second-coolest and
// so on, so that a compute-heavy expert and a transfer-heavy expert are
// loaded together. The queue is written as sorted[0], sorted[H-1], sorted[1],
// sorted[H-2], ..., with a lone middle expert last when H is odd. Cold experts
// are diverted to token buffering; those that still have a request that was
// not deferred (cold_keep) are appended after the pairs, hottest first.
// Experts with no tokens are never queued.
//
// Timing: a start pulse samples nothing itself; the inputs must stay stable
// until done. One queue entry is written per clock (q_we, q_idx, q_id);
// cold experts that are not kept cost one idle clock each. done is a
// one-clock pulse after the last entry, with q_len the number of entries.
//
// From the paper: the hot/cold split, the pairing from opposite ends and the
// diversion of cold experts. The order of kept cold experts and the one
// entry per clock rate are this design's choices.
module expert_pairing #(
  parameter int unsigned NUM_EXPERTS = 128,
  parameter int unsigned CNT_W       = 11,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] theta_min,
  input  logic [CNT_W-1:0] sorted_key [NUM_EXPERTS],
  input  logic [AW-1:0]    sorted_id  [NUM_EXPERTS],
  input  logic [NUM_EXPERTS-1:0] cold_keep,
  output logic             q_we,
  output logic [AW-1:0]    q_idx,
  output logic [AW-1:0]    q_id,
  output logic [AW:0]      q_len,
  output logic             busy,
  output logic             done
);

  typedef enum logic [1:0] {S_IDLE, S_HOT, S_COLD} state_t;
  state_t state;

  logic [AW:0] lo, hi, cp, n_hot, wr;
  logic        take_hi;   // next hot entry comes from the cool end

  // Number of hot experts: the list is sorted, so count the qualifying keys.
  always_comb begin
    n_hot = '0;
    for (int unsigned i = 0; i < NUM_EXPERTS; i++)
      if (sorted_key[i] != '0 && sorted_key[i] >= theta_min) n_hot = n_hot + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      lo      <= '0;
      hi      <= '0;
      cp      <= '0;
      wr      <= '0;
      take_hi <= 1'b0;
      q_we    <= 1'b0;
      q_idx   <= '0;
      q_id    <= '0;
      q_len   <= '0;
      done    <= 1'b0;
    end else begin
      q_we <= 1'b0;
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          lo      <= '0;
          hi      <= n_hot - 1'b1;
          cp      <= n_hot;
          wr      <= '0;
          take_hi <= 1'b0;
          state   <= (n_hot != 0) ? S_HOT : S_COLD;
        end
        S_HOT: begin
          // lo <= hi always holds here; lo == hi is the last hot entry.
          q_we  <= 1'b1;
          q_idx <= wr[AW-1:0];
          wr    <= wr + 1'b1;
          if (take_hi) begin
            q_id    <= sorted_id[hi[AW-1:0]];
            hi      <= hi - 1'b1;
            take_hi <= 1'b0;
            if (hi - 1'b1 < lo) state <= S_COLD;
          end else begin
            q_id    <= sorted_id[lo[AW-1:0]];
            lo      <= lo + 1'b1;
            take_hi <= 1'b1;
            if (lo == hi) state <= S_COLD;
          end
        end
        S_COLD: begin
          if (cp >= (AW+1)'(NUM_EXPERTS) || sorted_key[cp[AW-1:0]] == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
            q_len <= wr;
          end else begin
            if (cold_keep[sorted_id[cp[AW-1:0]]]) begin
              q_we  <= 1'b1;
              q_idx <= wr[AW-1:0];
              q_id  <= sorted_id[cp[AW-1:0]];
              wr    <= wr + 1'b1;
            end
            cp <= cp + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
