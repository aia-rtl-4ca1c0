// aia_ky_sampler: Knuth-Yao sampler unit (SU) for non-normalized integer
// distributions, with a rejection item.
//
// The distribution is N = `size` unsigned weights m[0..N-1], one per private
// register R32..R(32+N-1) (low VAL_W bits used). Instead of normalizing, the
// unit adds a rejection weight m[N] = 2^ceil(log2(sum m)) - sum m, so that
// all N+1 weights add up to a power of two 2^W and their binary expansions
// form an exact discrete-distribution-generating tree W levels deep.
//   Preprocess: one row-port read per cycle accumulates sum m (N cycles).
//   Walk: one tree level per cycle, from the most significant column. The
//   column-port read gives bit (W-1-level) of every weight; with m[N]'s bit
//   on top this is the column vector n. With one random bit rb,
//       d' = 2d + !rb - popcount(n).
//   If d' >= 0 the walk descends (d = d'). If d' < 0 a leaf is reached: the
//   result is the (-d')-th set bit of n counted from the top (row N down to
//   row 0). Row N is the rejection item: the walk restarts from the root
//   (d = 0, first column) with fresh random bits; any other row is the sample.
// Interface: pulse `start` with `size` stable; `busy` is high from the next
// cycle until the result; `done` is a one-cycle combinational pulse with
// `result` valid. Latency from start: 1 + N + (random bits consumed) cycles,
// `done` in the cycle of the last bit. `reject` pulses on each rejection and
// `rbit_used` on each random bit (for statistics).
// A zero size or an all-zero distribution returns 0 without drawing bits,
// after N + 1 cycles.
// Published: the rejection item and its formula, the update d' = 2d + !rb -
// sum n, the k-th-set-bit decoder (0xb5 example), one column per cycle,
// restart on rejection, LFSR bits, CSRs SU.seed and SU.size. This design's
// choice: VAL_W, the zero cases, the single-bit-per-cycle distance unit
// (the figure draws sixteen stacked distance units) and the done timing.
module aia_ky_sampler
  import aia_pkg::*;
#(
  parameter int unsigned VAL_W = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [4:0]  size,
  input  logic        seed_load,
  input  logic [31:0] seed,
  // register-file ports
  output logic [4:0]  row_addr,
  input  logic [31:0] row_data,
  output logic [4:0]  col_bit,
  input  logic [31:0] col_data,
  // status
  output logic        busy,
  output logic        done,
  output logic [4:0]  result,
  output logic        reject,
  output logic        rbit_used
);

  localparam int unsigned SUM_W = VAL_W + 5;
  localparam int unsigned WL_W  = $clog2(SUM_W + 1);

  typedef enum logic [1:0] {S_IDLE, S_SUM, S_WALK} state_e;
  state_e state;

  logic [4:0]       n_q;      // number of items
  logic [4:0]       idx_q;    // row counter during preprocess
  logic [SUM_W-1:0] sum_q;
  logic [WL_W-1:0]  col_q;    // tree level
  logic signed [7:0] d_q;

  // ---- random bits
  logic rb, step;
  aia_lfsr u_lfsr (
    .clk, .rst_n, .load(seed_load), .seed, .step, .rbit(rb)
  );

  // ---- preprocess results: W = ceil(log2(sum)) (at least 1), m[N]
  logic [WL_W-1:0]  w_lvls;
  logic [SUM_W:0]   m_n;
  always_comb begin
    w_lvls = WL_W'(1);
    for (int w = SUM_W; w >= 1; w--)
      if ({1'b0, sum_q} <= (SUM_W+1)'(1) << w) w_lvls = WL_W'(w);
    m_n = ((SUM_W+1)'(1) << w_lvls) - {1'b0, sum_q};
  end

  // ---- distance unit and reconfigurable decoder
  logic [WL_W-1:0]   bit_idx;
  logic [32:0]       nvec;
  logic [5:0]        pcnt;
  logic signed [7:0] d_next;
  logic [5:0]        kth;
  logic [5:0]        hit_row;
  logic              hit;

  assign bit_idx = w_lvls - WL_W'(1) - col_q;

  always_comb begin
    nvec = '0;
    for (int i = 0; i < 32; i++) if (i < int'(n_q)) nvec[i] = col_data[i];
    nvec[{1'b0, n_q}] = m_n[bit_idx];
    pcnt = '0;
    for (int i = 0; i < 33; i++) pcnt += 6'(nvec[i]);
    d_next = 8'(2 * d_q) + 8'(!rb) - 8'(pcnt);
    hit = (state == S_WALK) && (sum_q != '0) && (d_next < 0);
    kth = 6'(-d_next);
    // k-th set bit of nvec counted from row N downwards
    hit_row = '0;
    begin
      logic [5:0] cnt;
      cnt = '0;
      for (int i = 32; i >= 0; i--) begin
        if (nvec[i]) begin
          cnt += 6'd1;
          if (cnt == kth) hit_row = 6'(i);
        end
      end
    end
  end

  assign col_bit  = 5'(bit_idx);
  assign row_addr = idx_q;
  assign busy     = (state != S_IDLE);
  assign step     = (state == S_WALK) && (sum_q != '0);
  assign rbit_used = step;
  assign reject   = hit && (hit_row == {1'b0, n_q});
  assign done     = ((state == S_WALK) && (sum_q == '0)) || (hit && !reject);
  assign result   = (sum_q == '0) ? 5'd0 : hit_row[4:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n_q   <= '0;
      idx_q <= '0;
      sum_q <= '0;
      col_q <= '0;
      d_q   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          n_q   <= size;
          idx_q <= '0;
          sum_q <= '0;
          col_q <= '0;
          d_q   <= '0;
          state <= (size == 5'd0) ? S_WALK : S_SUM;
        end
        S_SUM: begin
          sum_q <= sum_q + SUM_W'(row_data[VAL_W-1:0]);
          idx_q <= idx_q + 5'd1;
          if (idx_q == n_q - 5'd1) state <= S_WALK;
        end
        S_WALK: begin
          if (done) begin
            state <= S_IDLE;
          end else if (hit || col_q == w_lvls - WL_W'(1)) begin
            // rejection (or, defensively, a walk past the last level)
            col_q <= '0;
            d_q   <= '0;
          end else begin
            col_q <= col_q + WL_W'(1);
            d_q   <= d_next;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
