// onboard_histogram: shot accumulator with an on-line top-M sorter.
//
// Data fetching: on `sra` the measured state vector is compared in parallel
// with every state already in the accumulator (T entries, one per possible
// distinct shot result). On a match that entry's occurrence counter is
// incremented; otherwise the next free entry takes the state with count 1.
// If all T entries are in use and the state is new, it is dropped and
// `overflow` is set.
//
// Counter updating / sorting: the changed (state, count) pair triggers the
// sorter, which holds the M most frequent states. In the same clock edge
// that updates the accumulator, the sorter either updates the count of the state if it already holds it,
// or replaces its M-th (smallest) entry when the new count is strictly
// larger or that entry is empty. M odd-even transposition passes follow,
// one per cycle, so the sorted top-M list is ready M+1 clock edges after
// the `sra` cycle;
// `busy` is high during that time and `sra` must wait for it to fall.
// top_*[0] is the most frequent state. Ties keep the earlier entry ahead.
// `clear` empties accumulator and sorter.
module onboard_histogram #(
  parameter int unsigned NUM_QUBITS = 100,
  parameter int unsigned T          = 100,
  parameter int unsigned M          = 4,
  localparam int unsigned CW        = $clog2(T + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  sra,
  input  logic [NUM_QUBITS-1:0] state,
  output logic                  busy,
  output logic                  overflow,
  output logic [NUM_QUBITS-1:0] top_state [M],
  output logic [CW-1:0]         top_cnt   [M],
  output logic [M-1:0]          top_valid
);
  localparam int unsigned TW = $clog2(T + 1);
  localparam int unsigned PW = $clog2(M + 1);

  // ------------------------------------------------ accumulator + comparator
  logic [NUM_QUBITS-1:0] acc_state [T];
  logic [CW-1:0]         acc_cnt   [T];
  logic [TW-1:0]         n_used;

  logic                  found;
  int unsigned           found_idx;
  logic                  trig;
  logic [CW-1:0]         new_cnt;

  always_comb begin
    found     = 1'b0;
    found_idx = 0;
    for (int i = 0; i < T; i++) begin
      if (!found && 32'(i) < 32'(n_used) && acc_state[i] == state) begin
        found     = 1'b1;
        found_idx = i;
      end
    end
    new_cnt = found ? acc_cnt[found_idx] + 1'b1 : CW'(1);
    trig    = sra && !busy && (found || 32'(n_used) < T);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_used   <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < T; i++) begin
        acc_state[i] <= '0;
        acc_cnt[i]   <= '0;
      end
    end else if (clear) begin
      n_used   <= '0;
      overflow <= 1'b0;
    end else if (sra && !busy) begin
      if (found) begin
        acc_cnt[found_idx] <= new_cnt;
      end else if (32'(n_used) < T) begin
        acc_state[n_used] <= state;
        acc_cnt[n_used]   <= CW'(1);
        n_used            <= n_used + 1'b1;
      end else begin
        overflow <= 1'b1;
      end
    end
  end

  // ------------------------------------------------ top-M sorter
  logic [PW-1:0]         passes;    // odd-even passes still to run
  logic                  parity;

  assign busy = (passes != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      passes    <= '0;
      parity    <= 1'b0;
      top_valid <= '0;
      for (int i = 0; i < M; i++) begin
        top_state[i] <= '0;
        top_cnt[i]   <= '0;
      end
    end else if (clear) begin
      passes    <= '0;
      top_valid <= '0;
    end else begin
      if (trig) begin : update
        logic in_top;
        in_top = 1'b0;
        for (int i = 0; i < M; i++) begin
          if (top_valid[i] && top_state[i] == state) begin
            top_cnt[i] <= new_cnt;
            in_top = 1'b1;
          end
        end
        if (!in_top && (!top_valid[M-1] || new_cnt > top_cnt[M-1])) begin
          top_state[M-1] <= state;
          top_cnt[M-1]   <= new_cnt;
          top_valid[M-1] <= 1'b1;
        end
        passes <= PW'(M);
        parity <= 1'b0;
      end else if (passes != 0) begin : sort_pass
        for (int i = 0; i + 1 < M; i++) begin
          if ((i % 2) == int'(parity) && top_valid[i+1] &&
              (!top_valid[i] || top_cnt[i+1] > top_cnt[i])) begin
            top_state[i]   <= top_state[i+1];
            top_cnt[i]     <= top_cnt[i+1];
            top_valid[i]   <= top_valid[i+1];
            top_state[i+1] <= top_state[i];
            top_cnt[i+1]   <= top_cnt[i];
            top_valid[i+1] <= top_valid[i];
          end
        end
        passes <= passes - 1'b1;
        parity <= ~parity;
      end
    end
  end

  a_no_sra_when_busy: assert property (@(posedge clk) disable iff (!rst_n) sra |-> !busy);
endmodule
