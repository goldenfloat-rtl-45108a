// lucas_accumulator -- integer-backed accumulator for phi-scaled sums.
//
// For every integer n >= 0, phi^(2n) + phi^(-2n) = L_(2n), the even-index
// Lucas number (L_0 = 2, L_1 = 1, L_k = L_(k-1) + L_(k-2)). A sum of
// phi-powers S = sum_i phi^(2 n_i) can therefore be carried exactly as the
// unsigned integer A = sum_i L_(2 n_i); the conjugate residual
// R = sum_i phi^(-2 n_i) = A - S lies in (0, count/phi^2] for n_i >= 1, so
// A together with the term count pins S down with no wide fixed-point
// register and no fractional storage. The paper gives this identity and
// its use as an accumulator; word widths, handshake and latency are this
// design's choices.
//
// Each accepted index n is turned into L_(2n) by the even-index recurrence
// L_(2k+2) = 3 L_(2k) - L_(2k-2), which powers of phi^2 obey because
// phi^4 = 3 phi^2 - 1; 3x is formed as x + 2x, so the unit uses adders,
// subtractors and registers only. Starting from (L_0, L_2) = (2, 3) the
// unit takes n-1 recurrence steps, one per clock, and adds L_(2n) into the
// accumulator on the next clock.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   in_valid/in_ready/in_n : valid-ready handshake for one index n,
//                            0 <= n <= N_MAX;
//   clear                  : zeroes the accumulator and the count (only
//                            while idle; ignored while busy);
//   acc, count             : running sum of L_(2 n_i) and number of terms;
//   term, term_valid       : the last L_(2n) and a one-cycle pulse when it
//                            is added;
//   overflow               : sticky, set if acc or count wrapped.
// Timing: an index accepted in cycle t is added at the end of cycle
// t + max(n,1); in_ready is low from t+1 to that cycle, so a new index is
// taken every max(n,1)+1 cycles. The index-range assertion is disabled
// during reset, so lint sees rst_n used both as an asynchronous reset and
// as a clocked term; the assertion is not part of the synthesised logic.
module lucas_accumulator #(
  parameter int N_MAX = 256,                          // largest index n
  parameter int IDX_W = $clog2(N_MAX + 1),
  // bits of L_(2 N_MAX): log2(phi) = 0.6942419136..., plus one spare bit
  parameter int L_W   = (2 * N_MAX * 694242 + 999999) / 1000000 + 1,
  parameter int CNT_W = 16,
  parameter int ACC_W = L_W + CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_n,
  output logic [ACC_W-1:0] acc,
  output logic [CNT_W-1:0] count,
  output logic [L_W-1:0]   term,
  output logic             term_valid,
  output logic             overflow
);
  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e           state;
  logic [IDX_W-1:0] target, k;
  logic [L_W-1:0]   prev, cur, next;
  logic [L_W-1:0]   sel;
  logic [ACC_W:0]   acc_sum;

  always_comb begin
    next    = (cur << 1) + cur - prev;
    sel     = (target == '0) ? prev : cur;
    acc_sum = {1'b0, acc} + (ACC_W+1)'(sel);
  end

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      target     <= '0;
      k          <= '0;
      prev       <= '0;
      cur        <= '0;
      acc        <= '0;
      count      <= '0;
      term       <= '0;
      term_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      term_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (in_valid) begin
            target <= in_n;
            k      <= IDX_W'(1);
            prev   <= L_W'(2);     // L_0
            cur    <= L_W'(3);     // L_2
            state  <= S_RUN;
          end else if (clear) begin
            acc      <= '0;
            count    <= '0;
            overflow <= 1'b0;
          end
        end
        S_RUN: begin
          if (target == '0 || k == target) begin
            acc        <= acc_sum[ACC_W-1:0];
            count      <= count + CNT_W'(1);
            term       <= sel;
            term_valid <= 1'b1;
            if (acc_sum[ACC_W] || (count == '1)) overflow <= 1'b1;
            state      <= S_IDLE;
          end else begin
            prev <= cur;
            cur  <= next;
            k    <= k + IDX_W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An index beyond N_MAX would overflow the recurrence registers.
  a_index_range: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_ready) |-> (in_n <= IDX_W'(N_MAX)));
endmodule
