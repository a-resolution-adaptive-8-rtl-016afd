// scan_unit: picks the BEACHES denoising threshold tau* by scanning the sorted
// magnitudes a_1 <= ... <= a_B and minimising Stein's unbiased risk estimate of
// complex soft-thresholding. With noise variance N0 per beamspace entry and
// candidate tau = a_k (k = 0 means tau = 0),
//   SURE(tau) + B*N0 = sum_{j<=k} a_j^2 + (B-k)*tau^2
//                      + N0 * ( 2(B-k) - tau * sum_{j>k} 1/a_j ).
// The unit evaluates it in integers scaled by 2^16, using the reciprocals r_j =
// floor(2^16/a_j) from the sort unit and their total rsum:
//   C_k = ((P_k + (B-k) a_k^2) << 16) + N0*(2(B-k) << 16) - N0 * a_k * (rsum - Q_k)
// with P_k, Q_k the running sums of a_j^2 and r_j over j <= k. One candidate per
// cycle; the smallest C wins, the earliest on ties, starting from tau = 0.
//
// start (one cycle) copies a[], r[], rsum and n0; B cycles later tau_valid pulses
// and tau holds tau* until the next result. A new start may coincide with the
// last scan cycle, so one vector per B cycles is sustained.
// n0 is in units of the squared CORDIC magnitude (K^2 times the beamspace noise
// variance). The paper says only that the sort and scan units find the
// MSE-optimal threshold from SURE; the formula is the standard SURE of complex
// soft-thresholding, and the fixed-point form is this design's.
module scan_unit
  import ra_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [MW-1:0]      a_in [B],
  input  logic [RW-1:0]      r_in [B],
  input  logic [RW+$clog2(B)-1:0] rsum_in,
  input  logic [NW-1:0]      n0,
  output logic               tau_valid,
  output logic [MW-1:0]      tau,
  output logic               busy
);
  logic [MW-1:0] a [B];
  logic [RW-1:0] r [B];
  logic [RW+$clog2(B)-1:0] rsum, q_acc, q_new;
  logic [NW-1:0] n0_q;
  logic [2*MW+$clog2(B)-1:0] p_acc, p_new;
  logic [$clog2(B)-1:0] j;
  logic signed [CW-1:0] best, cost;
  logic [MW-1:0] best_tau, cand_tau;
  logic [$clog2(B):0] nabove;   // B - k

  always_comb begin
    cand_tau = a[j];
    p_new    = p_acc + (2*MW+$clog2(B))'(a[j]) * (2*MW+$clog2(B))'(a[j]);
    q_new    = q_acc + (RW+$clog2(B))'(r[j]);
    nabove   = ($clog2(B)+1)'(B) - ($clog2(B)+1)'(j) - 1'b1;
    cost     = (CW'(p_new) + CW'(nabove) * CW'(a[j]) * CW'(a[j])) <<< RF;
    cost     = cost + CW'(n0_q) * (CW'(2 * nabove) <<< RF);
    cost     = cost - CW'(n0_q) * CW'(a[j]) * CW'(rsum - q_new);
  end

  always_ff @(posedge clk)
    if (start) begin
      a <= a_in;
      r <= r_in;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      tau_valid <= 1'b0;
      tau       <= '0;
      j         <= '0;
      p_acc     <= '0;
      q_acc     <= '0;
      best      <= '0;
      best_tau  <= '0;
      rsum      <= '0;
      n0_q      <= '0;
    end else begin
      tau_valid <= 1'b0;
      if (busy) begin
        p_acc <= p_new;
        q_acc <= q_new;
        j     <= j + 1'b1;
        if (cost < best) begin
          best     <= cost;
          best_tau <= cand_tau;
        end
        if (j == $clog2(B)'(B-1)) begin
          busy      <= 1'b0;
          tau_valid <= 1'b1;
          tau       <= (cost < best) ? cand_tau : best_tau;
        end
      end
      if (start) begin
        rsum     <= rsum_in;
        n0_q     <= n0;
        busy     <= 1'b1;
        j        <= '0;
        p_acc    <= '0;
        q_acc    <= '0;
        best     <= CW'(n0) * (CW'(2 * B) <<< RF);
        best_tau <= '0;
      end
    end
  end
endmodule
