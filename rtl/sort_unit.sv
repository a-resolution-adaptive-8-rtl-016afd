// sort_unit: sorts the B = 32 magnitudes of one beamspace vector in ascending
// order, as they stream in one per cycle. It is an insertion sorter: a row of B
// registers kept sorted, where every new entry is compared with all cells at once
// and slides in behind the cells that are not larger (ties keep arrival order).
// With each magnitude it carries its reciprocal r = floor(2^16 / max(a, 1)),
// which the SURE scan needs, and it sums all reciprocals of the vector.
//
// in_valid marks the entries; every B-th accepted entry closes a vector, and in
// the next cycle done pulses with a[], r[] sorted and rsum valid (they stay until
// the next vector's first entry is inserted, which may be that same cycle).
// The paper only names the sort unit; the insertion sorter and the reciprocal
// side path are this design's choices.
module sort_unit
  import ra_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [MW-1:0]      mag,
  output logic               done,
  output logic [MW-1:0]      a    [B],
  output logic [RW-1:0]      r    [B],
  output logic [RW+$clog2(B)-1:0] rsum
);
  logic [$clog2(B)-1:0] cnt;
  logic [B-1:0] occ;
  logic [RW-1:0] rn;
  logic [B-1:0] lt;     // new entry goes before cell i

  always_comb begin
    rn = RW'((MW+1)'(1 << RF) / ((mag == '0) ? (MW+1)'(1) : (MW+1)'(mag)));
    for (int i = 0; i < B; i++)
      lt[i] = (cnt == '0) || !occ[i] || (mag < a[i]);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (lt[0]) begin
        a[0] <= mag;
        r[0] <= rn;
      end
      for (int i = 1; i < B; i++) begin
        if (lt[i]) begin
          a[i] <= lt[i-1] ? a[i-1] : mag;
          r[i] <= lt[i-1] ? r[i-1] : rn;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      occ  <= '0;
      done <= 1'b0;
      rsum <= '0;
    end else begin
      done <= in_valid && (cnt == $clog2(B)'(B-1));
      if (in_valid) begin
        cnt  <= cnt + 1'b1;     // wraps after B entries
        occ  <= (cnt == '0) ? B'(1) : {occ[B-2:0], 1'b1};
        rsum <= ((cnt == '0) ? '0 : rsum) + (RW+$clog2(B))'(rn);
      end
    end
  end
endmodule
