// smul_fft: B = 32-point streaming FFT (INV = 0) or IFFT (INV = 1) of the BEACHES
// engine. It is fully parallel and pipelined: all 32 complex inputs enter in one
// cycle, each of the log2(32) = 5 radix-2 decimation-in-frequency stages ends in a
// register, and a new vector may enter every cycle (the engine feeds one every 32
// cycles). Latency: 5 cycles from in_valid to out_valid. The outputs are put back
// into natural order by wiring (bit reversal).
//
// Multiplierless: every twiddle factor is a fixed 10-fractional-bit constant
// (round(1024*cos), round(1024*sin), see ra_pkg), so each product is a constant
// multiplication, i.e. a few shifted additions, rounded back by >>> 10. The
// forward transform keeps full scale (out = DFT(x), so inputs must leave 5 bits of
// headroom); the inverse halves after every stage (out = IDFT(x) = (1/32)*sum
// x_k e^{+j...}), so FFT followed by IFFT returns the input.
//
// The paper takes this unit from earlier work and only names it (streaming,
// multiplierless, used for both FFT and IFFT); the radix-2 DIF pipeline, the
// twiddle precision and the scaling are this design's choices.
module smul_fft
  import ra_pkg::*;
#(
  parameter bit INV = 1'b0
)(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  cplx_t  x   [B],
  output logic   out_valid,
  output cplx_t  y   [B]
);
  localparam int unsigned NS = $clog2(B);

  cplx_t st [NS+1][B];
  logic [NS:0] vld;

  assign st[0] = x;
  assign vld[0] = in_valid;

  // product of d with twiddle k (W^k forward, W^-k inverse), rounded
  function automatic cplx_t twmul(input cplx_t d, input logic [3:0] k);
    logic signed [31:0] pr, pi;
    cplx_t r;
    if (INV) begin
      pr = d.re * TW_COS[k] - d.im * TW_SIN[k];
      pi = d.im * TW_COS[k] + d.re * TW_SIN[k];
    end else begin
      pr = d.re * TW_COS[k] + d.im * TW_SIN[k];
      pi = d.im * TW_COS[k] - d.re * TW_SIN[k];
    end
    pr   = (pr + 32'sd512) >>> TWF;
    pi   = (pi + 32'sd512) >>> TWF;
    r.re = DW'(pr);
    r.im = DW'(pi);
    return r;
  endfunction

  function automatic dw_t half(input logic signed [DW:0] v);
    return INV ? DW'(v >>> 1) : DW'(v);
  endfunction

  function automatic int bitrev(input int i);
    int r;
    r = 0;
    for (int b = 0; b < NS; b++) if (i[b]) r |= 1 << (NS - 1 - b);
    return r;
  endfunction

  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam int unsigned H = B >> (s + 1);   // butterfly span
    always_ff @(posedge clk) begin
      for (int blk = 0; blk < B; blk += 2*H) begin
        for (int j = 0; j < H; j++) begin
          cplx_t a, b, d;
          logic signed [DW:0] sr, si, dr, di;
          a  = st[s][blk+j];
          b  = st[s][blk+j+H];
          sr = (DW+1)'(a.re) + (DW+1)'(b.re);
          si = (DW+1)'(a.im) + (DW+1)'(b.im);
          dr = (DW+1)'(a.re) - (DW+1)'(b.re);
          di = (DW+1)'(a.im) - (DW+1)'(b.im);
          st[s+1][blk+j].re <= half(sr);
          st[s+1][blk+j].im <= half(si);
          d.re = half(dr);
          d.im = half(di);
          st[s+1][blk+j+H] <= twmul(d, 4'(j << s));
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vld[s+1] <= 1'b0;
      else        vld[s+1] <= vld[s];
  end

  // bit-reversed to natural order
  for (genvar i = 0; i < B; i++) begin : g_out
    assign y[bitrev(i)] = st[NS][i];
  end
  assign out_valid = vld[NS];
endmodule
