// cordic_rot: CORDIC in rotation mode, rebuilding a Cartesian entry from a
// (thresholded) magnitude and the angle kept from cordic_vec. A first stage
// handles angles in the left half-plane (start from -mag, turn the angle by half
// a turn); then NIT = 14 micro-rotations turn (mag, 0) by ang, and a final
// constant multiplication by 1/K^2 (24167/65536) removes the gain K of this CORDIC
// together with the gain K that cordic_vec left in the magnitude. The result is
// saturated to the DW-bit data word.
// Three guard bits below the data LSB keep the shift truncations small.
// Fully pipelined: one entry per cycle, latency NIT + 2 = 16 cycles.
// The paper only names the CORDIC; the gain compensation, widths and pipelining
// are this design's choices.
module cordic_rot
  import ra_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [MW-1:0]      mag,
  input  logic [ANGW-1:0]    ang,
  output logic               out_valid,
  output cplx_t              dout
);
  localparam int unsigned G  = 3;           // guard bits
  localparam int unsigned XW = MW + 3 + G;
  logic signed [XW-1:0]   xs [NIT+1];
  logic signed [XW-1:0]   ys [NIT+1];
  logic signed [ANGW-1:0] zs [NIT+1];
  logic [NIT+1:0]         vs;

  always_ff @(posedge clk) begin
    ys[0] <= '0;
    if (ang[ANGW-1] != ang[ANGW-2]) begin          // 90..270 degrees
      xs[0] <= -($signed({3'b000, mag, G'(0)}));
      zs[0] <= $signed(ang - ANGW'(1 << (ANGW-1)));
    end else begin
      xs[0] <= $signed({3'b000, mag, G'(0)});
      zs[0] <= $signed(ang);
    end
  end

  for (genvar i = 0; i < NIT; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ANGW'(ATAN[i]);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ANGW'(ATAN[i]);
      end
    end
  end

  function automatic dw_t sat_scale(input logic signed [XW-1:0] v);
    logic signed [XW+17:0] p;
    p = (v * KINV2_Q16 + (XW+18)'(1 << (15+G))) >>> (16+G);
    if (p > $signed((XW+18)'(2**(DW-1) - 1)))  return DW'(2**(DW-1) - 1);
    if (p < -$signed((XW+18)'(2**(DW-1))))     return {1'b1, {(DW-1){1'b0}}};
    return DW'(p);
  endfunction

  always_ff @(posedge clk) begin
    dout.re <= sat_scale(xs[NIT]);
    dout.im <= sat_scale(ys[NIT]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vs <= '0;
    else        vs <= {vs[NIT:0], in_valid};

  assign out_valid = vs[NIT+1];
endmodule
