// cordic_vec: CORDIC in vectoring mode, turning each beamspace entry h = re + j*im
// into magnitude and angle. A first stage folds the left half-plane onto the right
// one (negate both parts, add half a turn); then NIT = 14 shift-and-add
// micro-rotations drive the imaginary part to zero while summing the arctangent
// table. mag = K*|h| with the CORDIC gain K = 1.6468 (left in, and removed after
// the rotation CORDIC), ang = arg(h) in units of 2^-16 turn.
// Three guard bits below the data LSB keep the shift truncations small.
// Fully pipelined: one entry per cycle, latency NIT + 1 = 15 cycles.
// The paper only names the CORDIC; its iteration count, widths and angle format
// are this design's choices.
module cordic_vec
  import ra_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  cplx_t              din,
  output logic               out_valid,
  output logic [MW-1:0]      mag,
  output logic [ANGW-1:0]    ang
);
  localparam int unsigned G  = 3;           // guard bits
  localparam int unsigned XW = DW + 3 + G;
  logic signed [XW-1:0] xs [NIT+1];
  logic signed [XW-1:0] ys [NIT+1];
  logic [ANGW-1:0]      zs [NIT+1];
  logic [NIT:0]         vs;

  always_ff @(posedge clk) begin
    if (din.re < 0) begin
      xs[0] <= -(XW'(din.re) <<< G);
      ys[0] <= -(XW'(din.im) <<< G);
      zs[0] <= ANGW'(1 << (ANGW-1));
    end else begin
      xs[0] <= XW'(din.re) <<< G;
      ys[0] <= XW'(din.im) <<< G;
      zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < NIT; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ANGW'(ATAN[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ANGW'(ATAN[i]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vs <= '0;
    else        vs <= {vs[NIT-1:0], in_valid};

  assign out_valid = vs[NIT];
  logic signed [XW-1:0] xr;
  assign xr        = (xs[NIT] + XW'(1 << (G-1))) >>> G;   // drop guard bits, rounded
  assign mag       = (xr < 0) ? '0 : MW'(xr);
  assign ang       = zs[NIT];
endmodule
