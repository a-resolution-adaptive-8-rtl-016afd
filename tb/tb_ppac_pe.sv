// tb_ppac_pe: stores a random x (xres = 1..4 mid-rise digits per entry) in the
// four rows of a PE, streams random q-bit mid-rise z vectors (q = 1..8) MSB first
// with the one-cycle-delayed framing, and compares the accumulator with the
// integer inner product sum_i x_i z_i computed from the entry values.
module tb_ppac_pe;
  import ra_pkg::*;
  localparam int N = 2*B;
  logic clk = 0, we = 0, upd = 0, acc = 0;
  logic [1:0] wrow = '0;
  logic [N/CG-1:0] wmask = '1;
  logic [N-1:0] wdata = '0, z = '0;
  logic [XB_MAX-1:0] en = '0;
  logic signed [ACCW-1:0] result;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ppac_pe #(.N(N)) dut (.clk(clk), .we(we), .wrow(wrow), .wmask(wmask), .wdata(wdata),
                        .z(z), .en(en), .upd(upd), .acc(acc), .result(result));

  logic [N-1:0] xr [XB_MAX];

  initial begin
    for (int n = 0; n < 60; n++) begin
      int xres, q, xv [N], zc [N], expv;
      xres = 1 + (n % 4);
      q    = 1 + (n % 8);
      for (int k = 0; k < XB_MAX; k++) begin
        @(negedge clk);
        xr[k] = {$urandom, $urandom};
        we = 1; wrow = 2'(k); wdata = xr[k];
      end
      @(negedge clk);
      we = 0;
      for (int k = 0; k < XB_MAX; k++) en[k] = (k < xres);
      for (int i = 0; i < N; i++) begin
        xv[i] = 0;
        for (int k = 0; k < xres; k++) xv[i] += (xr[k][i] ? 1 : -1) * (1 << k);
        zc[i] = $urandom_range(0, (1 << q) - 1);
      end
      expv = 0;
      for (int i = 0; i < N; i++) expv += xv[i] * (2 * zc[i] - ((1 << q) - 1));
      // bit-planes MSB first; upd/acc follow one cycle later
      for (int b = q - 1; b >= -1; b--) begin
        @(negedge clk);
        if (b >= 0) for (int i = 0; i < N; i++) z[i] = zc[i][b];
        upd = (b < q - 1);
        acc = (b < q - 2);
      end
      @(negedge clk);
      upd = 0;
      checks++;
      if (int'(result) != expv) begin
        failures++;
        if (failures < 10) $display("n=%0d xres=%0d q=%0d got %0d exp %0d", n, xres, q, result, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
