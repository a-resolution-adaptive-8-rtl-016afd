// tb_sort_unit: streams vectors of B magnitudes (random, with many ties, sorted,
// reverse sorted, with zeros), back to back and with gaps, and checks that each
// done pulse comes one cycle after the vector's last entry with the entries in
// ascending order, each carrying floor(2^16/max(a,1)), and rsum the sum of all.
module tb_sort_unit;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, iv = 0, done;
  logic [MW-1:0] mag = '0;
  logic [MW-1:0] a [B];
  logic [RW-1:0] r [B];
  logic [RW+$clog2(B)-1:0] rsum;
  int checks = 0, failures = 0, ndone = 0;
  int vq [$];

  always #5 clk = ~clk;
  sort_unit dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .mag(mag), .done(done), .a(a), .r(r), .rsum(rsum));

  always @(posedge clk) begin
    #1;
    if (done) begin
      int v [B], es;
      ndone++;
      for (int b = 0; b < B; b++) v[b] = vq.pop_front();
      v.sort();
      es = 0;
      for (int b = 0; b < B; b++) begin
        int rr;
        rr = 65536 / ((v[b] == 0) ? 1 : v[b]);
        es += rr;
        checks += 2;
        if (int'(a[b]) != v[b]) begin failures++; if (failures < 10) $display("a[%0d]=%0d exp %0d", b, a[b], v[b]); end
        if (int'(r[b]) != rr) begin failures++; if (failures < 10) $display("r[%0d]=%0d exp %0d", b, r[b], rr); end
      end
      checks++;
      if (int'(rsum) != es) failures++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      for (int b = 0; b < B; b++) begin
        int v;
        case (n % 5)
          0: v = $urandom_range(0, (1 << MW) - 1);
          1: v = $urandom_range(0, 3);
          2: v = b * 100;
          3: v = (B - b) * 1000;
          default: v = (b % 4 == 0) ? 0 : $urandom_range(0, 5000);
        endcase
        if (n % 3 == 2 && b % 5 == 0) begin @(negedge clk); iv = 0; mag = '1; end
        @(negedge clk);
        mag = MW'(v); iv = 1; vq.push_back(v);
      end
    end
    @(negedge clk); iv = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 40) begin failures++; $display("done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
