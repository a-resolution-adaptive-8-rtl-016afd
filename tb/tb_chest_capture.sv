// tb_chest_capture: arms the capture for a random instance and pilot, sends
// bit-serial samples of several resolutions on all four instances at once, and
// checks the LS estimate z*conj(phi) (the scale 1/sqrt(2) dropped) of exactly the
// first complete sample of the chosen instance after arming, and that h_valid
// pulses two cycles after that sample's last bit-plane.
module tb_chest_capture;
  import ra_pkg::*;
  localparam int NI = NINST;
  logic clk = 0, rst_n = 0, cap_req = 0, h_valid, busy;
  logic [3:0] q = 4'd6;
  logic [1:0] cap_inst = '0, pilot = '0;
  logic [2*B-1:0] z [NI];
  logic [NI-1:0] bvalid = '0, bfirst = '0, blast = '0;
  logic signed [HW-1:0] h_re [B], h_im [B];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  chest_capture dut (.clk(clk), .rst_n(rst_n), .q(q), .cap_req(cap_req), .cap_inst(cap_inst),
    .pilot(pilot), .z(z), .bvalid(bvalid), .bfirst(bfirst), .blast(blast),
    .h_re(h_re), .h_im(h_im), .h_valid(h_valid), .busy(busy));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int k = 0; k < NI; k++) z[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int qq, inst, pr, pim, zc [NI][2*B], tgt [2*B], lastc, hv_cyc;
      qq = (n % 3 == 0) ? 3 : (n % 3 == 1) ? 6 : 8;
      q = 4'(qq);
      inst = $urandom_range(0, NI - 1);
      @(negedge clk);
      cap_req = 1; cap_inst = 2'(inst); pilot = 2'($urandom);
      pr  = pilot[0] ? -1 : 1;
      pim = pilot[1] ? -1 : 1;
      @(negedge clk);
      cap_req = 0;
      pilot = ~pilot;            // must have been latched at arming
      // two samples on every instance; the first one is the captured one
      for (int smp = 0; smp < 2; smp++) begin
        for (int k = 0; k < NI; k++)
          for (int i = 0; i < 2*B; i++) zc[k][i] = $urandom_range(0, (1 << qq) - 1);
        if (smp == 0) for (int i = 0; i < 2*B; i++) tgt[i] = zc[inst][i];
        for (int bt = qq - 1; bt >= 0; bt--) begin
          @(negedge clk);
          for (int k = 0; k < NI; k++) for (int i = 0; i < 2*B; i++) z[k][i] = zc[k][i][bt];
          bvalid = '1; bfirst = {NI{bt == qq - 1}}; blast = {NI{bt == 0}};
          if (smp == 0 && bt == 0) lastc = cyc;
        end
        @(negedge clk);
        bvalid = '0; bfirst = '0; blast = '0;
        if (smp == 0) begin
          // h_valid comes two cycles after the blast cycle
          @(posedge clk); #1;
          checks++;
          if (!h_valid || cyc - lastc != 2) begin
            failures++;
            $display("n=%0d h_valid=%0b latency %0d", n, h_valid, cyc - lastc);
          end
          for (int b = 0; b < B; b++) begin
            int zr, zi, er, ei;
            zr = 2 * tgt[b] - ((1 << qq) - 1);
            zi = 2 * tgt[B+b] - ((1 << qq) - 1);
            er = pr * zr + pim * zi;
            ei = pr * zi - pim * zr;
            checks++;
            if (int'(h_re[b]) != er || int'(h_im[b]) != ei) begin
              failures++;
              if (failures < 10) $display("n=%0d b=%0d got %0d,%0d exp %0d,%0d", n, b, h_re[b], h_im[b], er, ei);
            end
          end
          checks++;
          if (busy) failures++;
        end
      end
      // no second capture without arming
      checks++;
      if (h_valid) failures++;
    end
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
