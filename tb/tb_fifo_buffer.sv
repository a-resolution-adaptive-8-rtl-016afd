// tb_fifo_buffer: random pushes and pops (simultaneous ones included) against a
// queue reference; checks data order, empty and full, and fills the buffer to
// exactly DEPTH entries once.
module tb_fifo_buffer;
  localparam int W = 34, DEPTH = 128;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  logic [W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  always #5 clk = ~clk;
  fifo_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .push(push), .din(din),
                                          .pop(pop), .dout(dout), .empty(empty), .full(full));

  task automatic step(bit pu, bit po);
    @(negedge clk);
    checks += 2;
    if (empty != (q.size() == 0)) failures++;
    if (full != (q.size() == DEPTH)) failures++;
    if (q.size() > 0) begin
      checks++;
      if (dout != q[0]) begin failures++; if (failures < 10) $display("data %h exp %h", dout, q[0]); end
    end
    push = pu && (q.size() < DEPTH);
    pop  = po && (q.size() > 0);
    din  = {$urandom, $urandom};
    if (pop) void'(q.pop_front());
    if (push) q.push_back(din);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < DEPTH + 5; n++) step(1, 0);
    for (int n = 0; n < 3000; n++) step($urandom_range(0, 99) < 55, $urandom_range(0, 99) < 50);
    for (int n = 0; n < DEPTH + 5; n++) step(0, 1);
    step(0, 0);
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
