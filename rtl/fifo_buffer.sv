// fifo_buffer: first-in first-out buffer of the BEACHES engine. It keeps the
// magnitude and angle of every beamspace entry while the sort and scan units are
// still working out the threshold for that vector (about two vector times).
// Show-ahead: dout is the oldest entry whenever empty = 0, and pop removes it at
// the clock edge. push and pop may happen in the same cycle. DEPTH = 128 entries
// holds four vectors of B = 32, which covers the engine's worst-case occupancy of
// about 2.1 vectors. A memory array with read and write pointers; the paper only
// names the buffer, so depth and interface are this design's choices.
module fifo_buffer #(
  parameter int unsigned W     = 34,
  parameter int unsigned DEPTH = 128
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic          full
);
  localparam int unsigned AWD = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AWD:0] wp, rp;

  always_ff @(posedge clk)
    if (push && !full) mem[wp[AWD-1:0]] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  assign dout  = mem[rp[AWD-1:0]];
  assign empty = (wp == rp);
  assign full  = (wp[AWD-1:0] == rp[AWD-1:0]) && (wp[AWD] != rp[AWD]);

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
