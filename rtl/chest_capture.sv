// chest_capture: front end of the channel estimator. During training one UE sends
// a known pilot phi while the others are silent, and the least-squares estimate
// of its channel vector is h~ = z / phi. This block, once armed with cap_req,
// waits for the next complete sample of PPAC instance cap_inst, collects its q
// bit-planes (MSB first) into codes, turns each code c into the mid-rise value
// 2c - (2^q - 1), and forms h~.
//
// Pilots are QPSK, phi = (pr + j*pi)/sqrt(2) with pr = pilot[0] ? -1 : +1 and
// pi = pilot[1] ? -1 : +1. Then z/phi = z*(pr - j*pi)/sqrt(2); the 1/sqrt(2) is
// dropped (a constant scale), leaving only additions:
//   Re h~ = pr*Re z + pi*Im z,   Im h~ = pr*Im z - pi*Re z.
// h_valid pulses two cycles after the blast cycle of the captured sample; h holds
// until the next capture (it is not reset). The paper gives only h~ = z/phi; the QPSK pilot, the
// capture handshake and the dropped scale are this design's choices.
module chest_capture
  import ra_pkg::*;
#(
  parameter int unsigned NI = NINST
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               q,          // bits per z entry
  input  logic                     cap_req,    // arm: capture the next sample
  input  logic [$clog2(NI)-1:0]    cap_inst,   // of this instance
  input  logic [1:0]               pilot,      // QPSK pilot sign bits
  input  logic [2*B-1:0]           z      [NI],
  input  logic [NI-1:0]            bvalid,
  input  logic [NI-1:0]            bfirst,
  input  logic [NI-1:0]            blast,
  output logic signed [HW-1:0]     h_re   [B],
  output logic signed [HW-1:0]     h_im   [B],
  output logic                     h_valid,
  output logic                     busy
);
  typedef enum logic [1:0] {IDLE, ARMED, COLLECT} state_e;
  state_e state;
  logic [ZB_MAX-1:0] code [2*B];
  logic [$clog2(NI)-1:0] inst_q;
  logic [1:0] pilot_q;
  logic done;
  logic [2*B-1:0] zs;

  assign zs = z[inst_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      inst_q  <= '0;
      pilot_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (cap_req) begin
          state   <= ARMED;
          inst_q  <= cap_inst;
          pilot_q <= pilot;
        end
        ARMED: if (bfirst[inst_q]) state <= blast[inst_q] ? IDLE : COLLECT;
        COLLECT: if (blast[inst_q]) state <= IDLE;
        default: state <= IDLE;
      endcase
      if ((state == ARMED && bfirst[inst_q] && blast[inst_q]) ||
          (state == COLLECT && blast[inst_q]))
        done <= 1'b1;
    end
  end

  // bit-plane deserialiser
  always_ff @(posedge clk) begin
    for (int i = 0; i < 2*B; i++) begin
      if (state == ARMED && bfirst[inst_q])
        code[i] <= ZB_MAX'(zs[i]);
      else if (state == COLLECT && bvalid[inst_q])
        code[i] <= {code[i][ZB_MAX-2:0], zs[i]};
    end
  end

  // LS estimate, registered when the capture completes
  logic signed [HW-1:0] ls_re [B], ls_im [B];
  always_comb begin
    for (int b = 0; b < B; b++) begin
      logic signed [HW-1:0] zr, zi, tr, ti;
      zr = HW'(midrise(code[b], q));
      zi = HW'(midrise(code[B+b], q));
      tr = pilot_q[0] ? -zr : zr;     // pr * Re z
      ti = pilot_q[0] ? -zi : zi;     // pr * Im z
      ls_re[b] = pilot_q[1] ? (tr - zi) : (tr + zi);
      ls_im[b] = pilot_q[1] ? (ti + zr) : (ti - zr);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) h_valid <= 1'b0;
    else        h_valid <= done;

  always_ff @(posedge clk)
    if (done) begin
      h_re <= ls_re;
      h_im <= ls_im;
    end

  assign busy = (state != IDLE);
endmodule
