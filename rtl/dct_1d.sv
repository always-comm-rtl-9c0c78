// dct_1d: pipelined 8-point DCT-II (JPEG normalisation) using the butterfly flow graph.
//
// F[k] = 1/2 * C(k) * sum_i f[i] * cos((2i+1) k pi / 16), C(0) = 1/sqrt(2), C(k>0) = 1.
// The flow graph first splits the inputs into symmetric sums a_i = f_i + f_(7-i) and
// antisymmetric differences d_i = f_i - f_(7-i). The even outputs F0, F4, F2, F6
// come from a second butterfly on the sums followed by one rotation. The odd outputs
// F1, F7, F5, F3 come from a cos(pi/4) rotation of the two middle differences, a
// butterfly, and two final rotations. That is 16 constant multiplications instead of
// 64. The structure follows the butterfly diagram of the design. The way the
// cosine constants are grouped into multipliers, and the 14-bit constant precision,
// are this implementation's choices.
//
// Interface: one vector of eight signed IN_W-bit values per cycle on in_data when
// in_valid is high. The result comes out on out_data/out_valid exactly LATENCY = 5
// cycles later, fully pipelined. Outputs are signed OUT_W-bit fixed point with 5
// more fractional bits than the input (value * 32, rounded half up). The output
// vector is in natural order: out_data[k] = F[k].
// round_shift keeps only the low OUT_W bits of its wide accumulator. That is safe:
// no coefficient exceeds 4 times the largest input in magnitude, so even with the 5
// extra fractional bits it fits in IN_W + 7 bits, and the upper bits only repeat the sign.
// Lint therefore reports those bits as unused; that report is expected.
module dct_1d #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = IN_W + 8   // 3 bits of growth, 5 extra fractional bits
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data  [8],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data [8]
);
  localparam int unsigned CF    = 14;            // constant fractional bits
  localparam int unsigned FRAC  = 5;             // extra output fractional bits
  localparam int unsigned W     = IN_W + 2*CF + 8; // internal width, no overflow possible
  typedef logic signed [W-1:0] acc_t;

  // Constants: HALF_Ck = round(cos(k pi/16)/2 * 2^CF), C4 = round(cos(pi/4) * 2^CF).
  localparam acc_t C4     = acc_t'(11585);
  localparam acc_t HALF_C1 = acc_t'(8035);
  localparam acc_t HALF_C2 = acc_t'(7568);
  localparam acc_t HALF_C3 = acc_t'(6811);
  localparam acc_t HALF_C4 = acc_t'(5793);
  localparam acc_t HALF_C5 = acc_t'(4551);
  localparam acc_t HALF_C6 = acc_t'(3135);
  localparam acc_t HALF_C7 = acc_t'(1598);

  logic [4:0] vld;

  // Stage 1: symmetric / antisymmetric split.
  acc_t s1_a [4];
  acc_t s1_d [4];   // d0 = f3-f4, d1 = f2-f5, d2 = f1-f6, d3 = f0-f7
  // Stage 2: even butterfly, middle rotation of the odd half.
  acc_t s2_e [4];   // e0 = a0+a3, e1 = a1+a2, e2 = a1-a2, e3 = a0-a3
  acc_t s2_d0, s2_d3, s2_p5, s2_p6;   // p5/p6 carry CF fractional bits
  // Stage 3: even rotations, odd butterfly.
  acc_t s3_ev [4];  // F0, F4, F2, F6 with CF fractional bits
  acc_t s3_q [4];   // q4, q5, q6, q7 with CF fractional bits
  // Stage 4: odd rotations.
  acc_t s4_ev [4];
  acc_t s4_od [4];  // F1, F7, F5, F3 with 2*CF fractional bits

  function automatic logic signed [OUT_W-1:0] round_shift(input acc_t v, input int unsigned sh);
    acc_t r;
    r = (v + (acc_t'(1) <<< (sh - 1))) >>> sh;
    return r[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) vld <= '0;
    else     vld <= {vld[3:0], in_valid};

    for (int i = 0; i < 4; i++) begin
      s1_a[i] <= acc_t'(in_data[i]) + acc_t'(in_data[7-i]);
      s1_d[i] <= acc_t'(in_data[3-i]) - acc_t'(in_data[4+i]);
    end

    s2_e[0] <= s1_a[0] + s1_a[3];
    s2_e[1] <= s1_a[1] + s1_a[2];
    s2_e[2] <= s1_a[1] - s1_a[2];
    s2_e[3] <= s1_a[0] - s1_a[3];
    s2_d0   <= s1_d[0] <<< CF;
    s2_d3   <= s1_d[3] <<< CF;
    s2_p5   <= C4 * (s1_d[2] - s1_d[1]);
    s2_p6   <= C4 * (s1_d[2] + s1_d[1]);

    s3_ev[0] <= HALF_C4 * (s2_e[0] + s2_e[1]);
    s3_ev[1] <= HALF_C4 * (s2_e[0] - s2_e[1]);
    s3_ev[2] <= HALF_C2 * s2_e[3] + HALF_C6 * s2_e[2];
    s3_ev[3] <= HALF_C6 * s2_e[3] - HALF_C2 * s2_e[2];
    s3_q[0]  <= s2_d0 + s2_p5;
    s3_q[1]  <= s2_d0 - s2_p5;
    s3_q[2]  <= s2_d3 - s2_p6;
    s3_q[3]  <= s2_d3 + s2_p6;

    s4_ev    <= s3_ev;
    s4_od[0] <= HALF_C1 * s3_q[3] + HALF_C7 * s3_q[0];  // F1
    s4_od[1] <= HALF_C7 * s3_q[3] - HALF_C1 * s3_q[0];  // F7
    s4_od[2] <= HALF_C3 * s3_q[1] + HALF_C5 * s3_q[2];  // F5
    s4_od[3] <= HALF_C3 * s3_q[2] - HALF_C5 * s3_q[1];  // F3

    out_data[0] <= round_shift(s4_ev[0], CF - FRAC);
    out_data[4] <= round_shift(s4_ev[1], CF - FRAC);
    out_data[2] <= round_shift(s4_ev[2], CF - FRAC);
    out_data[6] <= round_shift(s4_ev[3], CF - FRAC);
    out_data[1] <= round_shift(s4_od[0], 2*CF - FRAC);
    out_data[7] <= round_shift(s4_od[1], 2*CF - FRAC);
    out_data[5] <= round_shift(s4_od[2], 2*CF - FRAC);
    out_data[3] <= round_shift(s4_od[3], 2*CF - FRAC);
  end

  assign out_valid = vld[4];
endmodule
