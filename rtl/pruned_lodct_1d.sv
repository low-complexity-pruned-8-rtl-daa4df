// Pruned 8-point LODCT approximation, 1-D, fully pipelined.
//
// Computes the four lowest coefficients of the Lengwehasatit-Ortega DCT
// approximation, X = W<4> * x, where
//   W<4> = [ 1   1    1    1   1   1    1    1 ]
//          [ 1   1    1    0   0  -1   -1   -1 ]
//          [ 1  1/2 -1/2  -1  -1 -1/2  1/2   1 ]
//          [ 1   0   -1   -1   1   1    0   -1 ]
// with 18 additions and one right shift, in three register stages:
//   stage 1  butterfly        a_i = x_i + x_(7-i),  b_i = x_i - x_(7-i), i = 0..3
//   stage 2  c0 = a0 + a3,  c1 = a1 + a2,  c2 = a0 - a3,  c3 = a1 - a2,
//            t1 = b1 + b2,  t3 = b0 - b3
//   stage 3  X0 = c0 + c1,  X2 = c2 + (c3 >>> 1),  X1 = t1 + b0,  X3 = t3 - b2
// The adder count, the single shift, the three columns of registers and the
// 8 / 6 / 4 split of adders over the stages follow the paper's architecture.
// Which odd-part terms are paired in stage 2 is not legible there and is this
// design's choice. The paper's drawing feeds two stage-3 adders from a
// stage-1 register directly; here b0 and b2 pass through one more register so
// that all four coefficients of a vector leave together and a new vector can
// enter on every clock.
//
// Arithmetic: two's complement, no rounding or saturation. The shift drops
// one fraction bit (floor), so X2 = floor((2*c2 + c3) / 2). Every output is
// IN_W + 3 bits wide, which holds any result exactly.
//
// Interface: x is sampled when in_valid is high; X is valid when out_valid
// is high, exactly 3 clocks later. Only the valid pipeline is reset
// (synchronous, active low); data registers are free-running.
module pruned_lodct_1d
  import pruned_dct_pkg::*;
#(
  parameter int unsigned IN_W = 11  // input sample width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [IN_W-1:0]         x   [N],
  output logic                           out_valid,
  output logic signed [IN_W+GROWTH-1:0]  X   [K_LODCT]
);

  localparam int unsigned W1 = IN_W + 1;  // after the butterfly
  localparam int unsigned W2 = IN_W + 2;  // after stage 2
  localparam int unsigned W3 = IN_W + 3;  // outputs

  // Stage 1 registers: butterfly sums and differences.
  logic signed [W1-1:0] a [4];
  logic signed [W1-1:0] b [4];
  // Stage 2 registers.
  logic signed [W2-1:0] c0, c1, c2, c3, t1, t3;
  logic signed [W1-1:0] b0_d, b2_d;         // delay-balancing registers
  logic [PIPE_LATENCY-1:0] vld;

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      a[i] <= W1'(x[i]) + W1'(x[N-1-i]);
      b[i] <= W1'(x[i]) - W1'(x[N-1-i]);
    end
  end

  always_ff @(posedge clk) begin
    c0   <= W2'(a[0]) + W2'(a[3]);
    c1   <= W2'(a[1]) + W2'(a[2]);
    c2   <= W2'(a[0]) - W2'(a[3]);
    c3   <= W2'(a[1]) - W2'(a[2]);
    t1   <= W2'(b[1]) + W2'(b[2]);
    t3   <= W2'(b[0]) - W2'(b[3]);
    b0_d <= b[0];
    b2_d <= b[2];
  end

  always_ff @(posedge clk) begin
    X[0] <= W3'(c0) + W3'(c1);
    X[1] <= W3'(t1) + W3'(b0_d);
    X[2] <= W3'(c2) + W3'(c3 >>> 1);
    X[3] <= W3'(t3) - W3'(b2_d);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[PIPE_LATENCY-2:0], in_valid};
  end

  assign out_valid = vld[PIPE_LATENCY-1];

endmodule
