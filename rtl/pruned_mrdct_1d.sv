// Pruned 8-point MRDCT approximation, 1-D, fully pipelined.
//
// Computes the six lowest coefficients of the modified rounded DCT,
// X = M<6> * x, where
//   M<6> = [ 1  1  1  1  1  1  1  1 ]
//          [ 1  0  0  0  0  0  0 -1 ]
//          [ 1  0  0 -1 -1  0  0  1 ]
//          [ 0  0 -1  0  0  1  0  0 ]
//          [ 1 -1 -1  1  1 -1 -1  1 ]
//          [ 0 -1  0  0  0  0  1  0 ]
// with 12 additions and no multiplications or shifts, in three register
// stages:
//   stage 1  a_i = x_i + x_(7-i) (i = 0..3),
//            X1 = x0 - x7,  X3 = x5 - x2,  X5 = x6 - x1
//   stage 2  e0 = a0 + a3,  e1 = a1 + a2,  X2 = a0 - a3
//   stage 3  X0 = e0 + e1,  X4 = e0 - e1
// The 7 / 3 / 2 split of the adders over three columns of registers follows
// the paper's architecture. Its drawing shows only two registers on the
// X1, X3 and X5 paths; here they get a third so that all six coefficients of
// a vector leave together and a new vector can enter on every clock.
//
// Arithmetic: two's complement, exact. Every output is IN_W + 3 bits wide.
//
// Interface: x is sampled when in_valid is high; X is valid when out_valid
// is high, exactly 3 clocks later. Only the valid pipeline is reset
// (synchronous, active low); data registers are free-running.
module pruned_mrdct_1d
  import pruned_dct_pkg::*;
#(
  parameter int unsigned IN_W = 11  // input sample width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [IN_W-1:0]         x   [N],
  output logic                           out_valid,
  output logic signed [IN_W+GROWTH-1:0]  X   [K_MRDCT]
);

  localparam int unsigned W1 = IN_W + 1;
  localparam int unsigned W2 = IN_W + 2;
  localparam int unsigned W3 = IN_W + 3;

  // Stage 1 registers.
  logic signed [W1-1:0] a [4];
  logic signed [W1-1:0] d1, d3, d5;
  // Stage 2 registers.
  logic signed [W2-1:0] e0, e1, e2;
  logic signed [W1-1:0] d1_d, d3_d, d5_d;   // delay-balancing registers
  logic [PIPE_LATENCY-1:0] vld;

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++)
      a[i] <= W1'(x[i]) + W1'(x[N-1-i]);
    d1 <= W1'(x[0]) - W1'(x[7]);
    d3 <= W1'(x[5]) - W1'(x[2]);
    d5 <= W1'(x[6]) - W1'(x[1]);
  end

  always_ff @(posedge clk) begin
    e0   <= W2'(a[0]) + W2'(a[3]);
    e1   <= W2'(a[1]) + W2'(a[2]);
    e2   <= W2'(a[0]) - W2'(a[3]);
    d1_d <= d1;
    d3_d <= d3;
    d5_d <= d5;
  end

  always_ff @(posedge clk) begin
    X[0] <= W3'(e0) + W3'(e1);
    X[1] <= W3'(d1_d);
    X[2] <= W3'(e2);
    X[3] <= W3'(d3_d);
    X[4] <= W3'(e0) - W3'(e1);
    X[5] <= W3'(d5_d);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[PIPE_LATENCY-2:0], in_valid};
  end

  assign out_valid = vld[PIPE_LATENCY-1];

endmodule
