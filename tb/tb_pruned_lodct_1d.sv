// Self-checking testbench for pruned_lodct_1d.
//
// Drives random 8-point vectors (with random idle cycles between them) and
// a set of corner vectors (full-scale positive and negative, alternating
// signs, odd values that exercise the shift) into the core. The reference is
// a plain matrix product with 2*W<4>, written out as integers, so the
// halves in row 2 become whole numbers: X2 is that row's sum divided by two
// and rounded toward minus infinity. Each accepted vector is queued with the
// cycle it entered; when out_valid is high the queue head must match and must
// be exactly 3 cycles old. Inputs change and outputs are sampled on the
// falling clock edge. A watchdog ends the run if it hangs.
module tb_pruned_lodct_1d;
  import pruned_dct_pkg::*;

  localparam int unsigned IN_W  = 11;     // the core's default
  localparam int unsigned OUT_W = IN_W + GROWTH;
  localparam int          NVEC  = 4000;

  // 2 * W<4>, row by row
  localparam int W2X [K_LODCT][N] = '{
    '{ 2,  2,  2,  2,  2,  2,  2,  2},
    '{ 2,  2,  2,  0,  0, -2, -2, -2},
    '{ 2,  1, -1, -2, -2, -1,  1,  2},
    '{ 2,  0, -2, -2,  2,  2,  0, -2}
  };

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  logic signed [IN_W-1:0]  x [N];
  logic out_valid;
  logic signed [OUT_W-1:0] X [K_LODCT];

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct {
    int     coef [K_LODCT];
    longint t_in;
  } exp_t;
  exp_t q [$];

  pruned_lodct_1d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t reference(input int v [N], input longint t);
    exp_t e;
    for (int k = 0; k < K_LODCT; k++) begin
      int s = 0;
      for (int n = 0; n < N; n++) s += W2X[k][n] * v[n];
      e.coef[k] = s >>> 1;   // floor(s / 2); exact for rows 0, 1, 3
    end
    e.t_in = t;
    return e;
  endfunction

  // Output checker: samples on the falling edge, half a clock after the
  // registers have settled.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: out_valid with nothing outstanding at cycle %0d", cycle);
      end else begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (cycle - e.t_in != longint'(PIPE_LATENCY)) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", cycle - e.t_in, PIPE_LATENCY);
        end
        for (int k = 0; k < K_LODCT; k++) begin
          checks++;
          if (int'(X[k]) != e.coef[k]) begin
            failures++;
            if (failures < 20)
              $display("FAIL: X%0d = %0d, expected %0d (cycle %0d)", k, X[k], e.coef[k], cycle);
          end
        end
      end
    end
  end

  task automatic send(input int v [N]);
    for (int n = 0; n < N; n++) x[n] = IN_W'(v[n]);
    in_valid = 1'b1;
    q.push_back(reference(v, cycle));
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  int v [N];
  localparam int MAXV = (1 << (IN_W - 1)) - 1;
  localparam int MINV = -(1 << (IN_W - 1));

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) x[n] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // Corner vectors
    for (int n = 0; n < N; n++) v[n] = MAXV;               send(v);
    for (int n = 0; n < N; n++) v[n] = MINV;               send(v);
    for (int n = 0; n < N; n++) v[n] = (n % 2 != 0) ? MINV : MAXV; send(v);
    for (int n = 0; n < N; n++) v[n] = (n < 4) ? MAXV : MINV; send(v);
    for (int n = 0; n < N; n++) v[n] = (n < 4) ? MINV : MAXV; send(v);
    v = '{MAXV, MINV, MAXV, MINV, MINV, MAXV, MINV, MAXV};  send(v);
    v = '{0, 1, 0, 0, 0, 0, 0, 0};  send(v);   // c3 odd, positive
    v = '{0, -1, 0, 0, 0, 0, 0, 0}; send(v);   // c3 odd, negative
    v = '{0, 0, 3, 0, 0, 0, 0, 0};  send(v);

    // Random stream, back-to-back with occasional idle cycles
    for (int i = 0; i < NVEC; i++) begin
      for (int n = 0; n < N; n++) v[n] = int'($signed(IN_W'($urandom)));
      send(v);
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end

    repeat (PIPE_LATENCY + 2) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d vectors never came out", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NVEC * 4 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
