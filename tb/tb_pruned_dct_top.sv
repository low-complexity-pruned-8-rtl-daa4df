// End-to-end testbench for pruned_dct_top at its default parameters.
//
// Streams 10,000 random 8-point vectors (the size of the prototype's
// hardware test) through both pruned cores, mixed with corner vectors, idle
// cycles and a reset in the middle of the stream. Every output vector is
// compared with integer matrix products against W<4> (doubled, so row 2 has
// no halves; X2 is then that sum halved and rounded toward minus infinity)
// and M<6>, and its latency must be 3 clocks. The DC terms of both
// transforms must also agree with each other.
//
// Each mechanism of the design is counted and must occur at least once:
// back-to-back vectors (full one-per-clock rate), idle gaps, a reset that
// discards vectors in flight, an odd c3 term that the LODCT's shift
// truncates (negative and positive), and full-scale inputs that need all
// of the output width. Inputs change and outputs are sampled on the falling
// clock edge. A watchdog ends the run if it hangs.
module tb_pruned_dct_top;
  import pruned_dct_pkg::*;

  localparam int unsigned IN_W  = 11;     // the top's default
  localparam int unsigned OUT_W = IN_W + GROWTH;
  localparam int          NVEC  = 10000;
  localparam int          MAXV  = (1 << (IN_W - 1)) - 1;
  localparam int          MINV  = -(1 << (IN_W - 1));

  localparam int W2X [K_LODCT][N] = '{
    '{ 2,  2,  2,  2,  2,  2,  2,  2},
    '{ 2,  2,  2,  0,  0, -2, -2, -2},
    '{ 2,  1, -1, -2, -2, -1,  1,  2},
    '{ 2,  0, -2, -2,  2,  2,  0, -2}
  };
  localparam int MX [K_MRDCT][N] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{ 1,  0,  0,  0,  0,  0,  0, -1},
    '{ 1,  0,  0, -1, -1,  0,  0,  1},
    '{ 0,  0, -1,  0,  0,  1,  0,  0},
    '{ 1, -1, -1,  1,  1, -1, -1,  1},
    '{ 0, -1,  0,  0,  0,  0,  1,  0}
  };

  logic clk;
  logic rst_n;
  logic in_valid;
  logic signed [IN_W-1:0]  x       [N];
  logic out_valid;
  logic signed [OUT_W-1:0] lodct_X [K_LODCT];
  logic signed [OUT_W-1:0] mrdct_X [K_MRDCT];

  int checks, failures;
  longint cycle;

  // mechanism counters
  int n_back_to_back, n_gap, n_flushed, n_trunc_neg, n_trunc_pos, n_full_scale;

  typedef struct {
    int     lo [K_LODCT];
    int     mr [K_MRDCT];
    longint t_in;
  } exp_t;
  exp_t q [$];

  pruned_dct_top dut (.*);

  initial clk = 1'b0;
  always #5 clk = ~clk;
  initial cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t reference(input int v [N], input longint t);
    exp_t e;
    for (int k = 0; k < K_LODCT; k++) begin
      int s;
      s = 0;
      for (int n = 0; n < N; n++) s += W2X[k][n] * v[n];
      e.lo[k] = s >>> 1;
    end
    for (int k = 0; k < K_MRDCT; k++) begin
      int s;
      s = 0;
      for (int n = 0; n < N; n++) s += MX[k][n] * v[n];
      e.mr[k] = s;
    end
    e.t_in = t;
    return e;
  endfunction

  function automatic int max_abs(input exp_t e);
    int m;
    m = 0;
    foreach (e.lo[k]) if ((e.lo[k] < 0 ? -e.lo[k] : e.lo[k]) > m) m = (e.lo[k] < 0 ? -e.lo[k] : e.lo[k]);
    foreach (e.mr[k]) if ((e.mr[k] < 0 ? -e.mr[k] : e.mr[k]) > m) m = (e.mr[k] < 0 ? -e.mr[k] : e.mr[k]);
    return m;
  endfunction

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
          if (int'(lodct_X[k]) != e.lo[k]) begin
            failures++;
            if (failures < 20)
              $display("FAIL: LODCT X%0d = %0d, expected %0d (cycle %0d)", k, lodct_X[k], e.lo[k], cycle);
          end
        end
        for (int k = 0; k < K_MRDCT; k++) begin
          checks++;
          if (int'(mrdct_X[k]) != e.mr[k]) begin
            failures++;
            if (failures < 20)
              $display("FAIL: MRDCT X%0d = %0d, expected %0d (cycle %0d)", k, mrdct_X[k], e.mr[k], cycle);
          end
        end
        checks++;
        if (lodct_X[0] != mrdct_X[0]) begin
          failures++;
          $display("FAIL: DC terms differ: %0d vs %0d", lodct_X[0], mrdct_X[0]);
        end
        if (max_abs(e) >= (1 << (OUT_W - 2))) n_full_scale++;
      end
    end
  end

  bit last_was_send;

  task automatic send(input int v [N]);
    int c3;
    for (int n = 0; n < N; n++) x[n] = IN_W'(v[n]);
    in_valid = 1'b1;
    q.push_back(reference(v, cycle));
    c3 = (v[1] + v[6]) - (v[2] + v[5]);
    if (c3 % 2 != 0) begin
      if (c3 < 0) n_trunc_neg++;
      else        n_trunc_pos++;
    end
    if (last_was_send) n_back_to_back++;
    last_was_send = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic idle(input int cycles);
    repeat (cycles) @(negedge clk);
    if (cycles > 0) begin
      last_was_send = 1'b0;
      n_gap++;
    end
  endtask

  int v [N];

  initial begin
    checks = 0; failures = 0;
    n_back_to_back = 0; n_gap = 0; n_flushed = 0;
    n_trunc_neg = 0; n_trunc_pos = 0; n_full_scale = 0;
    last_was_send = 1'b0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) x[n] = '0;
    idle(4);
    rst_n = 1'b1;

    // Corner vectors
    for (int n = 0; n < N; n++) v[n] = MAXV;                    send(v);
    for (int n = 0; n < N; n++) v[n] = MINV;                    send(v);
    for (int n = 0; n < N; n++) v[n] = (n % 2 != 0) ? MINV : MAXV; send(v);
    v = '{MAXV, MINV, MINV, MAXV, MAXV, MINV, MINV, MAXV};       send(v);
    v = '{MINV, MAXV, MAXV, MINV, MINV, MAXV, MAXV, MINV};       send(v);
    v = '{0, 1, 0, 0, 0, 0, 0, 0};                              send(v);
    v = '{0, -1, 0, 0, 0, 0, 0, 0};                             send(v);
    idle(PIPE_LATENCY + 1);

    // Reset with two vectors in flight: they must never appear.
    v = '{1, 2, 3, 4, 5, 6, 7, 8};                              send(v);
    v = '{-8, -7, -6, -5, -4, -3, -2, -1};                      send(v);
    rst_n = 1'b0;
    n_flushed += q.size();
    q.delete();
    idle(2);
    rst_n = 1'b1;
    idle(PIPE_LATENCY + 1);

    // Random stream at full rate with occasional idle cycles
    for (int i = 0; i < NVEC; i++) begin
      for (int n = 0; n < N; n++) v[n] = int'($signed(IN_W'($urandom)));
      send(v);
      if ($urandom_range(0, 7) == 0) idle($urandom_range(1, 3));
    end

    idle(PIPE_LATENCY + 2);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d vectors never came out", q.size());
    end

    $display("mechanisms: back_to_back=%0d gaps=%0d flushed_by_reset=%0d shift_trunc_neg=%0d shift_trunc_pos=%0d full_scale=%0d",
             n_back_to_back, n_gap, n_flushed, n_trunc_neg, n_trunc_pos, n_full_scale);
    if (n_back_to_back == 0) begin failures++; $display("FAIL: no back-to-back vectors"); end
    if (n_gap == 0)          begin failures++; $display("FAIL: no idle gaps"); end
    if (n_flushed == 0)      begin failures++; $display("FAIL: reset never flushed a vector"); end
    if (n_trunc_neg == 0)    begin failures++; $display("FAIL: shift never truncated a negative odd term"); end
    if (n_trunc_pos == 0)    begin failures++; $display("FAIL: shift never truncated a positive odd term"); end
    if (n_full_scale == 0)   begin failures++; $display("FAIL: no full-scale result"); end

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
