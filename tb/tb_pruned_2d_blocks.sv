// Workload testbench: 2-D pruned transforms of 8x8 image blocks.
//
// The pruned 2-D transform of an 8x8 block A is B = T<K> * A * T<K>^T,
// computed as eight column calls of the 1-D transform followed by K row
// calls on the kept coefficients. Here the transpose between the two passes
// is done by the testbench; the transforms themselves all run through
// pruned_dct_top at its default 11-bit input width, which takes both the
// level-shifted 8-bit pixels of the first pass and the first pass's results
// (at most 11 bits) in the second.
//
// Per block: 8 column vectors (both cores at once), then 4 row vectors whose
// LODCT outputs form the 4x4 result, then 6 row vectors whose MRDCT outputs
// form the 6x6 result: 18 vectors, sent back to back. The testbench makes
// 64 blocks (a 64x64 picture): smooth gradients with texture, flat blocks,
// sharp edges and full-range noise, with 8-bit pixels shifted by -128.
//
// The reference computes each B with its own triple sums: the MRDCT one
// exactly as M<6> A M<6>^T, the LODCT one with 2*W<4> and a floor division
// by two after each pass, which is what the shift in the hardware does.
module tb_pruned_2d_blocks;
  import pruned_dct_pkg::*;

  localparam int unsigned IN_W  = 11;
  localparam int unsigned OUT_W = IN_W + GROWTH;
  localparam int          NBLK  = 64;

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

  typedef int vec_t   [N];
  typedef int lo_t    [K_LODCT];
  typedef int mr_t    [K_MRDCT];
  lo_t lo_q [$];
  mr_t mr_q [$];

  pruned_dct_top dut (.*);

  initial clk = 1'b0;
  always #5 clk = ~clk;
  initial cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Collect every output vector in order.
  longint last_out;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      lo_t l;
      mr_t m;
      last_out = cycle;
      for (int k = 0; k < K_LODCT; k++) l[k] = int'(lodct_X[k]);
      for (int k = 0; k < K_MRDCT; k++) m[k] = int'(mrdct_X[k]);
      lo_q.push_back(l);
      mr_q.push_back(m);
    end
  end

  // Send a batch of vectors back to back and wait for all their outputs.
  task automatic run_batch(input vec_t vin [$], output lo_t lo_out [$], output mr_t mr_out [$]);
    longint t0;
    lo_q.delete();
    mr_q.delete();
    t0 = cycle;
    foreach (vin[i]) begin
      for (int n = 0; n < N; n++) x[n] = IN_W'(vin[i][n]);
      in_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    while (lo_q.size() < vin.size()) @(negedge clk);
    // full rate: the last output arrives PIPE_LATENCY clocks after the last input
    checks++;
    if (last_out - t0 != longint'(vin.size()) - 1 + longint'(PIPE_LATENCY)) begin
      failures++;
      $display("FAIL: batch of %0d took %0d cycles", vin.size(), last_out - t0);
    end
    lo_out = lo_q;
    mr_out = mr_q;
  endtask

  int img [NBLK][N][N];

  function automatic int clip8(input int p);
    return (p < 0) ? 0 : (p > 255) ? 255 : p;
  endfunction

  initial begin
    vec_t cols [$];
    vec_t rows [$];
    lo_t  lo_out [$];
    mr_t  mr_out [$];
    int   yl [K_LODCT][N];   // LODCT column-pass result
    int   ym [K_MRDCT][N];   // MRDCT column-pass result
    int   bl [K_LODCT][K_LODCT];
    int   bm [K_MRDCT][K_MRDCT];
    int   n_blocks, n_dc_only, n_full_range;

    checks = 0; failures = 0;
    n_blocks = 0; n_dc_only = 0; n_full_range = 0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) x[n] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Build a 64x64 test picture, 8x8 blocks in raster order.
    for (int b = 0; b < NBLK; b++) begin
      int kind, base, gx, gy;
      kind = b % 4;
      base = $urandom_range(30, 220);
      gx   = int'($urandom_range(0, 12)) - 6;
      gy   = int'($urandom_range(0, 12)) - 6;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          case (kind)
            0: img[b][r][c] = clip8(base + gx * c + gy * r + int'($urandom_range(0, 6)) - 3);
            1: img[b][r][c] = base;
            2: img[b][r][c] = (c + r > 7) ? 250 : 5;
            default: img[b][r][c] = int'($urandom_range(0, 255));
          endcase
    end

    for (int b = 0; b < NBLK; b++) begin
      int a [N][N];
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          a[r][c] = img[b][r][c] - 128;

      // Pass 1: eight columns, both transforms at once.
      cols.delete();
      for (int c = 0; c < N; c++) begin
        vec_t v;
        for (int r = 0; r < N; r++) v[r] = a[r][c];
        cols.push_back(v);
      end
      run_batch(cols, lo_out, mr_out);
      for (int c = 0; c < N; c++) begin
        for (int k = 0; k < K_LODCT; k++) yl[k][c] = lo_out[c][k];
        for (int k = 0; k < K_MRDCT; k++) ym[k][c] = mr_out[c][k];
      end

      // Pass 2a: the four LODCT rows.
      rows.delete();
      for (int k = 0; k < K_LODCT; k++) begin
        vec_t v;
        for (int c = 0; c < N; c++) v[c] = yl[k][c];
        rows.push_back(v);
      end
      run_batch(rows, lo_out, mr_out);
      for (int k = 0; k < K_LODCT; k++)
        for (int l = 0; l < K_LODCT; l++) bl[k][l] = lo_out[k][l];

      // Pass 2b: the six MRDCT rows.
      rows.delete();
      for (int k = 0; k < K_MRDCT; k++) begin
        vec_t v;
        for (int c = 0; c < N; c++) v[c] = ym[k][c];
        rows.push_back(v);
      end
      run_batch(rows, lo_out, mr_out);
      for (int k = 0; k < K_MRDCT; k++)
        for (int l = 0; l < K_MRDCT; l++) bm[k][l] = mr_out[k][l];

      // Reference, LODCT: floor(2W * A / 2) then floor(2W * Y^T / 2)
      begin
        int ry [K_LODCT][N];
        for (int k = 0; k < K_LODCT; k++)
          for (int c = 0; c < N; c++) begin
            int s;
            s = 0;
            for (int r = 0; r < N; r++) s += W2X[k][r] * a[r][c];
            ry[k][c] = s >>> 1;
          end
        for (int k = 0; k < K_LODCT; k++)
          for (int l = 0; l < K_LODCT; l++) begin
            int s;
            s = 0;
            for (int c = 0; c < N; c++) s += W2X[l][c] * ry[k][c];
            checks++;
            if (bl[k][l] != (s >>> 1)) begin
              failures++;
              if (failures < 20) $display("FAIL: block %0d LODCT B[%0d][%0d] = %0d, expected %0d", b, k, l, bl[k][l], s >>> 1);
            end
          end
      end

      // Reference, MRDCT: B = M A M^T as one quadruple sum
      for (int k = 0; k < K_MRDCT; k++)
        for (int l = 0; l < K_MRDCT; l++) begin
          int s;
          s = 0;
          for (int r = 0; r < N; r++)
            for (int c = 0; c < N; c++)
              s += MX[k][r] * a[r][c] * MX[l][c];
          checks++;
          if (bm[k][l] != s) begin
            failures++;
            if (failures < 20) $display("FAIL: block %0d MRDCT B[%0d][%0d] = %0d, expected %0d", b, k, l, bm[k][l], s);
          end
        end

      n_blocks++;
      if (bm[0][1] == 0 && bm[1][0] == 0 && bm[1][1] == 0) n_dc_only++;
      if (bl[0][0] > 2000 || bl[0][0] < -2000 || bm[4][4] > 2000 || bm[4][4] < -2000) n_full_range++;
    end

    $display("blocks=%0d flat_blocks=%0d large_coefficient_blocks=%0d", n_blocks, n_dc_only, n_full_range);
    if (n_dc_only == 0)    begin failures++; $display("FAIL: no flat block"); end
    if (n_full_range == 0) begin failures++; $display("FAIL: no block with large coefficients"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBLK * 40 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
