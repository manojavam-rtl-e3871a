// workload_case: one PCA workload run on its own accelerator instance at the
// default parameters (T = 4, S = 8, 50 Jacobi iterations), for
// tb_workload_pca. The data set size is a parameter (M_RAW samples, N_RAW
// features, padded with zero rows and columns to multiples of T).
//
// Real data sets cannot be read by the simulation, so the case generates data
// of the same shape and a similar spectrum: each sample mixes four fixed
// random "component" patterns (the strongest of amplitude AMP) plus small
// noise, centred per feature and kept within [-0.5, 0.5] so that covariance
// entries fit the Q15.16 range.
//
// Checks:
//   * C = X^T X after the covariance pass, bit-exact against a fixed-point
//     reference computed here;
//   * at every pivot report, |c_pq| equals the largest off-diagonal
//     magnitude of the matrix C then in memory (the pivot search is exact);
//   * the off-diagonal energy of C falls at every rotation whose pivot is
//     not lost in rounding (|c_pq| > 0.01);
//   * at the end: V^T V = I, V^T C0 V = C_final, trace preserved, and the
//     largest diagonal entry not below the largest initial one.
// `finished` rises when the case has run and been checked; `checks` and
// `failures` count its results. The flow (covariance, then fixed-count
// Jacobi rotations on one engine) follows the original design; the
// synthetic data and the tolerances are this testbench's own.
module workload_case #(
  parameter string NAME  = "case",
  parameter int    M_RAW = 1797,  // samples in the data set
  parameter int    N_RAW = 64,    // features in the data set
  parameter real   AMP   = 0.1    // amplitude of the strongest component
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  import manojavam_pkg::*;

  localparam int T = 4;
  localparam int S = 8;
  localparam int NUM_ITER = 50;
  localparam int M = (M_RAW + T - 1) / T * T;
  localparam int N = (N_RAW + T - 1) / T * T;
  localparam int NC = 4;  // planted components
  localparam int MT = M / T;
  localparam int NT = N / T;
  localparam taddr_t XB = 0, CB = 48000, RB = 49024, TB = 50048, V0B = 51072, V1B = 52096;

  logic rst = 1, start = 0;

  logic busy, done, v_sel;
  mode_e mode;
  logic [7:0] iter;
  logic mem_req, mem_we, mem_ack;
  taddr_t mem_addr;
  word_t [T-1:0][T-1:0] mem_wdata, mem_rdata;
  logic [T*T-1:0] mem_wmask;
  idx_t piv_p, piv_q;
  word_t piv_cpq, rot_cos, rot_sin;
  logic [S:0] ev_hit, ev_miss, ev_wr_alloc, ev_wr_around;

  manojavam_top dut (
    .clk, .rst, .start, .m_tiles(idx_t'(MT)), .n_tiles(idx_t'(NT)),
    .x_base(XB), .c_base(CB), .r_base(RB), .t_base(TB), .v0_base(V0B), .v1_base(V1B),
    .busy, .done, .v_sel, .mode, .iter,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wmask, .mem_ack, .mem_rdata,
    .piv_p, .piv_q, .piv_cpq, .rot_cos, .rot_sin,
    .ev_hit, .ev_miss, .ev_wr_alloc, .ev_wr_around
  );

  ddr3_model #(.T(T)) u_mem (
    .clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wmask, .mem_ack, .mem_rdata
  );

  initial begin finished = 1'b0; checks = 0; failures = 0; end
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  word_t X [M][N];
  real   C0 [N][N];

  function automatic word_t mget(taddr_t base, int r, int c);
    return u_mem.mem[base + taddr_t'((r / T) * NT + c / T)][r % T][c % T];
  endfunction

  function automatic real fx2r(word_t v);
    return $itor(v) / 65536.0;
  endfunction

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check_close(string what, real got, real exp_v, real tol);
    checks++;
    if (rabs(got - exp_v) > tol) begin
      failures++;
      if (failures < 20) $display("%s %s: got %f expected %f (tol %f)", NAME, what, got, exp_v, tol);
    end
  endtask

  // Covariance check at the switch to rotation mode.
  logic cov_checked = 0;
  always @(posedge clk) if (!rst && !cov_checked && mode == MODE_ROT) begin
    int bad;
    bad = 0;
    cov_checked <= 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        word_t ref_v;
        ref_v = '0;
        for (int k = 0; k < M; k++) ref_v += fx_mul(X[k][i], X[k][j]);
        checks++;
        if (mget(CB, i, j) !== ref_v) begin
          failures++;
          bad++;
          if (bad < 5) $display("%s C[%0d][%0d] = %0d expected %0d", NAME, i, j, mget(CB, i, j), ref_v);
        end
      end
  end

  // Pivot exactness and monotone off-diagonal energy, at every DLE report.
  int   n_pivots = 0;
  real  off_prev = -1.0;
  logic prev_nonzero = 1'b0;
  logic prev_large = 1'b0;
  always @(posedge clk) if (!rst && dut.u_jacobi.u_dle.res_valid) begin
    word_t mx, v, got;
    real off;
    mx = '0; off = 0.0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (i != j) begin
          v = mget(CB, i, j);
          if (v[WORD_W-1]) v = -v;
          if (v > mx) mx = v;
          off += fx2r(mget(CB, i, j)) * fx2r(mget(CB, i, j));
        end
    got = dut.u_jacobi.u_dle.c_pq;
    if (got[WORD_W-1]) got = -got;
    checks++;
    if (got !== mx) begin
      failures++;
      $display("%s pivot %0d: |c_pq| = %0d, largest off-diagonal magnitude %0d", NAME, n_pivots, got, mx);
    end
    if (off_prev >= 0.0 && prev_nonzero) begin
      checks++;
      if (prev_large ? !(off < off_prev) : (off > off_prev + 1.0e-3)) begin
        failures++;
        $display("%s pivot %0d: off-diagonal energy %f did not fall (was %f)", NAME, n_pivots, off, off_prev);
      end
    end
    off_prev = off;
    prev_nonzero = (mx != '0);
    prev_large   = (mx > word_t'(655));  // |c_pq| > 0.01: rounding cannot mask the drop
    n_pivots++;
  end

  initial begin
    int t0;
    real trace0, trace_f, dmax;
    real Cf [N][N];
    real V  [N][N];
    real W  [NC][N];
    real xr [N];
    real mean [N];
    real Xr [M][N];
    // Planted components and synthetic samples.
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < N; j++) W[c][j] = ($itor($urandom_range(0, 2000)) - 1000.0) / 1000.0;
    for (int j = 0; j < N; j++) mean[j] = 0.0;
    for (int k = 0; k < M; k++)
      for (int j = 0; j < N; j++) Xr[k][j] = 0.0;
    for (int k = 0; k < M_RAW; k++) begin
      for (int j = 0; j < N; j++) xr[j] = ($itor($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 0.02;
      for (int c = 0; c < NC; c++) begin
        real z;
        z = ($itor($urandom_range(0, 2000)) - 1000.0) / 1000.0 * AMP / (c + 1);
        for (int j = 0; j < N; j++) xr[j] += z * W[c][j];
      end
      for (int j = 0; j < N; j++) begin Xr[k][j] = xr[j]; mean[j] += xr[j] / M_RAW; end
    end
    for (int k = 0; k < M; k++)
      for (int j = 0; j < N; j++) begin
        real v;
        v = (k < M_RAW && j < N_RAW) ? Xr[k][j] - mean[j] : 0.0;
        if (v > 0.5) v = 0.5;
        if (v < -0.5) v = -0.5;
        X[k][j] = word_t'($rtoi(v * 65536.0));
        u_mem.mem[XB + taddr_t'((k / T) * NT + j / T)][k % T][j % T] = X[k][j];
      end
    trace0 = 0.0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        word_t acc_v;
        acc_v = '0;
        for (int k = 0; k < M; k++) acc_v += fx_mul(X[k][i], X[k][j]);
        C0[i][j] = fx2r(acc_v);
        if (i == j) trace0 += C0[i][i];
      end

    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    start <= 1;
    t0 = cycles;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    $display("%s (M=%0d, N=%0d): run finished after %0d cycles, %0d iterations, %0d pivots", NAME, M, N, cycles - t0, iter, n_pivots);
    checks++; if (int'(iter) != NUM_ITER) failures++;
    checks++; if (n_pivots != NUM_ITER) failures++;
    checks++; if (!cov_checked) failures++;

    trace_f = 0.0; dmax = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      Cf[i][j] = fx2r(mget(CB, i, j));
      V[i][j]  = fx2r(mget(v_sel ? V1B : V0B, i, j));
      if (i == j) begin
        trace_f += Cf[i][i];
        if (Cf[i][i] > dmax) dmax = Cf[i][i];
      end
    end
    check_close("trace", trace_f, trace0, 0.01 * trace0 + 0.01);
    // The rotations can only move weight onto the diagonal: its largest
    // entry must not fall below the largest initial diagonal entry.
    begin
      real d0max;
      d0max = 0.0;
      for (int i = 0; i < N; i++) if (C0[i][i] > d0max) d0max = C0[i][i];
      checks++;
      if (dmax < d0max) begin
        failures++;
        $display("%s: largest diagonal entry fell: %f < %f", NAME, dmax, d0max);
      end
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        real d, e;
        real cv [N];
        d = 0.0; e = 0.0;
        for (int i = 0; i < N; i++) d += V[i][a] * V[i][b];
        check_close($sformatf("VtV[%0d][%0d]", a, b), d, (a == b) ? 1.0 : 0.0, 0.01);
        for (int j = 0; j < N; j++) begin
          cv[j] = 0.0;
          for (int i = 0; i < N; i++) cv[j] += V[i][a] * C0[i][j];
        end
        for (int j = 0; j < N; j++) e += cv[j] * V[j][b];
        check_close($sformatf("VtCV[%0d][%0d]", a, b), e, Cf[a][b], 0.002 * trace0 + 0.01);
      end

    finished = 1'b1;
  end

endmodule
