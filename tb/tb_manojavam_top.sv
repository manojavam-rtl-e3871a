// tb_manojavam_top: end-to-end test of the accelerator at its default
// parameters (T = 4, S = 8, 50 Jacobi iterations).
//
// A random standardised-range data set X (M x N) is placed in the DDR3 model.
// The test runs the whole PCA kernel and checks:
//   * the covariance matrix C = X^T X in memory, when the datapath switches
//     to rotation mode, exactly against a bit-true fixed-point reference;
//   * the final C: its diagonal against the eigenvalue estimates of a
//     floating-point Jacobi run with the same pivot rule and iteration count,
//     and its off-diagonal norm against that run's;
//   * the final V: orthonormal columns, and V^T C0 V equal to the final C.
// It also counts the mechanisms the design has (mode switch, cache hits and
// misses, write-around and write-allocate writes, disabled lanes in a partial
// column group, transposed operand fetch, Givens restore) and fails if one
// never happened. The checked flow (covariance, then fixed-count Jacobi
// rotations on the same engine) is the original's; the pass structure and
// the corrected rotation signs are this design's, and the floating-point
// reference uses the same signs.
module tb_manojavam_top;
  import manojavam_pkg::*;

  localparam int T = 4;
  localparam int S = 8;
  localparam int NUM_ITER = 50;
  localparam int M = 16;
  localparam int N = 8;
  localparam int MT = M / T;
  localparam int NT = N / T;
  localparam taddr_t XB = 0, CB = 4096, RB = 8192, TB = 12288, V0B = 16384, V1B = 20480;

  logic clk = 0, rst = 1, start = 0;
  always #5 clk = ~clk;

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

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // Watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t X [M][N];
  real   C0 [N][N];

  function automatic word_t mget(taddr_t base, int r, int c);
    return u_mem.mem[base + taddr_t'((r / T) * NT + c / T)][r % T][c % T];
  endfunction

  function automatic real fx2r(word_t v);
    return $itor(v) / 65536.0;
  endfunction

  // Mechanism counters
  int n_mode_sw = 0, n_hit = 0, n_miss = 0, n_alloc = 0, n_around = 0;
  int n_lane_off = 0, n_trans = 0, n_restore = 0;
  mode_e mode_d = MODE_COV;
  always @(posedge clk) if (!rst) begin
    mode_d <= mode;
    if (mode != mode_d) n_mode_sw++;
    n_hit    += $countones(ev_hit);
    n_miss   += $countones(ev_miss);
    n_alloc  += $countones(ev_wr_alloc);
    n_around += $countones(ev_wr_around);
    if (dut.eng_start && dut.lane_en != '1) n_lane_off++;
    if (dut.eng_start && dut.lhs_transpose) n_trans++;
    if (dut.u_jacobi.u_givens.start && dut.u_jacobi.u_givens.have_old) n_restore++;
  end

  // Covariance check at the switch to rotation mode.
  logic cov_checked = 0;
  always @(posedge clk) if (!rst && !cov_checked && mode == MODE_ROT) begin
    cov_checked <= 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        word_t ref_v;
        ref_v = '0;
        for (int k = 0; k < M; k++) ref_v += fx_mul(X[k][i], X[k][j]);
        checks++;
        if (mget(CB, i, j) !== ref_v) begin
          failures++;
          if (failures < 10) $display("C[%0d][%0d] = %0d expected %0d", i, j, mget(CB, i, j), ref_v);
        end
      end
  end

  // Floating-point Jacobi reference with the same pivot rule.
  real A [N][N];
  real off_ref;
  task automatic ref_jacobi();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) A[i][j] = C0[i][j];
    for (int it = 0; it < NUM_ITER; it++) begin
      int p = 0, q = 1;
      real mx = -1.0, th, c, s;
      real Ap [N];
      real Aq [N];
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        if (i != j && ((A[i][j] < 0 ? -A[i][j] : A[i][j]) > mx)) begin
          mx = A[i][j] < 0 ? -A[i][j] : A[i][j]; p = i; q = j;
        end
      if (A[p][p] - A[q][q] == 0.0) th = (A[p][q] >= 0 ? 1.0 : -1.0) * 3.14159265358979 / 4.0;
      else th = 0.5 * $atan(2.0 * A[p][q] / (A[p][p] - A[q][q]));
      c = $cos(th); s = $sin(th);
      // A = R^T A R with R[p][p]=R[q][q]=c, R[p][q]=-s, R[q][p]=s
      for (int i = 0; i < N; i++) begin Ap[i] = A[i][p]; Aq[i] = A[i][q]; end
      for (int i = 0; i < N; i++) begin
        A[i][p] =  c * Ap[i] + s * Aq[i];
        A[i][q] = -s * Ap[i] + c * Aq[i];
      end
      for (int j = 0; j < N; j++) begin Ap[j] = A[p][j]; Aq[j] = A[q][j]; end
      for (int j = 0; j < N; j++) begin
        A[p][j] =  c * Ap[j] + s * Aq[j];
        A[q][j] = -s * Ap[j] + c * Aq[j];
      end
    end
    off_ref = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) if (i != j) off_ref += A[i][j] * A[i][j];
  endtask

  task automatic check_close(string what, real got, real exp_v, real tol);
    checks++;
    if ((got - exp_v > tol) || (exp_v - got > tol)) begin
      failures++;
      $display("%s: got %f expected %f (tol %f)", what, got, exp_v, tol);
    end
  endtask

  initial begin
    int t0;
    real trace, off_dut, Cf [N][N];
    real V [N][N];
    for (int k = 0; k < M; k++)
      for (int j = 0; j < N; j++)
        X[k][j] = word_t'($signed($urandom_range(0, 131072)) - 65536);  // [-1, 1]
    for (int k = 0; k < M; k++)
      for (int j = 0; j < N; j++)
        u_mem.mem[XB + taddr_t'((k / T) * NT + j / T)][k % T][j % T] = X[k][j];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        word_t acc_v;
        acc_v = '0;
        for (int k = 0; k < M; k++) acc_v += fx_mul(X[k][i], X[k][j]);
        C0[i][j] = fx2r(acc_v);
      end
    ref_jacobi();

    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    start <= 1;
    t0 = cycles;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    $display("run finished after %0d cycles, %0d iterations", cycles - t0, iter);
    checks++; if (int'(iter) != NUM_ITER) failures++;

    // Final C and V
    trace = 0.0; off_dut = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      Cf[i][j] = fx2r(mget(CB, i, j));
      V[i][j]  = fx2r(mget(v_sel ? V1B : V0B, i, j));
      if (i != j) off_dut += Cf[i][j] * Cf[i][j];
      else trace += C0[i][i];
    end
    // Eigenvalues: compare the sorted diagonals.
    begin
      real ed [N];
      real er [N];
      for (int i = 0; i < N; i++) begin ed[i] = Cf[i][i]; er[i] = A[i][i]; end
      ed.sort();
      er.sort();
      for (int i = 0; i < N; i++)
        check_close($sformatf("eigenvalue %0d", i), ed[i], er[i], 0.01 * trace / N + 0.01);
    end
    check_close("off-diagonal energy", $sqrt(off_dut), $sqrt(off_ref), 0.05 * trace / N + 0.05);
    // V orthonormal, V^T C0 V == final C
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        real d, e;
        d = 0.0; e = 0.0;
        for (int i = 0; i < N; i++) d += V[i][a] * V[i][b];
        check_close($sformatf("VtV[%0d][%0d]", a, b), d, (a == b) ? 1.0 : 0.0, 0.01);
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) e += V[i][a] * C0[i][j] * V[j][b];
        check_close($sformatf("VtCV[%0d][%0d]", a, b), e, Cf[a][b], 0.01 * trace / N + 0.01);
      end

    $display("mechanisms: mode_switch=%0d hit=%0d miss=%0d wr_alloc=%0d wr_around=%0d lane_off=%0d transposed=%0d givens_restore=%0d",
             n_mode_sw, n_hit, n_miss, n_alloc, n_around, n_lane_off, n_trans, n_restore);
    checks++; if (n_mode_sw == 0) failures++;
    checks++; if (n_hit == 0) failures++;
    checks++; if (n_miss == 0) failures++;
    checks++; if (n_alloc == 0) failures++;
    checks++; if (n_around == 0) failures++;
    checks++; if (n_lane_off == 0) failures++;
    checks++; if (n_trans == 0) failures++;
    checks++; if (n_restore == 0) failures++;
    checks++; if (!cov_checked) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

