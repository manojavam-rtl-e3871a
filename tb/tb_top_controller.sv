// tb_top_controller: runs the controller alone against behavioural
// responders (caches, engine, DLE and Jacobian unit answering after fixed
// delays) with S = 2 lanes, 3 x 3 feature tiles, 2 row tiles and 2 Jacobi
// iterations. Every engine step is compared with the schedule worked out
// here: phase order, operand tile addresses, transposition and lane enables
// (the last column group has one lane). Also checks the identity
// initialisation writes, write-back addresses, the DLE tile count of the
// scanned passes, the mode switch and the final V buffer.
// The row-block / column-group order and the mode switch follow the original;
// the three-pass rotation and V double buffer are this design's.
module tb_top_controller;
  import manojavam_pkg::*;
  localparam int T = 4, S = 2, NI = 2, MT = 2, NT = 3;
  localparam taddr_t XB = 0, CB = 100, RB = 200, TB = 300, V0B = 400, V1B = 500;
  logic clk = 0, rst = 1, start = 0;
  always #5 clk = ~clk;
  logic busy, done, v_sel, flush, lhs_rd_req, lhs_rd_valid, lhs_transpose;
  mode_e mode;
  logic [7:0] iter, dle_lane;
  taddr_t lhs_rd_addr, init_wr_addr;
  logic init_wr_req, init_wr_diag, init_wr_done;
  logic [S-1:0] rhs_rd_req, rhs_rd_valid, rhs_wr_req, rhs_wr_done, lane_en;
  taddr_t [S-1:0] rhs_rd_addr, rhs_wr_addr;
  logic eng_start, acc_clr, eng_done, dle_clear, dle_tile_valid, dle_finish, jac_done;
  idx_t dle_row_blk, dle_col_blk;

  top_controller #(.S(S), .NUM_ITER(NI)) dut (
    .clk, .rst, .start, .m_tiles(idx_t'(MT)), .n_tiles(idx_t'(NT)),
    .x_base(XB), .c_base(CB), .r_base(RB), .t_base(TB), .v0_base(V0B), .v1_base(V1B),
    .busy, .done, .v_sel, .mode, .iter, .flush,
    .lhs_ready(1'b1), .lhs_rd_req, .lhs_rd_addr, .lhs_rd_valid, .lhs_transpose,
    .init_wr_req, .init_wr_addr, .init_wr_diag, .init_wr_done,
    .rhs_ready('1), .rhs_rd_req, .rhs_rd_addr, .rhs_rd_valid,
    .rhs_wr_req, .rhs_wr_addr, .rhs_wr_done,
    .eng_start, .lane_en, .acc_clr, .eng_done,
    .dle_clear, .dle_tile_valid, .dle_lane, .dle_row_blk, .dle_col_blk,
    .dle_ready(1'b1), .dle_finish, .jac_done
  );

  // Responders: reply a fixed number of cycles after each request.
  logic [3:0] d_lhs, d_eng, d_init, d_jac;
  logic [S-1:0][3:0] d_rhs, d_wr;
  always @(posedge clk) begin
    lhs_rd_valid <= (d_lhs == 1);
    d_lhs <= lhs_rd_req ? 4'd2 : (d_lhs != 0 ? d_lhs - 1 : 0);
    eng_done <= (d_eng == 1);
    d_eng <= eng_start ? 4'd5 : (d_eng != 0 ? d_eng - 1 : 0);
    init_wr_done <= (d_init == 1);
    d_init <= init_wr_req ? 4'd2 : (d_init != 0 ? d_init - 1 : 0);
    jac_done <= (d_jac == 1);
    d_jac <= dle_finish ? 4'd9 : (d_jac != 0 ? d_jac - 1 : 0);
    for (int s = 0; s < S; s++) begin
      rhs_rd_valid[s] <= (d_rhs[s] == 1);
      d_rhs[s] <= rhs_rd_req[s] ? 4'd3 : (d_rhs[s] != 0 ? d_rhs[s] - 1 : 0);
      rhs_wr_done[s] <= (d_wr[s] == 1);
      d_wr[s] <= rhs_wr_req[s] ? 4'd2 : (d_wr[s] != 0 ? d_wr[s] - 1 : 0);
    end
    if (rst) begin
      d_lhs <= 0; d_eng <= 0; d_init <= 0; d_jac <= 0; d_rhs <= '0; d_wr <= '0;
    end
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { taddr_t a; taddr_t b0; taddr_t b1; logic tr; logic [S-1:0] en; } step_t;
  step_t exp_steps [$];
  taddr_t exp_init [$];
  taddr_t exp_wr [$];

  function automatic taddr_t at(taddr_t b, int r, int c);
    return b + taddr_t'(r * NT + c);
  endfunction

  task automatic plan_pass(taddr_t ab, logic tr, taddr_t bb, taddr_t ob, int kt);
    for (int r = 0; r < NT; r++)
      for (int g = 0; g < NT; g += S) begin
        for (int k = 0; k < kt; k++) begin
          step_t st;
          st.a  = tr ? at(ab, k, r) : at(ab, r, k);
          st.b0 = at(bb, k, g);
          st.b1 = at(bb, k, g + 1);
          st.tr = tr;
          st.en = (g + 1 < NT) ? 2'b11 : 2'b01;
          exp_steps.push_back(st);
        end
        exp_wr.push_back(at(ob, r, g));
        if (g + 1 < NT) exp_wr.push_back(at(ob, r, g + 1));
      end
  endtask

  int n_dle = 0, n_flush = 0, mode_sw = 0, n_step = 0;
  mode_e mode_d = MODE_COV;
  always @(posedge clk) if (!rst) begin
    mode_d <= mode;
    if (mode != mode_d) mode_sw++;
    if (dle_tile_valid) n_dle++;
    if (flush) n_flush++;
    if (init_wr_req) begin
      taddr_t e;
      e = exp_init.pop_front();
      checks++;
      if (init_wr_addr !== e || init_wr_diag !== (((init_wr_addr % 100) / NT) == ((init_wr_addr % 100) % NT))) begin
        failures++; $display("init write %0d expected %0d", init_wr_addr, e);
      end
    end
    if (eng_start) begin
      step_t e;
      e = exp_steps.pop_front();
      n_step++;
      checks++;
      if (lhs_rd_addr !== e.a || rhs_rd_addr[0] !== e.b0 || (lane_en[1] && rhs_rd_addr[1] !== e.b1) ||
          lhs_transpose !== e.tr || lane_en !== e.en) begin
        failures++;
        if (failures < 10) $display("step %0d: A %0d B %0d,%0d tr %0b en %b; expected A %0d B %0d,%0d tr %0b en %b",
          n_step, lhs_rd_addr, rhs_rd_addr[0], rhs_rd_addr[1], lhs_transpose, lane_en, e.a, e.b0, e.b1, e.tr, e.en);
      end
    end
    for (int s = 0; s < S; s++) if (rhs_wr_req[s]) begin
      taddr_t e;
      e = exp_wr.pop_front();
      checks++;
      if (rhs_wr_addr[s] !== e) begin failures++; $display("write-back %0d expected %0d", rhs_wr_addr[s], e); end
    end
  end

  initial begin
    logic vs;
    for (int i = 0; i < NT; i++) for (int j = 0; j < NT; j++) exp_init.push_back(at(RB, i, j));
    for (int i = 0; i < NT; i++) for (int j = 0; j < NT; j++) exp_init.push_back(at(V0B, i, j));
    plan_pass(XB, 1, XB, CB, MT);
    vs = 0;
    for (int it = 0; it < NI; it++) begin
      plan_pass(CB, 0, RB, TB, NT);
      plan_pass(RB, 1, TB, CB, NT);
      plan_pass(vs ? V1B : V0B, 0, RB, vs ? V0B : V1B, NT);
      vs = ~vs;
    end
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++; if (exp_steps.size() != 0 || exp_init.size() != 0 || exp_wr.size() != 0) begin
      failures++; $display("left over: %0d steps %0d init %0d writes", exp_steps.size(), exp_init.size(), exp_wr.size());
    end
    checks++; if (n_dle != NT * NT * (1 + NI)) begin failures++; $display("DLE tiles %0d", n_dle); end
    checks++; if (n_flush != 1 + 3 * NI) failures++;
    checks++; if (mode_sw != 1) failures++;
    checks++; if (v_sel != logic'(NI % 2)) failures++;
    checks++; if (int'(iter) != NI) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
