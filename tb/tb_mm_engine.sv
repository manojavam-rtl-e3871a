// tb_mm_engine: streams K random tile pairs through the engine (S = 3 lanes,
// one lane disabled), with the LHS tile sometimes transposed, and checks each
// enabled accumulator against sum_k op(A_k) * B_k,s computed here, disabled
// lanes staying zero, and `done` coming exactly 3T cycles after `start`.
// Lanes, the broadcast LHS tile and per-lane accumulation follow the original;
// the 3T-cycle step is this design's timing.
module tb_mm_engine;
  import manojavam_pkg::*;
  localparam int T = 4, S = 3, K = 5;
  logic clk = 0, rst = 1, start = 0, lhs_transpose = 0, acc_clr = 0, busy, done;
  word_t [T-1:0][T-1:0] lhs_tile;
  word_t [S-1:0][T-1:0][T-1:0] rhs_tile, acc;
  logic [S-1:0] lane_en;
  always #5 clk = ~clk;
  mm_engine #(.T(T), .S(S)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t [S-1:0][T-1:0][T-1:0] model;
  initial begin
    lhs_tile = '0; rhs_tile = '0; lane_en = '0;
    @(posedge clk); rst <= 0;
    for (int trial = 0; trial < 6; trial++) begin
      logic tr;
      tr = trial[0];
      lane_en = (trial < 3) ? 3'b111 : 3'b011;
      @(negedge clk); acc_clr = 1;
      @(negedge clk); acc_clr = 0;
      model = '0;
      for (int k = 0; k < K; k++) begin
        int lat;
        for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) begin
          lhs_tile[i][j] = word_t'($signed($urandom_range(0, 262144)) - 131072);
          for (int s = 0; s < S; s++)
            rhs_tile[s][i][j] = word_t'($signed($urandom_range(0, 262144)) - 131072);
        end
        for (int s = 0; s < S; s++) if (lane_en[s])
          for (int i = 0; i < T; i++) for (int j = 0; j < T; j++)
            for (int kk = 0; kk < T; kk++)
              model[s][i][j] += fx_mul(tr ? lhs_tile[kk][i] : lhs_tile[i][kk], rhs_tile[s][kk][j]);
        lhs_transpose = tr;
        start = 1;
        @(negedge clk); start = 0;
        lat = 1;
        while (!done) begin @(negedge clk); lat++; end
        checks++;
        if (lat != 3*T) begin failures++; $display("latency %0d", lat); end
      end
      for (int s = 0; s < S; s++) begin
        checks++;
        if (acc[s] !== model[s]) begin
          failures++;
          $display("lane %0d mismatch", s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
