// tb_pe: checks one processing element against a software model: operand
// forwarding to the neighbours, fixed-point multiply-accumulate, enable and
// clear, over random operands.
// The three registers and MAC feedback follow the original PE drawing; clear
// and enable are this design's.
module tb_pe;
  import manojavam_pkg::*;
  logic clk = 0, rst = 1, clr = 0, en = 0;
  word_t a_in, b_in, a_out, b_out, acc;
  always #5 clk = ~clk;
  pe dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(string w, word_t got, word_t exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("%s got %0d expected %0d", w, got, exp_v);
    end
  endtask
  initial begin
    logic signed [63:0] model;
    word_t la, lb;
    a_in = '0; b_in = '0;
    @(posedge clk); rst <= 0; @(negedge clk);
    model = 0;
    for (int n = 0; n < 500; n++) begin
      logic e;
      e = ($urandom_range(0, 3) != 0);
      la = word_t'($signed($urandom_range(0, 262144)) - 131072);
      lb = word_t'($signed($urandom_range(0, 262144)) - 131072);
      a_in = la; b_in = lb; en = e;
      clr = (n % 97 == 96);
      @(negedge clk);
      if (clr) begin
        model = 0;
        chk("acc after clr", acc, '0);
      end else if (e) begin
        model = model + ((64'(la) * 64'(lb)) >>> FRAC_W);
        chk("a_out", a_out, la);
        chk("b_out", b_out, lb);
        chk("acc", acc, word_t'(model));
      end else begin
        chk("acc hold", acc, word_t'(model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
