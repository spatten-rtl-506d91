// tb_head_score_acc: random attention_out vectors for random heads, in all
// three head sizes D = 64, 128, 256; each adds sum_d |out_d| over the first D
// elements to that head's score (elements beyond D must be ignored). The scores
// are compared with a software copy after every beat, and cleared at random.
module tb_head_score_acc;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_valid = 0;
  logic [1:0] dlog;
  logic [3:0] acc_head;
  logic [MULTS-1:0][EW-1:0] acc_vals;
  logic [15:0][23:0] score;
  head_score_acc dut (.*);
  longint model [16];
  int checks = 0, failures = 0;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    dlog = 0; acc_head = 0; acc_vals = '0;
    foreach (model[h]) model[h] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      dlog = 2'($urandom_range(2));
      clear = ($urandom_range(300) == 0);
      acc_valid = !clear && ($urandom_range(3) != 0);
      acc_head = 4'($urandom);
      for (int j = 0; j < MULTS; j++) acc_vals[j] = 12'($urandom);
      @(negedge clk);
      if (clear) foreach (model[h]) model[h] = 0;
      else if (acc_valid) begin
        for (int j = 0; j < (64 << dlog); j++) begin
          int v;
          v = int'($signed(acc_vals[j]));
          model[acc_head] += (v < 0) ? -v : v;
        end
        if (model[acc_head] > 24'hFFFFFF) model[acc_head] = 24'hFFFFFF;
      end
      clear = 0; acc_valid = 0;
      for (int h = 0; h < 16; h++) begin
        checks++;
        if (longint'(score[h]) != model[h]) begin failures++; if (failures < 5) $display("head %0d hw %0d model %0d", h, score[h], model[h]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
