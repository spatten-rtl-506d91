// tb_token_score_acc: random beats of 8 probabilities added to random distinct
// token ids, with random masks and occasional clears; a software copy of the
// scores is compared through all 16 read ports after every beat (reads are
// combinational, an add shows in the next cycle). Saturation is exercised with
// large values on a small score width.
module tb_token_score_acc;
  import spatten_pkg::*;
  localparam int NT = 64, SW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_valid = 0;
  logic [7:0] acc_mask;
  logic [7:0][5:0] acc_id;
  logic [7:0][EW-1:0] acc_prob;
  logic [15:0][5:0] rd_id;
  logic [15:0][SW-1:0] rd_score;
  token_score_acc #(.NTOK(NT), .SW(SW)) dut (.*);
  int model [NT];
  int checks = 0, failures = 0;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    acc_mask = '0; acc_id = '0; acc_prob = '0; rd_id = '0;
    foreach (model[t]) model[t] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int base;
      clear = ($urandom_range(400) == 0);
      acc_valid = !clear && ($urandom_range(3) != 0);
      acc_mask = 8'($urandom);
      base = int'($urandom_range(NT - 1));
      for (int i = 0; i < 8; i++) begin
        acc_id[i] = 6'((base + i * 7) % NT);
        acc_prob[i] = 12'($urandom);
      end
      @(negedge clk);
      if (clear) foreach (model[t]) model[t] = 0;
      else if (acc_valid)
        for (int i = 0; i < 8; i++) if (acc_mask[i]) begin
          model[acc_id[i]] += int'(acc_prob[i]);
          if (model[acc_id[i]] > (1 << SW) - 1) model[acc_id[i]] = (1 << SW) - 1;
        end
      clear = 0; acc_valid = 0;
      for (int r = 0; r < 16; r++) rd_id[r] = 6'($urandom);
      #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (int'(rd_score[r]) != model[rd_id[r]]) begin
          failures++; if (failures < 5) $display("id %0d hw %0d model %0d", rd_id[r], rd_score[r], model[rd_id[r]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
