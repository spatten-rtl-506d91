// tb_pq_determiner: random rows of probabilities (1 to 20 beats of 8 lanes,
// random masks, flat or peaked); after each row the decision must say "fetch
// LSBs" exactly when the largest valid probability is below the threshold, and
// row_max must equal that largest value. The decision must come one cycle after
// the last beat.
module tb_pq_determiner;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [EW-1:0] thres;
  logic in_valid = 0, in_last = 0, dec_valid, need_lsb;
  logic [7:0][EW-1:0] in_prob;
  logic [7:0] in_mask;
  logic [EW-1:0] row_max;
  pq_determiner dut (.*);
  int checks = 0, failures = 0;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_prob = '0; in_mask = '0; thres = 12'd410;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int row = 0; row < 600; row++) begin
      int nb, mx, lim;
      nb = 1 + int'($urandom_range(19)); mx = 0;
      lim = ($urandom_range(1) == 0) ? 500 : 4095;
      thres = 12'($urandom_range(4095));
      if (row % 3 == 0) thres = 12'd410;
      for (int b = 0; b < nb; b++) begin
        in_valid = 1; in_last = (b == nb - 1);
        in_mask = 8'($urandom); if (b == 0) in_mask[0] = 1'b1;
        for (int i = 0; i < 8; i++) begin
          in_prob[i] = 12'($urandom_range(lim));
          if (in_mask[i] && int'(in_prob[i]) > mx) mx = int'(in_prob[i]);
        end
        @(negedge clk);
        if (!in_last) begin checks++; if (dec_valid) failures++; end
      end
      in_valid = 0; in_last = 0;
      checks++;
      if (!dec_valid || need_lsb != (mx < int'(thres)) || int'(row_max) != mx) begin
        failures++; $display("row %0d max %0d hw %0d need %0d thres %0d", row, mx, row_max, need_lsb, thres);
      end
      if ($urandom_range(1)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
