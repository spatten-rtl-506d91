// tb_softmax: random rows (1 to 128 beats of 8 scores, random masks, random
// scale) are pushed with random gaps; every probability must be within
// 3 + 1 % of the real-number softmax of score * scale / 2^16 (clamped to
// [-16, 16)), times 4096. Masked lanes must come out masked, each row must end
// with out_last, and the output beats of a row must be back to back at 8
// probabilities per cycle.
module tb_softmax;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] scale;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_last;
  logic [7:0][EW-1:0] in_scores, out_prob;
  logic [7:0] in_mask, out_mask;
  softmax dut (.*);
  int checks = 0, failures = 0, maxerr = 0;
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  real pr [1024];
  logic m [1024];
  int nb;
  initial begin
    in_scores = '0; in_mask = '0; scale = 16'd100;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int row = 0; row < 120; row++) begin
      real sum;
      int ob, lim;
      nb = 1 + int'($urandom_range((row % 4 == 0) ? 127 : 12));
      scale = 16'($urandom_range(400));
      lim = ($urandom_range(1)) ? 2047 : 200;
      sum = 0;
      for (int b = 0; b < nb; b++) begin
        in_valid = 1; in_last = (b == nb - 1);
        in_mask = 8'($urandom); if (b == 0) in_mask[0] = 1;
        for (int i = 0; i < 8; i++) begin
          real x;
          in_scores[i] = 12'(int'($urandom_range(2 * lim)) - lim);
          x = real'($signed(in_scores[i])) * real'(scale) / 65536.0;
          if (x > 15.999) x = 15.999; if (x < -16.0) x = -16.0;
          m[b * 8 + i] = in_mask[i];
          pr[b * 8 + i] = in_mask[i] ? $exp(x) : 0.0;
          sum += pr[b * 8 + i];
        end
        @(negedge clk);
        while (!in_ready_q) @(negedge clk);
        in_valid = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      while (!out_valid) @(negedge clk);
      ob = 0;
      while (1) begin
        checks++;
        if (!out_valid) begin failures++; $display("gap in output beats"); break; end
        for (int i = 0; i < 8; i++) begin
          real r; int err;
          r = pr[ob * 8 + i] / sum * 4096.0;
          err = int'(out_prob[i]) - int'(r); if (err < 0) err = -err;
          if (err > maxerr && m[ob * 8 + i]) maxerr = err;
          checks++;
          if (out_mask[i] != m[ob * 8 + i] || (m[ob * 8 + i] && real'(err) > 3.0 + 0.01 * r)) begin
            failures++; if (failures < 6) $display("row %0d beat %0d lane %0d hw %0d ref %f", row, ob, i, out_prob[i], r);
          end
        end
        ob++;
        if (out_last) break;
        @(negedge clk);
      end
      checks++; if (ob != nb) begin failures++; $display("row beats %0d expected %0d", ob, nb); end
      @(negedge clk);
    end
    $display("max error %0d (of 4096)", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready;
endmodule
