// tb_av_unit: loads random values into a reduced Value SRAM and, for random
// numbers of lines and all three head sizes, feeds one line of probabilities
// per cycle; attention_out_d = sum_v prob_v * V_vd >> 12, saturated, must match
// a software sum exactly, with zeros beyond D. Latency check: out_valid comes a
// fixed 3 cycles after the last beat.
module tb_av_unit;
  import spatten_pkg::*;
  localparam int LINES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] dlog;
  logic v_we = 0, v_wmerge = 0, in_valid = 0, in_last = 0, busy, out_valid;
  logic [6:0] v_wseg;
  logic [SEG-1:0][EW-1:0] v_wdata;
  logic [3:0] in_line;
  logic [NSEGL-1:0][EW-1:0] in_prob;
  logic [MULTS-1:0][EW-1:0] out;
  av_unit #(.LINES(LINES)) dut (.*);
  int checks = 0, failures = 0;
  logic [EW-1:0] vmem [LINES * NSEGL * SEG];
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    dlog = 0; v_wseg = '0; v_wdata = '0; in_line = '0; in_prob = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < LINES * NSEGL; s++) begin
      v_we = 1; v_wseg = 7'(s);
      for (int e = 0; e < SEG; e++) begin v_wdata[e] = 12'($urandom); vmem[s * SEG + e] = v_wdata[e]; end
      @(negedge clk);
    end
    v_we = 0;
    for (int run = 0; run < 60; run++) begin
      int D, pl, nl, lat, lim;
      longint acc [256];
      dlog = 2'(run % 3); D = 64 << dlog; pl = 8 >> dlog;
      nl = 1 + int'($urandom_range(LINES - 1));
      lim = (run % 2) ? 4095 : 300;
      for (int d = 0; d < 256; d++) acc[d] = 0;
      for (int l = 0; l < nl; l++) begin
        in_valid = 1; in_line = 4'(l); in_last = (l == nl - 1);
        in_prob = '0;
        for (int i = 0; i < pl; i++) begin
          in_prob[i] = 12'($urandom_range(lim));
          for (int d = 0; d < D; d++)
            acc[d] += longint'(in_prob[i]) * longint'($signed(vmem[((l * pl + i) * (D / 64)) * SEG + d]));
        end
        @(negedge clk);
        checks++; if (out_valid) failures++;
      end
      in_valid = 0; in_last = 0;
      lat = 1;
      while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
      checks++; if (lat != 3) begin failures++; $display("latency %0d, expected 3", lat); end
      for (int d = 0; d < MULTS; d++) begin
        longint ex;
        ex = (d < D) ? (acc[d] >>> 12) : 0;
        if (ex > 2047) ex = 2047; if (ex < -2048) ex = -2048;
        checks++;
        if (longint'($signed(out[d])) != ex) begin failures++; if (failures < 6) $display("D %0d d %0d hw %0d exp %0d", D, d, $signed(out[d]), ex); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
