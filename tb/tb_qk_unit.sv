// tb_qk_unit: loads random keys into a reduced Key SRAM and a random query,
// then runs Q x K for random key counts and all three head sizes (D = 64, 128,
// 256) and compares each score with sum_d q_d k_d shifted and saturated to 12
// bits. Rate check: a line gives 512/D scores per cycle (8 for D = 64) with no
// gap between beats; latency check: the first beat comes a fixed number of
// cycles after start in every run.
module tb_qk_unit;
  import spatten_pkg::*;
  localparam int LINES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] dlog;
  logic [4:0] shift;
  logic k_we = 0, k_wmerge = 0, q_we = 0, q_wmerge = 0, start = 0, busy, score_valid, score_last;
  logic [6:0] k_wseg;
  logic [2:0] q_wseg;
  logic [SEG-1:0][EW-1:0] k_wdata, q_wdata;
  logic [TOKW:0] nkeys;
  logic [NSEGL-1:0][EW-1:0] scores;
  logic [NSEGL-1:0] score_mask;
  qk_unit #(.LINES(LINES)) dut (.*);
  int checks = 0, failures = 0;
  logic [EW-1:0] kmem [LINES * NSEGL * SEG];   // element e of segment s
  logic [EW-1:0] q [256];
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int lat_seen = -1;
  initial begin
    dlog = 0; shift = 5'd12; k_wseg = '0; q_wseg = '0; k_wdata = '0; q_wdata = '0; nkeys = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < LINES * NSEGL; s++) begin
      k_we = 1; k_wseg = 7'(s);
      for (int e = 0; e < SEG; e++) begin k_wdata[e] = 12'($urandom); kmem[s * SEG + e] = k_wdata[e]; end
      @(negedge clk);
    end
    k_we = 0;
    for (int run = 0; run < 60; run++) begin
      int D, pl, n, beats, lat, b;
      dlog = 2'(run % 3); D = 64 << dlog; pl = 8 >> dlog;
      shift = 5'(10 + $urandom_range(8));
      for (int s = 0; s < D / 64; s++) begin
        q_we = 1; q_wseg = 3'(s);
        for (int e = 0; e < SEG; e++) begin q_wdata[e] = 12'($urandom); q[s * 64 + e] = q_wdata[e]; end
        @(negedge clk);
      end
      q_we = 0;
      n = 1 + int'($urandom_range(LINES * pl - 1));
      nkeys = (TOKW+1)'(n);
      beats = (n + pl - 1) / pl;
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!score_valid) begin @(negedge clk); lat++; end
      checks++;
      lat_seen = lat;
      if (lat != 4) begin failures++; $display("latency %0d, expected 4", lat); end
      b = 0;
      while (score_valid) begin
        for (int i = 0; i < 8; i++) begin
          int key;
          key = b * pl + i;
          checks++;
          if (i < pl && key < n) begin
            longint acc;
            int ex;
            acc = 0;
            for (int d = 0; d < D; d++)
              acc += longint'($signed(q[d])) * longint'($signed(kmem[(key * (D / 64)) * SEG + d]));
            acc = acc >>> shift;
            ex = (acc > 2047) ? 2047 : (acc < -2048) ? -2048 : int'(acc);
            if (!score_mask[i] || int'($signed(scores[i])) != ex) begin
              failures++; if (failures < 6) $display("D %0d key %0d hw %0d exp %0d", D, key, $signed(scores[i]), ex);
            end
          end else if (score_mask[i]) failures++;
        end
        checks++; if (score_last != (b == beats - 1)) failures++;
        b++;
        @(negedge clk);
      end
      checks++;
      if (b != beats) begin failures++; $display("beats %0d expected %0d (must be back to back)", b, beats); end
    end
    $display("first score %0d cycles after start; %0d scores per cycle at D=64", lat_seen, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
