// tb_topk_engine: random score arrays (narrow value ranges so that ties are
// common) of random length n and random k. The reference keeps every score above
// the k-th largest and the first copies of the k-th largest, in input order; the
// engine's output indices and scores must match it exactly. The load phase must
// take exactly ceil(n/16) beats and the filter phase ceil(n/16) output beats.
module tb_topk_engine;
  localparam int PAR = 16, DEPTH = 64, W = 16, CAP = PAR * DEPTH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, busy, out_valid, done;
  logic [10:0] n, k;
  logic [PAR-1:0] in_mask, out_mask;
  logic [PAR-1:0][W-1:0] in_data, out_data;
  logic [PAR-1:0][9:0] out_idx;
  int checks = 0, failures = 0;
  logic [W-1:0] vals [CAP];
  int exp_idx [$];
  int got_idx [$];
  int got_val [$];
  int out_beats;

  topk_engine #(.PAR(PAR), .DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (out_valid) begin
    out_beats++;
    for (int i = 0; i < PAR; i++) if (out_mask[i]) begin got_idx.push_back(int'(out_idx[i])); got_val.push_back(int'(out_data[i])); end
  end

  task automatic run(input int nn, input int kk, input int range);
    int ngt, kth, eqk, cyc;
    for (int i = 0; i < nn; i++) vals[i] = W'($urandom_range(range));
    // reference: k-th largest by counting
    exp_idx.delete();
    kth = -1;
    if (kk > 0 && kk < nn) begin
      for (int i = 0; i < nn; i++) begin
        int g = 0, e = 0;
        for (int j = 0; j < nn; j++) begin if (vals[j] > vals[i]) g++; if (vals[j] == vals[i]) e++; end
        if (g < kk && g + e >= kk) kth = int'(vals[i]);
      end
      ngt = 0; for (int j = 0; j < nn; j++) if (int'(vals[j]) > kth) ngt++;
      eqk = kk - ngt;
      for (int j = 0; j < nn; j++)
        if (int'(vals[j]) > kth) exp_idx.push_back(j);
        else if (int'(vals[j]) == kth && eqk > 0) begin exp_idx.push_back(j); eqk--; end
    end else if (kk >= nn) for (int j = 0; j < nn; j++) exp_idx.push_back(j);
    got_idx.delete(); got_val.delete(); out_beats = 0;
    @(negedge clk); start = 1; n = 11'(nn); k = 11'(kk);
    @(negedge clk); start = 0;
    cyc = 0;
    for (int b = 0; b < nn; b += PAR) begin
      in_valid = 1;
      for (int i = 0; i < PAR; i++) begin in_mask[i] = (b + i < nn); in_data[i] = (b + i < nn) ? vals[b+i] : '0; end
      @(negedge clk); cyc++;
    end
    in_valid = 0; in_mask = '0;
    while (!done) @(negedge clk);
    checks++;
    if (got_idx.size() != exp_idx.size()) begin failures++; $display("n=%0d k=%0d size got %0d exp %0d", nn, kk, got_idx.size(), exp_idx.size()); end
    else for (int i = 0; i < exp_idx.size(); i++) begin
      checks++;
      if (got_idx[i] != exp_idx[i] || got_val[i] != int'(vals[exp_idx[i]])) begin failures++; if (failures < 10) $display("n=%0d k=%0d pos %0d got %0d exp %0d", nn, kk, i, got_idx[i], exp_idx[i]); end
    end
    if (kk > 0) begin checks++; if (out_beats != (nn + PAR - 1) / PAR) begin failures++; $display("filter beats %0d", out_beats); end end
  endtask

  initial begin
    start = 0; in_valid = 0; in_mask = '0; in_data = '0; n = 0; k = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(20, 3, 7);
    run(16, 16, 100);
    run(40, 0, 100);
    run(1024, 300, 65535);
    run(1024, 512, 3);
    run(1, 0, 5);
    run(2, 1, 1);
    for (int t = 0; t < 40; t++) begin
      int nn = $urandom_range(1, CAP);
      run(nn, $urandom_range(0, nn), (t % 3 == 0) ? 4 : ((t % 3 == 1) ? 200 : 65535));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
