// tb_zero_eliminator: random valid masks; the compacted vector must list the
// valid inputs in order, followed by empty lanes, and report their count.
module tb_zero_eliminator;
  localparam int N = 16, W = 16;
  logic [N-1:0] iv, ov;
  logic [N-1:0][W-1:0] id, od;
  logic [$clog2(N):0] cnt;
  int checks = 0, failures = 0;
  zero_eliminator #(.N(N), .W(W)) dut (.in_valid(iv), .in_data(id), .out_valid(ov), .out_data(od), .out_count(cnt));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int m;
      iv = N'($urandom); if (t == 0) iv = '0; if (t == 1) iv = '1;
      for (int i = 0; i < N; i++) id[i] = W'($urandom);
      #1;
      m = 0;
      for (int i = 0; i < N; i++) if (iv[i]) begin
        checks++;
        if (!ov[m] || od[m] !== id[i]) begin failures++; if (failures < 5) $display("mismatch t=%0d lane %0d", t, m); end
        m++;
      end
      for (int i = m; i < N; i++) begin checks++; if (ov[i]) failures++; end
      checks++; if (int'(cnt) != m) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
