// tb_data_xbar: each of the 32 ports has up to 64 words outstanding, tagged
// with consecutive buffer slots; the 16 channels return them in a random order
// (a word may come back on any channel, several ports in the same cycle). Each
// port must hand its words out strictly in slot order, each exactly once, under
// random output back-pressure, and must not offer a slot that has not arrived.
module tb_data_xbar;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NCH-1:0] ch_rvalid;
  logic [NCH-1:0][WORD_W-1:0] ch_rdata;
  mem_tag_t [NCH-1:0] ch_rtag;
  logic [NPORT-1:0] out_valid, out_ready;
  logic [NPORT-1:0][WORD_W-1:0] out_data;
  data_xbar dut (.*);
  int checks = 0, failures = 0;
  int issued [NPORT], popped [NPORT];
  mem_tag_t pend [$];
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [WORD_W-1:0] word(input int p, input int n);
    return {32'(p), 32'(n), 32'(p * 7919 + n), 32'(n ^ 32'h5a5a)};
  endfunction
  int seq_of [NPORT][64];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NPORT; p++) if (out_valid[p] && out_ready[p]) begin
      checks++;
      if (out_data[p] != word(p, popped[p])) begin failures++; if (failures < 5) $display("port %0d word %0d wrong", p, popped[p]); end
      popped[p]++;
    end
  initial begin
    ch_rvalid = '0; ch_rdata = '0; ch_rtag = '0; out_ready = '0;
    foreach (issued[p]) begin issued[p] = 0; popped[p] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      // issue new outstanding words
      for (int p = 0; p < NPORT; p++)
        if (it < 5000 && issued[p] - popped[p] < 64 && $urandom_range(1)) begin
          mem_tag_t t;
          t.port = PORT_W'(p); t.slot = SLOT_W'(issued[p] % 64);
          seq_of[p][issued[p] % 64] = issued[p];
          issued[p]++;
          pend.push_back(t);
        end
      // return up to 16 random pending words
      ch_rvalid = '0;
      for (int c = 0; c < NCH; c++) if (pend.size() > 0 && $urandom_range(3) != 0) begin
        int k;
        k = int'($urandom_range(pend.size() - 1));
        ch_rvalid[c] = 1; ch_rtag[c] = pend[k];
        ch_rdata[c] = word(int'(pend[k].port), seq_of[pend[k].port][pend[k].slot]);
        pend.delete(k);
      end
      out_ready = NPORT'($urandom);
      @(negedge clk);
    end
    ch_rvalid = '0; out_ready = '1;
    repeat (100) @(negedge clk);
    for (int p = 0; p < NPORT; p++) begin
      checks++; if (popped[p] != issued[p] || out_valid[p]) begin failures++; $display("port %0d issued %0d popped %0d", p, issued[p], popped[p]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
