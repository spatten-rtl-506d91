// tb_qkv_fetcher: random fetch commands (kind, plane, head, token, slot) for
// every MSB width and head size. Each port's requests are checked against the
// address map worked out here: segment s of vector v = head*1024 + token in
// plane {kind, lsb} starts at word (plane << 24) + (v * D/64 + s) * b/2, the LSB
// planes using b = 4. Per port, the descriptors must come in the order of the
// segments whose words were requested, the tags must count the reorder slots
// up by one, and no port may have more than 64 words in flight; credits are
// returned after a random delay. All words of all commands must be requested.
module tb_qkv_fetcher;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] dlog;
  logic [3:0] msb_bits;
  logic cmd_valid = 0, cmd_ready, idle;
  fetch_cmd_t cmd;
  logic [NPORT-1:0] req_valid, req_ready, word_pop, desc_valid, desc_pop;
  mem_req_t [NPORT-1:0] req;
  seg_desc_t [NPORT-1:0] desc;
  qkv_fetcher dut (.*);
  int checks = 0, failures = 0;
  // expected segments (first word, count, descriptor) in issue order, per port unknown: keep a global pool
  typedef struct { logic [ADDR_W-1:0] a; int n; seg_desc_t d; } seg_t;
  seg_t pool [$];
  seg_t cur [NPORT];
  int left [NPORT], inflight [NPORT], slot [NPORT];
  seg_t dq [NPORT][$];
  int pops [$];
  int words = 0, expected_words = 0;
  initial begin repeat (300000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPORT; p++) begin
      if (desc_valid[p] && desc_pop[p]) begin
        checks++;
        if (dq[p].size() == 0 || dq[p][0].d != desc[p]) begin failures++; if (failures < 5) $display("port %0d descriptor out of order", p); end
        else void'(dq[p].pop_front());
      end
      if (word_pop[p]) inflight[p]--;
      if (req_valid[p] && req_ready[p]) begin
        words++; inflight[p]++;
        checks++;
        if (inflight[p] > 64) begin failures++; $display("port %0d has %0d words in flight", p, inflight[p]); end
        checks++;
        if (int'(req[p].tag.slot) != slot[p] % 64) failures++;
        slot[p]++;
        if (left[p] == 0) begin
          // first word of a new segment: find it in the pool
          int k;
          k = -1;
          foreach (pool[i]) if (pool[i].a == req[p].addr) begin k = i; break; end
          checks++;
          if (k < 0) begin failures++; if (failures < 5) $display("port %0d unexpected address %h", p, req[p].addr); end
          else begin cur[p] = pool[k]; pool.delete(k); left[p] = cur[p].n - 1; dq[p].push_back(cur[p]); end
        end else begin
          checks++;
          cur[p].a++;
          if (req[p].addr != cur[p].a) begin failures++; if (failures < 5) $display("port %0d word out of sequence", p); end
          left[p]--;
        end
      end
    end
  end
  // credit return after a random delay
  always @(negedge clk) begin
    word_pop = '0;
    for (int p = 0; p < NPORT; p++) if (inflight[p] > 0 && $urandom_range(2) == 0) word_pop[p] = 1;
    req_ready = NPORT'($urandom) | NPORT'($urandom);
    // a descriptor is used when its segment's data arrives, so after its first request
    desc_pop = desc_valid & NPORT'($urandom);
    for (int p = 0; p < NPORT; p++) if (dq[p].size() == 0) desc_pop[p] = 1'b0;
  end

  initial begin
    int widths [5] = '{4, 6, 8, 10, 12};
    cmd = '0; dlog = 0; msb_bits = 8;
    foreach (left[p]) begin left[p] = 0; inflight[p] = 0; slot[p] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int cfgi = 0; cfgi < 15; cfgi++) begin
      dlog = 2'(cfgi % 3); msb_bits = 4'(widths[cfgi % 5]);
      for (int c = 0; c < 40; c++) begin
        int nseg, b, v, plane;
        @(negedge clk);
        cmd.kind = qkv_kind_e'($urandom_range(2)); cmd.lsb = $urandom_range(1);
        cmd.head = HEADW'($urandom); cmd.token = TOKW'($urandom); cmd.slot = TOKW'($urandom);
        nseg = 1 << dlog; b = cmd.lsb ? 4 : int'(msb_bits);
        v = int'(cmd.head) * 1024 + int'(cmd.token); plane = int'(cmd.kind) * 2 + int'(cmd.lsb);
        for (int s = 0; s < nseg; s++) begin
          seg_t e;
          e.a = ADDR_W'((plane << 24) + (v * nseg + s) * (b / 2)); e.n = b / 2;
          e.d.kind = cmd.kind; e.d.lsb = cmd.lsb; e.d.seg = (TOKW+3)'(int'(cmd.slot) * nseg + s);
          pool.push_back(e);
          expected_words += b / 2;
        end
        cmd_valid = 1;
        do @(negedge clk); while (!cmd_taken);
        cmd_valid = 0;
      end
      while (!idle) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    checks++; if (pool.size() != 0 || words != expected_words) begin failures++; $display("%0d segments never fetched, %0d/%0d words", pool.size(), words, expected_words); end
    $display("%0d words requested", words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic cmd_taken;
  always @(posedge clk) cmd_taken <= cmd_valid && cmd_ready;
endmodule
