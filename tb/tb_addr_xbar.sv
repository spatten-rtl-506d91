// tb_addr_xbar: 32 ports push random word addresses (random gaps) into their
// address FIFOs while the 16 channels stall at random. Every request must leave
// on channel addr[3:0], exactly once, with its tag, and requests of one port to
// one channel must keep their order. Rate check: with all ports busy and no
// channel stall, each channel is granted in at least 12 of 16 cycles on average (heads of line
// that want the same channel wait, so 16 per cycle is not reached).
module tb_addr_xbar;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NPORT-1:0] req_valid, req_ready;
  mem_req_t [NPORT-1:0] req;
  logic [NCH-1:0] ch_valid, ch_ready;
  mem_req_t [NCH-1:0] ch_req;
  addr_xbar dut (.*);
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [ADDR_W-1:0] expq [NPORT][NCH][$];
  bit stall_on = 1;
  int busy_cycles = 0, grants_full = 0;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    int g;
    g = 0;
    for (int c = 0; c < NCH; c++) if (ch_valid[c] && ch_ready[c]) begin
      int p;
      g++;
      p = int'(ch_req[c].tag.port);
      checks++;
      if (int'(ch_req[c].addr[3:0]) != c || expq[p][c].size() == 0 || expq[p][c][0] != ch_req[c].addr) begin
        failures++; if (failures < 5) $display("channel %0d got %h from port %0d", c, ch_req[c].addr, p);
      end else void'(expq[p][c].pop_front());
      got++;
    end
    if (!stall_on) begin busy_cycles++; grants_full += g; end
    for (int p = 0; p < NPORT; p++) if (req_valid[p] && req_ready[p]) begin
      expq[p][req[p].addr[3:0]].push_back(req[p].addr); sent++;
    end
  end

  initial begin
    req_valid = '0; req = '0; ch_ready = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      stall_on = (it < 3000);
      for (int p = 0; p < NPORT; p++) begin
        if (!req_valid[p] || req_ready_q[p]) begin
          req_valid[p] = stall_on ? ($urandom_range(2) == 0) : 1'b1;
          req[p].addr = ADDR_W'($urandom);
          if (!stall_on) req[p].addr[3:0] = 4'(p + it);
          req[p].tag.port = PORT_W'(p); req[p].tag.slot = SLOT_W'($urandom);
        end
      end
      ch_ready = stall_on ? NCH'($urandom) : '1;
      @(negedge clk);
    end
    stall_on = 1; req_valid = '0; ch_ready = '1;
    repeat (200) @(negedge clk);
    checks++; if (got != sent) begin failures++; $display("sent %0d delivered %0d", sent, got); end
    checks++;
    if (grants_full < 12 * busy_cycles) begin failures++; $display("only %0d grants in %0d unstalled cycles", grants_full, busy_cycles); end
    $display("%0d requests; %0d grants in %0d unstalled cycles", sent, grants_full, busy_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [NPORT-1:0] req_ready_q;
  always @(posedge clk) req_ready_q <= req_ready & req_valid;
endmodule
