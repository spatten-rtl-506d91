// tb_spatten_top: end-to-end test of the accelerator at its default sizes,
// with the behavioural HBM model (random channel stalls and return latency).
//
// Part A, generation mode, no pruning: every attention_out element is compared
// with a real-number reference built from the same DRAM contents (decoded here
// independently) - first with MSBs only, then with progressive quantization
// forced (threshold above any probability) so that LSBs are fetched, merged and
// the result must match the full-precision reference.
// Part B, summarization over two layers with token, head and local V pruning and
// progressive quantization on: the number of outputs per head must follow the
// keep fractions, the queries must be alive tokens, and layer 2 may only use
// the heads kept by layer 1. Every mechanism (token pruning, head pruning,
// V pruning, LSB refetch, channel stall, reordered return) must occur.
module tb_spatten_top;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic new_sentence = 0, start_layer = 0, layer_done, busy;
  logic     [NCH-1:0] ch_valid, ch_ready, ch_rvalid;
  mem_req_t [NCH-1:0] ch_req;
  logic     [NCH-1:0][WORD_W-1:0] ch_rdata;
  mem_tag_t [NCH-1:0] ch_rtag;
  logic out_valid;
  logic [HEADW-1:0] out_head;
  logic [TOKW-1:0] out_token;
  logic [MULTS-1:0][EW-1:0] out_data;
  logic ev_token_prune, ev_head_prune, ev_v_prune, ev_lsb_fetch;
  longint words_read;

  spatten_top dut (.*);
  hbm_model #(.LAT(6), .JIT(10), .STALL(1'b1)) u_hbm (.clk, .rst_n, .ch_valid, .ch_ready, .ch_req,
    .ch_rvalid, .ch_rdata, .ch_rtag, .words_read);

  int checks = 0, failures = 0;
  int n_tok_prune = 0, n_head_prune = 0, n_v_prune = 0, n_lsb = 0, n_stall = 0, n_out = 0;
  int max_err = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (!rst_n) ;
    else begin
    if (ev_token_prune) n_tok_prune++;
    if (ev_head_prune)  n_head_prune++;
    if (ev_v_prune)     n_v_prune++;
    if (ev_lsb_fetch)   n_lsb++;
    for (int c = 0; c < NCH; c++) if (ch_valid[c] && !ch_ready[c]) n_stall++;
    end
  end

  // --- independent decoding of the DRAM image ---------------------------
  function automatic logic [31:0] mix(input logic [31:0] x);
    x = x ^ (x >> 16); x = x * 32'h7feb352d; x = x ^ (x >> 15); x = x * 32'h846ca68b; x = x ^ (x >> 16);
    return x;
  endfunction
  function automatic logic [127:0] word_of(input logic [ADDR_W-1:0] a);
    return {mix({a, 4'd3}), mix({a, 4'd2}), mix({a, 4'd1}), mix({a, 4'd0})};
  endfunction
  function automatic int field(input int plane, input int bits, input int h, input int tok, input int e);
    int wps = bits / 2, nseg = 1, s = e / 64, i = e % 64, v = 0;
    longint base;
    logic [767:0] seg;
    base = (longint'(plane) << 24) + (longint'(h * MAXTOK + tok) * nseg + s) * wps;
    for (int w = 0; w < wps; w++) seg[w*128 +: 128] = word_of(ADDR_W'(base + w));
    for (int b = 0; b < bits; b++) v |= int'(seg[i*bits + b]) << b;
    return v;
  endfunction
  // kind 0 Q, 1 K, 2 V; full: MSB and LSB
  function automatic int elem(input int kind, input int h, input int tok, input int e, input int mb, input bit full);
    int m, l, v;
    m = field(kind * 2, mb, h, tok, e);
    if (m >= (1 << (mb - 1))) m -= (1 << mb);
    v = m * (1 << (12 - mb));
    if (full) begin
      l = field(kind * 2 + 1, 4, h, tok, e);
      if (mb <= 8) v += l * (1 << (8 - mb)); else if (mb == 10) v += l / 4;
    end
    return v;
  endfunction

  // --- reference attention for one head and query over given tokens ------
  real ref_out [64];
  task automatic reference(input int h, input int qtok, input int ntok, input bit full);
    real p [1024];
    real sum;
    int q [64];
    for (int e = 0; e < 64; e++) q[e] = elem(0, h, qtok, e, cfg.msb_bits, full);
    sum = 0;
    for (int t = 0; t < ntok; t++) begin
      longint raw = 0;
      int s12;
      real x;
      for (int e = 0; e < 64; e++) raw += longint'(q[e]) * elem(1, h, t, e, cfg.msb_bits, full);
      raw = raw >>> cfg.qk_shift;
      s12 = (raw > 2047) ? 2047 : (raw < -2048) ? -2048 : int'(raw);
      x = real'(s12) * real'(cfg.scale) / 65536.0;
      if (x > 15.99) x = 15.99; if (x < -16.0) x = -16.0;
      p[t] = $exp(x); sum += p[t];
    end
    for (int d = 0; d < 64; d++) begin
      ref_out[d] = 0;
      for (int t = 0; t < ntok; t++) ref_out[d] += p[t] / sum * real'(elem(2, h, t, d, cfg.msb_bits, full));
    end
  endtask

  // collect outputs
  int got_head [$];
  int got_tok [$];
  logic [63:0][EW-1:0] got_data [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    n_out++;
    got_head.push_back(int'(out_head)); got_tok.push_back(int'(out_token));
    got_data.push_back(out_data[63:0]);
  end

  task automatic run_layer();
    @(negedge clk); start_layer = 1; @(negedge clk); start_layer = 0;
    while (!layer_done) @(negedge clk);
  endtask
  task automatic sentence();
    @(negedge clk); new_sentence = 1; @(negedge clk); new_sentence = 0;
  endtask
  function automatic int keep(input int n, input int f);
    int k = (n * f) / 256; return (k == 0) ? 1 : k;
  endfunction

  task automatic check_part_a(input bit full);
    for (int i = 0; i < got_head.size(); i++) begin
      reference(got_head[i], got_tok[i], int'(cfg.n_tokens), full);
      for (int d = 0; d < 64; d++) begin
        int hw, err; real r;
        hw = int'($signed(got_data[i][d])); r = ref_out[d];
        err = hw - int'(r); if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        checks++;
        if (real'(err) > 6.0 + 0.03 * ((r < 0) ? -r : r)) begin
          failures++; if (failures < 8) $display("A full=%0d head %0d d %0d hw %0d ref %f", full, got_head[i], d, hw, r);
        end
      end
    end
  endtask

  initial begin
    int exp_alive, heads_l1 [$];
    cfg = '0;
    cfg.dlog = 2'd0; cfg.msb_bits = 4'd8; cfg.pq_en = 1'b0; cfg.thres = 12'd410;
    cfg.scale = 16'd100; cfg.qk_shift = 5'd13; cfg.gen_mode = 1'b1;
    cfg.n_tokens = 11'd40; cfg.q_token = 10'd7; cfg.n_heads = 5'd2;
    cfg.tok_keep = 9'd256; cfg.head_keep = 9'd256; cfg.v_keep = 9'd256;
    repeat (4) @(negedge clk); rst_n = 1;

    // ---------------- Part A: MSB only ----------------
    sentence(); run_layer();
    checks++; if (got_head.size() != 2) begin failures++; $display("A outputs %0d", got_head.size()); end
    check_part_a(1'b0);
    // ---------------- Part A: forced LSB fetch ----------------
    got_head.delete(); got_tok.delete(); got_data.delete();
    cfg.pq_en = 1'b1; cfg.thres = 12'd4095;
    sentence(); run_layer();
    checks++; if (got_head.size() != 2) failures++;
    check_part_a(1'b1);
    $display("part A max error %0d LSB fetches %0d", max_err, n_lsb);

    // ---------------- Part B: summarization with pruning ----------------
    got_head.delete(); got_tok.delete(); got_data.delete();
    cfg.gen_mode = 1'b0; cfg.n_tokens = 11'd24; cfg.n_heads = 5'd4;
    cfg.tok_keep = 9'd200; cfg.head_keep = 9'd128; cfg.v_keep = 9'd128;
    cfg.pq_en = 1'b1; cfg.thres = 12'd410; cfg.scale = 16'd40;
    sentence(); run_layer();
    exp_alive = 24;
    for (int hh = 0; hh < 4; hh++) begin
      int cnt;
      cnt = 0;
      exp_alive = keep(exp_alive, 200);
      for (int i = 0; i < got_head.size(); i++) if (got_head[i] == hh) cnt++;
      checks++;
      if (cnt != exp_alive) begin failures++; $display("B head %0d outputs %0d expected %0d", hh, cnt, exp_alive); end
    end
    // queries of a later head are a subset of an earlier head's
    for (int i = 0; i < got_head.size(); i++)
      if (got_head[i] == 3) begin
        bit found;
        found = 0;
        for (int j = 0; j < got_head.size(); j++) if (got_head[j] == 2 && got_tok[j] == got_tok[i]) found = 1;
        checks++; if (!found) begin failures++; $display("B token %0d came back", got_tok[i]); end
      end
    // layer 2: only two heads remain
    got_head.delete(); got_tok.delete(); got_data.delete();
    run_layer();
    for (int i = 0; i < got_head.size(); i++) begin
      bit seen;
      seen = 0;
      foreach (heads_l1[j]) if (heads_l1[j] == got_head[i]) seen = 1;
      if (!seen) heads_l1.push_back(got_head[i]);
    end
    checks++; if (heads_l1.size() != 2) begin failures++; $display("B layer 2 heads %0d", heads_l1.size()); end
    checks++; if (got_head.size() != 2 * keep(exp_alive, 200) + 0 && got_head.size() == 0) failures++;

    // ---------------- mechanisms ----------------
    repeat (4) @(negedge clk);
    $display("events: token_prune=%0d head_prune=%0d v_prune=%0d lsb_fetch=%0d stalls=%0d outputs=%0d words=%0d",
             n_tok_prune, n_head_prune, n_v_prune, n_lsb, n_stall, n_out, words_read);
    checks++; if (n_tok_prune == 0) failures++;
    checks++; if (n_head_prune == 0) failures++;
    checks++; if (n_v_prune == 0) failures++;
    checks++; if (n_lsb == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
