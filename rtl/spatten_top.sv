// spatten_top: the SpAtten attention co-processor with its controller.
//
// It computes multi-head attention head by head and query by query while
// pruning work on the fly:
//  * cascade token pruning: at the start of every head the token top-k engine
//    keeps the fraction tok_keep of the still-alive tokens, ranked by their
//    cumulative importance (the sum of all attention probabilities they have
//    received). A pruned token never comes back, in this or any later head,
//    layer or generation step, and its Q, K and V are never fetched again;
//  * cascade head pruning: at the end of a layer the same top-k engine keeps
//    the fraction head_keep of the alive heads, ranked by the accumulated
//    magnitude of their outputs;
//  * local V pruning: per query a second top-k engine keeps the fraction v_keep
//    of the V vectors with the largest probabilities; only those are fetched;
//  * progressive quantization: Q, K and V are first fetched as MSBs only; if
//    the largest probability of a query is below `thres`, the LSBs of Q and K
//    are fetched, merged and the scores recomputed once (and the V vectors of
//    that query are fetched with LSBs too).
//
// Per head the sequence is: token top-k -> fetch K of the alive tokens into
// the Key SRAM; per query: fetch Q -> Q x K -> softmax -> progressive
// quantization check (maybe LSB fetch and recompute) -> accumulate token
// scores and local V top-k -> fetch the kept V -> prob x V -> attention_out and
// head score. The steps of one query run one after the other; the datapath
// units are pipelined inside (one SRAM line, 8 scores, 8 probabilities per
// cycle), but fetching and computing are not overlapped: that is this
// design's simplification of the paper's coarse-grained pipeline.
//
// Memory side: the fetcher spreads 64-element segments over 32 ports, each
// with a 64-deep address FIFO, a 32x16 crossbar to 16 HBM channels, a 16x32
// crossbar back into 32 reorder buffers, and a bitwidth converter per port.
// Channel handshake: ch_valid/ch_ready per request; the channel answers later
// with ch_rvalid, the 128-bit word and the request's tag, and must accept no
// more than it can answer (there is no back-pressure on responses).
//
// Host interface: pulse new_sentence (with cfg.n_tokens, cfg.n_heads) to reset
// the alive lists and scores; pulse start_layer for every layer; layer_done
// pulses at its end. Each query of each head produces one out_valid beat with
// the head, the query token and D elements of attention_out. ev_* pulse once
// per event (for observation only).
//
// Lint notes: rst_n is an asynchronous reset for the flops and also the
// `disable iff` condition of the two handshake assertions below; the linter
// reports that mix (SYNCASYNCNET) but the assertions are not logic. Status
// outputs of some sub-blocks (busy flags, the row maximum, the values out of
// the head top-k) are left unconnected on purpose: the controller knows from
// its own state when each unit is done.
module spatten_top import spatten_pkg::*; #(
  parameter int NTOK  = MAXTOK,   // longest context (tokens)
  parameter int LINES = 256       // lines of each of the Key and Value SRAMs
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_t                          cfg,
  input  logic                          new_sentence,
  input  logic                          start_layer,
  output logic                          layer_done,
  output logic                          busy,
  // HBM channels
  output logic     [NCH-1:0]            ch_valid,
  input  logic     [NCH-1:0]            ch_ready,
  output mem_req_t [NCH-1:0]            ch_req,
  input  logic     [NCH-1:0]            ch_rvalid,
  input  logic     [NCH-1:0][WORD_W-1:0] ch_rdata,
  input  mem_tag_t [NCH-1:0]            ch_rtag,
  // attention output
  output logic                          out_valid,
  output logic [HEADW-1:0]              out_head,
  output logic [TOKW-1:0]               out_token,
  output logic [MULTS-1:0][EW-1:0]      out_data,
  // events
  output logic                          ev_token_prune,
  output logic                          ev_head_prune,
  output logic                          ev_v_prune,
  output logic                          ev_lsb_fetch
);
  localparam int TW  = $clog2(NTOK);
  localparam int CW  = TW + 1;
  localparam int TSW = 20;     // token score width
  localparam int HSW = 24;     // head score width
  localparam int KW  = $clog2(LINES * NSEGL);
  localparam int LW  = $clog2(LINES);

  // ---------------------------------------------------------------- state
  typedef enum logic [4:0] {
    S_IDLE, S_HEAD, S_TOK_FEED, S_TOK_COLLECT, S_KF, S_QF, S_QK, S_DECIDE, S_QLSB,
    S_VT_FEED, S_VT_COLLECT, S_VF, S_VLSB, S_AV, S_AV_WAIT, S_NEXT, S_HP_FEED, S_HP_COLLECT
  } state_e;
  state_e state;

  logic [TW-1:0]    alive_ids [NTOK];   // alive tokens, in order
  logic [CW-1:0]    n_alive;
  logic [HEADW-1:0] head_ids [MAXHEAD]; // alive heads, in order
  logic [HEADW:0]   n_heads_alive;
  logic [EW-1:0]    prob_buf [NTOK];    // probabilities of the current query, by key slot
  logic [TW-1:0]    sel_slot [NTOK];    // key slots kept by local V pruning
  logic [EW-1:0]    sel_prob [NTOK];
  logic [CW-1:0]    nsel;

  logic [HEADW:0]   hi;                 // index into head_ids
  logic [CW-1:0]    qi;                 // query index
  logic [HEADW-1:0] h;
  logic [TW-1:0]    qtok;
  logic             k_lsb, q_lsb;
  logic [CW-1:0]    ptr, wr;            // feed / collect pointers
  logic [CW-1:0]    topk_n, topk_k;

  assign h    = head_ids[hi[HEADW-1:0]];
  assign qtok = cfg.gen_mode ? cfg.q_token[TW-1:0] : alive_ids[qi[TW-1:0]];

  function automatic logic [CW-1:0] keep_of(input logic [CW-1:0] n, input logic [8:0] frac);
    logic [CW+8:0] p;
    p = (CW+9)'(n) * (CW+9)'(frac);
    p = p >> 8;
    if (p == '0) p = 1;
    return CW'(p);
  endfunction

  logic [3:0] nseg, per_line;
  assign nseg     = 4'd1 << cfg.dlog;
  assign per_line = 4'd8 >> cfg.dlog;

  // ---------------------------------------------------------------- fetch path
  logic            cmd_valid, cmd_ready;
  fetch_cmd_t      cmd;
  logic [CW-1:0]   iss_j, iss_n;
  logic [CW+3:0]   pending;              // segments requested but not yet written
  logic            seg_we;

  logic     [NPORT-1:0] preq_valid, preq_ready, word_pop, desc_valid, desc_pop;
  mem_req_t [NPORT-1:0] preq;
  seg_desc_t [NPORT-1:0] desc;
  logic     [NPORT-1:0] dv, dready, cvalid, cready;
  logic     [NPORT-1:0][WORD_W-1:0] dword;
  logic     [NPORT-1:0][SEG-1:0][EW-1:0] celems;
  logic     fetch_idle;
  logic     [NPORT-1:0] xready;
  assign xready = dready & desc_valid;

  qkv_fetcher u_fetcher (
    .clk, .rst_n, .dlog(cfg.dlog), .msb_bits(cfg.msb_bits),
    .cmd_valid, .cmd_ready, .cmd,
    .req_valid(preq_valid), .req_ready(preq_ready), .req(preq),
    .word_pop, .desc_valid, .desc_pop, .desc, .idle(fetch_idle));

  addr_xbar u_addr_xbar (
    .clk, .rst_n, .req_valid(preq_valid), .req_ready(preq_ready), .req(preq),
    .ch_valid, .ch_ready, .ch_req);

  data_xbar u_data_xbar (
    .clk, .rst_n, .ch_rvalid, .ch_rdata, .ch_rtag,
    .out_valid(dv), .out_ready(xready), .out_data(dword));

  for (genvar p = 0; p < NPORT; p++) begin : g_conv
    bitwidth_converter u_conv (
      .clk, .rst_n, .msb_bits(cfg.msb_bits), .lsb_mode(desc[p].lsb),
      .in_valid(dv[p] && desc_valid[p]), .in_ready(dready[p]), .in_data(dword[p]),
      .out_valid(cvalid[p]), .out_ready(cready[p]), .out_elems(celems[p]));
  end
  always_comb for (int p = 0; p < NPORT; p++) word_pop[p] = dv[p] && desc_valid[p] && dready[p];

  // one converted segment is written per cycle, lowest ready port first
  logic [PORT_W-1:0] wsel;
  always_comb begin
    seg_we = 1'b0; wsel = '0; cready = '0; desc_pop = '0;
    for (int p = NPORT - 1; p >= 0; p--)
      if (cvalid[p] && desc_valid[p]) begin seg_we = 1'b1; wsel = PORT_W'(p); end
    if (seg_we) begin cready[wsel] = 1'b1; desc_pop[wsel] = 1'b1; end
  end
  seg_desc_t wdesc;
  assign wdesc = desc[wsel];

  // ---------------------------------------------------------------- compute path
  logic qk_start, qk_busy, sc_valid, sc_last;
  logic [NSEGL-1:0][EW-1:0] scores;
  logic [NSEGL-1:0] sc_mask;
  qk_unit #(.LINES(LINES)) u_qk (
    .clk, .rst_n, .dlog(cfg.dlog), .shift(cfg.qk_shift),
    .k_we(seg_we && wdesc.kind == KIND_K), .k_wmerge(wdesc.lsb), .k_wseg(KW'(wdesc.seg)),
    .k_wdata(celems[wsel]),
    .q_we(seg_we && wdesc.kind == KIND_Q), .q_wmerge(wdesc.lsb), .q_wseg(3'(wdesc.seg)),
    .q_wdata(celems[wsel]),
    .start(qk_start), .nkeys((TOKW+1)'(n_alive)), .busy(qk_busy),
    .score_valid(sc_valid), .scores, .score_mask(sc_mask), .score_last(sc_last));

  logic sm_ready, pr_valid, pr_last;
  logic [NSEGL-1:0][EW-1:0] probs;
  logic [NSEGL-1:0] pr_mask;
  softmax u_softmax (
    .clk, .rst_n, .scale(cfg.scale), .in_valid(sc_valid), .in_ready(sm_ready),
    .in_scores(scores), .in_mask(sc_mask), .in_last(sc_last),
    .out_valid(pr_valid), .out_prob(probs), .out_mask(pr_mask), .out_last(pr_last));

  logic pq_valid, need_lsb;
  logic [EW-1:0] row_max;
  pq_determiner u_pq (
    .clk, .rst_n, .thres(cfg.thres), .in_valid(pr_valid), .in_prob(probs),
    .in_mask(pr_mask), .in_last(pr_last), .dec_valid(pq_valid), .need_lsb, .row_max);

  // token importance
  logic tacc_valid;
  logic [NSEGL-1:0] tacc_mask;
  logic [NSEGL-1:0][TW-1:0] tacc_id;
  logic [NSEGL-1:0][EW-1:0] tacc_prob;
  logic [15:0][TW-1:0]  trd_id;
  logic [15:0][TSW-1:0] trd_score;
  token_score_acc #(.NTOK(NTOK), .PAR(NSEGL), .RDP(16), .SW(TSW)) u_tok_acc (
    .clk, .rst_n, .clear(new_sentence && state == S_IDLE), .acc_valid(tacc_valid), .acc_mask(tacc_mask),
    .acc_id(tacc_id), .acc_prob(tacc_prob), .rd_id(trd_id), .rd_score(trd_score));

  // head importance
  logic av_out_valid, av_busy;
  logic [MULTS-1:0][EW-1:0] av_out;
  logic [MAXHEAD-1:0][HSW-1:0] hscore;
  head_score_acc #(.NH(MAXHEAD), .SW(HSW)) u_head_acc (
    .clk, .rst_n, .clear(new_sentence && state == S_IDLE), .dlog(cfg.dlog),
    .acc_valid(av_out_valid), .acc_head(h), .acc_vals(av_out), .score(hscore));

  // top-k engine for tokens and heads (shared), and one for local V pruning
  logic                  ta_start, ta_in_valid, ta_busy, ta_out_valid, ta_done;
  logic [15:0]           ta_in_mask, ta_out_mask;
  logic [15:0][HSW-1:0]  ta_in_data, ta_out_data;
  logic [15:0][TW-1:0]   ta_out_idx;
  topk_engine #(.PAR(16), .DEPTH(NTOK / 16), .W(HSW)) u_topk_token_head (
    .clk, .rst_n, .start(ta_start), .n(topk_n), .k(topk_k),
    .in_valid(ta_in_valid), .in_mask(ta_in_mask), .in_data(ta_in_data), .busy(ta_busy),
    .out_valid(ta_out_valid), .out_mask(ta_out_mask), .out_data(ta_out_data),
    .out_idx(ta_out_idx), .done(ta_done));

  logic                  tb_start, tb_in_valid, tb_busy, tb_out_valid, tb_done;
  logic [15:0]           tb_in_mask, tb_out_mask;
  logic [15:0][EW-1:0]   tb_in_data, tb_out_data;
  logic [15:0][TW-1:0]   tb_out_idx;
  topk_engine #(.PAR(16), .DEPTH(NTOK / 16), .W(EW)) u_topk_value (
    .clk, .rst_n, .start(tb_start), .n(topk_n), .k(topk_k),
    .in_valid(tb_in_valid), .in_mask(tb_in_mask), .in_data(tb_in_data), .busy(tb_busy),
    .out_valid(tb_out_valid), .out_mask(tb_out_mask), .out_data(tb_out_data),
    .out_idx(tb_out_idx), .done(tb_done));


  // prob x V
  logic av_in_valid, av_last;
  logic [LW-1:0] av_line;
  logic [NSEGL-1:0][EW-1:0] av_prob;
  av_unit #(.LINES(LINES)) u_av (
    .clk, .rst_n, .dlog(cfg.dlog),
    .v_we(seg_we && wdesc.kind == KIND_V), .v_wmerge(wdesc.lsb), .v_wseg(KW'(wdesc.seg)),
    .v_wdata(celems[wsel]),
    .in_valid(av_in_valid), .in_line(av_line), .in_prob(av_prob), .in_last(av_last),
    .busy(av_busy), .out_valid(av_out_valid), .out(av_out));

  // ---------------------------------------------------------------- controller datapath (combinational)
  always_comb begin
    // fetch commands of the current fetch state
    cmd = '0;
    cmd.head = h;
    cmd_valid = 1'b0;
    unique case (state)
      S_KF:   begin cmd.kind = KIND_K; cmd.token = TOKW'(alive_ids[iss_j[TW-1:0]]); cmd.slot = TOKW'(iss_j); end
      S_QF:   begin cmd.kind = KIND_Q; cmd.token = TOKW'(qtok); end
      S_QLSB: begin
        cmd.lsb = 1'b1;
        if (iss_j == '0) begin cmd.kind = KIND_Q; cmd.token = TOKW'(qtok); end
        else begin cmd.kind = KIND_K; cmd.token = TOKW'(alive_ids[TW'(iss_j - 1'b1)]); cmd.slot = TOKW'(iss_j - 1'b1); end
      end
      S_VF, S_VLSB: begin
        cmd.kind = KIND_V; cmd.lsb = (state == S_VLSB);
        cmd.token = TOKW'(alive_ids[sel_slot[iss_j[TW-1:0]]]); cmd.slot = TOKW'(iss_j);
      end
      default: ;
    endcase
    if (state inside {S_KF, S_QF, S_QLSB, S_VF, S_VLSB}) cmd_valid = (iss_j < iss_n);

    // top-k feeds
    ta_in_valid = 1'b0; ta_in_mask = '0; ta_in_data = '0; trd_id = '0;
    for (int r = 0; r < 16; r++) trd_id[r] = alive_ids[TW'(ptr + CW'(r))];
    if (state == S_TOK_FEED) begin
      ta_in_valid = 1'b1;
      for (int r = 0; r < 16; r++) begin
        ta_in_mask[r] = (ptr + CW'(r)) < n_alive;
        ta_in_data[r] = HSW'(trd_score[r]);
      end
    end else if (state == S_HP_FEED) begin
      ta_in_valid = 1'b1;
      for (int r = 0; r < 16; r++) begin
        ta_in_mask[r] = (r < MAXHEAD) && (HEADW+1)'(r) < n_heads_alive;
        ta_in_data[r] = hscore[head_ids[r % MAXHEAD]];
      end
    end
    // local V top-k and token accumulation read the probabilities 8 per cycle
    tb_in_valid = (state == S_VT_FEED) && !tb_start;
    tb_in_mask = '0; tb_in_data = '0;
    tacc_valid = tb_in_valid;
    for (int r = 0; r < NSEGL; r++) begin
      tacc_mask[r]  = tb_in_valid && (ptr + CW'(r)) < n_alive;
      tacc_id[r]    = alive_ids[TW'(ptr + CW'(r))];
      tacc_prob[r]  = prob_buf[TW'(ptr + CW'(r))];
      tb_in_mask[r] = tacc_mask[r];
      tb_in_data[r] = tacc_prob[r];
    end
    // prob x V beats
    av_in_valid = (state == S_AV);
    av_line = LW'(ptr);
    av_last = (ptr + 1'b1) * CW'(per_line) >= nsel;
    for (int i = 0; i < NSEGL; i++) begin
      logic [CW+3:0] m;
      m = (CW+4)'(ptr) * (CW+4)'(per_line) + (CW+4)'(i);
      av_prob[i] = (i < int'(per_line) && m < (CW+4)'(nsel)) ? sel_prob[TW'(m)] : '0;
    end
  end

  assign busy = (state != S_IDLE);

  // Q x K has no back-pressure: a row (at most 128 beats) always fits the softmax FIFO.
  a_softmax_accepts: assert property (@(posedge clk) disable iff (!rst_n) sc_valid |-> sm_ready)
    else $error("softmax dropped a score beat");
  // fetch segments are written only while a fetch is pending
  a_no_stray_segment: assert property (@(posedge clk) disable iff (!rst_n) seg_we |-> pending != '0)
    else $error("segment written with nothing pending");

  // ---------------------------------------------------------------- controller sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n_alive <= '0; n_heads_alive <= '0; nsel <= '0;
      hi <= '0; qi <= '0; k_lsb <= 1'b0; q_lsb <= 1'b0; ptr <= '0; wr <= '0;
      iss_j <= '0; iss_n <= '0; pending <= '0;
      topk_n <= '0; topk_k <= '0; ta_start <= 1'b0; tb_start <= 1'b0; qk_start <= 1'b0;
      layer_done <= 1'b0; out_valid <= 1'b0; out_head <= '0; out_token <= '0; out_data <= '0;
      ev_token_prune <= 1'b0; ev_head_prune <= 1'b0; ev_v_prune <= 1'b0; ev_lsb_fetch <= 1'b0;
      for (int i = 0; i < MAXHEAD; i++) head_ids[i] <= HEADW'(i);
    end else begin
      logic fetch_done;
      ta_start <= 1'b0; tb_start <= 1'b0; qk_start <= 1'b0; layer_done <= 1'b0; out_valid <= 1'b0;
      ev_token_prune <= 1'b0; ev_head_prune <= 1'b0; ev_v_prune <= 1'b0; ev_lsb_fetch <= 1'b0;

      // fetch bookkeeping
      if (cmd_valid && cmd_ready) iss_j <= iss_j + 1'b1;
      pending <= pending + ((cmd_valid && cmd_ready) ? (CW+4)'(nseg) : '0) - (CW+4)'(seg_we);
      fetch_done = (iss_j == iss_n) && (pending == '0) && !cmd_valid;

      // probabilities of the current query go to prob_buf by key slot
      if (pr_valid)
        for (int i = 0; i < NSEGL; i++)
          if (pr_mask[i]) prob_buf[TW'(wr * CW'(per_line) + CW'(i))] <= probs[i];
      if (pr_valid) wr <= wr + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (new_sentence) begin
            for (int t = 0; t < NTOK; t++) alive_ids[t] <= TW'(t);
            for (int i = 0; i < MAXHEAD; i++) head_ids[i] <= HEADW'(i);
            n_alive <= CW'(cfg.n_tokens);
            n_heads_alive <= cfg.n_heads;
          end else if (start_layer) begin
            hi <= '0;
            state <= S_HEAD;
          end
        end
        S_HEAD: begin
          // cascade token pruning for this head
          topk_n <= n_alive;
          topk_k <= keep_of(n_alive, cfg.tok_keep);
          k_lsb  <= 1'b0;
          ptr <= '0; wr <= '0;
          if (keep_of(n_alive, cfg.tok_keep) < n_alive) begin
            ta_start <= 1'b1;
            state <= S_TOK_FEED;
          end else begin
            iss_j <= '0; iss_n <= n_alive; state <= S_KF;
          end
        end
        S_TOK_FEED: if (!ta_start) begin
          ptr <= ptr + CW'(16);
          if (ptr + CW'(16) >= n_alive) state <= S_TOK_COLLECT;
        end
        S_TOK_COLLECT: begin
          if (ta_out_valid) begin
            logic [CW-1:0] w;
            w = wr;
            for (int r = 0; r < 16; r++)
              if (ta_out_mask[r]) begin alive_ids[TW'(w)] <= alive_ids[ta_out_idx[r]]; w = w + 1'b1; end
            wr <= w;
          end
          if (ta_done) begin
            n_alive <= wr;
            ev_token_prune <= 1'b1;
            iss_j <= '0; iss_n <= wr; state <= S_KF;
          end
        end
        S_KF: if (fetch_done) begin
          qi <= '0;
          iss_j <= '0; iss_n <= CW'(1); state <= S_QF;
        end
        S_QF: if (fetch_done) begin
          q_lsb <= 1'b0;
          wr <= '0;
          qk_start <= 1'b1;
          state <= S_QK;
        end
        S_QK: if (pq_valid) state <= S_DECIDE;
        S_DECIDE: begin
          ptr <= '0; wr <= '0;
          if (cfg.pq_en && need_lsb && !q_lsb) begin
            // flat distribution: fetch LSBs and recompute once
            ev_lsb_fetch <= 1'b1;
            q_lsb <= 1'b1;
            k_lsb <= 1'b1;
            iss_j <= '0; iss_n <= k_lsb ? CW'(1) : n_alive + 1'b1;
            state <= S_QLSB;
          end else begin
            topk_n <= n_alive;
            topk_k <= keep_of(n_alive, cfg.v_keep);
            tb_start <= 1'b1;
            state <= S_VT_FEED;
          end
        end
        S_QLSB: if (fetch_done) begin
          wr <= '0;
          qk_start <= 1'b1;
          state <= S_QK;
        end
        S_VT_FEED: if (!tb_start) begin
          ptr <= ptr + CW'(NSEGL);
          if (ptr + CW'(NSEGL) >= n_alive) begin wr <= '0; state <= S_VT_COLLECT; end
        end
        S_VT_COLLECT: begin
          if (tb_out_valid) begin
            logic [CW-1:0] w;
            w = wr;
            for (int r = 0; r < 16; r++)
              if (tb_out_mask[r]) begin
                sel_slot[TW'(w)] <= tb_out_idx[r];
                sel_prob[TW'(w)] <= tb_out_data[r];
                w = w + 1'b1;
              end
            wr <= w;
          end
          if (tb_done) begin
            nsel <= wr;
            if (topk_k < n_alive) ev_v_prune <= 1'b1;
            iss_j <= '0; iss_n <= wr; state <= S_VF;
          end
        end
        S_VF: if (fetch_done) begin
          if (q_lsb) begin iss_j <= '0; iss_n <= nsel; state <= S_VLSB; end
          else begin ptr <= '0; state <= S_AV; end
        end
        S_VLSB: if (fetch_done) begin ptr <= '0; state <= S_AV; end
        S_AV: begin
          ptr <= ptr + 1'b1;
          if (av_last) state <= S_AV_WAIT;
        end
        S_AV_WAIT: if (av_out_valid) begin
          out_valid <= 1'b1;
          out_head  <= h;
          out_token <= TOKW'(qtok);
          out_data  <= av_out;
          state <= S_NEXT;
        end
        S_NEXT: begin
          if (!cfg.gen_mode && qi + 1'b1 < n_alive) begin
            qi <= qi + 1'b1;
            iss_j <= '0; iss_n <= CW'(1); state <= S_QF;
          end else if (hi + 1'b1 < n_heads_alive) begin
            hi <= hi + 1'b1;
            state <= S_HEAD;
          end else begin
            // cascade head pruning at the end of the layer
            topk_n <= CW'(n_heads_alive);
            topk_k <= keep_of(CW'(n_heads_alive), cfg.head_keep);
            wr <= '0;
            if (keep_of(CW'(n_heads_alive), cfg.head_keep) < CW'(n_heads_alive)) begin
              ta_start <= 1'b1;
              state <= S_HP_FEED;
            end else begin
              layer_done <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        S_HP_FEED: if (!ta_start) state <= S_HP_COLLECT;
        S_HP_COLLECT: begin
          if (ta_out_valid) begin
            logic [CW-1:0] w;
            w = wr;
            for (int r = 0; r < 16; r++)
              if (ta_out_mask[r]) begin head_ids[HEADW'(w)] <= head_ids[HEADW'(ta_out_idx[r])]; w = w + 1'b1; end
            wr <= w;
          end
          if (ta_done) begin
            n_heads_alive <= (HEADW+1)'(wr);
            ev_head_prune <= 1'b1;
            layer_done <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
