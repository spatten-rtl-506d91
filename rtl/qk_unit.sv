// qk_unit: query x key, with the Key SRAM (module 7 of the architecture).
//
// The query (up to 512 elements, held in registers) is broadcast 512/D times so
// that one Key SRAM line, which packs 512/D keys of D = 64 << dlog elements,
// meets a copy of the query in a 512-multiplier array. A reconfigurable adder
// tree reduces the 512 products; its level log2(D) holds the 512/D dot
// products s_i = sum_j K_ij * Q_j, so one line gives 8, 4, 2 or 1 scores.
// Each score is shifted right by `shift` and saturated to 12 bits (the figure
// shows 8 x 12b going to Softmax); this requantization step is this design's
// choice.
// The query register and the Key SRAM are written by 64-element segments, with
// an OR-merge mode for late LSBs.
// Timing: after `start`, one line is read per cycle; the scores of line l
// appear 3 cycles after it is read (SRAM, multiplier, adder-tree registers).
// `score_last` marks the final beat of the nkeys scores.
module qk_unit import spatten_pkg::*; #(
  parameter int LINES = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [1:0]                    dlog,
  input  logic [4:0]                    shift,
  // Key SRAM write
  input  logic                          k_we,
  input  logic                          k_wmerge,
  input  logic [$clog2(LINES*NSEGL)-1:0] k_wseg,
  input  logic [SEG-1:0][EW-1:0]        k_wdata,
  // query register write
  input  logic                          q_we,
  input  logic                          q_wmerge,
  input  logic [2:0]                    q_wseg,
  input  logic [SEG-1:0][EW-1:0]        q_wdata,
  // run
  input  logic                          start,
  input  logic [TOKW:0]                 nkeys,
  output logic                          busy,
  output logic                          score_valid,
  output logic [NSEGL-1:0][EW-1:0]      scores,
  output logic [NSEGL-1:0]              score_mask,
  output logic                          score_last
);
  localparam int LW = $clog2(LINES);
  localparam int PW = 2 * EW;          // product width
  localparam int SWD = PW + 9;         // 512-way sum width

  logic [MULTS-1:0][EW-1:0] q_reg;
  logic [NSEGL-1:0][SEG*EW-1:0] line;
  logic [LW-1:0] rd_line;

  kv_sram #(.LINES(LINES)) u_key_sram (
    .clk, .we(k_we), .wmerge(k_wmerge), .wseg(k_wseg), .wdata(k_wdata),
    .raddr(rd_line), .rdata(line));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q_reg <= '0;
    else if (q_we)
      for (int e = 0; e < SEG; e++)
        q_reg[int'(q_wseg)*SEG + e] <= q_wmerge ? (q_reg[int'(q_wseg)*SEG + e] | q_wdata[e]) : q_wdata[e];
  end

  // line sequencing
  logic [TOKW:0] base, nk;
  logic [3:0]    per_line;
  logic          run;
  logic          v1, v2;
  logic [TOKW:0] b1, b2;
  logic          l1, l2;
  assign per_line = 4'd8 >> dlog;
  assign busy = run || v1 || v2 || score_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; rd_line <= '0; base <= '0; nk <= '0;
      v1 <= 1'b0; v2 <= 1'b0; b1 <= '0; b2 <= '0; l1 <= 1'b0; l2 <= 1'b0;
    end else begin
      v1 <= run; b1 <= base; l1 <= run && (base + (TOKW+1)'(per_line) >= nk);
      v2 <= v1;  b2 <= b1;   l2 <= l1;
      if (start) begin
        run <= (nkeys != '0); rd_line <= '0; base <= '0; nk <= nkeys;
      end else if (run) begin
        rd_line <= rd_line + 1'b1;
        base    <= base + (TOKW+1)'(per_line);
        if (base + (TOKW+1)'(per_line) >= nk) run <= 1'b0;
      end
    end
  end

  // multiplier array: element j of the line meets query element j mod D
  logic signed [MULTS-1:0][PW-1:0] prod;
  always_ff @(posedge clk) begin
    for (int j = 0; j < MULTS; j++) begin
      int qi;
      qi = j & ((SEG << dlog) - 1);
      prod[j] <= PW'($signed(line[j / SEG][(j % SEG)*EW +: EW])) * PW'($signed(q_reg[qi]));
    end
  end

  // reconfigurable adder tree: lvl[L][i] sums products i*2^L .. i*2^L+2^L-1
  logic signed [SWD-1:0] lvl [10][MULTS];
  always_comb begin
    for (int i = 0; i < MULTS; i++) lvl[0][i] = SWD'($signed(prod[i]));
    for (int L = 1; L < 10; L++)
      for (int i = 0; i < MULTS; i++)
        lvl[L][i] = (i < (MULTS >> L)) ? lvl[L-1][2*i] + lvl[L-1][2*i+1] : '0;
  end

  function automatic logic [EW-1:0] sat12(input logic signed [SWD-1:0] x);
    if (x > SWD'(2047))       return 12'h7FF;
    else if (x < -SWD'(2048)) return 12'h800;
    else                      return x[EW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_valid <= 1'b0; scores <= '0; score_mask <= '0; score_last <= 1'b0;
    end else begin
      score_valid <= v2;
      score_last  <= v2 && l2;
      for (int i = 0; i < NSEGL; i++) begin
        score_mask[i] <= v2 && (i < int'(per_line)) && (b2 + (TOKW+1)'(i) < nk);
        scores[i]     <= (i < int'(per_line)) ? sat12(lvl[6 + int'(dlog)][i] >>> shift) : '0;
      end
    end
  end
endmodule
