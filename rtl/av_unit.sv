// av_unit: attention probability x value, with the Value SRAM (module 11).
//
// A Value SRAM line packs 512/D value vectors (D = 64 << dlog). For each beat
// the unit reads one line and takes the 512/D probabilities of those vectors;
// each probability is broadcast D times over the 512 multipliers, and the
// adder tree is folded so that it works as D adder trees of 512/D inputs
// (level one adds element j and j+256, the next j and j+128, ...). The D sums
// are accumulated over the beats of a query; at the last beat
// attention_out_d = sum_i prob_i * V_id is returned, shifted back by the 12
// fraction bits of the probabilities and saturated to 12 bits.
// Probabilities are unsigned Q0.12, values signed 12-bit.
// Timing: a beat given in cycle t is accumulated in cycle t+2; out_valid
// follows the last beat by 3 cycles. A zero probability (pruned vector) adds 0.
module av_unit import spatten_pkg::*; #(
  parameter int LINES = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [1:0]                     dlog,
  // Value SRAM write
  input  logic                           v_we,
  input  logic                           v_wmerge,
  input  logic [$clog2(LINES*NSEGL)-1:0] v_wseg,
  input  logic [SEG-1:0][EW-1:0]         v_wdata,
  // beats
  input  logic                           in_valid,
  input  logic [$clog2(LINES)-1:0]       in_line,
  input  logic [NSEGL-1:0][EW-1:0]       in_prob,
  input  logic                           in_last,
  output logic                           busy,
  output logic                           out_valid,
  output logic [MULTS-1:0][EW-1:0]       out
);
  localparam int PW  = 2 * EW + 1;
  localparam int AW  = PW + 12;

  logic [NSEGL-1:0][SEG*EW-1:0] line;
  kv_sram #(.LINES(LINES)) u_value_sram (
    .clk, .we(v_we), .wmerge(v_wmerge), .wseg(v_wseg), .wdata(v_wdata),
    .raddr(in_line), .rdata(line));

  logic v1, v2, l1, l2;
  logic [NSEGL-1:0][EW-1:0] p1;
  logic signed [MULTS-1:0][PW-1:0] prod;
  logic signed [AW-1:0] fold [4][MULTS];
  logic signed [AW-1:0] acc [MULTS];

  assign busy = v1 || v2 || out_valid;

  always_ff @(posedge clk) begin
    p1 <= in_prob;
    for (int j = 0; j < MULTS; j++) begin
      int pi;
      pi = j >> (6 + int'(dlog));
      prod[j] <= PW'($signed({1'b0, p1[pi]})) * PW'($signed(line[j / SEG][(j % SEG)*EW +: EW]));
    end
  end

  always_comb begin
    for (int j = 0; j < MULTS; j++) fold[0][j] = AW'($signed(prod[j]));
    for (int L = 1; L < 4; L++)
      for (int j = 0; j < MULTS; j++)
        fold[L][j] = (j < (MULTS >> L)) ? fold[L-1][j] + fold[L-1][j + (MULTS >> L)] : '0;
  end

  function automatic logic [EW-1:0] sat12(input logic signed [AW-1:0] x);
    logic signed [AW-1:0] y;
    y = x >>> 12;
    if (y > AW'(2047))       return 12'h7FF;
    else if (y < -AW'(2048)) return 12'h800;
    else                     return y[EW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; l1 <= 1'b0; l2 <= 1'b0;
      out_valid <= 1'b0; out <= '0;
      for (int j = 0; j < MULTS; j++) acc[j] <= '0;
    end else begin
      v1 <= in_valid; l1 <= in_valid && in_last;
      v2 <= v1;       l2 <= l1;
      out_valid <= 1'b0;
      if (v2) begin
        for (int j = 0; j < MULTS; j++) begin
          logic signed [AW-1:0] s;
          s = acc[j] + fold[3 - int'(dlog)][j];
          if (l2) begin
            acc[j] <= '0;
            out[j] <= (j < (SEG << dlog)) ? sat12(s) : '0;
          end else acc[j] <= s;
        end
        if (l2) out_valid <= 1'b1;
      end
    end
  end
endmodule
