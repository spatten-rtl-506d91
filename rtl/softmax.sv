// softmax: 8-lane softmax over one row of attention scores.
//
// Each lane first multiplies its 12-bit score by `scale` (one factor that
// dequantizes the fixed-point score and divides by sqrt(D)): t = score*scale/2^16.
// The exponential is taken as e^t = 2^n * 2^f with n = floor(t*log2 e) and
// 2^f = e^(f ln 2) from a 5th-order Taylor series (the order the paper uses).
// The result is kept as a small float, a 17-bit mantissa and an exponent, in a
// 128-deep FIFO (128 x 8 = 1024 scores, the longest row) while its fixed-point
// value is added to the row sum. At the end of the row one sequential divider
// forms the reciprocal of the normalized sum; every buffered exponential is then
// multiplied by it and quantized to a Q0.12 probability (4095 = 1.0).
// The paper uses floating-point multiply-add units and a divider per element;
// fixed-point arithmetic, the reciprocal, the clamp of t to [-16, 16) and the
// absence of max subtraction are this design's choices.
// Interface: beats of (in_scores, in_mask, in_last) while in_ready; the
// probabilities come out as beats of the same shape in the same order.
// Timing: accepts a beat per cycle; after the last beat about 34 cycles for the
// divider, then one output beat per cycle. Rows do not overlap.
module softmax import spatten_pkg::*; #(
  parameter int PAR   = 8,
  parameter int DEPTH = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             scale,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [PAR-1:0][EW-1:0]  in_scores,
  input  logic [PAR-1:0]          in_mask,
  input  logic                    in_last,
  output logic                    out_valid,
  output logic [PAR-1:0][EW-1:0]  out_prob,
  output logic [PAR-1:0]          out_mask,
  output logic                    out_last
);
  localparam int MW = 18;                  // mantissa, Q1.16
  localparam int XW = 6;                   // exponent n+8 in [-16, 31]
  localparam int FW = 50;                  // fixed exp, Q.24
  localparam int SUMW = FW + 10;
  typedef struct packed { logic [MW-1:0] m; logic signed [XW-1:0] x; } fexp_t;
  typedef struct packed { fexp_t [PAR-1:0] e; logic [PAR-1:0] mask; logic last; } entry_t;

  typedef enum logic [1:0] {S_IN, S_DIV, S_OUT} state_e;
  state_e state;

  // stage 0 register
  logic                   s0_v, s0_last;
  logic [PAR-1:0][EW-1:0] s0_sc;
  logic [PAR-1:0]         s0_m;

  function automatic fexp_t exp_f(input logic signed [EW-1:0] s, input logic [15:0] sc);
    logic signed [31:0] t, y;
    logic signed [31:0] n;
    logic [15:0] f, r;
    logic [35:0] a;
    fexp_t o;
    t = 32'(s) * $signed({16'b0, sc});                 // Q.16
    if (t > 32'sd1048575)       t = 32'sd1048575;       // clamp to [-16, 16)
    else if (t < -32'sd1048576) t = -32'sd1048576;
    y = 32'((64'(t) * 64'sd94548) >>> 16);               // t * log2(e), Q.16
    n = y >>> 16;
    f = y[15:0];
    r = 16'((32'(f) * 32'd45426) >> 16);                // f * ln 2, Q0.16
    a = 36'd546;                                        // 1/120
    a = 36'd2731  + ((a * 36'(r)) >> 16);               // 1/24
    a = 36'd10923 + ((a * 36'(r)) >> 16);               // 1/6
    a = 36'd32768 + ((a * 36'(r)) >> 16);               // 1/2
    a = 36'd65536 + ((a * 36'(r)) >> 16);               // 1
    a = 36'd65536 + ((a * 36'(r)) >> 16);               // 1
    o.m = MW'(a);
    o.x = XW'(n + 8);
    return o;
  endfunction

  function automatic logic [FW-1:0] to_fixed(input fexp_t e);
    if (e.x >= 0) return FW'(e.m) << e.x;
    else          return FW'(e.m) >> (-e.x);
  endfunction

  entry_t push_e, pop_e;
  logic   f_in_ready, f_out_valid, pop;
  sync_fifo #(.W($bits(entry_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(s0_v), .in_ready(f_in_ready), .in_data(push_e),
    .out_valid(f_out_valid), .out_ready(pop), .out_data(pop_e));

  logic [SUMW-1:0] sum, beat_sum;
  always_comb begin
    beat_sum = '0;
    for (int i = 0; i < PAR; i++) begin
      push_e.e[i] = exp_f(s0_sc[i], scale);
      if (s0_m[i]) beat_sum += SUMW'(to_fixed(push_e.e[i]));
    end
    push_e.mask = s0_m;
    push_e.last = s0_last;
  end

  // reciprocal of the normalized sum: recip = 2^31 / (sum >> (lz - 15))
  logic [5:0]  lead;
  logic [15:0] sum_n;
  logic [31:0] rem, quo;
  logic [5:0]  dcnt;

  assign in_ready = (state == S_IN) && f_in_ready && !(s0_v && s0_last);
  assign pop      = (state == S_OUT) && f_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; s0_v <= 1'b0; s0_last <= 1'b0; s0_sc <= '0; s0_m <= '0;
      sum <= '0; lead <= '0; sum_n <= '0; rem <= '0; quo <= '0; dcnt <= '0;
      out_valid <= 1'b0; out_prob <= '0; out_mask <= '0; out_last <= 1'b0;
    end else begin
      s0_v <= in_valid && in_ready;
      s0_last <= in_valid && in_ready && in_last;
      s0_sc <= in_scores;
      s0_m  <= in_mask & {PAR{in_valid && in_ready}};
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IN: if (s0_v) begin
          sum <= sum + beat_sum;
          if (s0_last) begin
            logic [SUMW-1:0] s;
            logic [5:0] ld;
            s = sum + beat_sum;
            ld = 6'd15;
            for (int b = 16; b < SUMW; b++) if (s[b]) ld = 6'(b);
            lead  <= ld;
            sum_n <= (s == '0) ? 16'h8000 : 16'(s >> (ld - 6'd15));
            rem   <= '0; quo <= '0; dcnt <= 6'd32;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          // restoring division of 2^31 by sum_n, one quotient bit per cycle
          logic [32:0] r2;
          r2 = {rem, (dcnt == 6'd32)};   // dividend 2^31: its only 1 enters first
          if (r2 >= 33'(sum_n)) begin
            rem <= 32'(r2 - 33'(sum_n)); quo <= {quo[30:0], 1'b1};
          end else begin
            rem <= 32'(r2); quo <= {quo[30:0], 1'b0};
          end
          dcnt <= dcnt - 1'b1;
          if (dcnt == 6'd1) state <= S_OUT;
        end
        S_OUT: begin
          if (f_out_valid) begin
            out_valid <= 1'b1;
            out_mask  <= pop_e.mask;
            out_last  <= pop_e.last;
            for (int i = 0; i < PAR; i++) begin
              logic [FW+17-1:0] pr;
              logic [FW+17-1:0] q;
              pr = (FW+17)'(to_fixed(pop_e.e[i])) * (FW+17)'(quo[16:0]);
              q  = pr >> (lead + 6'd4);
              out_prob[i] <= !pop_e.mask[i] ? '0 : (q > 4095) ? 12'd4095 : EW'(q);
            end
            if (pop_e.last) begin
              state <= S_IN; sum <= '0;
            end
          end
        end
        default: state <= S_IN;
      endcase
    end
  end
endmodule
