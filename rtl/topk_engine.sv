// topk_engine: selects the k largest of n scores and emits them in input order.
//
// Follows the paper's quick-select engine. The n inputs arrive PAR per beat and
// are written both to FIFO_L and to an input buffer. Quick-select then repeats
// START/RUN: START compares size(FIFO_R)+num_eq_pivot with the remaining target
// to decide which side holds the k-th largest value and draws a random pivot
// from it; RUN streams that side through two PAR-wide comparator arrays ('<'
// and '>' the pivot), compacts each result with a zero eliminator and appends it
// to FIFO_L or FIFO_R, counting the elements equal to the pivot. When the k-th
// largest value and the number of its copies to keep are known, the buffered
// input is filtered PAR per cycle with '>' and '=' comparators plus a counter of
// kept equal values, and a last zero eliminator packs the survivors.
//
// Interface: pulse `start` with n and k, then give ceil-free beats of up to PAR
// valid lanes (in_mask) until n elements have been taken. Survivors come out as
// beats of (out_idx, out_data, out_mask), out_idx counting inputs from 0; `done`
// pulses after the last beat. There is no output back-pressure.
// Timing: n/PAR load beats, about ceil(size/PAR)+1 cycles per quick-select
// pass (O(n) on average), then n/PAR filter cycles.
// This design's choices: the pivot is drawn from a 16-bit LFSR scaled by the
// FIFO size; k >= n passes all inputs, k = 0 passes none; scores are unsigned.
module topk_engine #(
  parameter int PAR   = 16,
  parameter int DEPTH = 64,
  parameter int W     = 16,
  parameter int CAP   = PAR * DEPTH,
  parameter int IW    = $clog2(CAP),
  parameter int CW    = $clog2(CAP) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CW-1:0]           n,
  input  logic [CW-1:0]           k,
  input  logic                    in_valid,
  input  logic [PAR-1:0]          in_mask,
  input  logic [PAR-1:0][W-1:0]   in_data,
  output logic                    busy,
  output logic                    out_valid,
  output logic [PAR-1:0]          out_mask,
  output logic [PAR-1:0][W-1:0]   out_data,
  output logic [PAR-1:0][IW-1:0]  out_idx,
  output logic                    done
);
  localparam int PW = $clog2(PAR) + 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_RUN, S_FILTER, S_DONE} state_e;
  state_e state;

  logic [W-1:0] fifo_l [CAP];
  logic [W-1:0] fifo_r [CAP];
  logic [W-1:0] fifo_in[CAP];

  logic [CW-1:0] n_q, k_q, size_l, size_r, target, num_eq, pass_n, rd, wr_l, wr_r, eq_taken;
  logic          select, pass_all;
  logic [W-1:0]  pivot, kth;
  logic [15:0]   lfsr;

  // ---------------- load path: compact incoming lanes ----------------
  logic [PAR-1:0]        ld_v;
  logic [PAR-1:0][W-1:0] ld_d;
  logic [PW-1:0]         ld_cnt;
  zero_eliminator #(.N(PAR), .W(W)) u_ze_load (
    .in_valid(in_mask & {PAR{in_valid}}), .in_data(in_data),
    .out_valid(ld_v), .out_data(ld_d), .out_count(ld_cnt));

  // ---------------- run path: two comparator arrays ----------------
  logic [PAR-1:0]        lane_v, lt, gt, eq;
  logic [PAR-1:0][W-1:0] item;
  logic [PAR-1:0]        zl_v, zr_v;
  logic [PAR-1:0][W-1:0] zl_d, zr_d;
  logic [PW-1:0]         zl_cnt, zr_cnt, eq_cnt;

  always_comb begin
    eq_cnt = '0;
    for (int i = 0; i < PAR; i++) begin
      lane_v[i] = (CW'(rd) + CW'(i)) < pass_n;
      item[i]   = select ? fifo_r[IW'(rd + CW'(i))] : fifo_l[IW'(rd + CW'(i))];
      lt[i]     = lane_v[i] && (item[i] < pivot);
      gt[i]     = lane_v[i] && (item[i] > pivot);
      eq[i]     = lane_v[i] && (item[i] == pivot);
      eq_cnt   += PW'(eq[i]);
    end
  end

  zero_eliminator #(.N(PAR), .W(W)) u_ze_l (
    .in_valid(lt), .in_data(item), .out_valid(zl_v), .out_data(zl_d), .out_count(zl_cnt));
  zero_eliminator #(.N(PAR), .W(W)) u_ze_r (
    .in_valid(gt), .in_data(item), .out_valid(zr_v), .out_data(zr_d), .out_count(zr_cnt));

  // ---------------- filter path ----------------
  logic [PAR-1:0]             f_v, f_sel;
  logic [PAR-1:0][W-1:0]      f_item;
  logic [PAR-1:0][W+IW-1:0]   f_pack, fo_pack;
  logic [PAR-1:0]             fo_v;
  logic [PW-1:0]              fo_cnt;
  logic [CW-1:0]              f_eq_run;
  always_comb begin
    f_eq_run = eq_taken;
    for (int i = 0; i < PAR; i++) begin
      f_v[i]    = (CW'(rd) + CW'(i)) < n_q;
      f_item[i] = fifo_in[IW'(rd + CW'(i))];
      f_sel[i]  = 1'b0;
      if (f_v[i]) begin
        if (pass_all || f_item[i] > kth) f_sel[i] = 1'b1;
        else if (f_item[i] == kth) begin
          if (f_eq_run < num_eq) f_sel[i] = 1'b1;
          f_eq_run = f_eq_run + 1'b1;
        end
      end
      f_pack[i] = {IW'(rd + CW'(i)), f_item[i]};
    end
  end
  zero_eliminator #(.N(PAR), .W(W+IW)) u_ze_out (
    .in_valid(f_sel), .in_data(f_pack), .out_valid(fo_v), .out_data(fo_pack), .out_count(fo_cnt));

  // random pivot position inside the chosen FIFO
  function automatic logic [IW-1:0] rand_pos(input logic [15:0] r, input logic [CW-1:0] size);
    logic [CW+15:0] p;
    p = CW'(size) * (CW+16)'(r);
    return IW'(p >> 16);
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lfsr  <= 16'hACE1;
      {n_q, k_q, size_l, size_r, target, num_eq, pass_n, rd, wr_l, wr_r, eq_taken} <= '0;
      select <= 1'b0; pass_all <= 1'b0; pivot <= '0; kth <= '0;
      out_valid <= 1'b0; out_mask <= '0; out_data <= '0; out_idx <= '0; done <= 1'b0;
    end else begin
      lfsr      <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q <= n; k_q <= k; wr_l <= '0; state <= S_LOAD;
        end
        S_LOAD: begin
          if (in_valid) begin
            for (int i = 0; i < PAR; i++)
              if (ld_v[i]) begin
                fifo_l [IW'(wr_l + CW'(i))] <= ld_d[i];
                fifo_in[IW'(wr_l + CW'(i))] <= ld_d[i];
              end
            wr_l <= wr_l + CW'(ld_cnt);
          end
          if (wr_l >= n_q) begin
            size_l <= n_q; size_r <= '0; num_eq <= '0; target <= k_q;
            rd <= '0; eq_taken <= '0;
            pass_all <= (k_q >= n_q);
            if (k_q == '0)        state <= S_DONE;
            else if (k_q >= n_q)  state <= S_FILTER;
            else                  state <= S_START;
          end
        end
        S_START: begin
          rd <= '0; wr_l <= '0; wr_r <= '0;
          if (size_r + num_eq <= target) begin
            // the pivot was too large: look among the smaller ones
            target <= target - size_r - num_eq;
            size_r <= '0; select <= 1'b0;
            pivot  <= fifo_l[rand_pos(lfsr, size_l)];
            pass_n <= size_l;
            num_eq <= '0;
            state  <= S_RUN;
          end else if (size_r > target) begin
            // the pivot was too small: look among the larger ones
            size_l <= '0; select <= 1'b1;
            pivot  <= fifo_r[rand_pos(lfsr, size_r)];
            pass_n <= size_r;
            num_eq <= '0;
            state  <= S_RUN;
          end else begin
            kth    <= pivot;
            num_eq <= target - size_r;   // copies of the k-th largest to keep
            eq_taken <= '0;
            state  <= S_FILTER;
          end
        end
        S_RUN: begin
          for (int i = 0; i < PAR; i++) begin
            if (PW'(i) < zl_cnt) fifo_l[IW'(wr_l + CW'(i))] <= zl_d[i];
            if (PW'(i) < zr_cnt) fifo_r[IW'(wr_r + CW'(i))] <= zr_d[i];
          end
          wr_l   <= wr_l + CW'(zl_cnt);
          wr_r   <= wr_r + CW'(zr_cnt);
          num_eq <= num_eq + CW'(eq_cnt);
          rd     <= rd + CW'(PAR);
          if (rd + CW'(PAR) >= pass_n) begin
            size_l <= wr_l + CW'(zl_cnt);
            size_r <= wr_r + CW'(zr_cnt);
            state  <= S_START;
          end
        end
        S_FILTER: begin
          out_valid <= 1'b1;
          out_mask  <= fo_v;
          for (int i = 0; i < PAR; i++) begin
            out_idx[i]  <= fo_pack[i][W+IW-1:W];
            out_data[i] <= fo_pack[i][W-1:0];
          end
          eq_taken <= f_eq_run;
          rd <= rd + CW'(PAR);
          if (rd + CW'(PAR) >= n_q) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
