// data_xbar: the data side of the memory interface, 16 HBM channels back to
// 32 fetch ports.
//
// Each channel returns at most one 128-bit word per cycle with the tag that
// went out with its request. The crossbar writes the word into the 64-entry
// data buffer of the port named in the tag, at the reorder slot named in the
// tag. Because words of one port may come back from different channels in any
// order, the buffer releases words strictly in slot order: the paper's
// "reverse crossbar to preserve the correct order". Using the 64-deep data FIFO
// as a reorder buffer is this design's choice; the fetcher gives out slots in
// order and never has more than 64 words outstanding per port.
// Timing: a word returned in cycle t can be popped from cycle t+1.
module data_xbar import spatten_pkg::*; #(
  parameter int NP = NPORT,
  parameter int NC = NCH,
  parameter int FD = FDEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic     [NC-1:0]         ch_rvalid,
  input  logic     [NC-1:0][WORD_W-1:0] ch_rdata,
  input  mem_tag_t [NC-1:0]         ch_rtag,
  output logic     [NP-1:0]         out_valid,
  input  logic     [NP-1:0]         out_ready,
  output logic     [NP-1:0][WORD_W-1:0] out_data
);
  localparam int SW = $clog2(FD);
  logic [WORD_W-1:0] buf_q [NP][FD];
  logic [FD-1:0]     full_q [NP];
  logic [SW-1:0]     head_q [NP];

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign out_valid[p] = full_q[p][head_q[p]];
    assign out_data[p]  = buf_q[p][head_q[p]];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        full_q[p] <= '0;
        head_q[p] <= '0;
      end else begin
        logic [FD-1:0] f;
        f = full_q[p];
        if (out_valid[p] && out_ready[p]) begin
          f[head_q[p]] = 1'b0;
          head_q[p] <= head_q[p] + 1'b1;
        end
        for (int c = 0; c < NC; c++)
          if (ch_rvalid[c] && int'(ch_rtag[c].port) == p) f[ch_rtag[c].slot] = 1'b1;
        full_q[p] <= f;
      end
    end
    always_ff @(posedge clk)
      for (int c = 0; c < NC; c++)
        if (ch_rvalid[c] && int'(ch_rtag[c].port) == p) buf_q[p][ch_rtag[c].slot] <= ch_rdata[c];
  end
endmodule
