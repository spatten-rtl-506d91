// hbm_model: behavioural model of the 16 HBM channels, for testbenches only.
//
// Every channel takes one read request per cycle (ch_ready is high unless the
// random stall option is on) and answers it in order after LAT to LAT+JIT
// cycles with a 128-bit word that is a fixed function of the word address
// (see word_of), echoing the request tag. There is no DRAM timing beyond this.
// While rst_n is low the model drops everything and accepts nothing.
module hbm_model import spatten_pkg::*; #(
  parameter int LAT = 8,
  parameter int JIT = 8,
  parameter bit STALL = 1'b1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic     [NCH-1:0]             ch_valid,
  output logic     [NCH-1:0]             ch_ready,
  input  mem_req_t [NCH-1:0]             ch_req,
  output logic     [NCH-1:0]             ch_rvalid,
  output logic     [NCH-1:0][WORD_W-1:0] ch_rdata,
  output mem_tag_t [NCH-1:0]             ch_rtag,
  output longint                         words_read
);
  function automatic logic [31:0] mix(input logic [31:0] x);
    x = x ^ (x >> 16); x = x * 32'h7feb352d; x = x ^ (x >> 15); x = x * 32'h846ca68b; x = x ^ (x >> 16);
    return x;
  endfunction
  function automatic logic [WORD_W-1:0] word_of(input logic [ADDR_W-1:0] a);
    return {mix({a, 4'd3}), mix({a, 4'd2}), mix({a, 4'd1}), mix({a, 4'd0})};
  endfunction

  typedef struct { int due; mem_req_t r; } pend_t;
  pend_t q [NCH][$];
  int cyc = 0;
  initial words_read = 0;

  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < NCH; c++) if (!rst_n) begin
      q[c].delete(); ch_rvalid[c] <= 1'b0; ch_ready[c] <= 1'b1;
    end else begin
      ch_rvalid[c] <= 1'b0;
      if (q[c].size() > 0 && q[c][0].due <= cyc) begin
        pend_t p;
        p = q[c].pop_front();
        ch_rvalid[c] <= 1'b1;
        ch_rdata[c]  <= word_of(p.r.addr);
        ch_rtag[c]   <= p.r.tag;
      end
      if (ch_valid[c] && ch_ready[c]) begin
        pend_t p;
        int d;
        d = cyc + LAT + int'($urandom_range(JIT));
        if (q[c].size() > 0 && q[c][q[c].size()-1].due > d) d = q[c][q[c].size()-1].due;
        p.due = d; p.r = ch_req[c];
        q[c].push_back(p);
        words_read++;
      end
      ch_ready[c] <= STALL ? ($urandom_range(7) != 0) : 1'b1;
    end
  end
  initial begin ch_ready = '1; ch_rvalid = '0; ch_rdata = '0; ch_rtag = '0; end
endmodule
