// addr_xbar: the address side of the memory interface, 32 fetch ports onto 16
// HBM channels.
//
// Every port has a 64-deep address FIFO (as in the paper). Each cycle every
// channel picks, round-robin, one FIFO whose head request maps to it and that
// channel is ready, so a channel gets at most one request per cycle and two
// channels never collide. The channel of a request is the low bits of its word
// address: consecutive words are interleaved over the channels. The round-robin
// arbiter and the interleaving are this design's choices. A request travels
// with its return tag (port, reorder slot) untouched.
// Timing: a request pushed in cycle t can leave for its channel in cycle t+1.
module addr_xbar import spatten_pkg::*; #(
  parameter int NP = NPORT,
  parameter int NC = NCH,
  parameter int FD = FDEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [NP-1:0]    req_valid,
  output logic     [NP-1:0]    req_ready,
  input  mem_req_t [NP-1:0]    req,
  output logic     [NC-1:0]    ch_valid,
  input  logic     [NC-1:0]    ch_ready,
  output mem_req_t [NC-1:0]    ch_req
);
  localparam int PW = $clog2(NP);
  localparam int CB = $clog2(NC);

  logic     [NP-1:0] hv, hpop;
  mem_req_t [NP-1:0] hd;
  logic     [NC-1:0][PW-1:0] rr;

  for (genvar p = 0; p < NP; p++) begin : g_fifo
    sync_fifo #(.W($bits(mem_req_t)), .DEPTH(FD)) u_fifo (
      .clk, .rst_n, .in_valid(req_valid[p]), .in_ready(req_ready[p]), .in_data(req[p]),
      .out_valid(hv[p]), .out_ready(hpop[p]), .out_data(hd[p]));
  end

  always_comb begin
    hpop = '0;
    ch_valid = '0;
    ch_req = '0;
    for (int c = 0; c < NC; c++) begin
      for (int j = 0; j < NP; j++) begin
        int p;
        p = (int'(rr[c]) + j) % NP;
        if (!ch_valid[c] && hv[p] && int'(hd[p].addr[CB-1:0]) == c) begin
          ch_valid[c] = 1'b1;
          ch_req[c]   = hd[p];
          hpop[p]     = ch_ready[c];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else for (int c = 0; c < NC; c++)
      if (ch_valid[c] && ch_ready[c]) rr[c] <= ch_req[c].tag.port + 1'b1;
  end
endmodule
