// qkv_fetcher: turns "fetch this Q/K/V vector" commands into DRAM word reads.
//
// A command names the kind (Q, K or V), the bit plane (MSB or LSB), the head, the
// token and the destination slot. The vector is D = 64 << dlog elements long and
// is split into 64-element segments. Each segment is handed to the next fetch
// port in round-robin order; that port's issuer then pushes the segment's words,
// one per cycle, into its address FIFO. Every word carries a return tag (port,
// reorder slot); a port never has more than FDEPTH words in flight, counted with
// credits that come back when the data buffer releases a word. For each
// segment a descriptor (kind, plane, destination segment) is queued per port so
// that the converted data can be written to the right buffer in order.
//
// DRAM layout (this design's choice, following the paper's "MSBs stored
// continuously and LSBs continuously"): six planes, {Q,K,V} x {MSB,LSB}, each at
// word address plane << 24; inside a plane vector v = head*MAXTOK + token starts
// at word v * (D/64) * words_per_segment. A segment of b-bit fields takes b/2
// words (64 x b bits / 128); the LSB planes use b = 4.
// Commands are taken one at a time, one segment per cycle.
module qkv_fetcher import spatten_pkg::*; #(
  parameter int NP = NPORT,
  parameter int FD = FDEPTH,
  parameter int DESC_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [1:0]           dlog,      // D = 64 << dlog
  input  logic [3:0]           msb_bits,  // 4, 6, 8, 10 or 12
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  fetch_cmd_t           cmd,
  output logic     [NP-1:0]    req_valid,
  input  logic     [NP-1:0]    req_ready,
  output mem_req_t [NP-1:0]    req,
  input  logic     [NP-1:0]    word_pop,   // data buffer released a word
  output logic     [NP-1:0]    desc_valid,
  input  logic     [NP-1:0]    desc_pop,
  output seg_desc_t [NP-1:0]   desc,
  output logic                 idle        // nothing queued or in flight
);
  localparam int PW = $clog2(NP);
  localparam int SW = $clog2(FD);

  // command being split into segments
  logic            cur_v;
  fetch_cmd_t      cur;
  logic [3:0]      seg_i;
  logic [PW-1:0]   ptr;

  // per-port issuers
  logic [NP-1:0]            iss_v;
  logic [NP-1:0][ADDR_W-1:0] iss_addr;
  logic [NP-1:0][2:0]       iss_left;
  logic [NP-1:0][SW-1:0]    slot_q;
  logic [NP-1:0][SW:0]      credit;
  logic [NP-1:0]            dq_ready;
  logic [NP-1:0]            dq_push;
  seg_desc_t                new_desc;

  logic [3:0]  nseg;
  logic [2:0]  wps;
  logic [2:0]  plane;
  logic [HEADW+TOKW-1:0] vec;
  logic [ADDR_W-1:0] seg_addr;
  logic take_seg;

  always_comb begin
    nseg  = 4'd1 << dlog;
    wps   = cur.lsb ? 3'd2 : 3'(msb_bits >> 1);
    plane = {cur.kind, cur.lsb};
    vec   = {cur.head, cur.token};
    seg_addr = (ADDR_W'(plane) << 24) + (ADDR_W'(vec) * ADDR_W'(nseg) + ADDR_W'(seg_i)) * ADDR_W'(wps);
    new_desc.kind = cur.kind;
    new_desc.lsb  = cur.lsb;
    new_desc.seg  = (TOKW+3)'(cur.slot) * (TOKW+3)'(nseg) + (TOKW+3)'(seg_i);
    take_seg = cur_v && !iss_v[ptr] && dq_ready[ptr];
    dq_push  = '0;
    dq_push[ptr] = take_seg;
  end

  assign cmd_ready = !cur_v;

  for (genvar p = 0; p < NP; p++) begin : g_port
    sync_fifo #(.W($bits(seg_desc_t)), .DEPTH(DESC_DEPTH)) u_desc (
      .clk, .rst_n, .in_valid(dq_push[p]), .in_ready(dq_ready[p]), .in_data(new_desc),
      .out_valid(desc_valid[p]), .out_ready(desc_pop[p]), .out_data(desc[p]));
    assign req_valid[p]     = iss_v[p] && (credit[p] < (SW+1)'(FD));
    assign req[p].addr      = iss_addr[p];
    assign req[p].tag.port  = PORT_W'(p);
    assign req[p].tag.slot  = SLOT_W'(slot_q[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v <= 1'b0; cur <= '0; seg_i <= '0; ptr <= '0;
      iss_v <= '0; iss_addr <= '0; iss_left <= '0; slot_q <= '0; credit <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        cur_v <= 1'b1; cur <= cmd; seg_i <= '0;
      end
      for (int p = 0; p < NP; p++) begin
        logic issue;
        issue = req_valid[p] && req_ready[p];
        credit[p] <= credit[p] + (SW+1)'(issue) - (SW+1)'(word_pop[p]);
        if (issue) begin
          slot_q[p]   <= slot_q[p] + 1'b1;
          iss_addr[p] <= iss_addr[p] + 1'b1;
          iss_left[p] <= iss_left[p] - 1'b1;
          if (iss_left[p] == 3'd1) iss_v[p] <= 1'b0;
        end
      end
      if (take_seg) begin
        iss_v[ptr]    <= 1'b1;
        iss_addr[ptr] <= seg_addr;
        iss_left[ptr] <= wps;
        ptr   <= ptr + 1'b1;
        seg_i <= seg_i + 1'b1;
        if (seg_i + 1'b1 == nseg) cur_v <= 1'b0;
      end
    end
  end

  assign idle = !cur_v && (iss_v == '0) && (credit == '0) && (desc_valid == '0);
endmodule
