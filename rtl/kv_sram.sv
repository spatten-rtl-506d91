// kv_sram: the Key or the Value buffer, 196 KB as in the paper.
//
// Two banks of 128 lines; a line holds 512 elements of 12 bits, the width of a
// multiplier array, i.e. 8 head vectors of D = 64 (or 4 of 128, ...). The
// capacity, 2 x 1024 x 64 x 12 bits, is the paper's 1024-token context doubled
// for double buffering; bank = top line-address bit. Writes are one 64-element
// segment at a time, addressed by a global segment index (line = seg / 8); with
// wmerge set the segment is OR-ed into what is stored, which is how late LSBs
// complete MSB-only values. Reads return a full line one cycle after raddr.
// The segment write port and the OR-merge are this design's choices.
module kv_sram import spatten_pkg::*; #(
  parameter int LINES = 256
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic                          wmerge,
  input  logic [$clog2(LINES*NSEGL)-1:0] wseg,
  input  logic [SEG-1:0][EW-1:0]        wdata,
  input  logic [$clog2(LINES)-1:0]      raddr,
  output logic [NSEGL-1:0][SEG*EW-1:0]  rdata
);
  localparam int SB = $clog2(NSEGL);
  logic [SEG*EW-1:0] mem [LINES][NSEGL];
  logic [$clog2(LINES)-1:0] wl;
  logic [SB-1:0] wp;
  assign wl = wseg[$clog2(LINES*NSEGL)-1:SB];
  assign wp = wseg[SB-1:0];

  always_ff @(posedge clk) begin
    if (we) mem[wl][wp] <= wmerge ? (mem[wl][wp] | wdata) : wdata;
    for (int s = 0; s < NSEGL; s++) rdata[s] <= mem[raddr][s];
  end
endmodule
