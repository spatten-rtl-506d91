// bitwidth_converter: turns the DRAM words of one 64-element segment into 64
// elements of the fixed 12-bit on-chip format.
//
// Q, K and V are stored with linear symmetric quantization split in two planes:
// a signed MSB field of msb_bits (4, 6, 8, 10 or 12) and an unsigned 4-bit LSB
// field. A segment of b-bit fields fills b/2 words of 128 bits; the converter
// collects them in order (a shifter over an unaligned 768-bit window), then
// selects the b-bit fields with a multiplexer per element width.
// Placement on chip (this design's choice): the full value {msb, lsb} is
// aligned to 12 bits. An MSB field becomes msb << (12 - msb_bits); an LSB field
// becomes the bits that the LSBs add below it, so that OR-ing it into the
// stored MSB value gives the full-precision number. With 12+4 the LSBs fall
// below the 12-bit on-chip format and add nothing (the paper lists a 12+4
// setting and also a fixed 12-bit on-chip width).
// Handshakes: in_valid/in_ready per word, out_valid/out_ready per segment; the
// descriptor (plane) must be valid when the segment's first word arrives.
module bitwidth_converter import spatten_pkg::*; (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             msb_bits,
  input  logic                   lsb_mode,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [WORD_W-1:0]      in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [SEG-1:0][EW-1:0] out_elems
);
  localparam int BUFW = 6 * WORD_W;
  logic [5:0][WORD_W-1:0] win;
  logic [2:0] nw;
  logic [2:0] wps;
  logic [BUFW-1:0] flat;

  assign wps       = lsb_mode ? 3'd2 : 3'(msb_bits >> 1);
  assign out_valid = (nw == wps);
  assign in_ready  = !out_valid;
  assign flat      = win;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nw <= '0; win <= '0;
    end else begin
      if (out_valid && out_ready) nw <= '0;
      else if (in_valid && in_ready) begin
        win[nw] <= in_data;
        nw <= nw + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < SEG; i++) begin
      logic signed [EW-1:0] m;
      logic [3:0] l;
      l = flat[i*4 +: 4];
      m = '0;
      if (lsb_mode) begin
        // LSB contribution below the MSBs: lsb << (8 - msb_bits) or >> (msb_bits - 8)
        unique case (msb_bits)
          4'd4:    out_elems[i] = {4'b0, l, 4'b0};
          4'd6:    out_elems[i] = {6'b0, l, 2'b0};
          4'd8:    out_elems[i] = {8'b0, l};
          4'd10:   out_elems[i] = {10'b0, l[3:2]};
          default: out_elems[i] = '0;
        endcase
      end else begin
        unique case (msb_bits)
          4'd4:    m = {flat[i*4  +: 4],  8'b0};
          4'd6:    m = {flat[i*6  +: 6],  6'b0};
          4'd8:    m = {flat[i*8  +: 8],  4'b0};
          4'd10:   m = {flat[i*10 +: 10], 2'b0};
          default: m = flat[i*12 +: 12];
        endcase
        out_elems[i] = m;
      end
    end
  end
endmodule
