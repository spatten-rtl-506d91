// tb_bitwidth_converter: for every MSB width (4, 6, 8, 10, 12) and for LSB
// planes, random 128-bit words are streamed in with random gaps and random
// output back-pressure. Each group of words must come out as one segment of
// 64 elements: an MSB field sign-extended and shifted to the top of 12 bits, an
// LSB nibble placed right below the MSBs of that width. The reference unpacks
// the bits itself, element i taking bits i*width.. of the concatenated words.
module tb_bitwidth_converter;
  import spatten_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] msb_bits;
  logic lsb_mode, in_valid, in_ready, out_valid, out_ready;
  logic [WORD_W-1:0] in_data;
  logic [SEG-1:0][EW-1:0] out_elems;
  bitwidth_converter dut (.*);
  int checks = 0, failures = 0;
  logic [767:0] sent [$];
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int expect_elem(input logic [767:0] f, input int i, input int b, input bit lsb);
    int v = 0;
    if (lsb) begin
      int l = int'(f[i*4 +: 4]);
      if (b <= 8) return l << (8 - b);
      if (b == 10) return l >> 2;
      return 0;
    end
    for (int k = 0; k < b; k++) v |= int'(f[i*b + k]) << k;
    if (v >= (1 << (b - 1))) v -= 1 << b;
    return (v << (12 - b)) & 12'hFFF;
  endfunction

  int nseg_out;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [767:0] f;
    f = sent.pop_front();
    nseg_out++;
    for (int i = 0; i < SEG; i++) begin
      checks++;
      if (int'(out_elems[i]) != expect_elem(f, i, int'(msb_bits), lsb_mode)) begin
        failures++; if (failures < 5) $display("b %0d lsb %0d i %0d hw %h exp %h", msb_bits, lsb_mode, i, out_elems[i], expect_elem(f, i, int'(msb_bits), lsb_mode));
      end
    end
  end

  initial begin
    int widths [5] = '{4, 6, 8, 10, 12};
    msb_bits = 4'd8; lsb_mode = 0; in_valid = 0; out_ready = 0; in_data = '0; nseg_out = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 10; m++) begin
      msb_bits = 4'(widths[m % 5]); lsb_mode = (m >= 5);
      for (int s = 0; s < 40; s++) begin
        logic [767:0] f;
        int wps;
        wps = lsb_mode ? 2 : int'(msb_bits) / 2;
        f = '0;
        for (int w = 0; w < wps; w++) begin
          for (int k = 0; k < 4; k++) in_data[k*32 +: 32] = $urandom;
          f[w*128 +: 128] = in_data;
          if (w == wps - 1) sent.push_back(f);
          in_valid = 1;
          do begin out_ready = ($urandom_range(3) != 0); @(negedge clk); end while (!in_ready_at_edge);
          in_valid = 0;
          if ($urandom_range(3) == 0) begin out_ready = 1; @(negedge clk); end
        end
      end
      out_ready = 1;
      while (sent.size() != 0) @(negedge clk);
    end
    checks++; if (nseg_out != 400) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // handshake seen at the last rising edge
  logic in_ready_at_edge;
  always @(posedge clk) in_ready_at_edge <= in_valid && in_ready;
endmodule
