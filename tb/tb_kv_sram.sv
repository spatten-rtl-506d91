// tb_kv_sram: random segment writes (plain and OR-merge) and random line reads
// on a reduced SRAM, checked against a software copy. A read returns the line
// in the next cycle and sees writes of earlier cycles.
module tb_kv_sram;
  import spatten_pkg::*;
  localparam int LINES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, wmerge = 0;
  logic [6:0] wseg;
  logic [SEG-1:0][EW-1:0] wdata;
  logic [3:0] raddr;
  logic [NSEGL-1:0][SEG*EW-1:0] rdata;
  kv_sram #(.LINES(LINES)) dut (.*);
  logic [SEG*EW-1:0] model [LINES][NSEGL];
  int checks = 0, failures = 0;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wseg = '0; wdata = '0; raddr = '0;
    // fill everything once
    for (int s = 0; s < LINES * NSEGL; s++) begin
      we = 1; wmerge = 0; wseg = 7'(s);
      for (int e = 0; e < SEG; e++) wdata[e] = 12'($urandom);
      model[s / NSEGL][s % NSEGL] = wdata;
      @(negedge clk);
    end
    for (int it = 0; it < 4000; it++) begin
      logic [3:0] ra;
      we = ($urandom_range(1) == 0); wmerge = ($urandom_range(2) == 0); wseg = 7'($urandom);
      for (int e = 0; e < SEG; e++) wdata[e] = 12'($urandom);
      ra = 4'($urandom); raddr = ra;
      @(negedge clk);
      checks++;
      for (int s = 0; s < NSEGL; s++) if (rdata[s] !== model[ra][s]) begin
        failures++; if (failures < 4) $display("line %0d seg %0d mismatch", ra, s); break;
      end
      if (we) model[wseg / NSEGL][wseg % NSEGL] = wmerge ? (model[wseg / NSEGL][wseg % NSEGL] | wdata) : wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
