// tb_filling_scheme_ram: self-checking test of the filling-scheme memory.
//
// Writes all 224 words with random data, keeping its own copy, then reads
// the crossing type of every bunch crossing of an orbit (0..3563) one per
// cycle and compares it, one cycle later, with the two bits picked from the
// copy. Also checks that a read beyond the table returns empty-empty.
module tb_filling_scheme_ram;
  import rs_pkg::*;

  logic clk = 0;
  logic wr_en = 0;
  logic [7:0] wr_addr;
  logic [31:0] wr_data;
  logic [BXID_W-1:0] rd_bxid = '0;
  bx_type_e rd_type;
  logic [31:0] model [224];
  int checks = 0, failures = 0;

  filling_scheme_ram dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_bxid, .rd_type);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 224; a++) begin
      model[a] = $urandom;
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(a); wr_data = model[a];
    end
    @(negedge clk); wr_en = 0;
    for (int b = 0; b <= 3564; b++) begin
      @(negedge clk);
      if (b > 0) begin
        logic [1:0] want;
        want = model[(b-1)/16][2*((b-1)%16) +: 2];
        checks++;
        if (rd_type != bx_type_e'(want)) begin
          failures++;
          $display("FAIL bx %0d: got %0d want %0d", b-1, rd_type, want);
        end
      end
      rd_bxid = BXID_W'(b);
    end
    @(negedge clk); rd_bxid = 12'd4000;
    @(negedge clk); @(negedge clk);
    checks++;
    if (rd_type != BX_EMPTY_EMPTY) begin failures++; $display("FAIL out of range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
