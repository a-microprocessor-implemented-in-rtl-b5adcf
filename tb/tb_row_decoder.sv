// tb_row_decoder -- checks the word-line decoder at its full 768 rows: every
// address selects exactly its own line, and nothing is selected when disabled.
module tb_row_decoder;
  logic [9:0]   addr;
  logic         en;
  logic [767:0] wl;
  int checks = 0, failures = 0;
  row_decoder dut (.addr, .en, .wl);
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 768; a++) begin
      logic [767:0] e;
      e = '0; e[a] = 1'b1;
      addr = 10'(a); en = 1'b1; #1;
      checks++; if (wl !== e) begin failures++; $display("FAIL addr %0d", a); end
      en = 1'b0; #1;
      checks++; if (wl != '0) begin failures++; $display("FAIL disabled addr %0d", a); end
    end
    addr = 10'd1000; en = 1'b1; #1;
    checks++; if (wl != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
