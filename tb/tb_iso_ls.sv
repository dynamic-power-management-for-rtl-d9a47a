// tb_iso_ls: self-checking test of the isolation clamp: random values pass
// unchanged while iso_en is low and read as 0 while it is high.
`timescale 1ns / 1ps
module tb_iso_ls;
  logic iso_en = 0;
  logic [7:0] d = 0, q;
  int checks = 0, failures = 0;
  iso_ls #(.W(8)) dut (.iso_en, .d, .q);
  initial begin
    for (int i = 0; i < 64; i++) begin
      d = 8'($urandom);
      iso_en = i[0];
      #1;
      checks++;
      if (q !== (iso_en ? 8'h00 : d)) begin
        failures++; $display("FAIL: iso=%0d d=%h q=%h", iso_en, d, q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
