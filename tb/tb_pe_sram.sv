// tb_pe_sram: self-checking test of the PE SRAM at its full 32768-word
// size: processor writes with byte enables and reads (one cycle latency),
// DMA-port writes, and a same-cycle write collision (processor wins),
// compared with a reference array.
`timescale 1ns / 1ps
module tb_pe_sram;
  localparam int WORDS = 32768;
  logic clk = 0;
  always #5 clk = !clk;
  logic a_en = 0, b_we = 0;
  logic [3:0] a_we = 0;
  logic [14:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata;
  logic [31:0] ref_m [int];
  int checks = 0, failures = 0;

  pe_sram #(.WORDS(WORDS)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata, .b_we, .b_addr, .b_wdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic awrite(input int adr, input logic [31:0] d, input logic [3:0] be);
    logic [31:0] o;
    @(negedge clk); a_en = 1; a_we = be; a_addr = 15'(adr); a_wdata = d;
    @(negedge clk); a_en = 0; a_we = 0;
    o = ref_m.exists(adr) ? ref_m[adr] : 32'h0;
    for (int b = 0; b < 4; b++) if (be[b]) o[8*b +: 8] = d[8*b +: 8];
    ref_m[adr] = o;
  endtask

  task automatic bwrite(input int adr, input logic [31:0] d);
    @(negedge clk); b_we = 1; b_addr = 15'(adr); b_wdata = d;
    @(negedge clk); b_we = 0;
    ref_m[adr] = d;
  endtask

  task automatic aread(input int adr);
    @(negedge clk); a_en = 1; a_we = 0; a_addr = 15'(adr);
    @(posedge clk); #1;
    check(a_rdata == ref_m[adr], $sformatf("read %0d: %h vs %h", adr, a_rdata, ref_m[adr]));
    @(negedge clk); a_en = 0;
  endtask

  int adrs [16];
  initial begin
    for (int i = 0; i < 16; i++) adrs[i] = (i == 15) ? WORDS - 1 : $urandom_range(0, WORDS - 1);
    for (int i = 0; i < 16; i++) awrite(adrs[i], $urandom, 4'hF);
    for (int i = 0; i < 8; i++) bwrite(adrs[i], $urandom);
    for (int i = 0; i < 16; i++) awrite(adrs[i], $urandom, 4'($urandom_range(1, 14)));
    for (int i = 0; i < 16; i++) aread(adrs[i]);
    // collision: both ports write the same word
    @(negedge clk); a_en = 1; a_we = 4'hF; a_addr = 15'(adrs[0]); a_wdata = 32'hAAAA5555;
    b_we = 1; b_addr = 15'(adrs[0]); b_wdata = 32'h12345678;
    @(negedge clk); a_en = 0; a_we = 0; b_we = 0;
    ref_m[adrs[0]] = 32'hAAAA5555;
    aread(adrs[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
