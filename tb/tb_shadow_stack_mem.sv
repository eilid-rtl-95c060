// tb_shadow_stack_mem -- self-checking test of the shadow-stack memory.
//
// Fills all 128 words (default 256-byte window at 0x2000) in the order the
// trusted software pushes them (entry k at 0x2000 + 2*k), reads them back
// in pop order, and compares with a scoreboard array kept here. Also checks:
// one cycle of read latency; byte-enable writes; that writes without grant
// change nothing and reads without grant return zero; that addresses just
// outside the window are ignored. A watchdog ends the run.
module tb_shadow_stack_mem;
  import eilid_pkg::*;

  logic     clk = 0, rst_n = 0;
  mem_req_t req;
  logic     grant;
  word_t    rdata;
  word_t    sb [128];
  int checks = 0, failures = 0;

  shadow_stack_mem dut (.clk, .rst_n, .req, .grant, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(addr_t a, word_t d, logic [1:0] be, logic g);
    req = '{en: 1'b1, wr: 1'b1, be: be, addr: a, wdata: d}; grant = g;
    @(posedge clk); #1;
    req = '0; grant = 0;
  endtask

  // Read; checks that data is absent before the edge and present after it.
  task automatic rd(addr_t a, logic g, output word_t d);
    req = '{en: 1'b1, wr: 1'b0, be: 2'b11, addr: a, wdata: 16'h0}; grant = g;
    @(posedge clk); #1;
    d = rdata;
    req = '0; grant = 0;
    @(posedge clk); #1;
    check("read data lasts one cycle", rdata == 16'h0);
  endtask

  word_t d;

  initial begin
    req = '0; grant = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // push 128 return addresses
    for (int k = 0; k < 128; k++) begin
      sb[k] = 16'(16'hE000 + 4 * k + $urandom_range(0, 3) * 2);
      wr(16'(16'h2000 + 2 * k), sb[k], 2'b11, 1'b1);
    end
    // pop them in reverse
    for (int k = 127; k >= 0; k--) begin
      rd(16'(16'h2000 + 2 * k), 1'b1, d);
      check($sformatf("pop %0d", k), d == sb[k]);
    end

    // latency: the word is not on rdata in the request cycle
    req = '{en: 1'b1, wr: 1'b0, be: 2'b11, addr: 16'h2010, wdata: 16'h0}; grant = 1;
    #1 check("no combinational read", rdata == 16'h0);
    @(posedge clk); #1 check("data after one edge", rdata == sb[8]);
    req = '0; grant = 0;
    @(posedge clk); #1;

    // byte enables
    wr(16'h2020, 16'hAB00, 2'b10, 1'b1); sb[16][15:8] = 8'hAB;
    wr(16'h2020, 16'h00CD, 2'b01, 1'b1); sb[16][7:0]  = 8'hCD;
    rd(16'h2020, 1'b1, d); check("byte enables", d == sb[16] && d == 16'hABCD);

    // no grant: write ignored, read returns zero
    wr(16'h2000, 16'hDEAD, 2'b11, 1'b0);
    rd(16'h2000, 1'b0, d); check("denied read is zero", d == 16'h0);
    rd(16'h2000, 1'b1, d); check("denied write ignored", d == sb[0]);

    // outside the window
    wr(16'h2100, 16'hBEEF, 2'b11, 1'b1);
    rd(16'h2100, 1'b1, d); check("above window ignored", d == 16'h0);
    rd(16'h2000, 1'b1, d); check("no wrap into word 0", d == sb[0]);
    wr(16'h1FFE, 16'hBEEF, 2'b11, 1'b1);
    rd(16'h20FE, 1'b1, d); check("below window ignored", d == sb[127]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
