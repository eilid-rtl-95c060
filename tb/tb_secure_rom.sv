// tb_secure_rom -- self-checking test of the secure ROM.
//
// Loads a six-word image (tb/tb_secure_rom.hex) into a ROM at the default
// base 0xA000 and a second, empty ROM, then checks: every word of the image
// at its byte address one cycle after the fetch; zero for the rest of the
// window, for fetches with `en` low and for addresses outside the window; and
// that the empty ROM reads zero. A watchdog ends the run.
module tb_secure_rom;
  import eilid_pkg::*;

  logic  clk = 0, en;
  addr_t addr;
  word_t rdata, rdata0;
  int checks = 0, failures = 0;
  word_t img [6] = '{16'h4031, 16'h5a5a, 16'h1234, 16'hffff, 16'h0000, 16'hc0de};

  secure_rom #(.INIT_FILE("tb/tb_secure_rom.hex")) dut (.clk, .en, .addr, .rdata);
  secure_rom empty (.clk, .en, .addr, .rdata(rdata0));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic fetch(addr_t a, logic e, word_t want, string what);
    @(negedge clk); en = e; addr = a;
    @(posedge clk); #1;
    check(what, rdata == want);
    check({what, " (empty ROM)"}, rdata0 == 16'h0);
  endtask

  initial begin
    en = 0; addr = '0;
    for (int i = 0; i < 6; i++) fetch(16'(16'hA000 + 2 * i), 1'b1, img[i], $sformatf("word %0d", i));
    for (int i = 5; i >= 0; i--) fetch(16'(16'hA000 + 2 * i), 1'b1, img[i], $sformatf("word %0d again", i));
    fetch(16'hA00C, 1'b1, 16'h0, "unprogrammed word");
    fetch(16'hA7FE, 1'b1, 16'h0, "last word");
    fetch(16'hA000, 1'b0, 16'h0, "en low");
    fetch(16'hA800, 1'b1, 16'h0, "above window");
    fetch(16'h9FFE, 1'b1, 16'h0, "below window");
    fetch(16'hA00A, 1'b1, 16'hc0de, "last image word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
