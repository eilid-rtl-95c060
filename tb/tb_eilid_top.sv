// tb_eilid_top -- end-to-end test of the EILID hardware at its default size.
//
// A behavioural MSP430-class core, written here as tasks, runs an
// instrumented application against eilid_top with every parameter at its
// default. It stands in for the three parts the hardware surrounds:
//   * the core, which presents one program-counter value, one fetch and at
//     most one data access per cycle;
//   * program memory (8 KB at 0xE000, word at address a holds a ^ 16'h5A5A)
//     and data memory (0x0000-0x1FFF, holding the main stack);
//   * the trusted CFI software in the secure ROM. Each call enters the ROM at
//     its entry word, spends a few cycles in the body, touches the shadow
//     stack and leaves from the leave word. Its stack index r5 lives in the
//     model, as it lives in a CPU register on the real device. Return
//     address k is pushed at 0x2000 + 2*k. The indirect-call table is kept
//     at the top of the same secure window, growing downwards. When a check
//     fails the software leaves the ROM from its body, not from the leave
//     word, and the monitor resets the device.
// The application boots, registers its indirect-call targets, makes nested
// calls, takes an interrupt, makes indirect calls and runs a secure update.
// Then each attack and misuse is tried once or more: corrupted return
// address, corrupted interrupt context, illegal indirect target, untrusted
// shadow-stack access, DMA into the shadow stack and into program memory,
// mid-ROM entry, interrupt inside the ROM, execution from data memory, ROM
// write. Every one must reset the core one cycle after the offending cycle,
// for 8 cycles, with the matching cause. Every fetch and data read is
// checked against the memory models; shadow-stack contents are checked
// against the model's own copy. A watchdog ends the run.
module tb_eilid_top;
  import eilid_pkg::*;

  localparam addr_t ENTRY = 16'hA000;
  localparam addr_t LEAVE = 16'hA7FE;
  localparam int    RSTC  = 8;

  logic     clk = 0, rst_n = 0;
  logic     pc_valid, irq;
  addr_t    pc;
  mem_req_t prog_req, cpu_req, dma_req;
  mem_req_t ext_prog_req, ext_data_req, ext_dma_req;
  word_t    prog_rdata, cpu_rdata, ext_prog_rdata, ext_data_rdata;
  logic     puc_reset, viol_pulse;
  viol_t    viol_cause;

  eilid_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- external memories ----------------
  word_t dmem [4096];                       // 0x0000 - 0x1FFF
  function automatic word_t pmem_word(addr_t a); return a ^ 16'h5A5A; endfunction

  int ext_ss_leak = 0, ext_dma_secure = 0, ext_pmem_wr = 0;
  always_ff @(posedge clk) begin
    ext_prog_rdata <= (ext_prog_req.en && ext_prog_req.addr >= 16'hE000) ? pmem_word(ext_prog_req.addr) : 16'h0;
    ext_data_rdata <= 16'h0;
    if (ext_data_req.en && ext_data_req.addr < 16'h2000) begin
      if (ext_data_req.wr) dmem[ext_data_req.addr[12:1]] <= ext_data_req.wdata;
      else                 ext_data_rdata <= dmem[ext_data_req.addr[12:1]];
    end
    if (ext_data_req.en && ext_data_req.addr >= 16'h2000 && ext_data_req.addr <= 16'h20FF) ext_ss_leak++;
    if (ext_data_req.en && ext_data_req.wr && ext_data_req.addr >= 16'hE000) ext_pmem_wr++;
    if (ext_dma_req.en && ((ext_dma_req.addr >= 16'h2000 && ext_dma_req.addr <= 16'h20FF) ||
                           (ext_dma_req.addr >= 16'hA000 && ext_dma_req.addr <= 16'hA7FF))) ext_dma_secure++;
  end

  // ---------------- core model ----------------
  int    r5;                 // shadow-stack index (a CPU register on the device)
  int    n_tab;              // entries in the indirect-call table
  word_t ss_copy [128];      // what the software believes is on the shadow stack
  addr_t sp;                 // main stack pointer (r1)
  int    resets_seen = 0;

  // mechanism counters
  int n_push_ra = 0, n_check_ra = 0, n_push_rfi = 0, n_check_rfi = 0;
  int n_store_ind = 0, n_check_ind = 0, n_update = 0, n_ext_data = 0;
  int n_atk [string];

  function automatic mem_req_t rq(logic en, logic wr, addr_t a, word_t d);
    mem_req_t r;
    r.en = en; r.wr = wr; r.be = 2'b11; r.addr = a; r.wdata = d;
    return r;
  endfunction

  // One core cycle at `p`: fetch p, optional data access and DMA.
  // Returns the data read (if any). Checks fetch and read data.
  task automatic step(addr_t p, mem_req_t d = '0, mem_req_t dm = '0,
                      logic i = 0, output word_t rd_data);
    word_t want_fetch;
    @(negedge clk);
    pc_valid = 1; pc = p; irq = i;
    prog_req = rq(1, 0, p, 16'h0);
    cpu_req  = d;
    dma_req  = dm;
    want_fetch = (p >= 16'hE000) ? pmem_word(p) : 16'h0;   // secure ROM image is empty by default
    @(posedge clk); #1;
    check($sformatf("fetch %h", p), prog_rdata == want_fetch);
    rd_data = cpu_rdata;
    @(negedge clk);
    cpu_req = '0; dma_req = '0; irq = 0; prog_req = '0;
  endtask

  task automatic run(addr_t p);
    word_t x; step(p, '0, '0, 0, x);
  endtask

  // ---- the trusted software, as seen on the buses ----
  // Leave the ROM through the leave word back to `ret`.
  task automatic sw_leave(addr_t ret);
    run(16'hA7F0); run(LEAVE); run(ret);
  endtask

  // A failed check: the software branches straight back to the application
  // from its body; the monitor must reset.
  task automatic sw_fail_exit(addr_t ret);
    run(16'hA300); run(ret);
  endtask

  task automatic ss_write(addr_t body_pc, int k, word_t v);
    word_t x;
    step(body_pc, rq(1, 1, 16'(16'h2000 + 2 * k), v), '0, 0, x);
  endtask

  task automatic ss_read(addr_t body_pc, int k, output word_t v);
    step(body_pc, rq(1, 0, 16'(16'h2000 + 2 * k), 16'h0), '0, 0, v);
  endtask

  task automatic sw_enter(addr_t from);
    run(from); run(ENTRY); run(16'hA002);   // r4 dispatch
  endtask

  task automatic S_init(addr_t from);
    sw_enter(from); run(16'hA010);
    r5 = 0; n_tab = 0;
    sw_leave(from + 2);
  endtask

  task automatic S_store_ra(addr_t from, word_t r6);
    sw_enter(from); run(16'hA040);
    ss_write(16'hA042, r5, r6); ss_copy[r5] = r6; r5++;
    n_push_ra++;
    sw_leave(from + 2);
  endtask

  task automatic S_check_ra(addr_t from, word_t r6, output logic ok);
    word_t v;
    sw_enter(from); run(16'hA080);
    r5--;
    ss_read(16'hA082, r5, v);
    check("shadow stack read back", v == ss_copy[r5]);
    ok = (v == r6);
    if (ok) begin n_check_ra++; sw_leave(from + 2); end
    else sw_fail_exit(from + 2);
  endtask

  task automatic S_store_rfi(addr_t from, word_t r6, word_t r7);
    sw_enter(from); run(16'hA0C0);
    ss_write(16'hA0C2, r5, r6); ss_copy[r5] = r6; r5++;
    ss_write(16'hA0C4, r5, r7); ss_copy[r5] = r7; r5++;
    n_push_rfi++;
    sw_leave(from + 2);
  endtask

  task automatic S_check_rfi(addr_t from, word_t r6, word_t r7, output logic ok);
    word_t v7, v6;
    sw_enter(from); run(16'hA100);
    r5--; ss_read(16'hA102, r5, v7);
    r5--; ss_read(16'hA104, r5, v6);
    check("context read back", v7 == ss_copy[r5 + 1] && v6 == ss_copy[r5]);
    ok = (v6 == r6) && (v7 == r7);
    if (ok) begin n_check_rfi++; sw_leave(from + 2); end
    else sw_fail_exit(from + 2);
  endtask

  task automatic S_store_ind(addr_t from, word_t r6);
    sw_enter(from); run(16'hA140);
    ss_write(16'hA142, 127 - n_tab, r6); ss_copy[127 - n_tab] = r6; n_tab++;
    n_store_ind++;
    sw_leave(from + 2);
  endtask

  task automatic S_check_ind(addr_t from, word_t r6, output logic ok);
    word_t v;
    sw_enter(from); run(16'hA180);
    ok = 0;
    for (int t = 0; t < n_tab; t++) begin
      ss_read(16'hA182, 127 - t, v);
      check("table read back", v == ss_copy[127 - t]);
      if (v == r6) ok = 1;
    end
    if (ok) begin n_check_ind++; sw_leave(from + 2); end
    else sw_fail_exit(from + 2);
  endtask

  // Secure update: ROM code writes one program-memory word.
  task automatic S_update(addr_t from, addr_t a, word_t v);
    word_t x;
    int    n_before;
    sw_enter(from); run(16'hA1C0);
    n_before = ext_pmem_wr;
    step(16'hA1C2, rq(1, 1, a, v), '0, 0, x);
    check("update write reaches program memory", ext_pmem_wr == n_before + 1);
    n_update++;
    sw_leave(from + 2);
  endtask

  // ---- application-side helpers ----
  task automatic push_main(addr_t p, word_t v);
    word_t x;
    sp -= 2; step(p, rq(1, 1, sp, v), '0, 0, x); n_ext_data++;
  endtask

  task automatic peek_main(addr_t p, int off, output word_t v);
    step(p, rq(1, 0, 16'(sp + off), 16'h0), '0, 0, v); n_ext_data++;
  endtask

  // Expect the reset for `rule` to have started at the last edge; wait it out.
  task automatic expect_reset(string name, viol_t want);
    int n = 0;
    check({name, ": reset one cycle after"}, puc_reset == 1);
    check({name, ": cause"}, (viol_cause & want) == want);
    pc_valid = 0; prog_req = '0; cpu_req = '0; dma_req = '0;
    while (puc_reset) begin @(posedge clk); #1; n++; end
    check({name, ": reset length"}, n == RSTC);
    if (puc_reset == 0 && n == RSTC) n_atk[name] = n_atk[name] + 1;
    resets_seen++;
  endtask

  // Boot: main() starts, initialises the software, registers targets.
  task automatic boot();
    sp = 16'h1000;
    run(16'hFFFE); run(16'hE000);
    S_init(16'hE002);
    S_store_ind(16'hE00A, 16'hE400);
    S_store_ind(16'hE012, 16'hE500);
  endtask

  // Call foo() from `site`; foo optionally calls bar(). The return address
  // on the main stack may be corrupted inside the callee.
  task automatic call_foo(addr_t site, logic nested, word_t corrupt, output logic ok);
    word_t ra, got;
    logic  ok2;
    ra = site + 4;
    S_store_ra(site - 4, ra);           // mov #ra, r6 ; call NS_store_ra
    push_main(site, ra);                // call foo
    run(16'hE200); run(16'hE202);       // foo body
    ok2 = 1;
    if (nested) call_bar(16'hE204, ok2);
    if (!ok2) begin ok = 0; return; end
    if (corrupt != 0) begin
      word_t x;
      step(16'hE206, rq(1, 1, sp, corrupt), '0, 0, x);   // overflow overwrites ra
    end
    peek_main(16'hE208, 0, got);        // mov 0(r1), r6
    check("main stack returns what the model put there", got == (corrupt != 0 ? corrupt : ra));
    S_check_ra(16'hE20A, got, ok);
    if (ok) begin sp += 2; run(16'hE20E); run(ra); end  // ret
  endtask

  task automatic call_bar(addr_t site, output logic ok);
    word_t ra, got;
    ra = site + 4;
    S_store_ra(site, ra);
    push_main(site + 2, ra);
    run(16'hE300);
    peek_main(16'hE302, 0, got);
    S_check_ra(16'hE304, got, ok);
    if (ok) begin sp += 2; run(16'hE308); run(ra); end
  endtask

  // Interrupt taken at `at`: the core pushes PC and SR, the ISR stores them,
  // optionally the context is corrupted, then it is checked before reti.
  task automatic interrupt(addr_t at, word_t sr, word_t corrupt, output logic ok);
    word_t v6, v7, x;
    push_main(at, at);                  // return address
    push_main(16'hE600, sr);            // status register
    S_store_rfi(16'hE602, at, sr);
    run(16'hE60A);
    if (corrupt != 0) step(16'hE60C, rq(1, 1, 16'(sp + 2), corrupt), '0, 0, x);
    peek_main(16'hE60E, 2, v6);
    peek_main(16'hE610, 0, v7);
    S_check_rfi(16'hE612, v6, v7, ok);
    if (ok) begin sp += 4; run(16'hE616); run(at); end
  endtask

  task automatic icall(addr_t site, word_t target, output logic ok);
    S_check_ind(site, target, ok);
    if (ok) begin run(site + 4); run(target); run(target + 2); end
  endtask

  logic  ok;
  word_t v;
  viol_t w;

  initial begin
    pc_valid = 0; pc = '0; irq = 0; prog_req = '0; cpu_req = '0; dma_req = '0;
    foreach (dmem[i]) dmem[i] = '0;
    r5 = 0; n_tab = 0; sp = 16'h1000;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- legal operation ----------------
    boot();
    call_foo(16'hE100, 0, 0, ok);  check("plain call returns", ok);
    call_foo(16'hE120, 1, 0, ok);  check("nested call returns", ok);
    check("shadow stack empty after returns", r5 == 0);
    interrupt(16'hE140, 16'h0008, 0, ok); check("interrupt returns", ok);
    icall(16'hE150, 16'hE400, ok); check("indirect call to registered target", ok);
    icall(16'hE160, 16'hE500, ok); check("second registered target", ok);
    S_update(16'hE170, 16'hE800, 16'h4303);
    // deep call chain: fill the shadow stack to 126 entries, then unwind
    for (int k = 0; k < 126 - n_tab; k++) S_store_ra(16'hE180, 16'(16'hE184 + 2 * k));
    for (int k = 126 - n_tab - 1; k >= 0; k--) begin
      S_check_ra(16'hE190, 16'(16'hE184 + 2 * k), ok);
      check("deep unwind", ok);
    end
    check("no reset during legal operation", resets_seen == 0 && !puc_reset);
    check("shadow stack never reached external memory", ext_ss_leak == 0);

    // ---------------- attacks and misuse ----------------
    w = '0; w.rom_exit = 1;
    call_foo(16'hE100, 0, 16'hE0F0, ok);
    check("corrupted return detected", !ok);
    expect_reset("return address", w);
    boot();

    call_foo(16'hE120, 1, 16'hE2F0, ok);   // corrupt the outer frame after a nested call
    check("corrupted outer return detected", !ok);
    expect_reset("return address", w);
    boot();

    interrupt(16'hE140, 16'h0008, 16'hE666, ok);
    check("corrupted interrupt context detected", !ok);
    expect_reset("interrupt context", w);
    boot();

    icall(16'hE150, 16'hE450, ok);
    check("illegal indirect target detected", !ok);
    expect_reset("indirect call", w);
    boot();

    w = '0; w.sstack_access = 1;
    S_store_ra(16'hE100, 16'hE104);
    step(16'hE200, rq(1, 1, 16'h2000, 16'hBAD0), '0, 0, v);   // app overwrites the shadow copy
    expect_reset("app writes shadow stack", w);
    boot();
    S_store_ra(16'hE100, 16'hE104);
    step(16'hE200, rq(1, 0, 16'h2000, 16'h0), '0, 0, v);
    check("app read of shadow stack returns nothing", v == 16'h0);
    expect_reset("app reads shadow stack", w);
    boot();

    step(16'hE200, '0, rq(1, 1, 16'h2002, 16'hBAD0), 0, v);
    check("DMA to shadow stack blocked", ext_dma_secure == 0);
    expect_reset("DMA to shadow stack", w);
    boot();

    w = '0; w.pmem_write = 1;
    step(16'hE200, rq(1, 1, 16'hE300, 16'h4130), '0, 0, v);
    expect_reset("app writes program memory", w);
    boot();
    step(16'hE200, '0, rq(1, 1, 16'hE300, 16'h4130), 0, v);
    expect_reset("DMA writes program memory", w);
    boot();

    w = '0; w.rom_entry = 1;
    run(16'hE200); run(16'hA040);           // jump past the entry section
    expect_reset("mid-ROM entry", w);
    boot();

    w = '0; w.rom_irq = 1;
    sw_enter(16'hE200);
    step(16'hA040, '0, '0, 1, v);
    expect_reset("interrupt in ROM", w);
    boot();

    w = '0; w.rom_dma = 1;
    sw_enter(16'hE200);
    step(16'hA040, '0, rq(1, 0, 16'h0400, 16'h0), 0, v);
    expect_reset("DMA during ROM", w);
    boot();

    w = '0; w.exec_outside = 1;
    run(16'hE200); run(16'h0400);           // injected code in data memory
    expect_reset("execute from data memory", w);
    boot();

    w = '0; w.rom_write = 1;
    step(16'hE200, rq(1, 1, 16'hA000, 16'h4303), '0, 0, v);
    expect_reset("ROM write", w);
    boot();

    call_foo(16'hE100, 1, 0, ok); check("device works after the attacks", ok && !puc_reset);

    // ---------------- mechanism coverage ----------------
    $display("pushes %0d, return checks %0d, context stores %0d, context checks %0d",
             n_push_ra, n_check_ra, n_push_rfi, n_check_rfi);
    $display("table stores %0d, indirect checks %0d, updates %0d, main-stack accesses %0d",
             n_store_ind, n_check_ind, n_update, n_ext_data);
    check("return address push", n_push_ra > 0);
    check("return address check", n_check_ra > 0);
    check("interrupt context store", n_push_rfi > 0);
    check("interrupt context check", n_check_rfi > 0);
    check("indirect target store", n_store_ind > 0);
    check("indirect target check", n_check_ind > 0);
    check("secure update", n_update > 0);
    check("main stack traffic", n_ext_data > 0);
    begin
      string names [13] = '{"return address", "interrupt context", "indirect call",
        "app writes shadow stack", "app reads shadow stack", "DMA to shadow stack",
        "app writes program memory", "DMA writes program memory", "mid-ROM entry",
        "interrupt in ROM", "DMA during ROM", "execute from data memory", "ROM write"};
      foreach (names[i]) begin
        int c;
        c = n_atk.exists(names[i]) ? n_atk[names[i]] : 0;
        $display("reset for %-26s %0d", names[i], c);
        check({"reset seen: ", names[i]}, c > 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
