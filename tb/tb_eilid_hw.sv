// tb_eilid_hw -- self-checking test of the EILID monitor.
//
// Drives the monitor's core-side inputs one cycle at a time and compares its
// outputs with a reference model written here from the rules alone:
//   * sstack_grant, checked combinationally in every cycle;
//   * reset_req, which must rise at the clock edge after a breach and stay
//     high exactly RST_CYCLES cycles, ignoring breaches meanwhile;
//   * cause, which must name exactly the rules broken.
// A directed part breaks each rule once and runs one legal trip through the
// secure ROM; a random part (2000 cycles, biased towards legal traffic)
// compares everything against the model. A watchdog ends the run.
module tb_eilid_hw;
  import eilid_pkg::*;

  localparam int unsigned RST = 8;   // the default reset hold
  localparam addr_t ENTRY = SROM_BASE_D;
  localparam addr_t LEAVE = SROM_LAST_D - 16'd1;

  logic     clk = 0, rst_n = 0;
  logic     pc_valid, irq;
  addr_t    pc;
  mem_req_t cpu_req, dma_req;
  logic     sstack_grant, reset_req, kill_pulse;
  viol_t    cause;

  int checks = 0, failures = 0;

  eilid_hw dut (
    .clk, .rst_n, .pc_valid, .pc, .irq, .cpu_req, .dma_req,
    .sstack_grant, .reset_req, .cause, .kill_pulse
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic  m_prev_valid;
  addr_t m_prev_pc;
  logic  m_kill;
  int    m_cnt;
  viol_t m_cause;

  function automatic logic rng(addr_t a, addr_t lo, addr_t hi);
    return a >= lo && a <= hi;
  endfunction

  function automatic logic m_in_rom(addr_t a);
    return rng(a, SROM_BASE_D, SROM_LAST_D);
  endfunction

  function automatic viol_t m_viol();
    viol_t v;
    logic  cur_rom, prev_rom, ss_cpu, ss_dma;
    cur_rom  = pc_valid && m_in_rom(pc);
    prev_rom = m_prev_valid && m_in_rom(m_prev_pc);
    ss_cpu   = cpu_req.en && rng(cpu_req.addr, 16'h2000, 16'h20FF);
    ss_dma   = dma_req.en && rng(dma_req.addr, 16'h2000, 16'h20FF);
    v = '0;
    v.exec_outside  = pc_valid && !m_in_rom(pc) && !rng(pc, 16'hE000, 16'hFFFF);
    v.rom_entry     = cur_rom && !prev_rom && pc != ENTRY;
    v.rom_exit      = pc_valid && !cur_rom && prev_rom && m_prev_pc != LEAVE;
    v.rom_irq       = irq && cur_rom;
    v.rom_dma       = dma_req.en && cur_rom;
    v.pmem_write    = (cpu_req.en && cpu_req.wr && !cur_rom && rng(cpu_req.addr, 16'hE000, 16'hFFFF))
                   || (dma_req.en && dma_req.wr && rng(dma_req.addr, 16'hE000, 16'hFFFF));
    v.rom_write     = (cpu_req.en && cpu_req.wr && m_in_rom(cpu_req.addr))
                   || (dma_req.en && dma_req.wr && m_in_rom(dma_req.addr));
    v.sstack_access = (ss_cpu && !cur_rom) || ss_dma;
    return v;
  endfunction

  function automatic logic m_grant();
    return cpu_req.en && rng(cpu_req.addr, 16'h2000, 16'h20FF) && pc_valid && m_in_rom(pc);
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Apply one cycle of stimulus (already set on the inputs), check the
  // combinational grant, clock, then check the registered outputs.
  int n_viol_events = 0;
  task automatic cycle();
    viol_t v;
    logic  was_kill;
    #1;
    v = m_viol();
    check("sstack_grant", sstack_grant == m_grant());
    @(posedge clk);
    // model update
    was_kill = m_kill;
    if (!m_kill && (|v)) begin
      m_kill = 1; m_cnt = RST; m_cause = v; n_viol_events++;
    end else if (m_kill) begin
      m_cnt--;
      if (m_cnt == 0) m_kill = 0;
    end
    if (was_kill) begin
      m_prev_valid = 0; m_prev_pc = '0;
    end else if (pc_valid) begin
      m_prev_valid = 1; m_prev_pc = pc;
    end
    #1;
    check("reset_req", reset_req == m_kill);
    check("cause", cause == m_cause);
    @(negedge clk);
  endtask

  function automatic mem_req_t rq(logic en, logic wr, addr_t a);
    mem_req_t r;
    r.en = en; r.wr = wr; r.be = 2'b11; r.addr = a; r.wdata = 16'h1234;
    return r;
  endfunction

  task automatic idle_in(addr_t p);
    pc_valid = 1; pc = p; irq = 0; cpu_req = '0; dma_req = '0;
  endtask

  // Wait out a reset that must be in progress, then run legal code again.
  task automatic ride_out_reset();
    int n = 0;
    pc_valid = 0; irq = 0; cpu_req = '0; dma_req = '0;
    while (m_kill) begin cycle(); n++; end
    check("reset held RST cycles", n == RST);
    idle_in(16'hE100); cycle();
  endtask

  task automatic expect_breach(string rule, viol_t want);
    viol_t v;
    v = m_viol();
    check({rule, " model sees it"}, (v & want) == want);
    cycle();
    check({rule, " reset"}, reset_req == 1);
    check({rule, " cause"}, (cause & want) == want);
    ride_out_reset();
  endtask

  viol_t w;

  initial begin
    m_prev_valid = 0; m_prev_pc = '0; m_kill = 0; m_cnt = 0; m_cause = '0;
    pc_valid = 0; pc = '0; irq = 0; cpu_req = '0; dma_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // legal trip: application -> ROM entry -> body -> shadow stack -> leave -> application
    idle_in(16'hE200); cycle();
    idle_in(ENTRY);    cycle();
    idle_in(ENTRY + 16'd2); cpu_req = rq(1, 1, 16'h2004);
    #1 check("grant to ROM code", sstack_grant == 1);
    cycle();
    idle_in(ENTRY + 16'd4); cpu_req = rq(1, 0, 16'h2004); cycle();
    idle_in(ENTRY + 16'd6); cpu_req = rq(1, 1, 16'hE300); cycle(); // secure update write
    idle_in(LEAVE);    cycle();
    idle_in(16'hE204); cycle();
    check("legal trip: no reset", reset_req == 0 && n_viol_events == 0);

    // each rule broken once
    w = '0; w.rom_entry = 1;
    idle_in(ENTRY + 16'h10); expect_breach("mid-ROM entry", w);

    idle_in(ENTRY); cycle(); idle_in(ENTRY + 16'd2); cycle();
    w = '0; w.rom_exit = 1;
    idle_in(16'hE400); expect_breach("ROM exit from body", w);

    idle_in(ENTRY); cycle();
    w = '0; w.rom_irq = 1;
    idle_in(ENTRY + 16'd2); irq = 1; expect_breach("interrupt in ROM", w);

    idle_in(ENTRY); cycle();
    w = '0; w.rom_dma = 1;
    idle_in(ENTRY + 16'd2); dma_req = rq(1, 0, 16'h0400); expect_breach("DMA during ROM", w);

    w = '0; w.pmem_write = 1;
    idle_in(16'hE200); cpu_req = rq(1, 1, 16'hE800); expect_breach("PMEM write by app", w);

    w = '0; w.pmem_write = 1;
    idle_in(16'hE200); dma_req = rq(1, 1, 16'hF000); expect_breach("PMEM write by DMA", w);

    w = '0; w.exec_outside = 1;
    idle_in(16'h0400); expect_breach("execute from data memory", w);

    w = '0; w.sstack_access = 1;
    idle_in(16'hE200); cpu_req = rq(1, 0, 16'h2000);
    #1 check("no grant to app code", sstack_grant == 0);
    expect_breach("shadow stack read by app", w);

    w = '0; w.sstack_access = 1;
    idle_in(16'hE200); dma_req = rq(1, 1, 16'h20FE); expect_breach("shadow stack DMA", w);

    w = '0; w.rom_write = 1;
    idle_in(16'hE200); cpu_req = rq(1, 1, 16'hA100); expect_breach("ROM write", w);

    // breach during reset is ignored: reset length unchanged
    idle_in(16'h0400); cycle();
    begin
      int n = 1;
      while (m_kill) begin idle_in(16'h0300); cycle(); n++; end
      check("breach in KILL ignored", n == RST + 1);
    end
    idle_in(16'hE000); cycle();

    // random traffic against the model
    for (int i = 0; i < 2000; i++) begin
      int r;
      addr_t pcs [6];
      pcs = '{16'hE002, 16'hFFF0, ENTRY, ENTRY + 16'd8, LEAVE, 16'h0600};
      r = $urandom_range(0, 99);
      pc_valid = (r < 95);
      pc       = pcs[$urandom_range(0, 5)];
      irq      = ($urandom_range(0, 49) == 0);
      cpu_req  = rq($urandom_range(0, 3) == 0, 1'($urandom_range(0, 1)),
                    addr_t'($urandom_range(0, 3) == 0 ? 32'h2000 + 2 * $urandom_range(0, 127)
                                                       : $urandom_range(0, 65535)));
      dma_req  = rq($urandom_range(0, 19) == 0, 1'($urandom_range(0, 1)),
                    addr_t'($urandom_range(0, 65535)));
      cycle();
    end
    check("random run saw violations", n_viol_events > 20);

    $display("violation events: %0d", n_viol_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
