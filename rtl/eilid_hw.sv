// eilid_hw -- the EILID hardware monitor.
//
// EILID enforces control-flow integrity on a bare-metal MSP430-class MCU by
// pairing compiler-inserted calls with trusted software in a secure ROM that
// keeps a shadow stack of return addresses. The hardware's job is to make that
// software trustworthy: the ROM code must be unmodifiable, run atomically from
// a single entry point to a single exit point, and be the only code that can
// touch the shadow stack; the application code in program memory must be
// immutable and no code may run from data memory. This module watches the
// core's buses and resets the MCU the moment one of those rules is broken.
// When the trusted software finds a corrupted return address it simply leaves
// the ROM by an illegal path, and the same reset follows.
//
// Structure: four combinational rule checkers (exec_guard, pmem_guard,
// sstack_guard, srom_guard, the last with one register of PC history) feed a
// two-state reset controller (reset_ctrl).
//
// Timing: a breach seen on the inputs in cycle n sets `reset_req` from the
// clock edge ending cycle n for RST_CYCLES cycles; `cause` names the rules
// that fired. `sstack_grant` is combinational and qualifies the CPU's
// shadow-stack access in the same cycle.
//
// The rule set follows the published design (it reuses the CASU monitor, plus
// exclusive shadow-stack access). The bus signal forms, address map, the
// one-cycle reaction and the reset hold time are this implementation's.
module eilid_hw
  import eilid_pkg::*;
#(
  parameter addr_t       PMEM_BASE    = PMEM_BASE_D,
  parameter addr_t       PMEM_LAST    = PMEM_LAST_D,
  parameter addr_t       SROM_BASE    = SROM_BASE_D,
  parameter addr_t       SROM_LAST    = SROM_LAST_D,
  parameter addr_t       ENTRY_ADDR   = SROM_BASE_D,
  parameter addr_t       LEAVE_ADDR   = SROM_LAST_D - 16'd1,
  parameter addr_t       SSTACK_BASE  = SSTACK_BASE_D,
  parameter int unsigned SSTACK_BYTES = SSTACK_BYTES_D,
  parameter int unsigned RST_CYCLES   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // monitored core signals
  input  logic     pc_valid,     // pc holds the address of an executing instruction
  input  addr_t    pc,
  input  logic     irq,          // core accepts an interrupt this cycle
  input  mem_req_t cpu_req,      // core data-port request
  input  mem_req_t dma_req,      // DMA request
  // results
  output logic     sstack_grant, // CPU shadow-stack access allowed this cycle
  output logic     reset_req,    // hold the MCU in reset
  output viol_t    cause,        // rules broken by the last violation
  output logic     kill_pulse    // one-cycle pulse per violation
);
  viol_t viol;
  logic  pc_in_rom, clear;

  exec_guard #(
    .PMEM_BASE(PMEM_BASE), .PMEM_LAST(PMEM_LAST),
    .SROM_BASE(SROM_BASE), .SROM_LAST(SROM_LAST)
  ) u_exec (
    .pc_valid(pc_valid), .pc(pc), .viol(viol.exec_outside)
  );

  srom_guard #(
    .SROM_BASE(SROM_BASE), .SROM_LAST(SROM_LAST),
    .ENTRY_ADDR(ENTRY_ADDR), .LEAVE_ADDR(LEAVE_ADDR)
  ) u_srom (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .pc_valid(pc_valid), .pc(pc), .irq(irq), .dma_en(dma_req.en),
    .pc_in_rom(pc_in_rom),
    .viol_entry(viol.rom_entry), .viol_exit(viol.rom_exit),
    .viol_irq(viol.rom_irq), .viol_dma(viol.rom_dma)
  );

  pmem_guard #(
    .PMEM_BASE(PMEM_BASE), .PMEM_LAST(PMEM_LAST),
    .SROM_BASE(SROM_BASE), .SROM_LAST(SROM_LAST)
  ) u_pmem (
    .pc_in_rom(pc_in_rom), .cpu_req(cpu_req), .dma_req(dma_req),
    .viol_pmem(viol.pmem_write), .viol_rom(viol.rom_write)
  );

  sstack_guard #(
    .SSTACK_BASE(SSTACK_BASE), .SSTACK_BYTES(SSTACK_BYTES)
  ) u_sstack (
    .pc_valid(pc_valid), .pc_in_rom(pc_in_rom),
    .cpu_req(cpu_req), .dma_req(dma_req),
    .grant(sstack_grant), .viol(viol.sstack_access)
  );

  reset_ctrl #(.RST_CYCLES(RST_CYCLES)) u_rst (
    .clk(clk), .rst_n(rst_n), .viol(viol),
    .reset_req(reset_req), .clear(clear), .cause(cause), .kill_pulse(kill_pulse)
  );

  // The ROM must contain both of its gates.
  initial begin
    assert (ENTRY_ADDR >= SROM_BASE && ENTRY_ADDR <= SROM_LAST)
      else $error("ENTRY_ADDR outside the secure ROM");
    assert (LEAVE_ADDR >= SROM_BASE && LEAVE_ADDR <= SROM_LAST)
      else $error("LEAVE_ADDR outside the secure ROM");
  end

  // Every violation event starts a reset.
  a_kill_resets: assert property (@(posedge clk)
    kill_pulse |-> reset_req)
    else $error("violation without reset");

endmodule
