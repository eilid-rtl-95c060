// eilid_top -- EILID run-time hardware around an MSP430-class core.
//
// Instantiates the monitor (eilid_hw), the shadow-stack memory
// (shadow_stack_mem) and the secure ROM holding the trusted CFI software
// (secure_rom), and places them between the core and its ordinary memories.
// The core, its program memory (flash) and its data memory (RAM, holding the
// main stack) are outside this module; their buses pass through it:
//
//   prog_req  core program-space port (instruction fetch). Addresses in the
//             ROM window are served by the secure ROM; all others go out on
//             ext_prog_req to program memory. prog_rdata returns the word one
//             cycle after the request, from whichever memory was selected.
//   cpu_req   core data port. Shadow-stack addresses are served by the
//             shadow-stack memory, and only when the monitor grants it;
//             everything else goes out on ext_data_req. cpu_rdata returns one
//             cycle later.
//   dma_req   DMA master. Passed on as ext_dma_req unless it targets the
//             shadow stack or the ROM, which DMA may never reach.
//   pc, pc_valid, irq  the core's program counter and interrupt acceptance,
//             watched by the monitor.
//   puc_reset drives the core's (and its peripherals') reset; it rises one
//             clock after a rule is broken and stays high RST_CYCLES cycles.
//             viol_cause names the broken rules, viol_pulse marks each event.
//
// The split into monitor, secure ROM and shadow stack, and the shadow stack's
// 256 bytes at 0x2000, follow the published design; the port forms, the
// address map beyond that and the bus routing are this implementation's.
module eilid_top
  import eilid_pkg::*;
#(
  parameter addr_t       PMEM_BASE    = PMEM_BASE_D,
  parameter addr_t       PMEM_LAST    = PMEM_LAST_D,
  parameter addr_t       SROM_BASE    = SROM_BASE_D,
  parameter int unsigned SROM_BYTES   = 2048,
  parameter string       SROM_INIT    = "",
  parameter addr_t       SSTACK_BASE  = SSTACK_BASE_D,
  parameter int unsigned SSTACK_BYTES = SSTACK_BYTES_D,
  parameter int unsigned RST_CYCLES   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // core status
  input  logic     pc_valid,
  input  addr_t    pc,
  input  logic     irq,
  // core program-space port
  input  mem_req_t prog_req,
  output word_t    prog_rdata,
  output mem_req_t ext_prog_req,
  input  word_t    ext_prog_rdata,
  // core data port
  input  mem_req_t cpu_req,
  output word_t    cpu_rdata,
  output mem_req_t ext_data_req,
  input  word_t    ext_data_rdata,
  // DMA
  input  mem_req_t dma_req,
  output mem_req_t ext_dma_req,
  // reset and status
  output logic     puc_reset,
  output viol_t    viol_cause,
  output logic     viol_pulse
);
  localparam addr_t SROM_LAST   = SROM_BASE + addr_t'(SROM_BYTES - 1);
  localparam addr_t SSTACK_LAST = SSTACK_BASE + addr_t'(SSTACK_BYTES - 1);

  logic  sstack_grant;
  logic  prog_is_rom, data_is_ss, dma_is_secure;
  logic  prog_is_rom_q, data_is_ss_q;
  word_t rom_rdata, ss_rdata;

  eilid_hw #(
    .PMEM_BASE(PMEM_BASE), .PMEM_LAST(PMEM_LAST),
    .SROM_BASE(SROM_BASE), .SROM_LAST(SROM_LAST),
    .ENTRY_ADDR(SROM_BASE), .LEAVE_ADDR(SROM_LAST - 16'd1),
    .SSTACK_BASE(SSTACK_BASE), .SSTACK_BYTES(SSTACK_BYTES),
    .RST_CYCLES(RST_CYCLES)
  ) u_hw (
    .clk(clk), .rst_n(rst_n),
    .pc_valid(pc_valid), .pc(pc), .irq(irq),
    .cpu_req(cpu_req), .dma_req(dma_req),
    .sstack_grant(sstack_grant), .reset_req(puc_reset),
    .cause(viol_cause), .kill_pulse(viol_pulse)
  );

  secure_rom #(
    .SROM_BASE(SROM_BASE), .SROM_BYTES(SROM_BYTES), .INIT_FILE(SROM_INIT)
  ) u_rom (
    .clk(clk), .en(prog_req.en), .addr(prog_req.addr), .rdata(rom_rdata)
  );

  shadow_stack_mem #(
    .SSTACK_BASE(SSTACK_BASE), .SSTACK_BYTES(SSTACK_BYTES)
  ) u_ss (
    .clk(clk), .rst_n(rst_n), .req(cpu_req), .grant(sstack_grant),
    .rdata(ss_rdata)
  );

  // Address decode and request routing.
  always_comb begin
    prog_is_rom   = in_range(prog_req.addr, SROM_BASE, SROM_LAST);
    data_is_ss    = in_range(cpu_req.addr, SSTACK_BASE, SSTACK_LAST);
    dma_is_secure = in_range(dma_req.addr, SSTACK_BASE, SSTACK_LAST)
                 || in_range(dma_req.addr, SROM_BASE, SROM_LAST);

    ext_prog_req    = prog_req;
    ext_prog_req.en = prog_req.en && !prog_is_rom;
    ext_data_req    = cpu_req;
    ext_data_req.en = cpu_req.en && !data_is_ss;
    ext_dma_req     = dma_req;
    ext_dma_req.en  = dma_req.en && !dma_is_secure;
  end

  // Read-data return: one cycle after the request, from the memory selected.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_is_rom_q <= 1'b0;
      data_is_ss_q  <= 1'b0;
    end else begin
      prog_is_rom_q <= prog_req.en && prog_is_rom;
      data_is_ss_q  <= cpu_req.en && data_is_ss;
    end
  end

  assign prog_rdata = prog_is_rom_q ? rom_rdata : ext_prog_rdata;
  assign cpu_rdata  = data_is_ss_q  ? ss_rdata  : ext_data_rdata;
endmodule
