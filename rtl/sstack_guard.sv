// sstack_guard -- access control for the shadow stack.
//
// The shadow stack is a secure data region reserved for the trusted CFI
// software. A CPU read or write inside the window [SSTACK_BASE,
// SSTACK_BASE+SSTACK_BYTES) is granted (`grant` high) only while the program
// counter is inside the secure ROM; the same access from any other code, or
// any DMA access to the window, raises `viol`. Both outputs are combinational.
// Exclusive access by the trusted software is the published rule; the
// window test and the grant signal are this implementation's.
module sstack_guard
  import eilid_pkg::*;
#(
  parameter addr_t       SSTACK_BASE  = SSTACK_BASE_D,
  parameter int unsigned SSTACK_BYTES = SSTACK_BYTES_D
) (
  input  logic     pc_valid,
  input  logic     pc_in_rom,
  input  mem_req_t cpu_req,
  input  mem_req_t dma_req,
  output logic     grant,   // CPU access to the shadow stack may proceed
  output logic     viol
);
  localparam addr_t SSTACK_LAST = SSTACK_BASE + addr_t'(SSTACK_BYTES - 1);

  logic cpu_hit, dma_hit;

  always_comb begin
    cpu_hit = cpu_req.en && in_range(cpu_req.addr, SSTACK_BASE, SSTACK_LAST);
    dma_hit = dma_req.en && in_range(dma_req.addr, SSTACK_BASE, SSTACK_LAST);
    grant   = cpu_hit && pc_valid && pc_in_rom;
    viol    = (cpu_hit && !(pc_valid && pc_in_rom)) || dma_hit;
  end
endmodule
