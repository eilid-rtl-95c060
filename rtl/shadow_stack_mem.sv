// shadow_stack_mem -- the secure data memory that holds the shadow stack.
//
// A 16-bit-wide RAM of SSTACK_BYTES bytes (256 by default: up to 128 return
// addresses or interrupt-context words) mapped at SSTACK_BASE (0x2000 by
// default). The trusted CFI software keeps its stack index in a CPU register
// and pushes entry k at SSTACK_BASE + 2*k; this memory only stores words.
//
// Access rule: a request takes effect only when `grant` is high in the same
// cycle (the monitor raises it only for code running from the secure ROM).
// A granted write updates the bytes selected by `be` at the clock edge. A
// granted read returns the word on `rdata` after the clock edge (one cycle of
// latency, like the MCU's synchronous data memory); any other cycle leaves
// zero on `rdata`, so untrusted code can never observe stack contents.
// Requests outside the window are ignored. The memory is not cleared on
// reset: the trusted software re-initialises its index after every reset.
//
// Size and base address follow the published design; the port form, the
// byte enables and the zero-on-deny read are this implementation's.
module shadow_stack_mem
  import eilid_pkg::*;
#(
  parameter addr_t       SSTACK_BASE  = SSTACK_BASE_D,
  parameter int unsigned SSTACK_BYTES = SSTACK_BYTES_D
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  input  logic     grant,
  output word_t    rdata
);
  localparam int unsigned WORDS = SSTACK_BYTES / 2;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam addr_t       SSTACK_LAST = SSTACK_BASE + addr_t'(SSTACK_BYTES - 1);

  word_t         mem [WORDS];
  logic          hit;
  logic [AW-1:0] idx;
  addr_t         offs;

  always_comb begin
    hit  = req.en && grant && in_range(req.addr, SSTACK_BASE, SSTACK_LAST);
    offs = req.addr - SSTACK_BASE;
    idx  = offs[AW:1];
  end

  always_ff @(posedge clk) begin
    if (hit && req.wr) begin
      if (req.be[0]) mem[idx][7:0]  <= req.wdata[7:0];
      if (req.be[1]) mem[idx][15:8] <= req.wdata[15:8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                rdata <= '0;
    else if (hit && !req.wr)   rdata <= mem[idx];
    else                       rdata <= '0;
  end

  initial assert (SSTACK_BYTES >= 4 && (SSTACK_BYTES & (SSTACK_BYTES - 1)) == 0)
    else $error("SSTACK_BYTES must be a power of two, at least 4");
endmodule
