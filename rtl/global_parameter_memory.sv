// global_parameter_memory: on-chip store of the model parameters.
//
// Holds FP16 weights row-major (element (r, c) of an M x N layer at
// r * N + c) and, from lg_pkg::IG_BASE and lg_pkg::OG_BASE, the input
// grouping matrix (row-major, M x G_MAX stride) and the output grouping
// matrix (G_MAX rows of CH_MAX).  The paper names this memory and says it
// keeps all model parameters; the layout and the single read port are this
// design's choices.
//
// Interface: one write port (host loading, `we`), one read port with a
// one-cycle latency like a block RAM: `rdata` shows the word addressed by
// `raddr` in the cycle after `re` was high, and holds until the next read.
module global_parameter_memory
  import lg_pkg::*;
#(
  parameter int unsigned DEPTH = GPM_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp16_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fp16_t         rdata
);
  fp16_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
