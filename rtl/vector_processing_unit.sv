// vector_processing_unit: one lane of a LearningGroup core.
//
// The core broadcasts four activations (one per weight-matrix row handled in
// the current time stamp) and gives every VPU its own weight.  A 2-bit
// select picks one of the four activations through a 4-to-1 multiplexer;
// the FP16 multiplier forms weight x activation and the FP16 adder adds the
// product into one of four independent accumulation registers, the one of
// the same select.  This structure (one multiplier, one adder, 4:1 mux, four
// accumulators) is the published one.
//
// Timing: when `en` is high the selected accumulator is updated at the next
// rising clock edge.  `clr` together with `en` starts a new accumulation:
// all four registers are cleared and the selected one is loaded with the
// product alone.  `acc` shows the four registers.  Synchronous active-high reset clears the registers.
module vector_processing_unit
  import lg_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        clr,
  input  logic [1:0]  sel,
  input  fp16_t       weight,
  input  fp16_t       act [4],
  output fp16_t       acc [4]
);
  fp16_t a_mux, prod, base, sum;

  assign a_mux   = act[sel];
  assign base    = clr ? 16'h0000 : acc[sel];

  fp16_mul u_mul (.a(weight), .b(a_mux), .y(prod));
  fp16_add u_add (.a(base),   .b(prod),  .y(sum));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 4; i++) acc[i] <= '0;
    end else if (en) begin
      if (clr)
        for (int i = 0; i < 4; i++) acc[i] <= '0;
      acc[sel] <= sum;
    end
  end
endmodule
