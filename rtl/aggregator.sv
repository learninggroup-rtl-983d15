// aggregator: combines the cores' partial sums into the layer output and
// keeps the activation vector of the layer being computed.
//
// Every partial sum arriving from a core's output buffer carries a group
// index g and a position k; the output column it belongs to is the k-th
// non-zero index of g's tuple in the sparse row memory (read through the
// memory's second non-zero port).  The aggregator picks one core per cycle
// round-robin, looks the column up and adds the value into the output
// vector with an FP16 adder (read-modify-write in one cycle, so back-to-back
// sums to the same column are safe).  The activation memory holds the input
// vector that the load allocation unit hands out; `commit` copies the
// finished output vector into it so that it becomes the next layer's input,
// as the paper describes the aggregator sending its result back for the
// next layer's allocation.  The paper names the aggregator and its role;
// the one-sum-per-cycle rate, the arbitration and the lack of an activation
// function (none is described) are this design's choices.
//
// Interface: `clr_out` zeroes the output vector; `commit` copies it to the
// activation memory; `act_we` writes the activation memory from the host;
// `out_addr`/`out_data` and `act_addr`/`act_data` are combinational reads.
module aggregator
  import lg_pkg::*;
#(
  parameter int unsigned C = NUM_CORES
) (
  input  logic            clk,
  input  logic            rst,
  input  mode_e           mode,
  input  logic            clr_out,
  input  logic            commit,
  // partial sums from the cores
  input  logic            ps_valid [C],
  input  psum_t           ps       [C],
  output logic            ps_ready [C],
  // sparse row memory lookup
  output mode_e           srm_mode,
  output logic [GW-1:0]   srm_grp,
  output logic [CHW-1:0]  srm_k,
  input  logic [CHW-1:0]  srm_nz,
  // activation memory
  input  logic            act_we,
  input  logic [CHW-1:0]  act_waddr,
  input  fp16_t           act_wdata,
  input  logic [CHW-1:0]  act_addr,
  output fp16_t           act_data,
  // output vector
  input  logic [CHW-1:0]  out_addr,
  output fp16_t           out_data,
  output logic            idle,
  output logic [31:0]     n_psums
);
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;

  fp16_t out_mem [CH_MAX];
  fp16_t act_mem [CH_MAX];
  logic [CW-1:0] rr, pick;
  logic          any;
  fp16_t         sum;

  always_comb begin
    pick = rr;
    any  = 1'b0;
    for (int i = C - 1; i >= 0; i--) begin
      logic [CW-1:0] c;
      c = CW'((32'(rr) + 32'(i)) % C);
      if (ps_valid[c]) begin
        pick = c;
        any  = 1'b1;
      end
    end
    for (int i = 0; i < C; i++) ps_ready[i] = any && (pick == CW'(i));
  end

  assign srm_mode = mode;
  assign srm_grp  = ps[pick].grp;
  assign srm_k    = ps[pick].k;
  assign idle     = !any;

  fp16_add u_add (.a(out_mem[srm_nz]), .b(ps[pick].val), .y(sum));

  always_ff @(posedge clk) begin
    if (rst) begin
      rr      <= '0;
      n_psums <= '0;
    end else if (any) begin
      rr      <= CW'((32'(pick) + 1) % C);
      n_psums <= n_psums + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (clr_out) begin
      for (int i = 0; i < CH_MAX; i++) out_mem[i] <= '0;
    end else if (any) begin
      out_mem[srm_nz] <= sum;
    end
  end

  always_ff @(posedge clk) begin
    if (commit) begin
      for (int i = 0; i < CH_MAX; i++) act_mem[i] <= out_mem[i];
    end else if (act_we) begin
      act_mem[act_waddr] <= act_wdata;
    end
  end

  assign act_data = act_mem[act_addr];
  assign out_data = out_mem[out_addr];
endmodule
