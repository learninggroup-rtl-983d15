// max_index_unit: finds where the largest value of one grouping-matrix
// vector sits.
//
// Weight grouping turns each row of the input grouping matrix IG (M x G) and
// each column of the output grouping matrix OG (G x N) into a one-hot
// selection vector by keeping only its maximum; the encoder only needs the
// position of that maximum (a 4-bit index for G <= 16).  The G values of one
// vector arrive one per cycle, `first` marking the first and `last` the last;
// the unit keeps a running maximum and its position, so one vector takes G
// cycles, which is why the time to find max indexes grows with G.  On ties
// the earliest position wins.  FP16 values are ordered by mapping them to
// unsigned keys (sign bit set: invert all bits; clear: set the sign bit).
//
// Timing: `idx_valid` pulses for one cycle, the cycle after the `last`
// value was accepted, with `idx`.  The streaming order and tie rule are this
// design's choices; the paper only says that the maximum position is found.
module max_index_unit
  import lg_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic          in_first,
  input  logic          in_last,
  input  fp16_t         in_value,
  output logic          idx_valid,
  output logic [GW-1:0] idx
);
  logic [15:0]   best_key, key;
  logic [GW-1:0] best_pos, pos;
  logic          take;

  function automatic logic [15:0] order_key(fp16_t v);
    return v[15] ? ~v : {1'b1, v[14:0]};
  endfunction

  assign key  = order_key(in_value);
  assign take = in_first || (key > best_key);

  always_ff @(posedge clk) begin
    if (rst) begin
      best_key  <= '0;
      best_pos  <= '0;
      pos       <= '0;
      idx_valid <= 1'b0;
      idx       <= '0;
    end else begin
      idx_valid <= 1'b0;
      if (in_valid) begin
        if (take) begin
          best_key <= key;
          best_pos <= in_first ? '0 : pos;
        end
        pos <= in_first ? GW'(1) : pos + GW'(1);
        if (in_last) begin
          idx_valid <= 1'b1;
          idx       <= take ? (in_first ? '0 : pos) : best_pos;
        end
      end
    end
  end
endmodule
