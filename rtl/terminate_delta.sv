// terminate_delta: the Terminate Delta class-selection rule.
//
// Combinational, built as in the paper's Terminate Delta figure: a MAX1
// module finds the largest activation (spike count of an output neuron) and
// its index, a MAX2 module finds the largest activation among the others,
// a subtractor forms max1 - max2 and a comparator raises `stop` when that
// difference is greater than the reference `delta`. `class_idx` is MAX1's
// index. Ties resolve to the lowest index (this implementation's choice).
module terminate_delta #(
  parameter int unsigned N  = 10,
  parameter int unsigned CW = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [CW-1:0] act [N],
  input  logic [CW-1:0] delta,
  output logic [CW-1:0] max1,
  output logic [CW-1:0] max2,
  output logic [IW-1:0] class_idx,
  output logic          stop
);
  logic [IW-1:0] idx2_unused;

  max_unit #(.N(N), .CW(CW)) u_max1 (
    .act(act), .exclude_en(1'b0), .exclude_idx('0),
    .max_val(max1), .max_idx(class_idx)
  );

  max_unit #(.N(N), .CW(CW)) u_max2 (
    .act(act), .exclude_en(1'b1), .exclude_idx(class_idx),
    .max_val(max2), .max_idx(idx2_unused)
  );

  // max1 >= max2 always holds, so the difference cannot go negative.
  assign stop = (CW'(max1 - max2) > delta);
endmodule
