// max_terminate: the Max Terminate class-selection rule.
//
// Combinational, built as in the paper's Max Terminate figure: one MAX
// module returns the largest activation and its index, and a comparator
// raises `stop` when that activation is greater than the reference
// `max_value`. `class_idx` is the index of the largest activation (lowest
// index on a tie, a choice of this implementation).
module max_terminate #(
  parameter int unsigned N  = 10,
  parameter int unsigned CW = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [CW-1:0] act [N],
  input  logic [CW-1:0] max_value,
  output logic [CW-1:0] max_act,
  output logic [IW-1:0] class_idx,
  output logic          stop
);
  max_unit #(.N(N), .CW(CW)) u_max (
    .act(act), .exclude_en(1'b0), .exclude_idx('0),
    .max_val(max_act), .max_idx(class_idx)
  );

  assign stop = (max_act > max_value);
endmodule
