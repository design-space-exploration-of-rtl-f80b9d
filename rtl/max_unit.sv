// max_unit: largest entry of an activation vector and its index.
//
// Combinational. Scans the N entries in ascending index order and keeps an
// entry only when it is strictly greater than the best so far, so on a tie
// the lowest index wins (tie rule chosen by this implementation). With
// `exclude_en` high the entry at `exclude_idx` is skipped; this turns the
// same block into the "Max2" sub-module of Terminate Delta, which looks for
// the second largest activation once Max1's index is known.
module max_unit #(
  parameter int unsigned N  = 10,
  parameter int unsigned CW = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [CW-1:0] act [N],
  input  logic          exclude_en,
  input  logic [IW-1:0] exclude_idx,
  output logic [CW-1:0] max_val,
  output logic [IW-1:0] max_idx
);
  always_comb begin
    max_val = '0;
    max_idx = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (!(exclude_en && exclude_idx == IW'(i)) && act[i] > max_val) begin
        max_val = act[i];
        max_idx = IW'(i);
      end
    end
  end
endmodule
