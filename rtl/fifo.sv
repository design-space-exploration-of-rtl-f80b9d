// fifo: first-in first-out buffer of spike events (neuron addresses).
//
// Events are stored in arrival order and read back in the same order. The
// ports are those of the paper's FiFo figure: clock, reset, read enable,
// write enable, in data, out data, empty and full. The read side is
// first-word-fall-through (a choice of this implementation): while `empty`
// is low, `out_data` already shows the oldest event and `rd_en` removes it
// at the next clock edge. A write when full and a read when empty are
// ignored; the assertions flag them as protocol errors. Storage is a
// register array of DEPTH words with wrap-around pointers.
module fifo #(
  parameter int unsigned WIDTH = 9,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] in_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] out_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      level
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign empty    = (level == '0);
  assign full     = (level == (AW+1)'(DEPTH));
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_en && !empty;
  assign out_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + AW'(1);
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + AW'(1);
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
