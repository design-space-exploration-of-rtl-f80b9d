// weight_sdram_model: behavioural model of the external weight SDRAM.
//
// Not synthesizable design: a stand-in for the off-chip memory that holds
// the weights of the time-multiplexed layers, for simulation only. It has a
// load port (we/waddr/wdata) that a testbench uses to fill it, and the read
// port the network controller drives: a request (req, addr) is accepted
// when `ready` is high, and `rvalid` with `rdata` follow LATENCY clocks
// later. One read is served at a time; `ready` is low while it is in
// flight and, when STALL_PCT > 0, randomly on top of that, to imitate
// refresh and row-change stalls. No timing of a real SDRAM device (banks,
// refresh, CAS latency) is modelled.
module weight_sdram_model
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH     = 1 << 18,
  parameter int unsigned ADDR_W    = 24,
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  weight_t           wdata,
  input  logic              req,
  input  logic [ADDR_W-1:0] addr,
  output logic              ready,
  output logic              rvalid,
  output weight_t           rdata
);
  weight_t mem [DEPTH];
  int unsigned countdown;
  logic [ADDR_W-1:0] addr_q;
  logic stall;

  assign ready = rst_n && (countdown == 0) && !stall;

  always @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    stall <= (STALL_PCT != 0) && ($urandom_range(0, 99) < STALL_PCT);
    rvalid <= 1'b0;
    if (!rst_n) begin
      countdown <= 0;
    end else begin
      if (countdown > 0) begin
        countdown <= countdown - 1;
        if (countdown == 1) begin
          rvalid <= 1'b1;
          rdata  <= mem[addr_q];
        end
      end
      if (req && ready) begin
        addr_q    <= addr;
        countdown <= LATENCY;
      end
    end
  end
endmodule
