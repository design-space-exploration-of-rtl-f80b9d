// network_controller: shares the external weight SDRAM between the NPUs.
//
// Each NPU k raises req_valid[k] with a local weight address. The controller
// adds that NPU's region base BASE[k] and puts {k, address} into a request
// queue (a FIFO), so requests are served first come, first served. When two
// NPUs ask in the same clock, the lower index is queued first and the other
// keeps its request up (its req_ready stays low) until the next clock. The
// head of the queue is sent to the memory; when its data comes back, a
// demultiplexer steered by the stored NPU number ("Sel NPU") raises
// w_valid for that NPU only. One memory read is in flight at a time.
//
// Follows the paper: FIFO queue, first-come-first-served order, DEMUX to the
// requesting NPU. This implementation's choices: the request and memory
// handshakes, the base-address table, the fixed priority inside one clock
// and the single outstanding memory read.
//
// Memory side: mem_req/mem_addr held until mem_ready; mem_rvalid with
// mem_rdata any number of clocks later.
module network_controller
  import snn_pkg::*;
#(
  parameter int unsigned N_NPU       = 3,
  parameter int unsigned LAW         = 17,
  parameter int unsigned ADDR_W      = 24,
  parameter int unsigned QUEUE_DEPTH = 4,
  parameter int unsigned BASE [N_NPU] = '{default: 0},
  localparam int unsigned IDW = (N_NPU > 1) ? $clog2(N_NPU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // NPU side
  input  logic              req_valid [N_NPU],
  input  logic [LAW-1:0]    req_addr  [N_NPU],
  output logic              req_ready [N_NPU],
  output logic              w_valid   [N_NPU],
  output weight_t           w_data,
  // SDRAM side
  output logic              mem_req,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic              mem_ready,
  input  logic              mem_rvalid,
  input  weight_t           mem_rdata,
  // status
  output logic              idle
);
  typedef struct packed {
    logic [IDW-1:0]    npu;
    logic [ADDR_W-1:0] addr;
  } request_t;

  request_t       q_in, q_out;
  logic           q_wr, q_rd, q_empty, q_full, any_req, waiting;
  logic [IDW-1:0] grant, sel;
  logic [$clog2(QUEUE_DEPTH):0] q_level_unused;

  // one requester per clock, lowest index first
  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int k = N_NPU - 1; k >= 0; k--) begin
      if (req_valid[k]) begin
        any_req = 1'b1;
        grant   = IDW'(k);
      end
    end
    for (int k = 0; k < N_NPU; k++)
      req_ready[k] = any_req && !q_full && (grant == IDW'(k));
    q_in.npu  = grant;
    q_in.addr = ADDR_W'(BASE[grant]) + ADDR_W'(req_addr[grant]);
    q_wr      = any_req && !q_full;
  end

  fifo #(.WIDTH($bits(request_t)), .DEPTH(QUEUE_DEPTH)) u_queue (
    .clk(clk), .rst_n(rst_n), .wr_en(q_wr), .in_data(q_in),
    .rd_en(q_rd), .out_data(q_out), .empty(q_empty), .full(q_full),
    .level(q_level_unused)
  );

  assign mem_req  = !waiting && !q_empty;
  assign mem_addr = q_out.addr;
  assign q_rd     = mem_req && mem_ready;
  assign w_data   = mem_rdata;
  assign idle     = !waiting && q_empty;

  // DEMUX
  always_comb begin
    for (int k = 0; k < N_NPU; k++)
      w_valid[k] = waiting && mem_rvalid && (sel == IDW'(k));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      sel     <= '0;
    end else if (q_rd) begin
      waiting <= 1'b1;
      sel     <= q_out.npu;
    end else if (waiting && mem_rvalid) begin
      waiting <= 1'b0;
    end
  end

  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid |-> waiting);
endmodule
