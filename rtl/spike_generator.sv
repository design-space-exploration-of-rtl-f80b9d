// spike_generator: transcodes an image into input spikes, time step by time
// step, and forwards them pixel by pixel (the "input neuron").
//
// The image (N_IN pixels of PIX_W bits, intensity v = pixel / (2^PIX_W-1))
// is written through the pixel port before `start`. Processing runs in time
// steps. In each step the generator visits pixels 0 .. N_IN-1 in order and
// presents one pixel per handshake on (sp_valid, sp_spike, sp_ready):
// sp_spike says whether that pixel's input neuron spikes in this step. The
// receiving neural core counts the pixels itself, so the pixel index is
// implicit. After the last pixel the generator waits for `step_go` (the
// whole network has drained) before it starts the next step. It stops when
// `stop` (decision of the winner class selection) is seen or after
// `max_steps` steps, and then raises `done`.
//
// Coding methods (`coding`):
//  * Jittered Periodic: each pixel owns a 16-bit phase accumulator that is
//    advanced by its rate r(v) = f_min + v*(f_max - f_min) spikes per step
//    (f_min, f_max are fractions of 2^16); a carry out is a spike. This is
//    the frequency of the paper's period equation. The jitter is a random
//    starting phase drawn from an LFSR at step 0 (the paper only says a
//    random factor is applied to emission times).
//  * Single Burst: one spike at step t = (1 - v) * window.
//  * First Spike: one spike at the first carry of the jittered accumulator
//    (a random time within the first period), but never before step t_min.
//    The paper draws the delay from a normal then a uniform distribution;
//    the random starting phase is this implementation's simpler stand-in.
// Spike Select uses Jittered Periodic input; its filter is the raised
// threshold of the first hidden layer, set outside this block.
//
// Timing: one pixel per clock while sp_ready is high; a step of N_IN pixels
// takes at least N_IN clocks.
module spike_generator
  import snn_pkg::*;
#(
  parameter int unsigned N_IN  = 784,
  parameter int unsigned PIX_W = 8,
  parameter int unsigned T_W   = 16,
  localparam int unsigned AW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // image load
  input  logic             pix_we,
  input  logic [AW-1:0]    pix_addr,
  input  logic [PIX_W-1:0] pix_data,
  // control
  input  logic             start,
  input  logic             stop,
  input  logic             step_go,
  input  coding_e          coding,
  input  logic [15:0]      f_min,
  input  logic [15:0]      f_max,
  input  logic [T_W-1:0]   t_min,
  input  logic [T_W-1:0]   window,
  input  logic [T_W-1:0]   max_steps,
  // spike stream to the neural core
  output logic             sp_valid,
  output logic             sp_spike,
  input  logic             sp_ready,
  // status
  output logic             busy,
  output logic             done,
  output logic [T_W-1:0]   t_step
);
  localparam logic [PIX_W-1:0] PIX_MAX = '1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT, S_DONE} state_e;
  state_e state;

  logic [PIX_W-1:0] pixel   [N_IN];
  logic [15:0]      acc     [N_IN];
  logic             fired   [N_IN];
  logic             pending [N_IN];

  logic [AW-1:0] p;
  logic [15:0]   lfsr;

  // per-pixel step computation
  logic [PIX_W-1:0] pix;
  logic [15:0]      acc_prev, rate, acc_new;
  logic [16:0]      sum;
  logic             carry, fired_prev, pend_prev, fired_new, pend_new;
  logic [T_W-1:0]   sb_time;
  logic             spike;

  always_comb begin
    pix        = pixel[p];
    acc_prev   = (t_step == '0) ? lfsr : acc[p];
    fired_prev = (t_step == '0) ? 1'b0 : fired[p];
    pend_prev  = (t_step == '0) ? 1'b0 : pending[p];
    rate       = f_min + 16'((32'(f_max - f_min) * 32'(pix)) / 32'(PIX_MAX));
    sum        = {1'b0, acc_prev} + {1'b0, rate};
    carry      = sum[16];
    acc_new    = sum[15:0];
    sb_time    = T_W'((32'(PIX_MAX - pix) * 32'(window)) / 32'(PIX_MAX));
    fired_new  = fired_prev;
    pend_new   = pend_prev;
    unique case (coding)
      CODE_SINGLE_BURST: spike = (t_step == sb_time);
      CODE_FIRST_SPIKE: begin
        spike     = !fired_prev && (carry || pend_prev) && (t_step >= t_min);
        pend_new  = !fired_prev && (carry || pend_prev) && !spike;
        fired_new = fired_prev || spike;
      end
      default:           spike = carry;
    endcase
  end

  assign sp_valid = (state == S_RUN) && !stop;
  assign sp_spike = spike;
  assign busy     = (state == S_RUN) || (state == S_WAIT);
  assign done     = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (pix_we) pixel[pix_addr] <= pix_data;
    if (state == S_RUN && sp_ready && !stop) begin
      acc[p]     <= acc_new;
      fired[p]   <= fired_new;
      pending[p] <= pend_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      p      <= '0;
      t_step <= '0;
      lfsr   <= 16'hACE1;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state  <= S_RUN;
          p      <= '0;
          t_step <= '0;
        end
        S_RUN: begin
          if (stop) state <= S_DONE;
          else if (sp_ready) begin
            // 16-bit Galois LFSR, taps 16,14,13,11
            lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
            if (p == AW'(N_IN - 1)) begin
              p     <= '0;
              state <= S_WAIT;
            end else begin
              p <= p + AW'(1);
            end
          end
        end
        S_WAIT: begin
          if (stop) state <= S_DONE;
          else if (step_go) begin
            if (t_step + T_W'(1) >= max_steps) state <= S_DONE;
            else begin
              t_step <= t_step + T_W'(1);
              state  <= S_RUN;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
