// tb_spike_generator: self-checking test of the input spike generator.
//
// A small image (20 pixels) is coded with each method. The testbench keeps
// its own model of the generator: the same 16-bit LFSR for the random start
// phase, the per-pixel phase accumulators of Jittered Periodic, the
// (1 - v) * window emission time of Single Burst and the t_min clamp of
// First Spike. Every pixel handed over is compared with the model, with
// random back-pressure on sp_ready. Also checked: one pixel per clock when
// sp_ready stays high, one spike at most per pixel for the single-spike
// codes, the wait for step_go, the stop input and max_steps.
module tb_spike_generator;
  import snn_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0;
  logic pix_we = 0, start = 0, stop = 0, step_go = 0;
  logic [4:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  coding_e coding = CODE_JITTERED_PERIODIC;
  logic [15:0] f_min = 16'd0, f_max = 16'h4000;
  logic [15:0] t_min = 3, window = 20, max_steps = 24;
  logic sp_valid, sp_spike, sp_ready = 0, busy, done;
  logic [15:0] t_step;
  int checks = 0, failures = 0;
  logic [7:0] img [N];
  int total_spikes [3];

  spike_generator #(.N_IN(N)) dut (.clk, .rst_n, .pix_we, .pix_addr, .pix_data,
    .start, .stop, .step_go, .coding, .f_min, .f_max, .t_min, .window, .max_steps,
    .sp_valid, .sp_spike, .sp_ready, .busy, .done, .t_step);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] lfsr = 16'hACE1;
  function automatic logic [15:0] lfsr_next(logic [15:0] l);
    return {1'b0, l[15:1]} ^ (l[0] ? 16'hB400 : 16'h0000);
  endfunction

  task automatic run_image(coding_e c, int steps, bit full_speed);
    int acc [N];
    bit fired [N], pend [N];
    int nspk [N];
    int t0;
    @(negedge clk);
    coding = c; max_steps = 16'(steps);
    start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < steps; t++) begin
      t0 = $time;
      for (int p = 0; p < N; p++) begin
        int rate, sum, a_prev, sb_t;
        bit carry, f_prev, p_prev, exp;
        // back-pressure
        sp_ready = full_speed ? 1 : ($urandom_range(0, 2) != 0);
        while (!sp_ready) begin
          @(negedge clk);
          sp_ready = ($urandom_range(0, 2) != 0);
        end
        checks++;
        if (!sp_valid || t_step != 16'(t)) begin
          failures++;
          $display("no valid pixel t=%0d p=%0d", t, p);
        end
        a_prev = (t == 0) ? int'(lfsr) : acc[p];
        f_prev = (t == 0) ? 0 : fired[p];
        p_prev = (t == 0) ? 0 : pend[p];
        rate   = int'(f_min) + (int'(f_max - f_min) * int'(img[p])) / 255;
        sum    = a_prev + rate;
        carry  = sum >= 65536;
        acc[p] = sum % 65536;
        sb_t   = ((255 - int'(img[p])) * int'(window)) / 255;
        fired[p] = f_prev; pend[p] = p_prev;
        case (c)
          CODE_SINGLE_BURST: exp = (t == sb_t);
          CODE_FIRST_SPIKE: begin
            exp = !f_prev && (carry || p_prev) && (t >= int'(t_min));
            pend[p]  = !f_prev && (carry || p_prev) && !exp;
            fired[p] = f_prev || exp;
          end
          default: exp = carry;
        endcase
        checks++;
        if (sp_spike !== exp) begin
          failures++;
          if (failures < 10) $display("spike mismatch code=%0d t=%0d p=%0d got %0b", c, t, p, sp_spike);
        end
        if (exp) begin nspk[p]++; total_spikes[c]++; end
        lfsr = lfsr_next(lfsr);
        @(negedge clk);
      end
      sp_ready = 0;
      if (full_speed) begin
        checks++;
        if (($time - t0) != N * 10) begin
          failures++;
          $display("step took %0d cycles, expected %0d", ($time - t0) / 10, N);
        end
      end
      // the generator must wait for step_go
      repeat (3) begin
        checks++;
        if (sp_valid) failures++;
        @(negedge clk);
      end
      step_go = 1;
      @(negedge clk);
      step_go = 0;
    end
    checks++;
    if (!done) begin failures++; $display("not done after max_steps"); end
    if (c != CODE_JITTERED_PERIODIC)
      for (int p = 0; p < N; p++) begin
        checks++;
        if (nspk[p] > 1) failures++;
      end
  endtask

  initial begin
    for (int p = 0; p < N; p++) img[p] = (p % 5 == 0) ? 8'd0 : 8'($urandom_range(0, 255));
    img[1] = 8'd255;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < N; p++) begin
      @(negedge clk); pix_we = 1; pix_addr = 5'(p); pix_data = img[p];
    end
    @(negedge clk); pix_we = 0;
    run_image(CODE_JITTERED_PERIODIC, 24, 1);
    run_image(CODE_JITTERED_PERIODIC, 10, 0);
    run_image(CODE_SINGLE_BURST, 24, 0);
    run_image(CODE_FIRST_SPIKE, 24, 1);
    // stop: processing ends at once
    @(negedge clk); coding = CODE_JITTERED_PERIODIC; max_steps = 100; start = 1;
    @(negedge clk); start = 0; sp_ready = 1;
    repeat (5) begin @(negedge clk); lfsr = lfsr_next(lfsr); end
    stop = 1;
    @(negedge clk);
    checks++;
    if (!done || sp_valid) begin failures++; $display("stop not honoured"); end
    stop = 0;
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (total_spikes[c] == 0) begin failures++; $display("code %0d produced no spike", c); end
    end
    $display("spikes per code: JP=%0d SB=%0d FS=%0d", total_spikes[0], total_spikes[1], total_spikes[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
