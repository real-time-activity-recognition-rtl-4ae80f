// tb_adaptive_sampler: checks the sampling rate of Eq. (2) for random flow
// sums against a real-number computation, the fall-back to 2 for an empty
// frame, for S = 0 and for S above S_MAX, and the frame selection: after
// track_start the next frame is taken, then every S-th frame.
module tb_adaptive_sampler;
  import ir_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_clamped = 0;

  logic flow_done = 0, tracking = 0, track_start = 0, frame_start = 0;
  logic [47:0] smag = 0, sang = 0; logic [31:0] cnt = 0;
  logic take, clamped; logic [7:0] rate; logic [31:0] mm, ma;

  adaptive_sampler #(.S_LOW(2), .S_MAX(255)) dut (.clk, .rst_n, .flow_done, .sum_mag_q8(smag),
    .sum_ang_q8(sang), .count(cnt), .tracking, .track_start, .frame_start,
    .take, .rate, .rate_clamped(clamped), .mean_mag_q8(mm), .mean_ang_q8(ma));

  task automatic give(input longint m_sum, input longint a_sum, input int n, output int exp_rate);
    longint m, a; real s; int si;
    @(negedge clk);
    smag = 48'(m_sum); sang = 48'(a_sum); cnt = 32'(n); flow_done = 1;
    @(negedge clk) flow_done = 0;
    if (n == 0) exp_rate = 2;
    else begin
      m = m_sum / n; a = a_sum / n;
      s = $sqrt(real'(m) * real'(m) + real'(a) * real'(a));
      si = (int'($floor(s)) + 128) / 256;
      exp_rate = (si == 0 || si > 255) ? 2 : si;
    end
    checks++;
    if (rate != 8'(exp_rate)) begin failures++; $display("sums %0d %0d n=%0d: rate %0d exp %0d", m_sum, a_sum, n, rate, exp_rate); end
    if (clamped) n_clamped++;
  endtask

  task automatic frame(output bit took);
    @(negedge clk);
    took = take;
    frame_start = 1;
    @(negedge clk) frame_start = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int r; bit t;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rate computation
    give(0, 0, 0, r);                        // empty frame
    give(0, 0, 100, r);                      // no motion: S = 0
    give(longint'(300) * 256 * 10, 0, 10, r);// S = 300 > S_MAX
    checks++;
    if (n_clamped != 3) begin failures++; $display("clamp flag count %0d", n_clamped); end
    for (int i = 0; i < 40; i++) begin
      int n;
      longint ms, as;
      n  = 1 + int'($urandom_range(0, 5000));
      ms = longint'(n) * longint'($urandom_range(0, 8 * 256)) + longint'($urandom_range(0, n - 1));
      as = longint'(n) * longint'($urandom_range(0, 1608));
      give(ms, as, n, r);
    end
    // frame selection for several rates
    for (int k = 0; k < 4; k++) begin
      int want;
      want = 2 + k * 2;                      // 2, 4, 6, 8
      give(longint'(want) * 256 * 7, 0, 7, r);
      checks++;
      if (r != want) begin failures++; $display("setup rate %0d", r); end
      @(negedge clk) tracking = 1; track_start = 1;
      @(negedge clk) track_start = 0;
      for (int f = 0; f < 3 * want; f++) begin
        frame(t);
        checks++;
        if (t != (f % want == 0)) begin failures++; $display("rate %0d frame %0d take %0d", want, f, t); end
      end
      @(negedge clk) tracking = 0;
      frame(t);
      checks++;
      if (t) begin failures++; $display("frame taken while not tracking"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
