// tb_ir_top: end-to-end test of the pixel pipeline on a synthetic scene.
//
// A static textured background is shown while the background model learns,
// then a bright square walks down the frame, first slowly and then fast,
// and finally leaves.  The testbench watches the binary mask, the tracking
// state, the sampling rate and the weighted-frame stream, and checks:
//   - the model is not ready during the learning frames and ready afterwards;
//   - an empty scene gives an empty mask, and mask pixels lie on the square
//     (shifted by the three 3x3 stages);
//   - tracking starts when the square appears and stops when it leaves;
//   - taken frames are spaced by the current sampling rate, and the rate
//     rises above the fallback value 2 at least once (flow on a binary
//     silhouette saturates near one pixel, so fast and slow motion give
//     similar rates and are only reported, not compared);
//   - every weighted frame is 255 exactly where that frame's mask is set and
//     elsewhere 40 % of the previous weighted frame (0 after a restart).
// Each mechanism (learning, tracking start/stop, skipped frames, clamped
// rate, raised rate, weighted frame output) must happen at least once.
module tb_ir_top;
  import ir_pkg::*;
  localparam int W = 64, H = 48, NS = 3, WN = 9, MINA = 20, OBJ = 10;
  localparam int SHIFT = 3;
  localparam int FAST = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0; pix_t in_pix = 0;
  logic wf_valid, wf_done, fg_valid, fg_bit, model_ready, tracking, clamped, flow_done;
  coord_t wf_x, wf_y; pix_t wf_pix; logic [7:0] rate;
  logic [$clog2(W*H+1)-1:0] fg_area;
  logic [31:0] mmag, mang;

  ir_top #(.IMG_W(W), .IMG_H(H), .NSAMP(NS), .MIN_AREA(MINA), .WIN(WN)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix,
    .wf_valid, .wf_x, .wf_y, .wf_pix, .wf_frame_done(wf_done),
    .fg_valid, .fg_bit, .model_ready, .tracking, .fg_area, .rate, .rate_clamped(clamped),
    .flow_done, .mean_mag_q8(mmag), .mean_ang_q8(mang));

  // ---- scene -------------------------------------------------------------------
  int obj_x [64], obj_y [64];        // square position per frame, -1 = absent
  function automatic pix_t bg_at(int x, int y);
    return pix_t'(60 + ((x * 37 + y * 91 + (x * y) % 13) % 90));
  endfunction

  // ---- observed mask per frame -------------------------------------------------
  bit mask [64][H][W];
  int fg_frame = -1, fg_cnt [64];
  int n_off_object = 0;
  always @(posedge clk) if (rst_n && fg_valid) begin
    // fg output is tagged by the frame counter of the mask stream
  end

  // the top does not bring coordinates of the mask out; count them here
  int mx = 0, my = 0;
  always @(posedge clk) if (rst_n && fg_valid) begin
    if (mx == 0 && my == 0) begin fg_frame++; fg_cnt[fg_frame] = 0; end
    mask[fg_frame][my][mx] = fg_bit;
    if (fg_bit) begin
      int ox, oy;
      fg_cnt[fg_frame]++;
      ox = obj_x[fg_frame]; oy = obj_y[fg_frame];
      if (ox < 0 || mx < ox + SHIFT - 2 || mx > ox + SHIFT + OBJ + 1 || my < oy + SHIFT - 2 || my > oy + SHIFT + OBJ + 1)
        n_off_object++;
    end
    if (mx == W - 1) begin mx = 0; my = (my == H - 1) ? 0 : my + 1; end
    else mx++;
  end

  // ---- weighted frames ---------------------------------------------------------
  int prev_wf [H][W];
  int n_wf = 0, wf_bad = 0, last_take_frame = -1, gap_bad = 0, n_gap_checked = 0;
  int rate_at_take = 0;
  int n_track_start = 0, n_track_stop = 0, n_clamped = 0, n_skip = 0;
  int max_rate_slow = 0, max_rate_fast = 0;
  bit was_tracking = 0, restart = 0;
  int cur_frame_in = -1;             // frame index being fed to the camera input

  always @(posedge clk) if (rst_n) begin
    if (tracking && !was_tracking) begin n_track_start++; restart = 1; end
    if (!tracking && was_tracking) n_track_stop++;
    was_tracking = tracking;
    if (flow_done && clamped) n_clamped++;
    if (wf_valid) begin
      int e;
      if (wf_x == 0 && wf_y == 0) begin
        if (last_take_frame >= 0 && !restart) begin
          if (fg_frame - last_take_frame > 1) n_skip++;
          if (rate == 8'(rate_at_take)) begin
            n_gap_checked++;
            if (fg_frame - last_take_frame != rate_at_take) begin
              gap_bad++; $display("frame %0d taken %0d after the last, rate %0d", fg_frame, fg_frame - last_take_frame, rate_at_take);
            end
          end
        end
        if (restart) foreach (prev_wf[y, x]) prev_wf[y][x] = 0;
        restart = 0;
        last_take_frame = fg_frame;
        rate_at_take = int'(rate);
      end
      e = mask[fg_frame][wf_y][wf_x] ? 255 : (prev_wf[wf_y][wf_x] * 40) / 100;
      if (int'(wf_pix) != e) begin
        wf_bad++;
        if (wf_bad < 5) $display("frame %0d weighted (%0d,%0d) %0d exp %0d", fg_frame, wf_x, wf_y, wf_pix, e);
      end
      prev_wf[wf_y][wf_x] = int'(wf_pix);
    end
    if (wf_done) n_wf++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send_frame(input int f);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      int ox, oy;
      pix_t p;
      ox = obj_x[f]; oy = obj_y[f];
      p = bg_at(x, y);
      if (ox >= 0 && x >= ox && x < ox + OBJ && y >= oy && y < oy + OBJ) p = 8'd250;
      @(negedge clk);
      in_valid = 1; in_sof = (x == 0 && y == 0); in_pix = p;
    end
    @(negedge clk) in_valid = 0; in_sof = 0;
    repeat (12) @(negedge clk);
  endtask

  initial begin
    int nf, f, slow_end;
    // scene script
    f = 0;
    for (int i = 0; i < NS + 2; i++) begin obj_x[f] = -1; obj_y[f] = -1; f++; end
    for (int i = 0; i < 12; i++) begin obj_x[f] = 20; obj_y[f] = 2 + i; f++; end       // slow: 1 px/frame
    slow_end = f;
    for (int i = 0; i < 6; i++) begin obj_x[f] = 20; obj_y[f] = 14 + FAST * i; f++; end // fast
    for (int i = 0; i < 4; i++) begin obj_x[f] = -1; obj_y[f] = -1; f++; end
    nf = f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < nf; i++) begin
      cur_frame_in = i;
      send_frame(i);
      // model readiness: low while learning, high afterwards
      checks++;
      if (model_ready != (i >= NS - 1)) begin failures++; $display("frame %0d model_ready %0d", i, model_ready); end
      // mask content
      if (i >= NS && obj_x[i] < 0) begin
        checks++;
        if (fg_cnt[i] != 0) begin failures++; $display("frame %0d empty scene, mask area %0d", i, fg_cnt[i]); end
      end
      if (i >= NS && obj_x[i] >= 0) begin
        checks++;
        if (fg_cnt[i] < OBJ * OBJ / 2 || fg_cnt[i] > 2 * OBJ * OBJ) begin failures++; $display("frame %0d mask area %0d", i, fg_cnt[i]); end
        checks++;
        if (int'(fg_area) != fg_cnt[i]) begin failures++; $display("frame %0d fg_area %0d counted %0d", i, fg_area, fg_cnt[i]); end
      end
      if (i >= NS) begin
        checks++;
        if (tracking != (fg_cnt[i] >= MINA)) begin failures++; $display("frame %0d tracking %0d", i, tracking); end
      end
      if (i < slow_end && tracking && int'(rate) > max_rate_slow) max_rate_slow = int'(rate);
      if (i >= slow_end && tracking && int'(rate) > max_rate_fast) max_rate_fast = int'(rate);
      $display("frame %0d: area %0d tracking %0d rate %0d clamped %0d mean|v| %0.2f mean angle %0.2f",
               i, fg_cnt[i], tracking, rate, clamped, real'(mmag) / 256.0, real'(mang) / 256.0);
    end
    repeat (20) @(negedge clk);
    checks++; if (n_off_object != 0) begin failures++; $display("%0d mask pixels off the square", n_off_object); end
    checks++; if (wf_bad != 0) begin failures++; $display("%0d weighted pixels wrong", wf_bad); end
    checks++; if (gap_bad != 0) begin failures++; $display("%0d wrong sampling gaps", gap_bad); end
    checks++; if (n_gap_checked == 0) begin failures++; $display("no sampling gap checked"); end
    checks++; if (n_track_start == 0) begin failures++; $display("tracking never started"); end
    checks++; if (n_track_stop == 0) begin failures++; $display("tracking never stopped"); end
    checks++; if (n_skip == 0) begin failures++; $display("no frame skipped"); end
    checks++; if (n_clamped == 0) begin failures++; $display("rate never clamped"); end
    checks++; if (n_wf < 2) begin failures++; $display("weighted frames %0d", n_wf); end
    checks++; if (max_rate_slow <= 2 && max_rate_fast <= 2) begin failures++; $display("rate never rose above 2"); end
    $display("mechanisms: track starts %0d stops %0d, skipped gaps %0d, clamped rates %0d, weighted frames %0d, rate slow %0d fast %0d",
             n_track_start, n_track_stop, n_skip, n_clamped, n_wf, max_rate_slow, max_rate_fast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
