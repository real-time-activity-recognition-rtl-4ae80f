// tb_motion_tracker: feeds frames with chosen numbers of foreground pixels at
// random places and checks the area count, the tracking level and the
// one-clock track_start pulse after each frame, against MIN_AREA = 5.
module tb_motion_tracker;
  import ir_pkg::*;
  localparam int W = 8, H = 4, MIN_A = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int starts_seen = 0;

  logic in_valid = 0, in_fg = 0; coord_t in_x = 0, in_y = 0;
  logic tracking, track_start;
  logic [$clog2(W*H+1)-1:0] area;

  motion_tracker #(.IMG_W(W), .IMG_H(H), .MIN_AREA(MIN_A)) dut (
    .clk, .rst_n, .in_valid, .in_x, .in_y, .in_fg, .tracking, .track_start, .area);

  always @(posedge clk) if (rst_n && track_start) starts_seen++;

  int counts [8] = '{0, 3, 5, 12, 2, 0, 6, 32};

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit was_tracking = 0;
    bit mask [W*H];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      int placed, idx;
      foreach (mask[i]) mask[i] = 0;
      placed = 0;
      while (placed < counts[f]) begin
        idx = int'($urandom_range(0, W*H-1));
        if (!mask[idx]) begin mask[idx] = 1; placed++; end
      end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_fg = mask[y*W + x];
      end
      @(negedge clk) in_valid = 0; in_fg = 0;
      // the result is registered on the clock of the last pixel
      checks++;
      if (area != counts[f]) begin failures++; $display("f%0d area %0d exp %0d", f, area, counts[f]); end
      checks++;
      if (tracking != (counts[f] >= MIN_A)) begin failures++; $display("f%0d tracking %0d", f, tracking); end
      checks++;
      if (track_start != ((counts[f] >= MIN_A) && !was_tracking)) begin failures++; $display("f%0d start %0d", f, track_start); end
      was_tracking = (counts[f] >= MIN_A);
      @(negedge clk);
      checks++;
      if (track_start) begin failures++; $display("start pulse longer than one clock"); end
    end
    checks++;
    if (starts_seen != 2) begin failures++; $display("starts %0d", starts_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
