// tb_weighted_accumulator: random binary frames, each taken or skipped at
// random, with clear pulses in between.  Every output pixel is compared with
// a reference image updated as acc = min(255, acc*40/100 + 255*mask); skipped
// frames must give no output and leave the image unchanged; frame_done must
// pulse once, with the last pixel, for each taken frame.
module tb_weighted_accumulator;
  import ir_pkg::*;
  localparam int W = 6, H = 4, BETA = 40, NF = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_mask = 0, take = 0, clear = 0; coord_t in_x = 0, in_y = 0;
  logic ov, fdone; coord_t ox, oy; pix_t op;

  weighted_accumulator #(.IMG_W(W), .IMG_H(H), .BETA_PCT(BETA)) dut (.clk, .rst_n, .in_valid, .in_x, .in_y,
    .in_mask, .take, .clear, .out_valid(ov), .out_x(ox), .out_y(oy), .out_pix(op), .frame_done(fdone));

  int acc [H][W];
  int n_taken = 0, n_done = 0, n_cleared = 0;
  always @(posedge clk) if (rst_n && fdone) n_done++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit tk, cl;
    foreach (acc[y, x]) acc[y][x] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      tk = (f < 4) || ($urandom_range(0, 2) != 0);
      cl = (f == 7) || (f == 11);
      if (cl) begin
        @(negedge clk) clear = 1;
        @(negedge clk) clear = 0;
        n_cleared++;
      end
      if (tk && cl) foreach (acc[y, x]) acc[y][x] = 0;
      if (tk) n_taken++;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        bit m;
        int e;
        m = ($urandom_range(0, 3) == 0);
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_mask = m;
        take = (x == 0 && y == 0) ? tk : 1'($urandom);   // take only matters at (0,0)
        e = m ? 255 : (acc[y][x] * BETA) / 100;
        if (tk) acc[y][x] = e;
        @(posedge clk); #1;
        checks++;
        if (ov != tk) begin failures++; $display("f%0d out_valid %0d", f, ov); end
        else if (tk && (op != pix_t'(e) || ox != coord_t'(x) || oy != coord_t'(y))) begin
          failures++; $display("f%0d (%0d,%0d) got %0d exp %0d", f, x, y, op, e);
        end
      end
      @(negedge clk) in_valid = 0;
      // a clear before a skipped frame stays pending until the next taken one
      if (cl && !tk) begin
        f++;
        @(negedge clk);
        foreach (acc[y, x]) acc[y][x] = 0;
        n_taken++;
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_mask = 0; take = 1;
          @(posedge clk); #1;
          checks++;
          if (!ov || op != 0) begin failures++; $display("pending clear not applied"); end
        end
        @(negedge clk) in_valid = 0;
      end
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_done != n_taken) begin failures++; $display("frame_done %0d taken %0d", n_done, n_taken); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
