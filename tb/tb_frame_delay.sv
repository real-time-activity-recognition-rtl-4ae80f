// tb_frame_delay: streams random binary frames through a 3-frame delay and
// checks that each output pixel carries the current bit and the bit of the
// same pixel three frames earlier, that out_prev_ok rises only after three
// frames are stored, and that the latency is 1 clock.
module tb_frame_delay;
  import ir_pkg::*;
  localparam int W = 5, H = 3, D = 3, NF = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_bit = 0; coord_t in_x = 0, in_y = 0;
  logic ov, ocur, oprev, ook; coord_t ox, oy;
  bit frames [NF][H][W];

  frame_delay #(.IMG_W(W), .IMG_H(H), .D(D)) dut (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_bit,
    .out_valid(ov), .out_x(ox), .out_y(oy), .out_cur(ocur), .out_prev(oprev), .out_prev_ok(ook));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (frames[f, y, x]) frames[f][y][x] = 1'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_bit = frames[f][y][x];
        @(posedge clk); #1;
        checks++;
        if (!ov || ox != coord_t'(x) || oy != coord_t'(y) || ocur != frames[f][y][x]) begin
          failures++; $display("f%0d (%0d,%0d) current bit wrong", f, x, y);
        end
        checks++;
        if (ook != (f >= D)) begin failures++; $display("f%0d prev_ok %0d", f, ook); end
        if (f >= D) begin
          checks++;
          if (oprev != frames[f-D][y][x]) begin failures++; $display("f%0d (%0d,%0d) prev %0d exp %0d", f, x, y, oprev, frames[f-D][y][x]); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
