// tb_ir_workloads: runs the whole pipeline with the settings tuned for each
// evaluated action dataset, three ir_top instances side by side:
//   - KTH:      160x120 frames, beta 40 %, flow frame distance D = 2
//   - Weizmann: 180x144 frames, beta 80 %, D = 2
//   - HMDB-51:  320x240 frames, beta 20 %, D = 4
// The beta and D values are the best ones of the evaluation on each dataset;
// the frame sizes are the usual sizes of those datasets' videos.  Each run
// (ir_scene_run) plays a synthetic scene with a moving square scaled to the
// frame and checks masks, tracking, sampling and every weighted pixel.  The
// testbench adds up the checks once all three are done.
module tb_ir_workloads;
  logic done_kth, done_wz, done_hmdb;
  int   chk_kth, chk_wz, chk_hmdb, fail_kth, fail_wz, fail_hmdb;

  ir_scene_run #(.W(160), .H(120), .OBJ(20), .BETA_PCT(40), .D(2)) u_kth (
    .done(done_kth), .checks(chk_kth), .failures(fail_kth));
  ir_scene_run #(.W(180), .H(144), .OBJ(24), .BETA_PCT(80), .D(2)) u_wz (
    .done(done_wz), .checks(chk_wz), .failures(fail_wz));
  ir_scene_run #(.W(320), .H(240), .OBJ(40), .BETA_PCT(20), .D(4)) u_hmdb (
    .done(done_hmdb), .checks(chk_hmdb), .failures(fail_hmdb));

  initial begin
    fork
      begin
        wait (done_kth && done_wz && done_hmdb);
        $display("KTH      checks %0d failures %0d", chk_kth, fail_kth);
        $display("Weizmann checks %0d failures %0d", chk_wz, fail_wz);
        $display("HMDB-51  checks %0d failures %0d", chk_hmdb, fail_hmdb);
        $display("TB_RESULT checks=%0d failures=%0d",
                 chk_kth + chk_wz + chk_hmdb, fail_kth + fail_wz + fail_hmdb);
      end
      begin
        repeat (6000000) #10;   // 6 M clock periods of the runs (period 10)
        $display("watchdog");
        $display("TB_RESULT checks=%0d failures=%0d",
                 chk_kth + chk_wz + chk_hmdb, fail_kth + fail_wz + fail_hmdb + 1);
      end
    join_any
    $finish;
  end
endmodule
