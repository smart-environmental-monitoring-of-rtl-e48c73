// tb_tiny_unet_depths -- the accelerator at other depths of the compressed
// U-Net family: B = 1, 3 and 4 blocks per side, all with the channel
// reduction F = 4 (16 channels in the first block, doubling per level) and a
// 16 x 16 radar cube of 9 channels.  Each depth is a separate tiny_unet_top
// driven by unet_scene_check, which compares the whole class map, the run
// time and the layer mix with the golden model; this bench adds up their
// results.  B = 2 is covered by tb_tiny_unet_top and tb_tiny_unet_full.
module tb_tiny_unet_depths;
  int c1, f1, c3, f3, c4, f4;
  bit d1, d3, d4;

  unet_scene_check #(.IMG(16), .NB(1), .F(4)) u_b1 (.checks(c1), .failures(f1), .finished(d1));
  unet_scene_check #(.IMG(16), .NB(3), .F(4)) u_b3 (.checks(c3), .failures(f3), .finished(d3));
  unet_scene_check #(.IMG(16), .NB(4), .F(4)) u_b4 (.checks(c4), .failures(f4), .finished(d4));

  initial begin
    #(64'd500_000_000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c3 + c4, f1 + f3 + f4 + 1);
    $finish;
  end

  initial begin
    wait (d1 && d3 && d4);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c3 + c4, f1 + f3 + f4);
    $finish;
  end
endmodule
