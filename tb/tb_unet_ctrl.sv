// tb_unet_ctrl -- the sequencer driven by a stand-in engine that takes a
// random number of cycles per layer.  Checks, for the main configuration
// (128x128x9 input, NB = 2, 16 base channels, 11 classes):
//   - the layer list: kind, output size and channel counts of all 15 layers,
//     written out by hand from the network structure (the 9 input channels
//     are stored padded to 16 for 8 input channels per cycle);
//   - the data flow: each layer reads what the previous one wrote, decoder
//     concatenations read the right skip tensor, and no layer overwrites a
//     skip tensor before its decoder block has used it;
//   - one engine start per layer, a new start only after the engine's done,
//     and a single `done` at the end.
module tb_unet_ctrl;
  import unet_pkg::*;
  localparam int NL = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, eng_start, eng_done = 0;
  layer_t cfg;
  logic [7:0] layer;
  int checks = 0, failures = 0;

  unet_ctrl dut (.*);

  op_e exp_op [NL] = '{OP_CONV3, OP_CONV3, OP_POOL, OP_CONV3, OP_CONV3, OP_POOL, OP_CONV3,
                       OP_CONV3, OP_TCONV2, OP_CONV3, OP_CONV3, OP_TCONV2, OP_CONV3, OP_CONV3,
                       OP_CONV1};
  int exp_h    [NL] = '{128, 128, 64, 64, 64, 32, 32, 32, 64, 64, 64, 128, 128, 128, 128};
  int exp_cina [NL] = '{16, 16, 16, 16, 32, 32, 32, 64, 64, 32, 32, 32, 16, 16, 16};
  int exp_cinb [NL] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 32, 0, 0, 16, 0, 0};
  int exp_cout [NL] = '{16, 16, 16, 32, 32, 32, 64, 64, 32, 32, 32, 16, 16, 16, 11};
  int exp_relu [NL] = '{1, 1, 0, 1, 1, 0, 1, 1, 0, 1, 1, 0, 1, 1, 0};

  layer_t seen [NL];
  int n_start = 0, n_done = 0;
  bit eng_busy = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stand-in engine
  always @(posedge clk) begin
    if (rst_n && eng_start) begin
      if (eng_busy) begin failures++; $display("FAIL: start while engine busy"); end
      if (n_start < NL) seen[n_start] = cfg;
      n_start++;
      eng_busy = 1;
      fork begin
        repeat ($urandom_range(20, 1)) @(negedge clk);
        eng_done = 1;
        @(negedge clk);
        eng_done = 0;
        eng_busy = 0;
      end join_none
    end
    if (rst_n && done) n_done++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bytes_of(int h, int c);
    return h * h * c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (n_done == 1);
    repeat (30) @(negedge clk);
    check(n_start == NL, $sformatf("%0d engine starts, expected %0d", n_start, NL));
    check(n_done == 1, "one done pulse");
    check(!busy, "idle at the end");
    for (int i = 0; i < NL; i++) begin
      check(seen[i].op == exp_op[i], $sformatf("layer %0d kind", i));
      check(int'(seen[i].h) == exp_h[i] && int'(seen[i].w) == exp_h[i], $sformatf("layer %0d size", i));
      check(int'(seen[i].cin_a) == exp_cina[i] && int'(seen[i].cin_b) == exp_cinb[i],
            $sformatf("layer %0d input channels %0d+%0d", i, seen[i].cin_a, seen[i].cin_b));
      check(int'(seen[i].cout) == exp_cout[i], $sformatf("layer %0d output channels", i));
      check(int'(seen[i].relu) == exp_relu[i], $sformatf("layer %0d relu", i));
      check(seen[i].argmax == (i == NL - 1), $sformatf("layer %0d argmax flag", i));
    end
    // data flow
    for (int i = 1; i < NL; i++) begin
      if (exp_cinb[i] != 0) check(seen[i].src_b == seen[i-1].dst, $sformatf("layer %0d reads upsampled", i));
      else                  check(seen[i].src_a == seen[i-1].dst, $sformatf("layer %0d reads previous", i));
    end
    check(seen[9].src_a == seen[4].dst, "level-1 skip tensor feeds decoder 1");
    check(seen[12].src_a == seen[1].dst, "level-0 skip tensor feeds decoder 0");
    // the skip tensors stay intact until used
    for (int i = 2; i < 12; i++) begin
      int lo, hi, s0, s1;
      lo = int'(seen[i].dst); hi = lo + bytes_of(int'(seen[i].h), int'(seen[i].cout));
      s0 = int'(seen[1].dst);
      check(hi <= s0 || lo >= s0 + bytes_of(128, 16), $sformatf("layer %0d spares skip 0", i));
      if (i > 4 && i < 9) begin
        s1 = int'(seen[4].dst);
        check(hi <= s1 || lo >= s1 + bytes_of(64, 32), $sformatf("layer %0d spares skip 1", i));
      end
    end
    // weights are used back to back
    for (int i = 1; i < NL; i++)
      if (exp_op[i] != OP_POOL && exp_op[i-1] != OP_POOL)
        check(seen[i].w_base > seen[i-1].w_base, $sformatf("layer %0d weight base", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
