// tb_tiny_unet_top -- end-to-end test of the Tiny U-Net accelerator.
//
// Loads random int8 weights, per-channel parameters and a random radar cube,
// runs the network twice (the second run with a new input, to show the
// buffers are reused cleanly), and compares every pixel of the estimation map
// with the golden model in unet_ref_pkg.  Also checks the run time against
// the cycle formula (issue cycles of every layer, ICP input channels per cycle, + 7 per
// layer + 1) and that
// every mechanism of the design happened: 3x3 conv with zero padding, ReLU
// clipping, saturation, max pool, transposed conv, skip concatenation and
// more than one output class.  The image is cut to IMG = 16 to keep the run
// short; all channel counts are the main configuration's (9 -> 16 -> 32 -> 64,
// 11 classes, 16 lanes).
module tb_tiny_unet_top;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int IMG = 16, CIN = 9, NCLS = 11, NB = 2, CBASE = 64, F = 4, LANES = 16, ICP = 8;
  localparam int C0 = CBASE / F, CINP = (CIN + ICP - 1) / ICP * ICP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_we = 0, w_we = 0, p_we = 0, start = 0;
  logic [31:0] in_addr_i, w_addr_i, p_idx_i, map_addr_i;
  logic [7:0] in_data;
  logic [LANES*ICP*8-1:0] w_data;
  qparam_t p_data;
  logic busy, done;
  logic [7:0] layer;
  logic [31:0] cycles;
  logic [$clog2(NCLS)-1:0] map_class;

  tiny_unet_top #(.IMG(IMG), .CIN(CIN), .NCLS(NCLS), .NB(NB), .CBASE(CBASE), .F(F),
                  .LANES(LANES), .ICP(ICP)) dut (
    .clk, .rst_n,
    .in_we, .in_addr(in_addr_i[$bits(dut.in_addr)-1:0]), .in_data,
    .w_we, .w_addr(w_addr_i[$bits(dut.w_addr)-1:0]), .w_data,
    .p_we, .p_idx(p_idx_i[$bits(dut.p_idx)-1:0]), .p_data,
    .start, .busy, .done, .layer, .cycles,
    .map_addr(map_addr_i[$bits(dut.map_addr)-1:0]), .map_class
  );

  int checks = 0, failures = 0;
  int seen_op[4] = '{0, 0, 0, 0};
  int seen_concat = 0;

  // count the layer kinds the engine is started on
  always @(posedge clk)
    if (rst_n && dut.eng_start) begin
      seen_op[int'(dut.cfg.op)]++;
      if (dut.cfg.cin_b != 0) seen_concat++;
    end

  initial begin
    #(64'd200_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic longint expected_cycles();
    longint n;
    n = 0;
    for (int i = 0; i < num_layers(NB); i++) begin
      layer_t L;
      longint px, ng;
      L  = layer_desc(i, IMG, CINP, C0, NB, NCLS, LANES, ICP);
      px = longint'(L.h) * L.w;
      ng = (longint'(L.cout) + LANES - 1) / LANES;
      case (L.op)
        OP_CONV3:  n += px * ng * 9 * ((L.cin_a + L.cin_b) / ICP);
        OP_TCONV2: n += px * ng * (L.cin_a / ICP);
        OP_CONV1:  n += px * ng * (L.cin_a / ICP);
        default:   n += px * ng * 4;
      endcase
      n += 7;
    end
    return n + 1;
  endfunction

  task automatic run_once(unet_ref #(LANES, ICP) ref_m, bit load_params);
    int classes_seen[NCLS];
    int distinct;
    if (load_params) begin
      foreach (ref_m.wwords[i]) begin
        @(negedge clk); w_we = 1; w_addr_i = i; w_data = ref_m.wwords[i];
      end
      @(negedge clk); w_we = 0;
      foreach (ref_m.p_bias[i]) begin
        @(negedge clk); p_we = 1; p_idx_i = i;
        p_data.bias = ref_m.p_bias[i]; p_data.mult = 16'(ref_m.p_mult[i]);
        p_data.shift = 6'(ref_m.p_shift[i]);
      end
      @(negedge clk); p_we = 0;
    end
    foreach (ref_m.in_cube[i]) begin
      @(negedge clk); in_we = 1; in_addr_i = ref_m.in_addr(i); in_data = 8'(ref_m.in_cube[i]);
    end
    @(negedge clk); in_we = 0;
    ref_m.run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);
    check(longint'(cycles) == expected_cycles(),
          $sformatf("run time %0d cycles, expected %0d", cycles, expected_cycles()));
    $display("run: %0d cycles for %0d MACs", cycles, ref_m.macs());
    for (int p = 0; p < IMG * IMG; p++) begin
      map_addr_i = p;
      @(negedge clk);
      check(int'(map_class) == ref_m.out_map[p],
            $sformatf("pixel %0d class %0d expected %0d", p, map_class, ref_m.out_map[p]));
      classes_seen[ref_m.out_map[p]]++;
    end
    distinct = 0;
    foreach (classes_seen[c]) if (classes_seen[c] > 0) distinct++;
    $display("distinct classes in map: %0d", distinct);
    check(distinct > 1, "output map uses more than one class");
  endtask

  initial begin
    unet_ref #(LANES, ICP) r;
    r = new(IMG, CIN, C0, NB, NCLS);
    r.randomise(8, 500, 2000, 16, 3000);
    in_addr_i = 0; w_addr_i = 0; p_idx_i = 0; map_addr_i = 0; in_data = 0; w_data = 0;
    p_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_once(r, 1);
    // second image, same weights
    foreach (r.in_cube[i]) r.in_cube[i] = int'($urandom_range(255, 0)) - 128;
    run_once(r, 0);

    $display("mechanisms: conv3=%0d pool=%0d tconv=%0d conv1=%0d concat=%0d pad_taps=%0d relu_clips=%0d saturations=%0d",
             seen_op[OP_CONV3], seen_op[OP_POOL], seen_op[OP_TCONV2], seen_op[OP_CONV1],
             seen_concat, r.n_pad_taps, r.n_relu_clip, r.n_sat);
    check(seen_op[OP_CONV3] == 2 * (4 * NB + 2), "3x3 conv layers run");
    check(seen_op[OP_POOL] == 2 * NB, "max pool layers run");
    check(seen_op[OP_TCONV2] == 2 * NB, "transposed conv layers run");
    check(seen_op[OP_CONV1] == 2, "classifier layer run");
    check(seen_concat == 2 * NB, "skip concatenations run");
    check(r.n_pad_taps > 0, "zero padding exercised");
    check(r.n_relu_clip > 0, "ReLU clipping exercised");
    check(r.n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
