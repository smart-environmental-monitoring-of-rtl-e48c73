// unet_scene_check -- one end-to-end scene through a tiny_unet_top of a given
// depth NB and channel reduction F, checked against the golden model.
//
// Drives its own clock and reset, loads random int8 weights, parameters and a
// random radar cube, runs the network once, and compares every pixel of the
// estimation map, the run time (issue cycles of every layer + 7 per layer + 1)
// and the number of layers of each kind started on the engine.  It raises
// `finished` when done; `checks` and `failures` are its totals.  Used by
// tb_tiny_unet_depths to run several network sizes side by side.
module unet_scene_check #(
  parameter int IMG = 16,
  parameter int NB  = 2,
  parameter int F   = 4
) (
  output int checks,
  output int failures,
  output bit finished
);
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int CIN = 9, NCLS = 11, CBASE = 64, LANES = 16, ICP = 8;
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

  int seen_op[4] = '{0, 0, 0, 0};
  int seen_concat = 0;

  always @(posedge clk)
    if (rst_n && dut.eng_start) begin
      seen_op[int'(dut.cfg.op)]++;
      if (dut.cfg.cin_b != 0) seen_concat++;
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL (NB=%0d F=%0d): %s", NB, F, what);
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

  initial begin
    unet_ref #(LANES, ICP) r;
    checks = 0; failures = 0; finished = 0;
    r = new(IMG, CIN, C0, NB, NCLS);
    r.randomise(8, 500, 2000, 16, 3000);
    in_addr_i = 0; w_addr_i = 0; p_idx_i = 0; map_addr_i = 0; in_data = 0; w_data = 0;
    p_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (r.wwords[i]) begin
      @(negedge clk); w_we = 1; w_addr_i = i; w_data = r.wwords[i];
    end
    @(negedge clk); w_we = 0;
    foreach (r.p_bias[i]) begin
      @(negedge clk); p_we = 1; p_idx_i = i;
      p_data.bias = r.p_bias[i]; p_data.mult = 16'(r.p_mult[i]); p_data.shift = 6'(r.p_shift[i]);
    end
    @(negedge clk); p_we = 0;
    foreach (r.in_cube[i]) begin
      @(negedge clk); in_we = 1; in_addr_i = r.in_addr(i); in_data = 8'(r.in_cube[i]);
    end
    @(negedge clk); in_we = 0;
    r.run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);
    check(longint'(cycles) == expected_cycles(),
          $sformatf("run time %0d cycles, expected %0d", cycles, expected_cycles()));
    for (int p = 0; p < IMG * IMG; p++) begin
      map_addr_i = p;
      @(negedge clk);
      check(int'(map_class) == r.out_map[p],
            $sformatf("pixel %0d class %0d expected %0d", p, map_class, r.out_map[p]));
    end
    check(seen_op[OP_CONV3] == 4 * NB + 2, "3x3 conv layers run");
    check(seen_op[OP_POOL] == NB, "max pool layers run");
    check(seen_op[OP_TCONV2] == NB, "transposed conv layers run");
    check(seen_op[OP_CONV1] == 1, "classifier layer run");
    check(seen_concat == NB, "skip concatenations run");
    check(r.n_pad_taps > 0, "zero padding exercised");
    check(r.n_relu_clip > 0, "ReLU clipping exercised");
    $display("NB=%0d F=%0d: %0d layers, %0d weight words, %0d cycles for %0d MACs",
             NB, F, num_layers(NB), r.wwords.size(), cycles, r.macs());
    finished = 1;
  end
endmodule
