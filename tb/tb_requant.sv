// tb_requant -- random accumulators and parameters, with and without ReLU,
// compared with the requantisation formula evaluated in 64-bit arithmetic.
module tb_requant;
  import unet_pkg::*;
  localparam int LANES = 4;
  logic signed [31:0] acc [LANES];
  qparam_t [LANES-1:0] qp;
  logic relu;
  logic [LANES*8-1:0] y;
  int checks = 0, failures = 0;
  int n_clip = 0, n_sat = 0;

  requant #(.LANES(LANES), .ACCW(32)) dut (.*);

  function automatic int model(longint a, longint b, longint m, int s, bit r);
    longint t;
    t = (a + b) * m;
    if (s > 0) t += longint'(1) <<< (s - 1);
    t = t >>> s;
    if (r && t < 0) t = 0;
    if (t > 127) t = 127;
    if (t < -128) t = -128;
    return int'(t);
  endfunction

  initial begin
    for (int it = 0; it < 2000; it++) begin
      relu = it[0];
      for (int l = 0; l < LANES; l++) begin
        acc[l]      = (it % 3 == 0) ? $urandom : int'($urandom_range(200000)) - 100000;
        qp[l].bias  = int'($urandom_range(20000)) - 10000;
        qp[l].mult  = 16'($urandom);
        qp[l].shift = 6'($urandom_range(24, 0));
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = model(acc[l], qp[l].bias, qp[l].mult, qp[l].shift, relu);
        if (relu && e == 0) n_clip++;
        if (e == 127 || e == -128) n_sat++;
        checks++;
        if (int'($signed(y[l*8 +: 8])) != e) begin
          failures++;
          if (failures < 10)
            $display("FAIL acc=%0d bias=%0d mult=%0d shift=%0d relu=%0d: %0d expected %0d",
                     acc[l], qp[l].bias, qp[l].mult, qp[l].shift, relu,
                     $signed(y[l*8 +: 8]), e);
        end
      end
    end
    checks++;
    if (n_clip == 0 || n_sat == 0) failures++;
    $display("relu clips %0d saturations %0d", n_clip, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
