// tb_concat_addr -- random tensor pairs (and single tensors, cin_b = 0); every
// (pixel, channel) of the concatenation must map to the HWC address of the
// skip tensor for the first cin_a channels and of the upsampled one after.
module tb_concat_addr;
  logic [31:0] pix, base_a, base_b, addr;
  logic [15:0] ch, cin_a, cin_b;
  int checks = 0, failures = 0;

  concat_addr dut (.*);

  initial begin
    for (int it = 0; it < 20; it++) begin
      int px, ca, cb, ba, bb;
      px = $urandom_range(20, 1);
      ca = $urandom_range(12, 1);
      cb = (it % 3 == 0) ? 0 : $urandom_range(12, 1);
      ba = $urandom_range(1000);
      bb = ba + px * ca + $urandom_range(50);
      cin_a = 16'(ca); cin_b = 16'(cb); base_a = 32'(ba); base_b = 32'(bb);
      for (int p = 0; p < px; p++)
        for (int c = 0; c < ca + cb; c++) begin
          int e;
          pix = 32'(p); ch = 16'(c);
          #1;
          e = (c < ca) ? ba + p * ca + c : bb + p * cb + (c - ca);
          checks++;
          if (int'(addr) != e) begin
            failures++;
            if (failures < 10) $display("FAIL p=%0d c=%0d: %0d expected %0d", p, c, addr, e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
