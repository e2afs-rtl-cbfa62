// tb_e2afs_sobel -- Sobel edge-detection workload on the registered E2AFS unit.
// A 64x64 8-bit grayscale test image is generated (smooth shading, a disc, a bright
// rectangle, a diagonal stripe and pseudo-random texture). For every interior pixel
// the Sobel gradients Gx, Gy are formed and the magnitude sqrt(Gx^2 + Gy^2) is taken
// once with an exact square root and once through the unit. Gx^2 + Gy^2 reaches
// 2,080,800, beyond the binary16 range, so it is scaled by 1/64 before conversion to
// binary16 (round to nearest) and the root is scaled back by 8; both paths see the
// same binary16 operand. The edge maps (clipped to 0..255) are compared by PSNR.
// The method reports about 46 dB on natural 8-bit images; this test requires 40 dB
// on its synthetic image and prints the value. Operands are streamed back to back.
module tb_e2afs_sobel;
  import e2afs_ref_pkg::*;
  localparam int N = 64;
  int unsigned checks = 0, failures = 0;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [15:0] in_m;
  logic        out_valid;
  logic [15:0] out_sqrt;

  int          img[N][N];
  logic [15:0] ops[$];
  logic [15:0] res[$];

  e2afs_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_m(in_m),
                 .out_valid(out_valid), .out_sqrt(out_sqrt));

  always #5 clk = ~clk;

  always @(posedge clk) if (out_valid) res.push_back(out_sqrt);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip255(input real v);
    int k = int'($floor(v + 0.5));
    return (k > 255) ? 255 : (k < 0 ? 0 : k);
  endfunction

  initial begin
    automatic int unsigned lcg = 32'd12345;
    automatic real sse = 0.0;
    real psnr;
    automatic int n_zero_grad = 0, n_sat = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_m = '0;

    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++) begin
        int v, dx, dy;
        v  = 40 + 2 * x + y;                                  // shading
        dx = x - 20; dy = y - 24;
        if (dx * dx + dy * dy < 144) v = 200 - (dx * dx + dy * dy) / 2;   // disc
        if (x > 38 && x < 58 && y > 6 && y < 30) v = 230;      // rectangle
        if ((x + y) % 16 < 3 && y > 36) v = 15;                // stripes
        lcg = lcg * 32'd1103515245 + 32'd12345;
        v  = v + int'((lcg >> 16) % 9) - 4;                    // texture
        img[y][x] = (v > 255) ? 255 : (v < 0 ? 0 : v);
      end

    for (int y = 1; y < N - 1; y++)
      for (int x = 1; x < N - 1; x++) begin
        int gx, gy;
        gx = (img[y-1][x+1] + 2 * img[y][x+1] + img[y+1][x+1])
           - (img[y-1][x-1] + 2 * img[y][x-1] + img[y+1][x-1]);
        gy = (img[y+1][x-1] + 2 * img[y+1][x] + img[y+1][x+1])
           - (img[y-1][x-1] + 2 * img[y-1][x] + img[y-1][x+1]);
        ops.push_back(real_to_fp16(real'(gx * gx + gy * gy) / 64.0));
      end

    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (ops[i]) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_m     = ops[i];
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);

    checks++;
    if (res.size() != ops.size()) begin
      failures++;
      $display("FAIL %0d results for %0d operands", res.size(), ops.size());
    end else begin
      foreach (ops[i]) begin
        int e_px, a_px;
        real d;
        e_px = clip255(8.0 * $sqrt(fp16_to_real(ops[i])));
        a_px = clip255(8.0 * fp16_to_real(res[i]));
        if (ops[i] == 16'h0) n_zero_grad++;
        if (e_px == 255) n_sat++;
        d = real'(e_px - a_px);
        sse += d * d;
        checks++;
        if (!result_ok(ops[i], res[i])) begin
          failures++;
          if (failures < 10) $display("FAIL m=%04h q=%04h", ops[i], res[i]);
        end
      end
      psnr = (sse == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / (sse / ops.size()));
      $display("pixels=%0d zero-gradient=%0d saturated=%0d PSNR=%f dB",
               ops.size(), n_zero_grad, n_sat, psnr);
      checks++;
      if (psnr < 40.0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
