// tb_e2afs_kmeans -- K-means colour-quantization workload on the registered E2AFS unit.
// A 32x32 RGB test image is generated (colour gradients, a few flat patches and
// pseudo-random noise) and quantized to K = 20 colours by Lloyd's K-means, with the
// Euclidean pixel-to-centroid distance sqrt(dr^2 + dg^2 + db^2) taken through the unit.
// dr^2 + dg^2 + db^2 reaches 195,075, beyond the binary16 range, so it is scaled by 1/4
// before conversion (this scales every distance alike and does not move the minimum).
// The same clustering, from the same initial centroids, is repeated with an exact
// square root. The quantized images are compared with the original by PSNR; the
// approximate run must come within 1.5 dB of the exact one. Each iteration streams
// the 1024 x 20 distances through the unit back to back.
module tb_e2afs_kmeans;
  import e2afs_ref_pkg::*;
  localparam int NPIX  = 1024;
  localparam int K     = 20;
  localparam int ITERS = 8;
  int unsigned checks = 0, failures = 0;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [15:0] in_m;
  logic        out_valid;
  logic [15:0] out_sqrt;

  int          pix[NPIX][3];
  logic [15:0] res[$];

  e2afs_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_m(in_m),
                 .out_valid(out_valid), .out_sqrt(out_sqrt));

  always #5 clk = ~clk;

  always @(posedge clk) if (out_valid) res.push_back(out_sqrt);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One K-means run; approx selects the unit, else the exact root. Returns the PSNR of
  // the quantized image and the final assignment.
  task automatic kmeans(input bit approx, output real psnr, output int assign_out[NPIX]);
    real         cen[K][3];
    real         sum[K][3];
    int          cnt[K];
    int          asg[NPIX];
    logic [15:0] ops[NPIX*K];
    real         sse;
    for (int k = 0; k < K; k++)
      for (int c = 0; c < 3; c++) cen[k][c] = real'(pix[(k * 51 + 7) % NPIX][c]);
    for (int it = 0; it < ITERS; it++) begin
      for (int p = 0; p < NPIX; p++)
        for (int k = 0; k < K; k++) begin
          real d2 = 0.0;
          for (int c = 0; c < 3; c++) d2 += (real'(pix[p][c]) - cen[k][c]) ** 2;
          ops[p * K + k] = real_to_fp16(d2 / 4.0);
        end
      if (approx) begin
        res.delete();
        for (int i = 0; i < NPIX * K; i++) begin
          @(negedge clk);
          in_valid = 1'b1;
          in_m     = ops[i];
        end
        @(negedge clk);
        in_valid = 1'b0;
        repeat (4) @(posedge clk);
        checks++;
        if (res.size() != NPIX * K) begin
          failures++;
          $display("FAIL %0d results for %0d operands", res.size(), NPIX * K);
          return;
        end
      end
      for (int p = 0; p < NPIX; p++) begin
        real best = 1.0e30;
        for (int k = 0; k < K; k++) begin
          real d;
          d = approx ? fp16_to_real(res[p * K + k]) : $sqrt(fp16_to_real(ops[p * K + k]));
          if (d < best) begin best = d; asg[p] = k; end
        end
      end
      for (int k = 0; k < K; k++) begin
        cnt[k] = 0;
        for (int c = 0; c < 3; c++) sum[k][c] = 0.0;
      end
      for (int p = 0; p < NPIX; p++) begin
        cnt[asg[p]]++;
        for (int c = 0; c < 3; c++) sum[asg[p]][c] += real'(pix[p][c]);
      end
      for (int k = 0; k < K; k++)
        if (cnt[k] > 0) for (int c = 0; c < 3; c++) cen[k][c] = sum[k][c] / cnt[k];
    end
    sse = 0.0;
    for (int p = 0; p < NPIX; p++)
      for (int c = 0; c < 3; c++) begin
        int q = int'($floor(cen[asg[p]][c] + 0.5));
        sse += real'((pix[p][c] - q) ** 2);
      end
    psnr = 10.0 * $log10(255.0 * 255.0 / (sse / (3 * NPIX)));
    assign_out = asg;
  endtask

  initial begin
    automatic int unsigned lcg = 32'd777;
    real psnr_exact, psnr_approx;
    int  asg_e[NPIX], asg_a[NPIX];
    automatic int n_diff = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_m = '0;
    for (int p = 0; p < NPIX; p++) begin
      int x, y;
      int v[3];
      x = p % 32;
      y = p / 32;
      v[0] = 8 * x;  v[1] = 8 * y;  v[2] = 255 - 4 * (x + y);
      if (x > 4 && x < 14 && y > 4 && y < 14)  begin v[0] = 220; v[1] = 40;  v[2] = 40;  end
      if (x > 18 && x < 28 && y > 18 && y < 28) begin v[0] = 30;  v[1] = 180; v[2] = 60;  end
      for (int c = 0; c < 3; c++) begin
        lcg = lcg * 32'd1103515245 + 32'd12345;
        v[c] = v[c] + int'((lcg >> 16) % 17) - 8;
        pix[p][c] = (v[c] > 255) ? 255 : (v[c] < 0 ? 0 : v[c]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    kmeans(1'b0, psnr_exact, asg_e);
    kmeans(1'b1, psnr_approx, asg_a);
    for (int p = 0; p < NPIX; p++) if (asg_e[p] != asg_a[p]) n_diff++;
    $display("K=%0d iterations=%0d PSNR exact=%f dB approximate=%f dB, %0d of %0d pixels assigned differently",
             K, ITERS, psnr_exact, psnr_approx, n_diff, NPIX);
    checks++;
    if (psnr_approx < psnr_exact - 1.5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
