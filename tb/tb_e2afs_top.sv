// tb_e2afs_top -- end-to-end check of the registered E2AFS unit at its default size.
// All 65536 binary16 operands are streamed through the unit, in random order of idle
// cycles (in_valid low about one cycle in four). A delay-line model checks every cycle
// that out_valid is in_valid delayed by exactly two cycles, that each result matches the
// approximation table or the special-value rule, and that the output holds its last
// value while idle. An asynchronous reset is applied once in mid-stream and must clear
// the pipeline. The testbench counts how often each mechanism happened -- the four
// regions (even/odd exponent x Y below/above 0.5), zero, infinity, NaN and negative
// operands, idle hold and reset -- and fails if one never did. The worked example
// 0x785A -> 0x5A21 is sent first and checked exactly.
module tb_e2afs_top;
  import e2afs_ref_pkg::*;
  int unsigned checks = 0, failures = 0;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [15:0] in_m;
  logic        out_valid;
  logic [15:0] out_sqrt;

  // delay line of what was presented, two stages deep
  logic        v_d1, v_d2;
  logic [15:0] m_d1, m_d2;
  logic [15:0] last_out;
  int          n_region[4];
  int          n_zero = 0, n_inf = 0, n_nan = 0, n_neg = 0, n_hold = 0, n_reset = 0;
  int          n_results = 0;

  e2afs_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_m(in_m),
                 .out_valid(out_valid), .out_sqrt(out_sqrt));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_cycle();
    checks++;
    if (out_valid !== v_d2) begin
      failures++;
      if (failures < 10) $display("FAIL latency: out_valid=%0b expected %0b", out_valid, v_d2);
    end else if (v_d2) begin
      n_results++;
      if (!result_ok(m_d2, out_sqrt)) begin
        failures++;
        if (failures < 10) $display("FAIL m=%04h q=%04h", m_d2, out_sqrt);
      end
      last_out = out_sqrt;
    end else if (out_sqrt !== last_out) begin
      failures++;
      if (failures < 10) $display("FAIL hold: q=%04h expected %04h", out_sqrt, last_out);
    end else begin
      n_hold++;
    end
  endtask

  task automatic step(input logic v, input logic [15:0] m);
    @(negedge clk);
    in_valid = v;
    in_m     = v ? m : 16'($urandom);
    @(posedge clk);
    v_d2 = v_d1; m_d2 = m_d1;
    v_d1 = v;    m_d1 = m;
    #1;
    check_cycle();
  endtask

  initial begin
    int order[65536];
    for (int k = 0; k < 4; k++) n_region[k] = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_m = '0;
    v_d1 = 1'b0; v_d2 = 1'b0; m_d1 = '0; m_d2 = '0; last_out = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // worked example, exact
    step(1'b1, 16'b0_11110_0001011010);
    step(1'b0, 16'h0);
    step(1'b0, 16'h0);
    checks++;
    if (out_sqrt !== 16'b0_10110_1000100001) begin
      failures++;
      $display("FAIL worked example q=%04h", out_sqrt);
    end

    // every operand once, shuffled
    for (int i = 0; i < 65536; i++) order[i] = i;
    for (int i = 65535; i > 0; i--) begin
      int j, tmp;
      j = int'($urandom_range(0, i));
      tmp = order[i]; order[i] = order[j]; order[j] = tmp;
    end
    for (int i = 0; i < 65536; i++) begin
      logic [15:0] h;
      h = 16'(order[i]);
      while ($urandom_range(0, 3) == 0) step(1'b0, 16'h0);
      step(1'b1, h);
      if (h[14:10] == 5'd0)                    n_zero++;
      else if (h[14:10] == 5'd31 && h[9:0] != 0) n_nan++;
      else if (h[15])                          n_neg++;
      else if (h[14:10] == 5'd31)              n_inf++;
      else                                     n_region[region(h)]++;

      if (i == 30000) begin
        // asynchronous reset in mid-stream: everything in flight is dropped
        @(negedge clk);
        in_valid = 1'b0;
        #2 rst_n = 1'b0;
        #1;
        checks++;
        if (out_valid !== 1'b0 || out_sqrt !== 16'h0) begin
          failures++;
          $display("FAIL reset did not clear the output");
        end
        @(posedge clk);
        #1 rst_n = 1'b1;
        n_reset++;
        v_d1 = 1'b0; v_d2 = 1'b0; last_out = '0;
      end
    end
    step(1'b0, 16'h0);
    step(1'b0, 16'h0);

    $display("results=%0d regions even/lo=%0d even/hi=%0d odd/lo=%0d odd/hi=%0d",
             n_results, n_region[0], n_region[1], n_region[2], n_region[3]);
    $display("zero=%0d inf=%0d nan=%0d neg=%0d hold=%0d reset=%0d",
             n_zero, n_inf, n_nan, n_neg, n_hold, n_reset);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_region[k] == 0) failures++;
    end
    checks += 7;
    if (n_zero == 0)  failures++;
    if (n_inf == 0)   failures++;
    if (n_nan == 0)   failures++;
    if (n_neg == 0)   failures++;
    if (n_hold == 0)  failures++;
    if (n_reset == 0) failures++;
    if (n_results < 65536 - 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
