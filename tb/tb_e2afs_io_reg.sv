// tb_e2afs_io_reg -- check of the operand/result register.
// Random data with random valid gaps is clocked in. A testbench model checks, every
// cycle, that out_valid is in_valid delayed by one cycle and that out_data is the last
// word presented with in_valid (held across idle cycles), and that reset clears both.
module tb_e2afs_io_reg;
  int unsigned checks = 0, failures = 0;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [15:0] in_data;
  logic        out_valid;
  logic [15:0] out_data;
  logic        exp_valid;
  logic [15:0] exp_data;
  int          n_hold = 0;

  e2afs_io_reg dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
                              .in_data(in_data), .out_valid(out_valid), .out_data(out_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_data = '0;
    exp_valid = 1'b0; exp_data = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0 || out_data !== 16'h0) failures++;
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_data  = 16'($urandom);
      @(posedge clk);
      if (!in_valid) n_hold++;
      exp_valid = in_valid;
      if (in_valid) exp_data = in_data;
      #1;
      checks++;
      if (out_valid !== exp_valid || out_data !== exp_data) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d valid=%0b data=%04h exp %0b %04h",
                                    i, out_valid, out_data, exp_valid, exp_data);
      end
    end
    if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
