// tb_pool_unit: random 3x3 windows; output must be their maximum, one cycle
// later.
module tb_pool_unit;
  import hec_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  iv, ov;
  data_t win [3][3];
  data_t y;
  pool_unit #(.K(3)) dut (.clk, .rst_n, .in_valid(iv), .win, .out_valid(ov), .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    iv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      e = -32768;
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) begin
          win[i][j] = data_t'($urandom);
          if (int'(win[i][j]) > e) e = win[i][j];
        end
      iv = 1;
      @(negedge clk);
      iv = 0;
      checks++;
      if (!ov || int'(y) != e) begin
        failures++;
        if (failures < 6) $display("got %0d exp %0d valid %0b", y, e, ov);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
