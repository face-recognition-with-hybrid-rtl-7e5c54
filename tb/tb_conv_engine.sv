// tb_conv_engine: random windows and weights over several input channels;
// compares the PAR_K outputs with a direct sum, rounded and biased, and
// checks the one-cycle latency.
module tb_conv_engine;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int K = 3, PK = 4, C = 7;
  logic  iv, fi, la, ov;
  data_t win [K][K];
  data_t w   [PK][K][K];
  data_t b   [PK];
  data_t y   [PK];

  conv_engine #(.K(K), .PAR_K(PK)) dut (.clk, .rst_n, .in_valid(iv), .in_first(fi), .in_last(la),
    .win, .w, .bias(b), .out_valid(ov), .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc [PK];
    {iv, fi, la} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      for (int k = 0; k < PK; k++) begin
        acc[k] = 0;
        b[k]   = data_t'(srand(300));
      end
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            win[i][j] = data_t'(srand(1000));
            for (int k = 0; k < PK; k++) begin
              w[k][i][j] = data_t'(srand(100));
              acc[k] += longint'(win[i][j]) * w[k][i][j];
            end
          end
        {iv, fi, la} = {1'b1, c == 0, c == C - 1};
      end
      @(negedge clk);
      iv = 0;
      checks++;
      if (!ov) begin
        failures++;
        $display("out_valid missing");
      end
      for (int k = 0; k < PK; k++) begin
        checks++;
        if (y[k] != data_t'(requant_ref(acc[k], b[k], FRAC))) begin
          failures++;
          if (failures < 6) $display("k=%0d got %0d exp %0d", k, y[k], requant_ref(acc[k], b[k], FRAC));
        end
      end
      // idle gaps between outputs: out_valid must stay low
      @(negedge clk);
      checks++;
      if (ov) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
