// tb_combine_output: four branch buffers of 5, 0, 7 and 3 words (one branch
// absent) are concatenated; checks every output address and word and the
// total number of writes.
module tb_combine_output;
  import hec_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int WORDS [4] = '{5, 0, 7, 3};
  logic        start, busy, done, out_we;
  logic [1:0]  sel;
  logic [31:0] br_addr, out_addr;
  data_t       br_data [4];
  data_t       out_data;
  data_t       mem [4][8];
  data_t       dst [15];
  int          nw;

  combine_output #(.NB(4), .WORDS(WORDS)) dut (.clk, .rst_n, .start, .busy, .done, .sel, .br_addr,
    .br_data, .out_we, .out_addr, .out_data);
  for (genvar b = 0; b < 4; b++) begin : g_br
    assign br_data[b] = mem[b][br_addr % 8];
  end

  always @(negedge clk)
    if (out_we) begin
      nw++;
      if (out_addr < 15) dst[out_addr] = out_data;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int o;
    start = 0;
    nw    = 0;
    for (int b = 0; b < 4; b++) for (int i = 0; i < 8; i++) mem[b][i] = data_t'($urandom);
    for (int i = 0; i < 15; i++) dst[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (nw != 15) begin failures++; $display("%0d writes", nw); end
    o = 0;
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < WORDS[b]; i++) begin
        checks++;
        if (dst[o] != mem[b][i]) begin
          failures++;
          $display("out[%0d] = %0d, expected branch %0d word %0d = %0d", o, dst[o], b, i, mem[b][i]);
        end
        o++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
