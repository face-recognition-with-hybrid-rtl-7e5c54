// tb_split_input: copies a 100-word source memory; checks that each word
// arrives once, in order, with its data, and that the copy takes WORDS
// cycles.
module tb_split_input;
  import hec_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int WORDS = 100;
  logic        start, busy, done, wr_en;
  logic [31:0] rd_addr, wr_addr;
  data_t       rd_data, wr_data;
  data_t       src [WORDS];
  int          next;

  split_input #(.WORDS(WORDS)) dut (.clk, .rst_n, .start, .busy, .done, .rd_addr, .rd_data, .wr_en,
    .wr_addr, .wr_data);
  assign rd_data = src[rd_addr % WORDS];

  always @(negedge clk)
    if (wr_en) begin
      checks++;
      if (int'(wr_addr) != next || wr_data != src[next]) begin
        failures++;
        if (failures < 6) $display("write %0d: addr %0d data %0d", next, wr_addr, wr_data);
      end
      next++;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0;
    next  = 0;
    for (int i = 0; i < WORDS; i++) src[i] = data_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      next = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks += 2;
      if (next != WORDS) begin failures++; $display("%0d words copied", next); end
      if (cyc != WORDS + 1) begin failures++; $display("copy took %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
