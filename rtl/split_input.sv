// split_input: copies the module's input feature map, word by word, into the
// private input buffers of all branches at once, so that the branches can
// then run concurrently without sharing (and contending for) one buffer.
// This is the paper's split_input function, which it adds because the HLS
// tool would not run sub-functions concurrently on a shared array.
//
// After start it reads address 0..WORDS-1 of the source (rd_addr, with a
// combinational read returning rd_data in the same cycle) and drives the
// same address and data on the broadcast write port (wr_en, wr_addr,
// wr_data): one word per cycle, WORDS cycles. done pulses on the last write.
module split_input
  import hec_pkg::*;
#(
  parameter int WORDS = 16 * 24 * 24
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [31:0] rd_addr,
  input  data_t       rd_data,
  output logic        wr_en,
  output logic [31:0] wr_addr,
  output data_t       wr_data
);
  logic [31:0] addr;

  assign rd_addr = addr;
  assign wr_en   = busy;
  assign wr_addr = addr;
  assign wr_data = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      addr <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          addr <= '0;
        end
      end else if (addr == 32'(WORDS - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else addr <= addr + 1'b1;
    end
  end
endmodule
