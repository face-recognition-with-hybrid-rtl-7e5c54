// combine_output: concatenates the branch results along the channel axis
// ("filter concatenation") by copying each branch's private output buffer
// into its slice of the module's output buffer. This is the paper's
// combine_output function, the counterpart of split_input.
//
// Branch b holds WORDS[b] words (its channels times the map size; 0 for an
// absent branch) and is placed after all earlier branches. After start the
// unit reads branch sel = 0, 1, ... at address br_addr (combinational read,
// data on br_data[sel]) and writes out_addr = offset(sel) + br_addr, one word
// per cycle, sum(WORDS) cycles. done pulses after the last write.
module combine_output
  import hec_pkg::*;
#(
  parameter int NB          = 4,
  parameter int WORDS [NB]  = '{default: 16 * 24 * 24}
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [$clog2(NB)-1:0]  sel,
  output logic [31:0]            br_addr,
  input  data_t                  br_data [NB],
  output logic                   out_we,
  output logic [31:0]            out_addr,
  output data_t                  out_data
);
  localparam int SW = $clog2(NB);

  function automatic int offset_of(input int b);
    int s;
    s = 0;
    for (int i = 0; i < NB; i++) if (i < b) s += WORDS[i];
    return s;
  endfunction

  logic [31:0] offs [NB];
  for (genvar b = 0; b < NB; b++) begin : g_off
    assign offs[b] = 32'(offset_of(b));
  end

  // Next branch after b that holds data (NB if none).
  function automatic int next_nonempty(input int b);
    for (int i = 0; i < NB; i++) if (i > b && WORDS[i] > 0) return i;
    return NB;
  endfunction

  logic run;

  assign busy     = run;
  assign out_we   = run;
  assign out_addr = offs[sel] + br_addr;
  assign out_data = br_data[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      done    <= 1'b0;
      sel     <= '0;
      br_addr <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          if (next_nonempty(-1) < NB) begin
            run     <= 1'b1;
            sel     <= SW'(next_nonempty(-1));
            br_addr <= '0;
          end else done <= 1'b1;
        end
      end else if (br_addr == 32'(WORDS[sel] - 1)) begin
        br_addr <= '0;
        if (next_nonempty(int'(sel)) < NB) sel <= SW'(next_nonempty(int'(sel)));
        else begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end else br_addr <= br_addr + 1'b1;
    end
  end
endmodule
