// inception_module: one Inception module of the hybrid-algorithm face
// recognition accelerator: four parallel branches (1x1 "cccp", 3x3, 5x5 and
// pooling) on the same input feature map, whose results are concatenated
// along the channel axis.
//
// This mirrors the paper's template "Inception module IP": a split_input
// stage copies the input map into a private buffer per branch; the branches
// then run concurrently, each on its own engine with its own weights and
// output buffer; a combine_output stage concatenates the results. As in the
// paper's CONFIG template, parameters choose which branches exist
// (HAS_*), their sizes, their parallel (unroll) factors PAR_*, and the
// algorithm of the 3x3 branch (Winograd F(WINO_M x WINO_M,3x3) or
// conventional) and of the 5x5 branch (FFT or conventional). The defaults
// are the configuration of Inception 3b in the paper's Table 4
// (Winograd F(4x4,3x3) for 3x3, FFT for 5x5); the map and channel sizes are
// this design's choice (24 x 24 x 16 in, 16 channels per branch), from the
// ranges the paper's design space exploration evaluates.
//
// Interface: the host writes the input map (in_we/in_addr/in_data, address
// (c*H + y)*W + x) and the weights and biases of each branch (wt_sel:
// 0 = 1x1, 1 = 3x3, 2 = 5x5; layouts as documented in conv_branch,
// wino_branch and fft_branch; 16-bit weights in wt_data[15:0], complex FFT
// kernel words as {re, im}). A start pulse runs split, branches and combine;
// done pulses when the concatenated output can be read at out_addr
// (combinational read, address (c*H + y)*W + x, channels in branch order
// 1x1, 3x3, 5x5, pool). branch_busy shows which branches are computing.
// Weights must not be written while busy is high.
module inception_module
  import hec_pkg::*;
#(
  parameter int   C_IN      = 16,
  parameter int   H         = 24,
  parameter int   W         = 24,
  parameter int   C1        = 16,        // 1x1 branch output channels
  parameter int   C3        = 16,        // 3x3 branch output channels
  parameter int   C5        = 16,        // 5x5 branch output channels
  parameter bit   HAS_CCCP  = 1'b1,
  parameter bit   HAS_CONV3 = 1'b1,
  parameter bit   HAS_CONV5 = 1'b1,
  parameter bit   HAS_POOL  = 1'b1,
  parameter alg_e CONV3_ALG = ALG_WINO,  // ALG_WINO or ALG_CONV
  parameter alg_e CONV5_ALG = ALG_FFT,   // ALG_FFT or ALG_CONV
  parameter int   WINO_M    = 4,         // F(4x4,3x3) or F(2x2,3x3)
  parameter int   FFT_N     = 32,        // FFT size the 5x5 branch pads to
  parameter int   FFT_CORES = 4,         // 1D FFT cores per array
  parameter int   PAR_1     = 4,         // parallel factors (unroll) per branch
  parameter int   PAR_3     = 4,
  parameter int   PAR_5     = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [31:0] in_addr,
  input  data_t       in_data,
  input  logic        wt_we,
  input  logic [1:0]  wt_sel,
  input  logic [31:0] wt_addr,
  input  logic [31:0] wt_data,
  input  logic        b_we,
  input  logic [1:0]  b_sel,
  input  logic [31:0] b_addr,
  input  data_t       b_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [3:0]  branch_busy,
  input  logic [31:0] out_addr,
  output data_t       out_data
);
  localparam int PLANE = H * W;
  localparam int N1 = HAS_CCCP  ? C1   : 0;
  localparam int N3 = HAS_CONV3 ? C3   : 0;
  localparam int N5 = HAS_CONV5 ? C5   : 0;
  localparam int NP = HAS_POOL  ? C_IN : 0;
  localparam int C_TOT = N1 + N3 + N5 + NP;
  localparam int BR_WORDS [4] = '{N1 * PLANE, N3 * PLANE, N5 * PLANE, NP * PLANE};

  data_t ibuf [C_IN*PLANE];
  data_t obuf [C_TOT*PLANE];

  typedef enum logic [1:0] {S_IDLE, S_SPLIT, S_RUN, S_COMBINE} state_e;
  state_e state;

  // split_input
  logic        sp_start, sp_busy, sp_done, sp_we;
  logic [31:0] sp_rd_addr, sp_wr_addr;
  data_t       sp_wr_data;

  split_input #(.WORDS(C_IN * PLANE)) u_split (
    .clk, .rst_n, .start(sp_start), .busy(sp_busy), .done(sp_done),
    .rd_addr(sp_rd_addr), .rd_data(ibuf[sp_rd_addr]),
    .wr_en(sp_we), .wr_addr(sp_wr_addr), .wr_data(sp_wr_data));

  // branches
  logic        br_start;
  logic [3:0]  br_done, br_done_q, present;
  logic [31:0] br_rd_addr;
  data_t       br_rd_data [4];

  assign present = {HAS_POOL, HAS_CONV5, HAS_CONV3, HAS_CCCP};

  if (HAS_CCCP) begin : g_cccp
    conv_branch #(.C_IN(C_IN), .C_OUT(C1), .H(H), .W(W), .K(1), .PAR_K(PAR_1)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .wt_we(wt_we && wt_sel == 2'd0), .wt_addr, .wt_data(wt_data[DW-1:0]),
      .b_we(b_we && b_sel == 2'd0), .b_addr, .b_data,
      .start(br_start), .busy(branch_busy[0]), .done(br_done[0]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[0]));
  end else begin : g_no_cccp
    assign branch_busy[0] = 1'b0;
    assign br_done[0]     = 1'b0;
    assign br_rd_data[0]  = '0;
  end

  if (HAS_CONV3 && CONV3_ALG == ALG_WINO) begin : g_conv3_wino
    wino_branch #(.C_IN(C_IN), .C_OUT(C3), .H(H), .W(W), .M(WINO_M), .PAR_K(PAR_3)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .wt_we(wt_we && wt_sel == 2'd1), .wt_addr, .wt_data(wt_data[DW-1:0]),
      .b_we(b_we && b_sel == 2'd1), .b_addr, .b_data,
      .start(br_start), .busy(branch_busy[1]), .done(br_done[1]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[1]));
  end else if (HAS_CONV3) begin : g_conv3_conv
    conv_branch #(.C_IN(C_IN), .C_OUT(C3), .H(H), .W(W), .K(3), .PAR_K(PAR_3)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .wt_we(wt_we && wt_sel == 2'd1), .wt_addr, .wt_data(wt_data[DW-1:0]),
      .b_we(b_we && b_sel == 2'd1), .b_addr, .b_data,
      .start(br_start), .busy(branch_busy[1]), .done(br_done[1]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[1]));
  end else begin : g_no_conv3
    assign branch_busy[1] = 1'b0;
    assign br_done[1]     = 1'b0;
    assign br_rd_data[1]  = '0;
  end

  if (HAS_CONV5 && CONV5_ALG == ALG_FFT) begin : g_conv5_fft
    fft_branch #(.C_IN(C_IN), .C_OUT(C5), .H(H), .W(W), .K(5), .N(FFT_N), .PAR_K(PAR_5),
                 .CORES(FFT_CORES)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .wt_we(wt_we && wt_sel == 2'd2), .wt_addr, .wt_data(cdata_t'(wt_data)),
      .b_we(b_we && b_sel == 2'd2), .b_addr, .b_data,
      .start(br_start), .busy(branch_busy[2]), .done(br_done[2]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[2]));
  end else if (HAS_CONV5) begin : g_conv5_conv
    conv_branch #(.C_IN(C_IN), .C_OUT(C5), .H(H), .W(W), .K(5), .PAR_K(PAR_5)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .wt_we(wt_we && wt_sel == 2'd2), .wt_addr, .wt_data(wt_data[DW-1:0]),
      .b_we(b_we && b_sel == 2'd2), .b_addr, .b_data,
      .start(br_start), .busy(branch_busy[2]), .done(br_done[2]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[2]));
  end else begin : g_no_conv5
    assign branch_busy[2] = 1'b0;
    assign br_done[2]     = 1'b0;
    assign br_rd_data[2]  = '0;
  end

  if (HAS_POOL) begin : g_pool
    pool_branch #(.C(C_IN), .H(H), .W(W), .K(3)) u_br (
      .clk, .rst_n, .in_we(sp_we), .in_addr(sp_wr_addr), .in_data(sp_wr_data),
      .start(br_start), .busy(branch_busy[3]), .done(br_done[3]),
      .rd_addr(br_rd_addr), .rd_data(br_rd_data[3]));
  end else begin : g_no_pool
    assign branch_busy[3] = 1'b0;
    assign br_done[3]     = 1'b0;
    assign br_rd_data[3]  = '0;
  end

  // combine_output
  logic        cb_start, cb_busy, cb_done, cb_we;
  logic [1:0]  cb_sel;
  logic [31:0] cb_addr;
  data_t       cb_data;

  combine_output #(.NB(4), .WORDS(BR_WORDS)) u_combine (
    .clk, .rst_n, .start(cb_start), .busy(cb_busy), .done(cb_done),
    .sel(cb_sel), .br_addr(br_rd_addr), .br_data(br_rd_data),
    .out_we(cb_we), .out_addr(cb_addr), .out_data(cb_data));

  assign out_data = obuf[out_addr];
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (in_we) ibuf[in_addr] <= in_data;
    if (cb_we) obuf[cb_addr] <= cb_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      sp_start  <= 1'b0;
      br_start  <= 1'b0;
      cb_start  <= 1'b0;
      done      <= 1'b0;
      br_done_q <= '0;
    end else begin
      sp_start <= 1'b0;
      br_start <= 1'b0;
      cb_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sp_start <= 1'b1;
          state    <= S_SPLIT;
        end
        S_SPLIT: if (sp_done) begin
          br_start  <= 1'b1;
          br_done_q <= ~present;
          state     <= S_RUN;
        end
        S_RUN: begin
          br_done_q <= br_done_q | br_done;
          if (&(br_done_q | br_done) && !br_start) begin
            cb_start <= 1'b1;
            state    <= S_COMBINE;
          end
        end
        S_COMBINE: if (cb_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Input and weights may only be loaded while the module is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (in_we || wt_we || b_we) |-> !busy);
  initial assert (!(HAS_CONV3 && CONV3_ALG == ALG_FFT) && !(HAS_CONV5 && CONV5_ALG == ALG_WINO))
    else $error("inception_module: unsupported algorithm for a branch");
endmodule
