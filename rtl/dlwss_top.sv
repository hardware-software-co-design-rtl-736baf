// dlwss_top: programmable-logic part of the DLWSS wideband spectrum sensor.
//
// It holds the AXI-Stream accelerators of the paper's Zynq architecture: the
// pre-processing stage (pseudo-recovered, normalized spectrum from sub-Nyquist
// samples), the three convolution layers and the fully connected layer of the
// CNN. In the paper each accelerator sits behind its own AXI DMA and the ARM
// processor schedules them through DDR memory: the output of one stage goes to
// DDR and is streamed, tile by tile, into the next. The DMAs, the interconnect
// and the processor are not part of this RTL, so every accelerator's stream
// pair and its start/busy/done control are ports of this module, with the
// prefixes pre_, cv1_, cv2_, cv3_ and fc_. The sigmoid of the output and the
// band decision run in software, as in the paper's chosen partitioning.
//
// Network (defaults, from the paper's CNN table): input 14 bands x 299 samples
// x 2 (real, imaginary); CV1 256 filters 1x150 -> 14x150x256; CV2 128 filters
// 1x100 -> 14x51x128; CV3 64 filters 1x51 -> 14x1x64; flatten 896 -> FC -> 14.
// All layers use the tiling <TO,TI,TR,TC> = <20,16,20,20> and the fixed-point
// word lengths <25,9> (activations) and <16,2> (weights). Pre-processing uses
// K = 8 ADCs, N = 14 bands and Q = 299 snapshots.
module dlwss_top
  import dlwss_pkg::*;
#(
  parameter int K   = 8,
  parameter int N   = 14,
  parameter int Q   = 299,
  parameter int CO1 = 256, parameter int KW1 = 150,
  parameter int CO2 = 128, parameter int KW2 = 100,
  parameter int CO3 = 64,  parameter int KW3 = 51,
  parameter int TO  = 20,  parameter int TI  = 16,
  parameter int TR  = 20,  parameter int TC  = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  // pre-processing
  input  logic        pre_start,
  output logic        pre_busy,
  output logic        pre_done,
  output int          pre_inv_swaps,
  input  logic [63:0] pre_s_tdata,
  input  logic        pre_s_tvalid,
  output logic        pre_s_tready,
  output logic [31:0] pre_m_tdata,
  output logic        pre_m_tvalid,
  input  logic        pre_m_tready,
  output logic        pre_m_tlast,
  // convolution layers 1..3 (index 0..2)
  input  logic        cv_start    [3],
  output logic        cv_busy     [3],
  output logic        cv_done     [3],
  input  logic [31:0] cv_s_tdata  [3],
  input  logic        cv_s_tvalid [3],
  output logic        cv_s_tready [3],
  output logic [31:0] cv_m_tdata  [3],
  output logic        cv_m_tvalid [3],
  input  logic        cv_m_tready [3],
  output logic        cv_m_tlast  [3],
  // fully connected layer
  input  logic        fc_start,
  input  logic        fc_load_w,
  output logic        fc_busy,
  output logic        fc_done,
  input  logic [31:0] fc_s_tdata,
  input  logic        fc_s_tvalid,
  output logic        fc_s_tready,
  output logic [31:0] fc_m_tdata,
  output logic        fc_m_tvalid,
  input  logic        fc_m_tready,
  output logic        fc_m_tlast
);
  localparam int WO1 = Q   - KW1 + 1;
  localparam int WO2 = WO1 - KW2 + 1;
  localparam int WO3 = WO2 - KW3 + 1;

  preprocessing #(.K(K), .N(N), .Q(Q)) u_pre (
    .clk, .rst_n, .start(pre_start), .busy(pre_busy), .done(pre_done),
    .s_tdata(pre_s_tdata), .s_tvalid(pre_s_tvalid), .s_tready(pre_s_tready),
    .m_tdata(pre_m_tdata), .m_tvalid(pre_m_tvalid), .m_tready(pre_m_tready),
    .m_tlast(pre_m_tlast), .inv_swaps(pre_inv_swaps));

  cnn_layer #(.H(N), .WI(Q), .CI(2), .CO(CO1), .KW(KW1),
              .TO(TO), .TI(TI), .TR(TR), .TC(TC)) u_cv1 (
    .clk, .rst_n, .start(cv_start[0]), .busy(cv_busy[0]), .done(cv_done[0]),
    .s_tdata(cv_s_tdata[0]), .s_tvalid(cv_s_tvalid[0]), .s_tready(cv_s_tready[0]),
    .m_tdata(cv_m_tdata[0]), .m_tvalid(cv_m_tvalid[0]), .m_tready(cv_m_tready[0]),
    .m_tlast(cv_m_tlast[0]));

  cnn_layer #(.H(N), .WI(WO1), .CI(CO1), .CO(CO2), .KW(KW2),
              .TO(TO), .TI(TI), .TR(TR), .TC(TC)) u_cv2 (
    .clk, .rst_n, .start(cv_start[1]), .busy(cv_busy[1]), .done(cv_done[1]),
    .s_tdata(cv_s_tdata[1]), .s_tvalid(cv_s_tvalid[1]), .s_tready(cv_s_tready[1]),
    .m_tdata(cv_m_tdata[1]), .m_tvalid(cv_m_tvalid[1]), .m_tready(cv_m_tready[1]),
    .m_tlast(cv_m_tlast[1]));

  cnn_layer #(.H(N), .WI(WO2), .CI(CO2), .CO(CO3), .KW(KW3),
              .TO(TO), .TI(TI), .TR(TR), .TC(TC)) u_cv3 (
    .clk, .rst_n, .start(cv_start[2]), .busy(cv_busy[2]), .done(cv_done[2]),
    .s_tdata(cv_s_tdata[2]), .s_tvalid(cv_s_tvalid[2]), .s_tready(cv_s_tready[2]),
    .m_tdata(cv_m_tdata[2]), .m_tvalid(cv_m_tvalid[2]), .m_tready(cv_m_tready[2]),
    .m_tlast(cv_m_tlast[2]));

  fc_layer #(.NIN(N * WO3 * CO3), .NOUT(N)) u_fc (
    .clk, .rst_n, .start(fc_start), .load_w(fc_load_w), .busy(fc_busy), .done(fc_done),
    .s_tdata(fc_s_tdata), .s_tvalid(fc_s_tvalid), .s_tready(fc_s_tready),
    .m_tdata(fc_m_tdata), .m_tvalid(fc_m_tvalid), .m_tready(fc_m_tready),
    .m_tlast(fc_m_tlast));

endmodule
