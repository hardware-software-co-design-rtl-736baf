// cnn_layer: one tiled convolution layer (1 x KW kernels, stride 1, no padding)
// with bias and ReLU, fed and drained by AXI-Stream.
//
// Function: out[o][r][c] = relu(b[o] + sum_i sum_k in[i][r][c+k] * w[o][i][k])
// for o < CO, r < H, c < WO = WI-KW+1, i < CI, k < KW. The defaults are the
// first layer of the DLWSS network (14x299x2 in, 256 filters of 1x150, 14x150x256
// out); the other two layers are instances with other parameters.
//
// Memory tiling: the output is cut into tiles of TO output channels x TR rows x
// TC columns, and the input channels into groups of TI; <TO,TI,TR,TC> defaults to
// <20,16,20,20>, the tiling the paper evaluates its word lengths with. For every
// output tile the layer receives, over the input stream, the tile's TO biases,
// then for every group of TI input channels the weight tile W[o][i][k]
// (o-major, then i, then k) followed by the input tile I[i][r][c'] (c' covering
// TC+KW-1 columns), and it accumulates the group into the on-chip output tile.
// After the last input group the output tile O[o][r][c] is streamed out after
// bias and ReLU, and the next output tile begins. Tiles are visited with the
// output-channel tile outermost, then row tile, then column tile, and tiles at
// the edges are cut to the sizes that remain. The host (DMA) must send the
// words in exactly this order; the order is a choice of this design.
//
// On-chip buffers (block RAM): TI input banks, TO x TI weight banks and TO
// output-accumulator banks, each read synchronously. The MAC array computes one
// output position for all TO output channels at once, each lane summing TI
// products per cycle, so one output position takes KW+2 cycles (KW taps, one
// cycle of read latency, one write-back). The paper's figure sums the products
// of one output element with parallel multipliers and adders then adds the bias
// and applies ReLU; the split of that parallelism (over TO and TI, serial over
// the kernel taps) is this design's choice.
//
// Stream words are 32 bits, sign-extended: activations and biases in <25,9>,
// weights in <16,2> (low 16 bits). Partial sums are kept at full precision
// (30 fraction bits) across input groups; the result is shifted to 16 fraction
// bits by truncation and saturated to 25 bits, then ReLU is applied.
//
// Control: a one-cycle start pulse runs the whole layer; done pulses for one
// cycle when the last output word has been accepted. m_tlast marks the last
// word of each output tile.
module cnn_layer
  import dlwss_pkg::*;
#(
  parameter int H  = 14,    // rows (frequency bands)
  parameter int WI = 299,   // input width
  parameter int CI = 2,     // input channels
  parameter int CO = 256,   // filters
  parameter int KW = 150,   // kernel width
  parameter int TO = 20,    // tiling factor, output channels
  parameter int TI = 16,    // tiling factor, input channels
  parameter int TR = 20,    // tiling factor, output rows
  parameter int TC = 20     // tiling factor, output columns
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // input stream: biases, weight tiles, input tiles
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  // output stream: output tiles after ReLU
  output logic [AXIS_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast
);
  localparam int WO  = WI - KW + 1;
  localparam int TOE = (TO < CO) ? TO : CO;
  localparam int TIE = (TI < CI) ? TI : CI;
  localparam int TRE = (TR < H)  ? TR : H;
  localparam int TCE = (TC < WO) ? TC : WO;
  localparam int IWS = TCE + KW - 1;   // width of a stored input tile row
  localparam int IN_D  = TRE * IWS;
  localparam int OUT_D = TRE * TCE;

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_WGT, S_INP, S_MAC, S_WB, S_OUT} state_t;
  state_t state;

  // tile origin and sizes
  int o0, i0, r0, c0;
  int to_n, ti_n, tr_n, tc_n;
  always_comb begin
    to_n = (CO - o0 < TO) ? CO - o0 : TO;
    ti_n = (CI - i0 < TI) ? CI - i0 : TI;
    tr_n = (H  - r0 < TR) ? H  - r0 : TR;
    tc_n = (WO - c0 < TC) ? WO - c0 : TC;
  end

  // load / compute / output counters
  int ca, cb, cc;        // nested counters for loads and output
  int er, ec, k;         // element row, column and tap during MAC

  // on-chip buffers
  act_t in_mem  [TIE][IN_D];
  wgt_t w_mem   [TOE][TIE][KW];
  acc_t out_mem [TOE][OUT_D];
  act_t bias    [TOE];

  act_t in_rd  [TIE];
  wgt_t w_rd   [TOE][TIE];
  acc_t out_rd [TOE];
  acc_t acc    [TOE];

  logic in_we, w_we;
  int   in_waddr;
  int   in_raddr, out_raddr;
  logic mac_v;           // read data of the previous tap is valid
  logic out_ok;          // out_rd holds the word at the current output index
  logic first_grp;
  assign first_grp = (i0 == 0);

  assign s_tready = (state == S_BIAS) || (state == S_WGT) || (state == S_INP);
  assign busy     = (state != S_IDLE);

  wire accept = s_tvalid && s_tready;
  assign in_we    = accept && (state == S_INP);
  assign w_we     = accept && (state == S_WGT);
  assign in_waddr = cb * IWS + cc;

  // read addresses
  always_comb begin
    in_raddr = er * IWS + ec + ((k < KW) ? k : KW-1);
    if (state == S_OUT) out_raddr = cb * TCE + cc;
    else                out_raddr = er * TCE + ec;
  end

  // buffer memories (synchronous read)
  always_ff @(posedge clk) begin
    for (int i = 0; i < TIE; i++) begin
      if (in_we && ca == i) in_mem[i][in_waddr] <= act_t'(s_tdata);
      in_rd[i] <= in_mem[i][in_raddr];
    end
    for (int o = 0; o < TOE; o++)
      for (int i = 0; i < TIE; i++) begin
        if (w_we && ca == o && cb == i) w_mem[o][i][cc] <= wgt_t'(s_tdata);
        w_rd[o][i] <= w_mem[o][i][(k < KW) ? k : KW-1];
      end
    for (int o = 0; o < TOE; o++) begin
      if (state == S_WB)
        out_mem[o][er*TCE+ec] <= (first_grp ? act_to_acc(bias[o]) : out_rd[o]) + acc[o];
      out_rd[o] <= out_mem[o][out_raddr];
    end
  end

  // multiply-accumulate lanes: lane o adds sum_i in_rd[i]*w_rd[o][i]
  acc_t psum [TOE];
  always_comb begin
    for (int o = 0; o < TOE; o++) begin
      psum[o] = '0;
      for (int i = 0; i < TIE; i++)
        if (i < ti_n) psum[o] = psum[o] + acc_t'(in_rd[i]) * acc_t'(w_rd[o][i]);
    end
  end

  // output word: accumulator -> activation format -> ReLU
  act_t out_act, out_relu;
  logic [$clog2(TOE+1)-1:0] out_lane;
  always_comb begin
    out_lane = $bits(out_lane)'(ca);
    out_act  = acc_to_act(out_rd[out_lane]);
  end
  relu #(.W(ACT_W)) u_relu (.x(out_act), .y(out_relu));

  assign m_tdata  = AXIS_W'(out_relu);
  assign m_tvalid = (state == S_OUT) && out_ok;
  assign m_tlast  = m_tvalid && (ca == to_n-1) && (cb == tr_n-1) && (cc == tc_n-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      o0 <= 0; i0 <= 0; r0 <= 0; c0 <= 0;
      ca <= 0; cb <= 0; cc <= 0;
      er <= 0; ec <= 0; k <= 0;
      mac_v <= 1'b0; out_ok <= 1'b0; done <= 1'b0;
      for (int o = 0; o < TOE; o++) begin
        acc[o]  <= '0;
        bias[o] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          o0 <= 0; i0 <= 0; r0 <= 0; c0 <= 0; ca <= 0;
          state <= S_BIAS;
        end
        S_BIAS: if (accept) begin
          bias[ca] <= act_t'(s_tdata);
          if (ca == to_n-1) begin
            ca <= 0; cb <= 0; cc <= 0;
            state <= S_WGT;
          end else ca <= ca + 1;
        end
        S_WGT: if (accept) begin            // ca = o, cb = i, cc = k
          if (cc == KW-1) begin
            cc <= 0;
            if (cb == ti_n-1) begin
              cb <= 0;
              if (ca == to_n-1) begin
                ca <= 0;
                state <= S_INP;
              end else ca <= ca + 1;
            end else cb <= cb + 1;
          end else cc <= cc + 1;
        end
        S_INP: if (accept) begin            // ca = i, cb = r, cc = c'
          if (cc == tc_n+KW-2) begin
            cc <= 0;
            if (cb == tr_n-1) begin
              cb <= 0;
              if (ca == ti_n-1) begin
                ca <= 0;
                er <= 0; ec <= 0; k <= 0; mac_v <= 1'b0;
                state <= S_MAC;
              end else ca <= ca + 1;
            end else cb <= cb + 1;
          end else cc <= cc + 1;
        end
        S_MAC: begin
          // cycle k issues tap k; cycle k+1 accumulates it
          mac_v <= (k < KW);
          for (int o = 0; o < TOE; o++)
            acc[o] <= (k == 0) ? '0 : (mac_v ? acc[o] + psum[o] : acc[o]);
          if (k == KW) state <= S_WB;
          else         k <= k + 1;
        end
        S_WB: begin
          k <= 0; mac_v <= 1'b0;
          if (ec == tc_n-1) begin
            ec <= 0;
            if (er == tr_n-1) begin
              er <= 0;
              if (i0 + TI >= CI) begin      // last input group: drain the tile
                ca <= 0; cb <= 0; cc <= 0; out_ok <= 1'b0;
                state <= S_OUT;
              end else begin
                i0 <= i0 + TI;
                ca <= 0; cb <= 0; cc <= 0;
                state <= S_WGT;
              end
            end else begin
              er <= er + 1;
              state <= S_MAC;
            end
          end else begin
            ec <= ec + 1;
            state <= S_MAC;
          end
        end
        S_OUT: begin                        // ca = o, cb = r, cc = c
          if (!out_ok) out_ok <= 1'b1;      // read latency of the output bank
          else if (m_tready) begin
            out_ok <= 1'b0;
            if (cc == tc_n-1) begin
              cc <= 0;
              if (cb == tr_n-1) begin
                cb <= 0;
                if (ca == to_n-1) begin
                  ca <= 0;
                  // next output tile: column, then row, then output channel
                  i0 <= 0;
                  if (c0 + TC < WO) begin
                    c0 <= c0 + TC; state <= S_BIAS;
                  end else if (r0 + TR < H) begin
                    c0 <= 0; r0 <= r0 + TR; state <= S_BIAS;
                  end else if (o0 + TO < CO) begin
                    c0 <= 0; r0 <= 0; o0 <= o0 + TO; state <= S_BIAS;
                  end else begin
                    done  <= 1'b1;
                    state <= S_IDLE;
                  end
                end else ca <= ca + 1;
              end else cb <= cb + 1;
            end else cc <= cc + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI-Stream rule: a word offered and not taken stays unchanged
  a_m_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
