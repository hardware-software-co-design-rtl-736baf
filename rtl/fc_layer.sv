// fc_layer: fully connected layer, y[o] = b[o] + sum_i W[o][i] * x[i], for the
// 896-input, 14-output last layer of the DLWSS network.
//
// The paper finds that the FC layer needs no tiling because its inputs and
// weights are small, so all NOUT x NIN weights and NOUT biases are held on chip.
// A run is started with a one-cycle start pulse. If load_w is high on that
// cycle the layer first takes NOUT biases and then the NOUT x NIN weights
// (o-major) from the input stream and keeps them for later runs; it then takes
// the NIN inputs. Each accepted input word is multiplied with the weights of all
// NOUT outputs in parallel (NOUT multipliers, one weight bank per output, read
// synchronously), so inference takes NIN accepted words plus two cycles. The
// NOUT results, in the <25,9> activation format (truncated and saturated), are
// then streamed out, one word per cycle while m_tready is high, m_tlast on the
// last. No activation is applied: the sigmoid of the network runs in software on
// the ARM processor, as in the paper's chosen partitioning. The load_w mode and
// the word order are choices of this design.
module fc_layer
  import dlwss_pkg::*;
#(
  parameter int NIN  = 896,
  parameter int NOUT = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              load_w,
  output logic              busy,
  output logic              done,
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [AXIS_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast
);
  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_WGT, S_INP, S_FLUSH, S_OUT} state_t;
  state_t state;

  wgt_t w_mem [NOUT][NIN];
  act_t bias  [NOUT];
  acc_t acc   [NOUT];
  wgt_t w_rd  [NOUT];
  act_t x_q;
  logic x_v;
  int   co, ci;          // load / output counters

  assign s_tready = (state == S_BIAS) || (state == S_WGT) || (state == S_INP);
  assign busy     = (state != S_IDLE);
  wire accept = s_tvalid && s_tready;

  // weight banks: write while loading, read the column of the incoming input
  always_ff @(posedge clk) begin
    for (int o = 0; o < NOUT; o++) begin
      if (accept && state == S_WGT && co == o) w_mem[o][ci] <= wgt_t'(s_tdata);
      w_rd[o] <= w_mem[o][ci];
    end
  end

  assign m_tvalid = (state == S_OUT);
  assign m_tdata  = AXIS_W'(acc_to_act(acc[co]));
  assign m_tlast  = m_tvalid && (co == NOUT-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      co <= 0; ci <= 0; x_v <= 1'b0; x_q <= '0; done <= 1'b0;
      for (int o = 0; o < NOUT; o++) begin
        acc[o] <= '0; bias[o] <= '0;
      end
    end else begin
      done <= 1'b0;
      x_v  <= 1'b0;
      // accumulate the input accepted in the previous cycle
      if (x_v)
        for (int o = 0; o < NOUT; o++)
          acc[o] <= acc[o] + acc_t'(x_q) * acc_t'(w_rd[o]);
      case (state)
        S_IDLE: if (start) begin
          co <= 0; ci <= 0;
          for (int o = 0; o < NOUT; o++) acc[o] <= act_to_acc(bias[o]);
          state <= load_w ? S_BIAS : S_INP;
        end
        S_BIAS: if (accept) begin
          bias[co] <= act_t'(s_tdata);
          if (co == NOUT-1) begin co <= 0; state <= S_WGT; end
          else co <= co + 1;
        end
        S_WGT: if (accept) begin
          if (ci == NIN-1) begin
            ci <= 0;
            if (co == NOUT-1) begin
              co <= 0;
              for (int o = 0; o < NOUT; o++) acc[o] <= act_to_acc(bias[o]);
              state <= S_INP;
            end else co <= co + 1;
          end else ci <= ci + 1;
        end
        S_INP: if (accept) begin
          x_q <= act_t'(s_tdata);
          x_v <= 1'b1;
          if (ci == NIN-1) begin ci <= 0; state <= S_FLUSH; end
          else ci <= ci + 1;
        end
        S_FLUSH: if (!x_v) begin co <= 0; state <= S_OUT; end
        S_OUT: if (m_tready) begin
          if (co == NOUT-1) begin co <= 0; done <= 1'b1; state <= S_IDLE; end
          else co <= co + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_m_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
