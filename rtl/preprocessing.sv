// preprocessing: the DLWSS pre-processing stage. From the K x N complex sensing
// matrix A and the K x Q complex sub-Nyquist samples Y it computes the
// pseudo-recovered spectrum X~ = A_pinv Y with A_pinv = (A^H A)^-1 A^H, splits it
// into real and imaginary planes and normalizes it for the CNN.
//
// Structure (after the paper's pre-processing figure): an A buffer and a Z
// buffer (the samples Y) feed a Conjugate block, a first Matrix Multiplication
// (A_sq = A^H A), the Matrix Inversion (LU), a second Matrix Multiplication
// (A_pinv = A_sq^-1 A^H), a third Matrix Multiplication (X~ = A_pinv Y, the
// samples read from the Z buffer) and Normalization. The stages run one after
// the other, each as its own unit.
//
// Input stream (64-bit words {im, re}, Q16.16 parts): A row by row (K*N words),
// then Y snapshot by snapshot, each snapshot its K samples (K*Q words).
// Output stream (32-bit words, <25,9> activations sign-extended): the real plane
// X[n][q] for n < N, q < Q, then the imaginary plane, i.e. a 2 x N x Q tensor in
// channel, band, sample order (the 14x299x2 input of the first CNN layer); one
// word every two cycles, m_tlast on the last. start runs one frame; done pulses
// after the last output word. The word formats and orders, and the
// normalization rule (see normalize), are choices of this design.
//
// Note that the left pseudo-inverse exists only when A has full column rank
// (K >= N). With the paper's K = 8 ADCs and N = 14 bands A^H A is singular; the
// inverter then saturates and the output is not meaningful. The structure
// follows the paper's algorithm as given.
module preprocessing
  import dlwss_pkg::*;
#(
  parameter int K = 8,     // ADCs (rows of A)
  parameter int N = 14,    // frequency bands (columns of A)
  parameter int Q = 299    // snapshots per ADC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic [63:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  output logic [31:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  output int          inv_swaps
);
  typedef enum logic [3:0] {S_IDLE, S_LDA, S_LDY, S_MM1, S_INV, S_MM2, S_MM3,
                            S_NRM, S_OUT} state_t;
  state_t state;

  // A buffer, Z buffer, X~ buffer
  cplx_t a_buf [K][N];
  cplx_t z_mem [Q][K];
  cplx_t x_mem [N*Q];
  cplx_t ah    [N][K];
  cplx_t asq   [N][N];
  cplx_t apinv [N][K];
  cplx_t ainv  [N][N];

  int   ca, cb, cc;
  logic out_ok;
  logic go1, go2, go3, goi, gon;
  cplx_t in_word;
  assign in_word = s_tdata;

  assign s_tready = (state == S_LDA) || (state == S_LDY);
  assign busy     = (state != S_IDLE);
  wire accept = s_tvalid && s_tready;

  // Conjugate
  cmat_conj_transpose #(.R(K), .C(N)) u_conj (.m(a_buf), .t(ah));

  // Matrix Multiplication 1: A_sq = A^H A
  int    l1r, r1c, p1i, p1j;
  cplx_t l1v [K], r1v [K], p1;
  logic  p1v, b1, d1;
  cmat_mult #(.M(N), .KD(K), .NC(N)) u_mm1 (
    .clk, .rst_n, .start(go1), .busy(b1), .done(d1), .l_row(l1r), .r_col(r1c),
    .lvec(l1v), .rvec(r1v), .res_valid(p1v), .res_i(p1i), .res_j(p1j), .res(p1));

  // Matrix Inversion
  logic bi, di;
  cmat_inv_lu #(.N(N)) u_inv (
    .clk, .rst_n, .start(goi), .a_in(asq), .busy(bi), .done(di), .inv(ainv),
    .swaps(inv_swaps));

  // Matrix Multiplication 2: A_pinv = A_sq^-1 A^H
  int    l2r, r2c, p2i, p2j;
  cplx_t l2v [N], r2v [N], p2;
  logic  p2v, b2, d2;
  cmat_mult #(.M(N), .KD(N), .NC(K)) u_mm2 (
    .clk, .rst_n, .start(go2), .busy(b2), .done(d2), .l_row(l2r), .r_col(r2c),
    .lvec(l2v), .rvec(r2v), .res_valid(p2v), .res_i(p2i), .res_j(p2j), .res(p2));

  // Matrix Multiplication 3: X~ = A_pinv Y
  int    l3r, r3c, p3i, p3j;
  cplx_t l3v [K], r3v [K], p3;
  logic  p3v, b3, d3;
  cmat_mult #(.M(N), .KD(K), .NC(Q)) u_mm3 (
    .clk, .rst_n, .start(go3), .busy(b3), .done(d3), .l_row(l3r), .r_col(r3c),
    .lvec(l3v), .rvec(r3v), .res_valid(p3v), .res_i(p3i), .res_j(p3j), .res(p3));

  // Normalization
  logic        nrdy;
  logic [31:0] nmax;
  cpart_t      nx;
  act_t        ny;
  normalize u_norm (
    .clk, .rst_n, .clr(go3), .upd(p3v), .upd_x(p3), .calc(gon), .ready(nrdy),
    .max_abs(nmax), .x_in(nx), .y_out(ny));

  // operand reads (one cycle of latency) and buffer writes
  cplx_t x_rd;
  always_ff @(posedge clk) begin
    for (int k = 0; k < K; k++) begin
      l1v[k] <= ah[l1r][k];
      r1v[k] <= a_buf[k][r1c];
      l3v[k] <= apinv[l3r][k];
      r3v[k] <= z_mem[r3c][k];
    end
    for (int k = 0; k < N; k++) begin
      l2v[k] <= ainv[l2r][k];
      r2v[k] <= ah[k][r2c];
    end
    if (state == S_LDA && accept) a_buf[ca][cb] <= in_word;
    if (state == S_LDY && accept) z_mem[cb][ca] <= in_word;
    if (p1v) asq[p1i][p1j]     <= p1;
    if (p2v) apinv[p2i][p2j]   <= p2;
    if (p3v) x_mem[p3i*Q+p3j]  <= p3;
    x_rd <= x_mem[cb*Q+cc];
  end

  assign nx       = (ca == 0) ? x_rd.re : x_rd.im;
  assign m_tdata  = 32'(ny);
  assign m_tvalid = (state == S_OUT) && out_ok;
  assign m_tlast  = m_tvalid && (ca == 1) && (cb == N-1) && (cc == Q-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; out_ok <= 1'b0;
      ca <= 0; cb <= 0; cc <= 0;
      go1 <= 1'b0; go2 <= 1'b0; go3 <= 1'b0; goi <= 1'b0; gon <= 1'b0;
    end else begin
      done <= 1'b0;
      go1 <= 1'b0; go2 <= 1'b0; go3 <= 1'b0; goi <= 1'b0; gon <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          ca <= 0; cb <= 0; state <= S_LDA;
        end
        S_LDA: if (accept) begin            // ca = row k, cb = column n
          if (cb == N-1) begin
            cb <= 0;
            if (ca == K-1) begin ca <= 0; state <= S_LDY; end
            else ca <= ca + 1;
          end else cb <= cb + 1;
        end
        S_LDY: if (accept) begin            // cb = snapshot q, ca = ADC k
          if (ca == K-1) begin
            ca <= 0;
            if (cb == Q-1) begin cb <= 0; go1 <= 1'b1; state <= S_MM1; end
            else cb <= cb + 1;
          end else ca <= ca + 1;
        end
        S_MM1: if (d1) begin goi <= 1'b1; state <= S_INV; end
        // the inverter reads asq when it starts, one cycle after the last write
        S_INV: if (di) begin go2 <= 1'b1; state <= S_MM2; end
        S_MM2: if (d2) begin go3 <= 1'b1; state <= S_MM3; end
        S_MM3: if (d3) begin gon <= 1'b1; state <= S_NRM; end
        S_NRM: if (nrdy) begin
          ca <= 0; cb <= 0; cc <= 0; out_ok <= 1'b0; state <= S_OUT;
        end
        S_OUT: begin                        // ca = re/im, cb = band, cc = sample
          if (!out_ok) out_ok <= 1'b1;
          else if (m_tready) begin
            out_ok <= 1'b0;
            if (cc == Q-1) begin
              cc <= 0;
              if (cb == N-1) begin
                cb <= 0;
                if (ca == 1) begin
                  ca <= 0; done <= 1'b1; state <= S_IDLE;
                end else ca <= 1;
              end else cb <= cb + 1;
            end else cc <= cc + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_m_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
