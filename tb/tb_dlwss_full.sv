// tb_dlwss_full: one complete sensing frame through the DLWSS accelerators with
// every parameter of the top at its default: pre-processing of 8 ADCs x 299
// snapshots into 14 bands, CV1 (256 filters 1x150), CV2 (128 filters 1x100),
// CV3 (64 filters 1x51) with tiling <20,16,20,20>, and the 896 -> 14 FC layer.
//
// The testbench plays the ARM processor, the DMAs and the DDR memory, exactly as
// tb_dlwss_top does for a reduced network (see there). With the default K = 8
// ADCs and N = 14 bands the matrix A^H A of the pseudo-inverse is singular, so
// the pre-processing output cannot be predicted; it is checked for its length
// and framing only, and the CNN layers are then checked exactly against a
// reference computed from whatever the pre-processing produced. Streams run
// without gaps to keep the run short.
module tb_dlwss_full;
  import dlwss_pkg::*;
  localparam int K = 8, N = 14, Q = 299;
  localparam int CO1 = 256, KW1 = 150, CO2 = 128, KW2 = 100, CO3 = 64, KW3 = 51;
  localparam int TO = 20, TI = 16, TR = 20, TC = 20;
  localparam bit GAPS = 0;            // no random gaps or back-pressure
  localparam bit CHECK_PRE = 0;       // A^H A is singular for K < N
  localparam int WATCHDOG = 200000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int WO1 = Q - KW1 + 1, WO2 = WO1 - KW2 + 1, WO3 = WO2 - KW3 + 1;
  localparam int NIN = N * WO3 * CO3;

  logic        pre_start = 0, pre_busy, pre_done;
  int          pre_inv_swaps;
  logic [63:0] pre_s_tdata = '0;
  logic        pre_s_tvalid = 0, pre_s_tready;
  logic [31:0] pre_m_tdata;
  logic        pre_m_tvalid, pre_m_tready = 0, pre_m_tlast;
  logic        cv_start [3] = '{0, 0, 0};
  logic        cv_busy [3], cv_done [3];
  logic [31:0] cv_s_tdata [3];
  logic        cv_s_tvalid [3];
  logic        cv_s_tready [3];
  logic [31:0] cv_m_tdata [3];
  logic        cv_m_tvalid [3];
  logic        cv_m_tready [3];
  logic        cv_m_tlast [3];
  logic        fc_start = 0, fc_load_w = 0, fc_busy, fc_done;
  logic [31:0] fc_s_tdata = '0;
  logic        fc_s_tvalid = 0, fc_s_tready;
  logic [31:0] fc_m_tdata;
  logic        fc_m_tvalid, fc_m_tready = 0, fc_m_tlast;

  dlwss_top dut (.*);

  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0, n_in_wait = 0, n_out_stall = 0, n_multi_grp = 0, n_edge = 0;

  function automatic int min2(int a, int b); return a < b ? a : b; endfunction

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL: %s", s);
  endtask

  // ---------------- "DDR" contents ----------------
  int act0[], act1[], act2[], act3[];
  int w1[], w2[], w3[], b1[], b2[], b3[];
  int wf[], bf[];
  int ref1[], ref2[], ref3[], reff[];

  function automatic int rnd_w(input int fan_in);
    int lim;
    lim = int'(16384.0 * 1.7 / $sqrt(real'(fan_in)));
    if (lim > 32767) lim = 32767;
    return $signed($urandom_range(2*lim)) - lim;
  endfunction

  // reference convolution + bias + ReLU in 64-bit integers
  task automatic conv_ref(input int H, WI, CI, CO, KW, ref int in_a[], ref int w_a[],
                          ref int b_a[], ref int out_a[]);
    int WO;
    WO = WI - KW + 1;
    out_a = new[CO*H*WO];
    for (int o = 0; o < CO; o++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < WO; c++) begin
          longint s;
          s = longint'(b_a[o]) * 16384;
          for (int i = 0; i < CI; i++)
            for (int k = 0; k < KW; k++)
              s += longint'(in_a[(i*H + r)*WI + c+k]) * longint'(w_a[(o*CI + i)*KW + k]);
          s = s >>> 14;
          if (s > 16777215) begin s = 16777215; n_sat++; end
          if (s < -16777216) begin s = -16777216; n_sat++; end
          if (s < 0) begin s = 0; n_relu++; end
          out_a[(o*H + r)*WO + c] = int'(s);
        end
  endtask

  // stream engines of the three layer DMAs: each pops words from its queue
  // and compares each output word with the next expected one
  int   sq [3][$];          // words to send
  int   eq [3][$];          // expected output words
  bit   el [3][$];          // expected tlast
  int   oq [3][$];          // received output words
  always @(posedge clk) begin
    for (int L = 0; L < 3; L++) begin
      // input side
      if (cv_s_tvalid[L] && !cv_s_tready[L]) n_in_wait++;
      if (!cv_s_tvalid[L] || cv_s_tready[L]) begin
        if (sq[L].size() > 0 && !(GAPS && $urandom_range(7) == 0)) begin
          cv_s_tdata[L]  <= sq[L].pop_front();
          cv_s_tvalid[L] <= 1'b1;
        end else cv_s_tvalid[L] <= 1'b0;
      end
      // output side
      if (cv_m_tvalid[L] && !cv_m_tready[L]) n_out_stall++;
      if (cv_m_tvalid[L] && cv_m_tready[L]) begin
        int e;
        bit l;
        checks++;
        if (eq[L].size() == 0) fail($sformatf("CV%0d: unexpected output word", L+1));
        else begin
          e = eq[L].pop_front();
          l = el[L].pop_front();
          if (int'($signed(cv_m_tdata[L])) != e || cv_m_tlast[L] != l)
            fail($sformatf("CV%0d output word %0d: got %0d exp %0d, tlast %0b", L+1, oq[L].size(),
                           $signed(cv_m_tdata[L]), e, cv_m_tlast[L]));
        end
        oq[L].push_back(int'($signed(cv_m_tdata[L])));
      end
      cv_m_tready[L] <= GAPS ? ($urandom_range(3) != 0) : 1'b1;
    end
  end

  // host side of one convolution layer: queue the tiles in the layer's order,
  // start it, wait for done, then scatter the received tiles into DDR layout
  task automatic run_layer(input int L, H, WI, CI, CO, KW, ref int in_a[], ref int w_a[],
                           ref int b_a[], ref int exp_a[], ref int out_a[]);
    int WO, n;
    WO = WI - KW + 1;
    out_a = new[CO*H*WO];
    for (int o0 = 0; o0 < CO; o0 += TO)
      for (int r0 = 0; r0 < H; r0 += TR)
        for (int c0 = 0; c0 < WO; c0 += TC) begin
          int ton, trn, tcn;
          ton = min2(TO, CO-o0); trn = min2(TR, H-r0); tcn = min2(TC, WO-c0);
          if (ton < TO || trn < TR || tcn < TC) n_edge++;
          if (CI > TI) n_multi_grp++;
          for (int o = 0; o < ton; o++) sq[L].push_back(b_a[o0+o]);
          for (int i0 = 0; i0 < CI; i0 += TI) begin
            int tin;
            tin = min2(TI, CI-i0);
            for (int o = 0; o < ton; o++)
              for (int i = 0; i < tin; i++)
                for (int k = 0; k < KW; k++) sq[L].push_back(w_a[((o0+o)*CI + i0+i)*KW + k]);
            for (int i = 0; i < tin; i++)
              for (int r = 0; r < trn; r++)
                for (int c = 0; c < tcn+KW-1; c++) sq[L].push_back(in_a[((i0+i)*H + r0+r)*WI + c0+c]);
          end
          for (int o = 0; o < ton; o++)
            for (int r = 0; r < trn; r++)
              for (int c = 0; c < tcn; c++) begin
                eq[L].push_back(exp_a[((o0+o)*H + r0+r)*WO + c0+c]);
                el[L].push_back(o == ton-1 && r == trn-1 && c == tcn-1);
              end
        end
    @(negedge clk); cv_start[L] = 1'b1; @(negedge clk); cv_start[L] = 1'b0;
    @(posedge cv_done[L]);
    repeat (2) @(posedge clk);
    checks++;
    if (cv_busy[L] || eq[L].size() != 0 || sq[L].size() != 0)
      fail($sformatf("CV%0d ended with %0d words unsent, %0d outputs missing", L+1, sq[L].size(), eq[L].size()));
    n = 0;
    for (int o0 = 0; o0 < CO; o0 += TO)
      for (int r0 = 0; r0 < H; r0 += TR)
        for (int c0 = 0; c0 < WO; c0 += TC) begin
          int ton, trn, tcn;
          ton = min2(TO, CO-o0); trn = min2(TR, H-r0); tcn = min2(TC, WO-c0);
          for (int o = 0; o < ton; o++)
            for (int r = 0; r < trn; r++)
              for (int c = 0; c < tcn; c++) begin
                out_a[((o0+o)*H + r0+r)*WO + c0+c] = (n < oq[L].size()) ? oq[L][n] : 0;
                n++;
              end
        end
    oq[L].delete();
  endtask

  task automatic pre_send(input real re, input real im);
    @(negedge clk);
    pre_s_tdata = {32'($rtoi(im * 65536.0)), 32'($rtoi(re * 65536.0))};
    pre_s_tvalid = 1'b1;
    #1;
    while (!pre_s_tready) @(negedge clk);
    @(posedge clk);
    #1 pre_s_tvalid = 1'b0;
  endtask

  task automatic fc_send(input int v);
    @(negedge clk);
    fc_s_tdata = v; fc_s_tvalid = 1'b1;
    #1;
    while (!fc_s_tready) @(negedge clk);
    @(posedge clk);
    #1 fc_s_tvalid = 1'b0;
  endtask

  real ar [K][N], ai [K][N], xr [N][Q], xi [N][Q];

  initial begin
    real mx;
    longint t0;
    // ---- spectrum and sensing matrix ----
    mx = 0;
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++) begin
        ar[k][n] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        ai[k][n] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      end
    // column 1 leans on column 0, so column 0 of A^H A needs a row exchange
    for (int k = 0; k < K; k++) begin
      ar[k][0] = 0.5 * ar[k][0]; ai[k][0] = 0.5 * ai[k][0];
      ar[k][1] = 0.5 * ar[k][1] + 2.0 * ar[k][0];
      ai[k][1] = 0.5 * ai[k][1] + 2.0 * ai[k][0];
    end
    for (int n = 0; n < N; n++)
      for (int q = 0; q < Q; q++) begin
        bit occ;
        occ = (n % 3 == 0);                   // sparse: every third band occupied
        xr[n][q] = occ ? (real'($urandom_range(2000)) - 1000.0) / 1000.0 : 0.0;
        xi[n][q] = occ ? (real'($urandom_range(2000)) - 1000.0) / 1000.0 : 0.0;
        if (xr[n][q] > mx) mx = xr[n][q];
        if (-xr[n][q] > mx) mx = -xr[n][q];
        if (xi[n][q] > mx) mx = xi[n][q];
        if (-xi[n][q] > mx) mx = -xi[n][q];
      end
    // ---- weights ----
    w1 = new[CO1*2*KW1];    foreach (w1[i]) w1[i] = rnd_w(2*KW1);
    w2 = new[CO2*CO1*KW2];  foreach (w2[i]) w2[i] = rnd_w(CO1*KW2);
    w3 = new[CO3*CO2*KW3];  foreach (w3[i]) w3[i] = rnd_w(CO2*KW3);
    b1 = new[CO1]; foreach (b1[i]) b1[i] = $signed($urandom_range(16384)) - 8192;
    b2 = new[CO2]; foreach (b2[i]) b2[i] = $signed($urandom_range(16384)) - 8192;
    b3 = new[CO3]; foreach (b3[i]) b3[i] = $signed($urandom_range(16384)) - 8192;
    // one large weight in CV1 to drive a few outputs into saturation
    w1[0] = 32767; w1[1] = 32767; w1[2] = 32767;
    b1[0] = 16777215 - 65536;
    wf = new[N*NIN]; foreach (wf[i]) wf[i] = rnd_w(NIN);
    bf = new[N];     foreach (bf[i]) bf[i] = $signed($urandom_range(65536)) - 32768;

    for (int L = 0; L < 3; L++) begin
      cv_s_tdata[L] = '0; cv_s_tvalid[L] = 1'b0; cv_m_tready[L] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- pre-processing ----
    t0 = $time;
    @(negedge clk); pre_start = 1'b1; @(negedge clk); pre_start = 1'b0;
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) pre_send(ar[k][n], ai[k][n]);
    for (int q = 0; q < Q; q++)
      for (int k = 0; k < K; k++) begin
        real yr, yi;
        yr = 0; yi = 0;
        for (int n = 0; n < N; n++) begin
          yr += ar[k][n]*xr[n][q] - ai[k][n]*xi[n][q];
          yi += ar[k][n]*xi[n][q] + ai[k][n]*xr[n][q];
        end
        pre_send(yr, yi);
      end
    act0 = new[2*N*Q];
    for (int c = 0; c < 2; c++)
      for (int n = 0; n < N; n++)
        for (int q = 0; q < Q; q++) begin
          real e, g;
          forever begin
            @(negedge clk);
            pre_m_tready = GAPS ? ($urandom_range(3) != 0) : 1'b1;
            #1;
            if (pre_m_tvalid && !pre_m_tready) n_out_stall++;
            if (pre_m_tvalid && pre_m_tready) break;
          end
          act0[(c*N + n)*Q + q] = int'($signed(pre_m_tdata));
          g = real'($signed(pre_m_tdata)) / 65536.0;
          e = (c == 0 ? xr[n][q] : xi[n][q]) / mx;
          checks++;
          if (pre_m_tlast != (c == 1 && n == N-1 && q == Q-1))
            fail("pre-processing tlast");
          if (CHECK_PRE && (g - e > 0.0078 || e - g > 0.0078))
            fail($sformatf("pre ch %0d band %0d sample %0d: got %f exp %f", c, n, q, g, e));
          @(posedge clk);
          #1 pre_m_tready = 1'b0;
        end
    $display("pre-processing: %0d cycles, %0d row exchanges", ($time - t0) / 10, pre_inv_swaps);

    // ---- convolution layers ----
    conv_ref(N, Q, 2, CO1, KW1, act0, w1, b1, ref1);
    t0 = $time;
    run_layer(0, N, Q, 2, CO1, KW1, act0, w1, b1, ref1, act1);
    $display("CV1: %0d cycles", ($time - t0) / 10);
    conv_ref(N, WO1, CO1, CO2, KW2, act1, w2, b2, ref2);
    t0 = $time;
    run_layer(1, N, WO1, CO1, CO2, KW2, act1, w2, b2, ref2, act2);
    $display("CV2: %0d cycles", ($time - t0) / 10);
    conv_ref(N, WO2, CO2, CO3, KW3, act2, w3, b3, ref3);
    t0 = $time;
    run_layer(2, N, WO2, CO2, CO3, KW3, act2, w3, b3, ref3, act3);
    $display("CV3: %0d cycles", ($time - t0) / 10);

    // ---- FC (flatten in channel, row, column order) ----
    reff = new[N];
    for (int o = 0; o < N; o++) begin
      longint s;
      s = longint'(bf[o]) * 16384;
      for (int i = 0; i < NIN; i++) s += longint'(act3[i]) * longint'(wf[o*NIN + i]);
      s = s >>> 14;
      if (s > 16777215) s = 16777215;
      if (s < -16777216) s = -16777216;
      reff[o] = int'(s);
    end
    t0 = $time;
    @(negedge clk); fc_start = 1'b1; fc_load_w = 1'b1;
    @(negedge clk); fc_start = 1'b0; fc_load_w = 1'b0;
    for (int o = 0; o < N; o++) fc_send(bf[o]);
    for (int i = 0; i < N*NIN; i++) fc_send(wf[i]);
    for (int i = 0; i < NIN; i++) fc_send(act3[i]);
    for (int o = 0; o < N; o++) begin
      real p;
      @(negedge clk);
      fc_m_tready = 1'b1;
      #1;
      while (!fc_m_tvalid) begin @(negedge clk); #1; end
      checks++;
      if (int'($signed(fc_m_tdata[24:0])) != reff[o] || fc_m_tlast != (o == N-1))
        fail($sformatf("FC out %0d got %0d exp %0d", o, $signed(fc_m_tdata[24:0]), reff[o]));
      // software sigmoid and band decision, as on the ARM processor
      p = 1.0 / (1.0 + $exp(-real'($signed(fc_m_tdata[24:0])) / 65536.0));
      $display("band %0d: logit %f  p(occupied) %f  -> %s", o,
               real'($signed(fc_m_tdata[24:0])) / 65536.0, p, p > 0.5 ? "occupied" : "vacant");
      @(posedge clk);
      #1 fc_m_tready = 1'b0;
    end
    $display("FC: %0d cycles", ($time - t0) / 10);

    // ---- mechanisms ----
    $display("row exchanges %0d, multi-group tiles %0d, edge tiles %0d, relu clips %0d, saturations %0d, input waits %0d, output stalls %0d",
             pre_inv_swaps, n_multi_grp, n_edge, n_relu, n_sat, n_in_wait, n_out_stall);
    checks++; if (pre_inv_swaps == 0) fail("no row exchange in the LU inversion");
    checks++; if (n_multi_grp == 0)   fail("no accumulation over input-channel groups");
    checks++; if (n_edge == 0)        fail("no edge tile");
    checks++; if (n_relu == 0)        fail("no ReLU clipping");
    checks++; if (n_sat == 0)         fail("no saturation");
    checks++; if (n_in_wait == 0)     fail("no input stall");
    checks++; if (GAPS && n_out_stall == 0) fail("no output back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
