// tb_cnn_layer: self-checking test of the tiled convolution layer.
//
// Small layer (3 rows, width 9, 5 input channels, 7 filters of 1x3) with tiling
// <3,2,2,3>, so every tile dimension has a cut edge tile and the output tile is
// accumulated over three input-channel groups. The testbench acts as the host:
// it streams biases, weight tiles and input tiles in the layer's order with
// random gaps, drains the output with random back-pressure, and compares every
// output word with a reference convolution computed here in 64-bit integers.
// It also checks the number of output words per tile (tlast) and in total.
module tb_cnn_layer;
  localparam int H = 3, WI = 9, CI = 5, CO = 7, KW = 3;
  localparam int TO = 3, TI = 2, TR = 2, TC = 3;
  localparam int WO = WI - KW + 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [31:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, m_tlast;
  always #5 clk = ~clk;

  cnn_layer #(.H(H), .WI(WI), .CI(CI), .CO(CO), .KW(KW),
              .TO(TO), .TI(TI), .TR(TR), .TC(TC)) dut (.*);

  int checks = 0, failures = 0;
  int in_a [CI*H*WI];
  int w_a  [CO*CI*KW];
  int b_a  [CO];
  int ref_o[CO*H*WO];
  int n_relu = 0, n_sat = 0, n_stall = 0, n_last = 0;

  function automatic int min2(int a, int b); return a < b ? a : b; endfunction

  task automatic send(input int v);
    // drive after the falling edge; the word moves at the next rising edge
    // on which s_tready is high
    @(negedge clk);
    s_tdata  = v;
    s_tvalid = 1'b1;
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    #1 s_tvalid = 1'b0;
    if ($urandom_range(3) == 0) @(posedge clk);
  endtask

  task automatic drive();
    for (int o0 = 0; o0 < CO; o0 += TO)
      for (int r0 = 0; r0 < H; r0 += TR)
        for (int c0 = 0; c0 < WO; c0 += TC) begin
          int ton = min2(TO, CO-o0), trn = min2(TR, H-r0), tcn = min2(TC, WO-c0);
          for (int o = 0; o < ton; o++) send(b_a[o0+o]);
          for (int i0 = 0; i0 < CI; i0 += TI) begin
            int tin = min2(TI, CI-i0);
            for (int o = 0; o < ton; o++)
              for (int i = 0; i < tin; i++)
                for (int k = 0; k < KW; k++) send(w_a[((o0+o)*CI + i0+i)*KW + k]);
            for (int i = 0; i < tin; i++)
              for (int r = 0; r < trn; r++)
                for (int c = 0; c < tcn+KW-1; c++) send(in_a[((i0+i)*H + r0+r)*WI + c0+c]);
          end
        end
  endtask

  task automatic collect();
    for (int o0 = 0; o0 < CO; o0 += TO)
      for (int r0 = 0; r0 < H; r0 += TR)
        for (int c0 = 0; c0 < WO; c0 += TC) begin
          int ton = min2(TO, CO-o0), trn = min2(TR, H-r0), tcn = min2(TC, WO-c0);
          for (int o = 0; o < ton; o++)
            for (int r = 0; r < trn; r++)
              for (int c = 0; c < tcn; c++) begin
                logic last_exp;
                last_exp = (o == ton-1) && (r == trn-1) && (c == tcn-1);
                forever begin
                  @(negedge clk);
                  m_tready = ($urandom_range(3) != 0);
                  #1;
                  if (m_tvalid && !m_tready) n_stall++;
                  if (m_tvalid && m_tready) break;
                end
                checks++;
                if ($signed(m_tdata) != ref_o[((o0+o)*H + r0+r)*WO + c0+c] || m_tlast != last_exp) begin
                  failures++;
                  if (failures < 10) $display("MISMATCH o=%0d r=%0d c=%0d got %0d exp %0d last %0b",
                    o0+o, r0+r, c0+c, $signed(m_tdata), ref_o[((o0+o)*H + r0+r)*WO + c0+c], m_tlast);
                end
                if (m_tlast) n_last++;
                @(posedge clk);
              end
        end
    #1 m_tready = 1'b0;
  endtask

  initial begin
    // data: activations up to +-16.0, weights up to +-1.0, one huge input
    // row to force saturation
    foreach (in_a[i]) in_a[i] = $signed($urandom_range(2*(1<<20))) - (1<<20);
    for (int c = 0; c < WI; c++) in_a[(0*H + 1)*WI + c] = 24'h7f0000;   // ~ +127
    for (int c = 0; c < WI; c++) in_a[(1*H + 1)*WI + c] = 24'h7f0000;
    foreach (w_a[i])  w_a[i]  = $signed($urandom_range(2*(1<<14))) - (1<<14);
    for (int o = 0; o < CO; o++) begin
      w_a[(o*CI + 0)*KW + 0] = 16'sh1fff; w_a[(o*CI + 1)*KW + 0] = 16'sh1fff;
      w_a[(o*CI + 0)*KW + 1] = 16'sh1fff; w_a[(o*CI + 1)*KW + 1] = 16'sh1fff;
    end
    foreach (b_a[i])  b_a[i]  = $signed($urandom_range(2*(1<<18))) - (1<<18);
    // reference
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
          ref_o[(o*H + r)*WO + c] = int'(s);
        end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    fork
      drive();
      collect();
    join
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("layer still busy after last word"); end
    checks++;
    if (n_last != ((CO+TO-1)/TO) * ((H+TR-1)/TR) * ((WO+TC-1)/TC)) begin
      failures++; $display("tlast count %0d", n_last);
    end
    // the test must have exercised ReLU clipping, saturation and back-pressure
    checks++; if (n_relu == 0)  begin failures++; $display("no negative output"); end
    checks++; if (n_sat == 0)   begin failures++; $display("no saturation"); end
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    $display("relu clips=%0d saturations=%0d stalls=%0d", n_relu, n_sat, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
