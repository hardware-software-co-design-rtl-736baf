// tb_fc_layer: self-checking test of the fully connected layer.
//
// A 40-input, 5-output layer is loaded with random biases and weights, then run
// twice: once together with the weight load and once reusing the stored
// weights on new inputs. Every output is compared with a 64-bit integer
// reference, and the cycles from the last input word to the first output word
// are checked against the two-cycle pipeline.
module tb_fc_layer;
  localparam int NIN = 40, NOUT = 5;
  logic clk = 0, rst_n = 0, start = 0, load_w = 0;
  logic busy, done;
  logic [31:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, m_tlast;
  always #5 clk = ~clk;

  fc_layer #(.NIN(NIN), .NOUT(NOUT)) dut (.*);

  int checks = 0, failures = 0;
  int w_a [NOUT*NIN];
  int b_a [NOUT];
  int x_a [NIN];
  int n_stall = 0;

  task automatic send(input int v, input bit gaps);
    @(negedge clk);
    s_tdata = v; s_tvalid = 1'b1;
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    #1 s_tvalid = 1'b0;
    if (gaps && $urandom_range(3) == 0) @(posedge clk);
  endtask

  task automatic run(input bit with_load);
    longint s;
    int t_last, t_first;
    @(negedge clk); start = 1'b1; load_w = with_load;
    @(negedge clk); start = 1'b0; load_w = 1'b0;
    if (with_load) begin
      for (int o = 0; o < NOUT; o++) send(b_a[o], 1);
      for (int o = 0; o < NOUT; o++) for (int i = 0; i < NIN; i++) send(w_a[o*NIN+i], 1);
    end
    foreach (x_a[i]) x_a[i] = $signed($urandom_range(2*(1<<22))) - (1<<22);
    for (int i = 0; i < NIN; i++) send(x_a[i], i != NIN-1);
    t_last = 0;
    for (int o = 0; o < NOUT; o++) begin
      forever begin
        @(negedge clk);
        m_tready = (o == 0) ? 1'b1 : ($urandom_range(2) != 0);
        #1;
        if (m_tvalid && !m_tready) n_stall++;
        if (m_tvalid && m_tready) break;
        t_last++;
      end
      if (o == 0) begin
        checks++;
        if (t_last != 2) begin failures++; $display("latency %0d, expected 2", t_last); end
      end
      s = longint'(b_a[o]) * 16384;
      for (int i = 0; i < NIN; i++) s += longint'(x_a[i]) * longint'(w_a[o*NIN+i]);
      s = s >>> 14;
      if (s > 16777215) s = 16777215;
      if (s < -16777216) s = -16777216;
      checks++;
      if ($signed(m_tdata[24:0]) != s || m_tlast != (o == NOUT-1)) begin
        failures++; $display("out %0d got %0d exp %0d", o, $signed(m_tdata[24:0]), s);
      end
      @(posedge clk);
    end
    #1 m_tready = 1'b0;
  endtask

  initial begin
    foreach (w_a[i]) w_a[i] = $signed($urandom_range(2*(1<<13))) - (1<<13);
    foreach (b_a[i]) b_a[i] = $signed($urandom_range(2*(1<<20))) - (1<<20);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1);
    run(0);
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall"); end
    repeat (2) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
