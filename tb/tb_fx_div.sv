// tb_fx_div: random divisions, division by zero and quotient overflow, each
// checked against integer division and against the NW+1-cycle latency.
module tb_fx_div;
  localparam int NW = 40, QW = 24;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NW-1:0] num, den;
  logic [QW-1:0] quo;
  always #5 clk = ~clk;
  fx_div #(.NW(NW), .QW(QW)) dut (.*);
  int checks = 0, failures = 0;
  task automatic div(input logic [NW-1:0] n, input logic [NW-1:0] d);
    longint unsigned e;
    int cyc;
    @(negedge clk); num = n; den = d; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = (d == 0) ? (1 << QW) - 1 : n / d;
    if (e > (1 << QW) - 1) e = (1 << QW) - 1;
    checks++;
    if (quo != e || cyc != NW+1) begin
      failures++; $display("%0d / %0d = %0d (exp %0d), %0d cycles", n, d, quo, e, cyc);
    end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    div(1000, 7); div(0, 5); div(5, 0); div(40'hff_ffff_ffff, 3); div(12345678, 12345678);
    repeat (100) div({$urandom, $urandom} & 40'hff_ffff_ffff, 40'($urandom_range(1, 1 << 20)));
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
