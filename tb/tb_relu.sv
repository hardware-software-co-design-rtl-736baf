// tb_relu: checks y = max(0, x) on the extremes, zero, +-1 LSB and random words.
module tb_relu;
  localparam int W = 25;
  logic signed [W-1:0] x, y;
  relu #(.W(W)) dut (.x, .y);
  int checks = 0, failures = 0;
  task automatic t(input logic signed [W-1:0] v);
    x = v; #1;
    checks++;
    if (y != ((v < 0) ? 0 : v)) begin failures++; $display("relu(%0d) = %0d", v, y); end
  endtask
  initial begin
    t(0); t(1); t(-1); t(25'sh0ffffff); t(-25'sh1000000);
    repeat (200) t($signed(W'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
