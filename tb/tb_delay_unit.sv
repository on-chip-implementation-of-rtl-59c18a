// tb_delay_unit -- checks that the delay line returns each input exactly
// DEPTH clocks later (depths 3, the butterfly's, and 1) and that reset clears
// it.
module tb_delay_unit;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic [31:0] d, q3;
  logic [7:0]  q1;
  logic [31:0] hist [$];

  delay_unit #(.WIDTH(32), .DEPTH(3)) u3 (.clk, .rst, .d, .q(q3));
  delay_unit #(.WIDTH(8),  .DEPTH(1)) u1 (.clk, .rst, .d(d[7:0]), .q(q1));

  always #5 clk = ~clk;

  initial begin
    #50000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 32'hDEADBEEF;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (q3 != 0 || q1 != 0) failures++;
    rst = 1'b0;
    for (int n = 0; n < 200; n++) begin
      d = $urandom;
      @(posedge clk);
      hist.push_front(d);
      #1;
      checks++;
      if (q1 != hist[0][7:0]) failures++;
      if (hist.size() >= 3) begin
        checks++;
        if (q3 != hist[2]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d q3=%h exp=%h", n, q3, hist[2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
