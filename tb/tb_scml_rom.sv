// tb_scml_rom -- checks the four lookup tables of the constant multiplier.
// For the constant 0x5A82 (0.7071) and for 1.0 it reads every address of
// tables 0..3, one clock after the address is applied, and compares with the
// rounded product d * W * 16^k / 2^15; it also checks the output widths
// (4/8/12/16 bits) hold every entry and that reset clears the register.
module tb_scml_rom;
  import ds_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic [3:0] addr;

  logic [3:0]  q0, p0;
  logic [7:0]  q1, p1;
  logic [11:0] q2, p2;
  logic [15:0] q3, p3;

  scml_rom #(.K(0), .W_MAG(23170)) u0 (.clk, .rst, .addr, .q(q0));
  scml_rom #(.K(1), .W_MAG(23170)) u1 (.clk, .rst, .addr, .q(q1));
  scml_rom #(.K(2), .W_MAG(23170)) u2 (.clk, .rst, .addr, .q(q2));
  scml_rom #(.K(3), .W_MAG(23170)) u3 (.clk, .rst, .addr, .q(q3));
  scml_rom #(.K(0), .W_MAG(32768)) v0 (.clk, .rst, .addr, .q(p0));
  scml_rom #(.K(1), .W_MAG(32768)) v1 (.clk, .rst, .addr, .q(p1));
  scml_rom #(.K(2), .W_MAG(32768)) v2 (.clk, .rst, .addr, .q(p2));
  scml_rom #(.K(3), .W_MAG(32768)) v3 (.clk, .rst, .addr, .q(p3));

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #20000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = 4'd9;
    repeat (2) @(posedge clk);
    #1;
    check("reset q3", int'(q3), 0);
    check("reset q2", int'(q2), 0);
    rst = 1'b0;
    for (int d = 0; d < 16; d++) begin
      addr = 4'(d);
      @(posedge clk);
      #1;
      check("w0.7071 k0", int'(q0), rom_ref(0, d, 23170));
      check("w0.7071 k1", int'(q1), rom_ref(1, d, 23170));
      check("w0.7071 k2", int'(q2), rom_ref(2, d, 23170));
      check("w0.7071 k3", s16(int'(q3)), rom_ref(3, d, 23170));
      check("w1.0 k0", int'(p0), rom_ref(0, d, 32768));
      check("w1.0 k1", int'(p1), rom_ref(1, d, 32768));
      check("w1.0 k2", int'(p2), rom_ref(2, d, 32768));
      check("w1.0 k3", s16(int'(p3)), rom_ref(3, d, 32768));
    end
    // registered: the output must not follow the address before the edge
    addr = 4'd0;
    #1;
    check("registered", int'(q2), rom_ref(2, 15, 23170));
    rst = 1'b1;
    #1;
    check("async reset", int'(q2), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
