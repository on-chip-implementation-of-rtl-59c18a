// tb_kogge_stone_adder -- checks the parallel-prefix adder against integer
// addition: exhaustively at 6 bits, and with random and corner operands at
// 16 and 18 bits (the widths the butterfly uses), with both carry-in values.
module tb_kogge_stone_adder;

  int checks = 0, failures = 0;

  logic [5:0]  a6, b6, s6;
  logic [15:0] a16, b16, s16;
  logic [17:0] a18, b18, s18;
  logic        cin, c6, c16, c18;

  kogge_stone_adder #(.W(6))  u6  (.a(a6),  .b(b6),  .cin, .sum(s6),  .cout(c6));
  kogge_stone_adder           u16 (.a(a16), .b(b16), .cin, .sum(s16), .cout(c16));
  kogge_stone_adder #(.W(18)) u18 (.a(a18), .b(b18), .cin, .sum(s18), .cout(c18));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2; c++)
      for (int x = 0; x < 64; x++)
        for (int y = 0; y < 64; y++) begin
          a6 = 6'(x); b6 = 6'(y); cin = 1'(c);
          #1;
          check("w6", {c6, s6}, longint'(x + y + c));
        end
    for (int n = 0; n < 4000; n++) begin
      case (n % 8)
        0: begin a16 = '1; b16 = '0; end
        1: begin a16 = '1; b16 = 16'd1; end
        2: begin a16 = 16'h8000; b16 = 16'h8000; end
        3: begin a16 = 16'h5555; b16 = 16'hAAAA; end
        default: begin a16 = 16'($urandom); b16 = 16'($urandom); end
      endcase
      a18 = 18'($urandom); b18 = 18'($urandom); cin = 1'($urandom);
      if (n % 8 == 1) begin a18 = '1; b18 = '0; cin = 1'b1; end
      #1;
      check("w16", {c16, s16}, longint'(a16) + longint'(b16) + longint'(cin));
      check("w18", {c18, s18}, longint'(a18) + longint'(b18) + longint'(cin));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
