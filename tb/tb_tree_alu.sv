// tb_tree_alu: random operands for every tree operation, compared with the
// arithmetic worked out in the testbench (signed max via integers, sum
// modulo 2^32, bitwise logic), plus the corner cases of max with negatives.
module tb_tree_alu;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  tree_op_e op;
  logic [31:0] a, b, y;
  tree_alu dut (.op, .a, .b, .y);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 6000; t++) begin
      longint sa, sb;
      logic [31:0] e;
      op = tree_op_e'(t % 6);
      a = $urandom; b = $urandom;
      if (t % 50 == 0) begin a = 32'h8000_0000; b = 32'h7FFF_FFFF; end
      #1;
      sa = longint'($signed(a)); sb = longint'($signed(b));
      case (t % 6)
        0: e = 32'((longint'(a) + longint'(b)) % (64'd1 << 32));
        1: e = (sa > sb) ? a : b;
        2: e = a & b;
        3: e = a | b;
        4: e = a ^ b;
        default: e = a;
      endcase
      check(y == e, $sformatf("op %0d a=%h b=%h y=%h exp=%h", t % 6, a, b, y, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
