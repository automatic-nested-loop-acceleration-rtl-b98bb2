// tb_pe_alu: self-checking test of the PE ALU.
// Drives random operands for every operation (plus corner values) and compares
// the registered result, one cycle later, with a reference computed here from
// the operation's definition; OP_NOP must hold the previous result.
module tb_pe_alu;
  import scgra_pkg::*;
  logic clk = 0, rst_n = 0;
  alu_op_e op;
  logic [31:0] a, b, c, y, exp_y, prev;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe_alu dut (.clk, .rst_n, .op, .a, .b, .c, .y);

  function automatic logic [31:0] ref_op(int o, logic [31:0] a, logic [31:0] b,
                                         logic [31:0] c, logic [31:0] old);
    longint sa, sb;
    logic [31:0] d;
    sa = $signed(a); sb = $signed(b);
    case (o)
      0:  return old;
      1:  return 32'(sa + sb);
      2:  return 32'(sa - sb);
      3:  return 32'(sa * sb);
      4:  return 32'(sa * sb + longint'($signed(c)));
      5:  return 32'(longint'($signed(c)) - sa * sb);
      6:  return 32'(sa + sb + longint'($signed(c)));
      7:  return 32'(sa < 0 ? -sa : sa);
      8:  begin d = 32'(sa - sb); return $signed(d) < 0 ? -d : d; end
      9:  return a << b[4:0];
      10: return 32'(sa >>> b[4:0]);
      11: return a & b;
      12: return sa < sb ? a : b;
      13: return sa > sb ? a : b;
      14: return (sa < sb) ? 32'd1 : 32'd0;
      15: return (a != 0) ? b : c;
      default: return old;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = OP_NOP; a = 0; b = 0; c = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    prev = y;
    for (int n = 0; n < 3000; n++) begin
      int o;
      o = n % 16;
      op = alu_op_e'(o);
      case (n % 7)
        0: begin a = 32'h8000_0000; b = $urandom; c = $urandom; end
        1: begin a = $urandom % 16; b = $urandom % 16; c = $urandom % 16; end
        2: begin a = 0; b = $urandom; c = $urandom; end
        default: begin a = $urandom; b = $urandom; c = $urandom; end
      endcase
      exp_y = ref_op(o, a, b, c, prev);
      @(negedge clk);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL op=%0d a=%h b=%h c=%h y=%h exp=%h", o, a, b, c, y, exp_y);
      end
      prev = y;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
