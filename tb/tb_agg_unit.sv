// tb_agg_unit: drives random and corner operands through SUM, MAX and MIN and
// compares with values computed here from the operation's definition.
module tb_agg_unit;
  import switchagg_pkg::*;
  agg_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  agg_unit dut (.op, .a, .b, .y);

  function automatic logic [31:0] ref_op(agg_op_e o, logic [31:0] x, logic [31:0] z);
    int sx, sz;
    sx = int'(x); sz = int'(z);
    case (o)
      OP_MAX:  return (sx >= sz) ? x : z;
      OP_MIN:  return (sx <= sz) ? x : z;
      default: return 32'(longint'(x) + longint'(z));
    endcase
  endfunction

  initial begin
    logic [31:0] corner [6] = '{32'd0, 32'd1, 32'hFFFF_FFFF, 32'h7FFF_FFFF, 32'h8000_0000, 32'd12345};
    for (int i = 0; i < 2000; i++) begin
      op = agg_op_e'(i % 3);
      a  = (i < 108) ? corner[i % 6] : $urandom;
      b  = (i < 108) ? corner[(i / 6) % 6] : $urandom;
      #1;
      checks++;
      if (y !== ref_op(op, a, b)) begin
        failures++;
        if (failures < 5) $display("mismatch op=%0d a=%h b=%h y=%h", op, a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
