// agg_unit: the aggregation unit of a processing engine.
//
// Takes the parameters <Operation, Value1, Value2> from the memory management
// logic and returns the aggregated value combinationally, so the engine can
// write it back in the same cycle it compares the bucket. The paper names SUM,
// MAX and MIN; values are treated as signed 32-bit integers and SUM wraps
// around, which is this design's choice.
module agg_unit
  import switchagg_pkg::*;
(
  input  agg_op_e          op,
  input  logic [VAL_W-1:0] a,
  input  logic [VAL_W-1:0] b,
  output logic [VAL_W-1:0] y
);
  always_comb begin
    unique case (op)
      OP_MAX:  y = ($signed(a) > $signed(b)) ? a : b;
      OP_MIN:  y = ($signed(a) < $signed(b)) ? a : b;
      default: y = a + b;
    endcase
  end
endmodule
