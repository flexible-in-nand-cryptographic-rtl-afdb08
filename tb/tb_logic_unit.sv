// tb_logic_unit: random self-check of the BCE logical operation unit.
module tb_logic_unit;
  import fv_pkg::*;
  logic [31:0] in0, in1;
  logic [8:0]  ctrl;
  logic [63:0] out;
  int checks = 0, failures = 0;

  logic_unit dut (.in0, .in1, .ctrl, .out);

  function automatic logic [7:0] f(logic [1:0] op, logic [7:0] a, logic [7:0] b);
    if (op == 0) return a ^ b;
    if (op == 1) return a & b;
    if (op == 2) return a | b;
    return ~a;
  endfunction
  function automatic logic [7:0] blk(logic [31:0] v, logic [8:0] c);
    logic [7:0] a, b, r;
    a = f(c[1:0], v[7:0], v[15:8]);
    b = f(c[3:2], v[23:16], v[31:24]);
    case (c[7:6])
      0: r = a;
      1: r = b;
      2: r = f(c[5:4], a, b);
      default: r = v[7:0];
    endcase
    return c[8] ? ~r : r;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      in0 = $urandom; in1 = $urandom; ctrl = 9'($urandom);
      #1; checks++;
      if (out !== {24'b0, blk(in1, ctrl), 24'b0, blk(in0, ctrl)}) begin
        failures++;
        if (failures < 10) $display("mismatch ctrl=%h in0=%h out=%h", ctrl, in0, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
