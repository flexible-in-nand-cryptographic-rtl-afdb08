// tb_arith_unit: random self-check of the BCE arithmetic unit against
// reference arithmetic written with the % operator.
module tb_arith_unit;
  import fv_pkg::*;
  logic [31:0] in0, in1;
  logic [5:0]  ctrl;
  logic [63:0] out;
  int checks = 0, failures = 0;

  arith_unit dut (.in0, .in1, .ctrl, .out);

  function automatic logic [15:0] ref_al(logic [1:0] op, logic [1:0] m, logic [15:0] a, logic [15:0] b);
    longint unsigned x, y, mod;
    x = a; y = b;
    case (m)
      2'd0: mod = 256;
      2'd1: mod = 65536;
      2'd2: mod = 65537;
      default: mod = 16;
    endcase
    case (op)
      2'd0: return 16'((x + y) % 65536);
      2'd1: return 16'((x * y) % 65536);
      2'd2: return 16'((x + y) % mod);
      default: begin
        if (m == 2'd2) begin
          if (x == 0) x = 65536;
          if (y == 0) y = 65536;
          return 16'(((x * y) % 65537) % 65536);
        end
        return 16'((x * y) % mod);
      end
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      in0 = $urandom; in1 = $urandom; ctrl = 6'($urandom);
      if (i % 7 == 0) in0[15:0] = 16'h0;
      if (i % 11 == 0) in1[31:16] = 16'hffff;
      #1;
      checks++;
      if (out !== {16'b0, ref_al(ctrl[3:2], ctrl[5:4], in1[15:0], in1[31:16]),
                   16'b0, ref_al(ctrl[1:0], ctrl[5:4], in0[15:0], in0[31:16])}) begin
        failures++;
        if (failures < 10) $display("mismatch ctrl=%h in0=%h in1=%h out=%h", ctrl, in0, in1, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
