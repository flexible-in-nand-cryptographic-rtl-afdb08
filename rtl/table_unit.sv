// table_unit: table unit (TU) of a block cipher engine.
//
// N_UNIT S-box units of N_SBOX lookup tables, each 256 entries of one byte,
// so that every byte of {in1,in0} has its own table (byte i uses table i).
// The tables are writable registers, filled one entry per cycle through
// tbl_*, so any cipher's S-box can be loaded. Control_TU selects the full
// byte (0) or the low nibble zero-padded, {4'b0, out[3:0]}, for 4-bit S-boxes
// (1). Narrow inputs are expected zero-padded in the high bits; a wider S-box
// is formed by reading several tables. Lookup is combinational.
//
// The paper gives four S-box units in the text and two in its area table; the
// 2 x 4 arrangement here fits both and the printed 64-bit Out_TU.
module table_unit #(
  parameter int unsigned N_UNIT = 2,
  parameter int unsigned N_SBOX = 4,
  localparam int unsigned NT = N_UNIT * N_SBOX
) (
  input  logic        clk,
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  logic        ctrl,
  input  logic        tbl_we,
  input  logic [$clog2(NT)-1:0] tbl_sel,
  input  logic [7:0]  tbl_addr,
  input  logic [7:0]  tbl_data,
  output logic [8*NT-1:0] out
);
  logic [7:0] tbl [NT][256];

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_sel][tbl_addr] <= tbl_data;
  end

  logic [8*NT-1:0] x;
  assign x = (8 * NT)'({in1, in0});

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      logic [7:0] s;
      s = tbl[t][x[8*t +: 8]];
      out[8*t +: 8] = ctrl ? {4'b0, s[3:0]} : s;
    end
  end
endmodule
