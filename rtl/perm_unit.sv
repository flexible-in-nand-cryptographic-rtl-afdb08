// perm_unit: permutation unit (PU) of a block cipher engine.
//
// Two 32-bit Benes networks (each a butterfly plus an inverse butterfly
// network) sit between an input and an output column of 32 2x2 switches that
// pair bit i with bit i+32. With Control_PU[0] set, the outer columns take
// part and the whole forms a single 64-bit Benes network over {in1,in0};
// otherwise they are held straight and the halves permute in0 and in1 on
// their own, as the paper describes. Combinational datapath.
//
// Switch settings are configuration registers: N_BANK banks of 11 columns x
// 32 bits, written one column per cycle through cfg_* and reset to identity.
// Column 0 and 10 are the outer columns, columns 1..9 the inner networks
// (bits [15:0] network 0, [31:16] network 1). Control_PU[1] selects the bank,
// Control_PU[2] bypasses the unit. Where the settings come from, and this
// control encoding, are this design's choices.
module perm_unit #(
  parameter int unsigned N_BANK = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  input  logic [8:0]  ctrl,
  input  logic        cfg_we,
  input  logic [$clog2(N_BANK)-1:0] cfg_bank,
  input  logic [3:0]  cfg_stage,
  input  logic [31:0] cfg_data,
  output logic [63:0] out
);
  logic [31:0] cfg_q [N_BANK][11];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BANK; b++)
        for (int s = 0; s < 11; s++) cfg_q[b][s] <= '0;
    end else if (cfg_we && cfg_stage < 4'd11) begin
      cfg_q[cfg_bank][cfg_stage] <= cfg_data;
    end
  end

  logic        combine, bypass;
  logic [$clog2(N_BANK)-1:0] bank;
  logic [31:0] c [11];
  assign combine = ctrl[0];
  assign bank    = ctrl[1 +: $clog2(N_BANK)];
  assign bypass  = ctrl[2];
  always_comb for (int s = 0; s < 11; s++) c[s] = cfg_q[bank][s];

  logic [63:0] x, y_in, y_out, z;
  assign x = {in1, in0};

  // outer input column (distance 32)
  always_comb begin
    for (int i = 0; i < 32; i++) begin
      logic sw;
      sw = combine & c[0][i];
      y_in[i]    = sw ? x[i+32] : x[i];
      y_in[i+32] = sw ? x[i]    : x[i+32];
    end
  end

  logic [143:0] cfg_n0, cfg_n1;
  always_comb begin
    for (int s = 0; s < 9; s++) begin
      cfg_n0[s*16 +: 16] = c[s+1][15:0];
      cfg_n1[s*16 +: 16] = c[s+1][31:16];
    end
  end

  benes_net #(.W(32)) u_bn0 (.din(y_in[31:0]),  .cfg(cfg_n0), .dout(y_out[31:0]));
  benes_net #(.W(32)) u_bn1 (.din(y_in[63:32]), .cfg(cfg_n1), .dout(y_out[63:32]));

  // outer output column (distance 32)
  always_comb begin
    for (int i = 0; i < 32; i++) begin
      logic sw;
      sw = combine & c[10][i];
      z[i]    = sw ? y_out[i+32] : y_out[i];
      z[i+32] = sw ? y_out[i]    : y_out[i+32];
    end
  end

  assign out = bypass ? x : z;
endmodule
