// sha256_core: iterative SHA-256 compression function (FIPS 180-4).
//
// start loads a 512-bit block (big-endian: word 0 = bits 511:480) and a
// chaining value (h_in, or the standard initial value when use_iv is set);
// one round is computed per clock, so done pulses 65 cycles after start and
// h_out holds the updated chaining value. The message schedule uses a
// 16-word sliding window. Used by the key generation engine's key
// derivation function.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic         use_iv,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out
);
  function automatic logic [31:0] kconst(logic [5:0] i);
    case (i)
      6'd0:  return 32'h428a2f98; 6'd1:  return 32'h71374491; 6'd2:  return 32'hb5c0fbcf; 6'd3:  return 32'he9b5dba5;
      6'd4:  return 32'h3956c25b; 6'd5:  return 32'h59f111f1; 6'd6:  return 32'h923f82a4; 6'd7:  return 32'hab1c5ed5;
      6'd8:  return 32'hd807aa98; 6'd9:  return 32'h12835b01; 6'd10: return 32'h243185be; 6'd11: return 32'h550c7dc3;
      6'd12: return 32'h72be5d74; 6'd13: return 32'h80deb1fe; 6'd14: return 32'h9bdc06a7; 6'd15: return 32'hc19bf174;
      6'd16: return 32'he49b69c1; 6'd17: return 32'hefbe4786; 6'd18: return 32'h0fc19dc6; 6'd19: return 32'h240ca1cc;
      6'd20: return 32'h2de92c6f; 6'd21: return 32'h4a7484aa; 6'd22: return 32'h5cb0a9dc; 6'd23: return 32'h76f988da;
      6'd24: return 32'h983e5152; 6'd25: return 32'ha831c66d; 6'd26: return 32'hb00327c8; 6'd27: return 32'hbf597fc7;
      6'd28: return 32'hc6e00bf3; 6'd29: return 32'hd5a79147; 6'd30: return 32'h06ca6351; 6'd31: return 32'h14292967;
      6'd32: return 32'h27b70a85; 6'd33: return 32'h2e1b2138; 6'd34: return 32'h4d2c6dfc; 6'd35: return 32'h53380d13;
      6'd36: return 32'h650a7354; 6'd37: return 32'h766a0abb; 6'd38: return 32'h81c2c92e; 6'd39: return 32'h92722c85;
      6'd40: return 32'ha2bfe8a1; 6'd41: return 32'ha81a664b; 6'd42: return 32'hc24b8b70; 6'd43: return 32'hc76c51a3;
      6'd44: return 32'hd192e819; 6'd45: return 32'hd6990624; 6'd46: return 32'hf40e3585; 6'd47: return 32'h106aa070;
      6'd48: return 32'h19a4c116; 6'd49: return 32'h1e376c08; 6'd50: return 32'h2748774c; 6'd51: return 32'h34b0bcb5;
      6'd52: return 32'h391c0cb3; 6'd53: return 32'h4ed8aa4a; 6'd54: return 32'h5b9cca4f; 6'd55: return 32'h682e6ff3;
      6'd56: return 32'h748f82ee; 6'd57: return 32'h78a5636f; 6'd58: return 32'h84c87814; 6'd59: return 32'h8cc70208;
      6'd60: return 32'h90befffa; 6'd61: return 32'ha4506ceb; 6'd62: return 32'hbef9a3f7; default: return 32'hc67178f2;
    endcase
  endfunction

  localparam logic [255:0] IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  function automatic logic [31:0] rotr(logic [31:0] v, int n);
    return (v >> n) | (v << (32 - n));
  endfunction

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [255:0] hc;
  logic [6:0]  rnd;

  logic [31:0] t1, t2, wn, s0, s1;
  always_comb begin
    t1 = h + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + kconst(rnd[5:0]) + w[0];
    t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
    s0 = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    s1 = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wn = w[0] + s0 + w[9] + s1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rnd <= '0; hc <= '0; h_out <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          logic [255:0] hv;
          hv = use_iv ? IV : h_in;
          hc <= hv;
          {a, b, c, d, e, f, g, h} <= hv;
          for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
          rnd  <= '0;
          busy <= 1'b1;
        end
      end else if (rnd == 7'd64) begin
        h_out <= {hc[255:224] + a, hc[223:192] + b, hc[191:160] + c, hc[159:128] + d,
                  hc[127:96] + e,  hc[95:64] + f,   hc[63:32] + g,   hc[31:0] + h};
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        h <= g; g <= f; f <= e; e <= d + t1;
        d <= c; c <= b; b <= a; a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= wn;
        rnd <= rnd + 1'b1;
      end
    end
  end
endmodule
