// ldpc_decoder: in-NAND LDPC decoder (hard-decision gradient-descent bit
// flipping).
//
// Code: quasi-cyclic, Z x Z circulants, NB = 16 block columns of which the
// first NB-2 carry data and the last two parity, two block rows, so
// n = NB*Z = 1024, k = (NB-2)*Z = 896, rate 0.875:
//   H = [ I    I    ...  I          | I  0 ]
//       [ P^0  P^1  ...  P^(NB-3)   | 0  I ]
// where P^s is the identity rotated by s (row r has its one in column
// (r+s) mod Z). Codeword bit c*Z+t is bit t of block column c. The parity
// blocks are thus p0[r] = XOR_c d_c[r] and p1[r] = XOR_c d_c[(r+c) mod Z].
//
// Decoding: x starts as the hard-decided word y. Each cycle the syndrome is
// formed; if it is zero the word is accepted (ok). Otherwise every bit gets
// the reliability score  x_i*y_i + sum over its checks of (1 - 2 s_j)  in
// bipolar form (agreeing with the channel +1, each satisfied check +1, each
// failed check -1) and the bit with the lowest score (lowest index on ties)
// is flipped. After MAX_ITER flips without success the decoder gives up
// (ok = 0). done pulses one cycle after the result is final; data holds the
// k data bits and iters the number of flips.
//
// The paper adopts a published gradient-descent bit-flipping decoder for a
// rate-0.88 QC-LDPC code and gives neither the matrix nor the circulant size:
// the code above, the single flip per cycle and MAX_ITER are this design's.
module ldpc_decoder #(
  parameter int unsigned Z        = 64,
  parameter int unsigned NB       = 16,
  parameter int unsigned MAX_ITER = 32,
  localparam int unsigned N  = NB * Z,
  localparam int unsigned K  = (NB - 2) * Z,
  localparam int unsigned ND = NB - 2,
  localparam int unsigned IW = $clog2(MAX_ITER + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cw_valid,
  output logic         cw_ready,
  input  logic [N-1:0] cw,
  output logic         done,
  output logic         ok,
  output logic [K-1:0] data,
  output logic [IW-1:0] iters
);
  logic [N-1:0]  x, y;
  logic          busy;
  logic [Z-1:0]  s0, s1;      // syndromes of the two block rows

  assign cw_ready = !busy;

  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic a, b;
      a = x[(NB-2)*Z + r];
      b = x[(NB-1)*Z + r];
      for (int c = 0; c < ND; c++) begin
        a ^= x[c*Z + r];
        b ^= x[c*Z + ((r + c) % Z)];
      end
      s0[r] = a;
      s1[r] = b;
    end
  end

  // score per bit (range -3..3) and argmin tree
  logic signed [3:0] met [N];
  always_comb begin
    for (int c = 0; c < NB; c++)
      for (int t = 0; t < Z; t++) begin
        logic signed [3:0] m;
        m = (x[c*Z + t] == y[c*Z + t]) ? 4'sd1 : -4'sd1;
        if (c < ND) begin
          m += s0[t] ? -4'sd1 : 4'sd1;
          m += s1[(t - c + Z) % Z] ? -4'sd1 : 4'sd1;
        end else if (c == ND) begin
          m += s0[t] ? -4'sd1 : 4'sd1;
        end else begin
          m += s1[t] ? -4'sd1 : 4'sd1;
        end
        met[c*Z + t] = m;
      end
  end

  logic signed [3:0] tm [N];
  logic [$clog2(N)-1:0] ti [N];
  logic [$clog2(N)-1:0] flip_idx;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      tm[i] = met[i];
      ti[i] = ($clog2(N))'(i);
    end
    for (int n = N / 2; n >= 1; n = n / 2)
      for (int k = 0; k < n; k++) begin
        if (tm[2*k+1] < tm[2*k]) begin
          tm[k] = tm[2*k+1]; ti[k] = ti[2*k+1];
        end else begin
          tm[k] = tm[2*k];   ti[k] = ti[2*k];
        end
      end
    flip_idx = ti[0];
  end

  logic synd_zero;
  assign synd_zero = (s0 == '0) && (s1 == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      ok    <= 1'b0;
      iters <= '0;
      x     <= '0;
      y     <= '0;
      data  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (cw_valid) begin
          x     <= cw;
          y     <= cw;
          busy  <= 1'b1;
          iters <= '0;
        end
      end else if (synd_zero || iters == IW'(MAX_ITER)) begin
        busy <= 1'b0;
        done <= 1'b1;
        ok   <= synd_zero;
        data <= x[K-1:0];
      end else begin
        x[flip_idx] <= ~x[flip_idx];
        iters <= iters + 1'b1;
      end
    end
  end
endmodule
