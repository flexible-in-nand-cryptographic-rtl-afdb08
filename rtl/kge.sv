// kge: key generation engine of the key management engine.
//
// Derives keys from the chip-unique root key delivered by the ring
// oscillator PUF. The key derivation function is SHA-256 over one padded
// block holding  root key (256) || salt (64) || context (64) || counter (32),
// i.e. 416 message bits; counter = 0, 1, ... gives nblk successive 256-bit
// key blocks for keys longer than one digest. The key leaves as 32-bit words
// on two ports (kw0 = even word, kw1 = odd word of the digest, most
// significant first) with kv high, four beats per block; kidx counts the
// beats over the whole key. done pulses after the last beat.
// Timing: 65 cycles per block for the hash plus 4 output beats.
// The paper says only that a secure-hash KDF combines the root key with a
// salt or context; the hash, field widths and output order are this design's.
// Lint note: the hash core's busy output is unread; the FSM follows its done.
module kge #(
  parameter int unsigned KEY_BLOCKS = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] puf_key,
  input  logic [63:0]  salt,
  input  logic [63:0]  context_w,
  input  logic         start,
  input  logic [$clog2(KEY_BLOCKS+1)-1:0] nblk,
  output logic         busy,
  output logic         kv,
  output logic [31:0]  kw0,
  output logic [31:0]  kw1,
  output logic [$clog2(4*KEY_BLOCKS)-1:0] kidx,
  output logic         done
);
  typedef enum logic [1:0] { K_IDLE, K_HASH, K_OUT } kstate_e;
  kstate_e st;
  logic [31:0]  ctr;
  logic [1:0]   beat;
  logic [255:0] dig;
  logic         h_start, h_busy, h_done, last;
  logic [255:0] h_out;
  logic [511:0] blk;

  assign blk = {puf_key, salt, context_w, ctr, 8'h80, 24'd0, 64'd416};
  assign busy = (st != K_IDLE) || kv || last;

  sha256_core u_sha (
    .clk, .rst_n, .start(h_start), .block(blk), .use_iv(1'b1), .h_in('0),
    .busy(h_busy), .done(h_done), .h_out);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE; ctr <= '0; beat <= '0; dig <= '0; h_start <= 1'b0;
      kv <= 1'b0; kw0 <= '0; kw1 <= '0; kidx <= '0; done <= 1'b0; last <= 1'b0;
    end else begin
      h_start <= 1'b0;
      kv      <= 1'b0;
      done    <= last;
      last    <= 1'b0;
      case (st)
        K_IDLE:
          if (start) begin
            ctr <= '0; kidx <= '0; h_start <= 1'b1; st <= K_HASH;
          end
        K_HASH:
          if (h_done) begin
            dig <= h_out; beat <= '0; st <= K_OUT;
          end
        default: begin
          kv   <= 1'b1;
          kw0  <= dig[255 - 64*beat -: 32];
          kw1  <= dig[223 - 64*beat -: 32];
          kidx <= ($bits(kidx))'(ctr * 4 + 32'(beat));
          beat <= beat + 1'b1;
          if (beat == 2'd3) begin
            if (ctr + 1 >= 32'(nblk) || ctr + 1 >= KEY_BLOCKS) begin
              st <= K_IDLE; last <= 1'b1;
            end else begin
              ctr <= ctr + 1'b1; h_start <= 1'b1; st <= K_HASH;
            end
          end
        end
      endcase
    end
  end
endmodule
