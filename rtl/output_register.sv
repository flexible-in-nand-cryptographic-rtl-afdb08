// output_register: 512-byte output register between the engine and the
// chip's data port.
//
// Eight 512-bit rows. The engine side reads and writes whole rows
// (eng_we/eng_row/eng_wdata, eng_rdata combinational). The host side moves
// 64-bit words: host_in_* (valid/ready) fills row hi_row word by word, and
// host_out_* streams row ho_row..ho_row+ho_nrows-1 out, eight words per row,
// after ho_start. Program data thus enters here and read results leave from
// here. The 64-bit host width and the streaming control are this design's.
module output_register #(
  parameter int unsigned BYTES  = 512,
  parameter int unsigned HOST_W = 64,
  localparam int unsigned NROW = BYTES / 64,
  localparam int unsigned RW   = $clog2(NROW),
  localparam int unsigned WPR  = 512 / HOST_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // engine side
  input  logic              eng_we,
  input  logic [RW-1:0]     eng_row,
  input  logic [511:0]      eng_wdata,
  input  logic [RW-1:0]     eng_rrow,
  output logic [511:0]      eng_rdata,
  // host write side
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  logic [HOST_W-1:0] host_in_data,
  input  logic              hi_clear,       // restart the write pointer at row 0
  output logic [RW:0]       hi_rows,        // complete rows written since hi_clear
  // host read side
  input  logic              ho_start,
  input  logic [RW-1:0]     ho_row,
  input  logic [RW:0]       ho_nrows,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output logic [HOST_W-1:0] host_out_data,
  output logic              ho_busy
);
  logic [HOST_W-1:0] mem [NROW * WPR];
  logic [RW+$clog2(WPR):0] wp, rp, rend;

  assign host_in_ready  = (wp < (RW + $clog2(WPR) + 1)'(NROW * WPR)) && !eng_we;
  assign hi_rows        = (RW + 1)'(wp / WPR);
  assign host_out_valid = ho_busy;
  assign host_out_data  = mem[rp[RW+$clog2(WPR)-1:0]];

  always_comb
    for (int w = 0; w < WPR; w++) eng_rdata[HOST_W*w +: HOST_W] = mem[int'(eng_rrow) * WPR + w];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; rend <= '0; ho_busy <= 1'b0;
    end else begin
      if (hi_clear) wp <= '0;
      else if (host_in_valid && host_in_ready) wp <= wp + 1'b1;
      if (ho_start && !ho_busy) begin
        rp      <= ($bits(rp))'(int'(ho_row) * WPR);
        rend    <= ($bits(rend))'((int'(ho_row) + int'(ho_nrows)) * WPR);
        ho_busy <= (ho_nrows != '0);
      end else if (ho_busy && host_out_ready) begin
        rp <= rp + 1'b1;
        if (rp + 1'b1 == rend) ho_busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (eng_we)
      for (int w = 0; w < WPR; w++) mem[int'(eng_row) * WPR + w] <= eng_wdata[HOST_W*w +: HOST_W];
    else if (host_in_valid && host_in_ready && !hi_clear)
      mem[wp[RW+$clog2(WPR)-1:0]] <= host_in_data;
  end
endmodule
