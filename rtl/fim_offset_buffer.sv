// fim_offset_buffer: the offset buffer added to every DRAM bank by Piccolo-FIM.
//
// It holds the eight 16-bit column offsets of one gather or scatter. The host
// fills it with one ordinary write burst (BL8 on a x16 device = 128 bits, one
// offset per beat) aimed at the offset region of a virtual row; the bank's
// internal controller then reads the offsets one at a time to drive the column
// decoder. Size (8 x 16 bits = 128 bits per bank) follows the paper.
//
// Interface / timing: burst_we writes all eight offsets at the clock edge
// (beat k in burst_wdata[16k +: 16]); rd_idx selects the offset shown on
// rd_offset combinationally. Reset clears the buffer (own choice).
module fim_offset_buffer
  import piccolo_pkg::*;
#(
  parameter int unsigned N  = N_ITEMS,
  parameter int unsigned OW = OFFSET_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   burst_we,
  input  logic [N*OW-1:0]        burst_wdata,
  input  logic [$clog2(N)-1:0]   rd_idx,
  output logic [OW-1:0]          rd_offset
);
  logic [N-1:0][OW-1:0] ofs_q;

  always_ff @(posedge clk) begin
    if (!rst_n) ofs_q <= '0;
    else if (burst_we) ofs_q <= burst_wdata;
  end

  assign rd_offset = ofs_q[rd_idx];
endmodule
