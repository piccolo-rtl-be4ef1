// fim_data_buffer: the data buffer added to every DRAM bank by Piccolo-FIM.
//
// It holds eight 16-bit items, this chip's slice of eight 64-bit words. In a
// gather the internal controller deposits one picked item per column read and
// the host collects all eight with one read burst; in a scatter the host fills
// it with one write burst and the internal controller takes one item per
// column write. Size (128 bits per bank) follows the paper.
//
// Interface / timing: burst_we loads all eight items from burst_wdata and
// word_we loads item word_idx from word_wdata at the clock edge; if both are
// asserted the burst wins (host data replaces the buffer). burst_rdata and
// word_rdata are combinational views. Reset clears the buffer (own choice).
module fim_data_buffer
  import piccolo_pkg::*;
#(
  parameter int unsigned N  = N_ITEMS,
  parameter int unsigned DW = DEV_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   burst_we,
  input  logic [N*DW-1:0]        burst_wdata,
  output logic [N*DW-1:0]        burst_rdata,
  input  logic                   word_we,
  input  logic [$clog2(N)-1:0]   word_idx,
  input  logic [DW-1:0]          word_wdata,
  output logic [DW-1:0]          word_rdata
);
  logic [N-1:0][DW-1:0] buf_q;

  always_ff @(posedge clk) begin
    if (!rst_n)        buf_q <= '0;
    else if (burst_we) buf_q <= burst_wdata;
    else if (word_we)  buf_q[word_idx] <= word_wdata;
  end

  assign burst_rdata = buf_q;
  assign word_rdata  = buf_q[word_idx];
endmodule
