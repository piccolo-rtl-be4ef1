// dram_array_model: behavioural model of the cell arrays, sense amplifiers and
// column decoders of the banks of one x16 DDR4 device (not synthesizable).
//
// Each bank keeps its open row. arr_act opens a new row (the previous one is
// written back implicitly, as every write goes straight to the store).
// arr_en reads the 128-bit column arr_col of the open row combinationally;
// with arr_we it also writes the 16-bit words selected by arr_wmask at the
// clock edge. The store is sparse (an associative array), so any row count
// can be modelled; a word never written reads as a value computed from its
// address, init_word(), so testbenches can predict it.
//
// It stands for the standard DRAM parts that the design does not build
// (cells, sense amplifiers, column decoder). Timing: reads combinational,
// writes at the clock edge; the fill pattern is this model's own.
module dram_array_model
  import piccolo_pkg::*;
#(
  parameter int unsigned NB   = NUM_BANKS,
  parameter int unsigned SEED = 0
) (
  input  logic                            clk,
  input  logic [NB-1:0]                   arr_act,
  input  logic [NB-1:0][ROW_W-1:0]        arr_row,
  input  logic [NB-1:0]                   arr_en,
  input  logic [NB-1:0]                   arr_we,
  input  logic [NB-1:0][COL_W-4:0]        arr_col,
  input  logic [NB-1:0][BURST_LEN-1:0]    arr_wmask,
  input  logic [NB-1:0][CHIP_BURST_W-1:0] arr_wdata,
  output logic [NB-1:0][CHIP_BURST_W-1:0] arr_rdata
);
  logic [DEV_W-1:0] store [logic [31:0]];
  logic [ROW_W-1:0] open_row [NB];
  int unsigned acts;

  function automatic logic [DEV_W-1:0] init_word(int unsigned seed, int unsigned bank,
                                                 int unsigned row, int unsigned col);
    return DEV_W'((row * 7919 + col * 31 + bank * 1021 + seed * 577) ^ 16'h5a5a);
  endfunction

  function automatic logic [31:0] key(int unsigned bank, int unsigned row, int unsigned col);
    return 32'((bank << (ROW_W + COL_W)) | (row << COL_W) | col);
  endfunction

  function automatic logic [DEV_W-1:0] peek(int unsigned bank, int unsigned row, int unsigned col);
    logic [31:0] k;
    k = key(bank, row, col);
    if (store.exists(k)) return store[k];
    return init_word(SEED, bank, row, col);
  endfunction

  initial begin
    acts = 0;
    for (int b = 0; b < NB; b++) open_row[b] = '0;
  end

  always_comb begin
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < BURST_LEN; w++)
        arr_rdata[b][w*DEV_W +: DEV_W] = peek(b, open_row[b], {arr_col[b], 3'(w)});
  end

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (arr_act[b]) begin
        open_row[b] <= arr_row[b];
        acts++;
      end
      if (arr_en[b] && arr_we[b])
        for (int w = 0; w < BURST_LEN; w++)
          if (arr_wmask[b][w])
            store[key(b, open_row[b], {arr_col[b], 3'(w)})] = arr_wdata[b][w*DEV_W +: DEV_W];
    end
  end
endmodule
