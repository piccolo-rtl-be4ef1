// tb_fim_offset_buffer: loads random offset bursts and checks every offset
// read back by index against the burst that was written.
//
// Timing: a burst written at one clock edge must be readable at every index
// right after it. The buffer size (eight 16-bit offsets) is the paper's; the
// random stimulus and the watchdog are this testbench's own.
module tb_fim_offset_buffer;
  import piccolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic burst_we = 0;
  logic [N_ITEMS*OFFSET_W-1:0] burst_wdata = '0;
  logic [2:0] rd_idx = '0;
  logic [OFFSET_W-1:0] rd_offset;
  int checks = 0, failures = 0;

  fim_offset_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N_ITEMS*OFFSET_W-1:0] ref_v;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rd_idx = 3'(i); #1;
      checks++; if (rd_offset !== '0) begin failures++; $display("reset value wrong"); end
    end
    for (int t = 0; t < 50; t++) begin
      for (int k = 0; k < N_ITEMS; k++) ref_v[k*OFFSET_W +: OFFSET_W] = OFFSET_W'($urandom);
      @(negedge clk); burst_we = 1; burst_wdata = ref_v;
      @(negedge clk); burst_we = 0; burst_wdata = ~ref_v;   // not written
      for (int i = 0; i < 8; i++) begin
        rd_idx = 3'(i); #1;
        checks++;
        if (rd_offset !== ref_v[i*OFFSET_W +: OFFSET_W]) begin
          failures++; $display("offset %0d: got %h want %h", i, rd_offset, ref_v[i*OFFSET_W +: OFFSET_W]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
