// tb_fim_data_buffer: checks burst loads, per-item deposits (as a gather
// makes them), per-item reads (as a scatter makes them) and that a burst write
// takes priority over a simultaneous item write, against a reference copy.
//
// Timing: every write is visible right after its clock edge. The buffer size
// (eight 16-bit words) is the paper's; the priority rule it checks is this
// design's own choice.
module tb_fim_data_buffer;
  import piccolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic burst_we = 0, word_we = 0;
  logic [N_ITEMS*DEV_W-1:0] burst_wdata = '0, burst_rdata;
  logic [2:0] word_idx = '0;
  logic [DEV_W-1:0] word_wdata = '0, word_rdata;
  logic [N_ITEMS-1:0][DEV_W-1:0] ref_v;
  int checks = 0, failures = 0;

  fim_data_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    checks++;
    if (burst_rdata !== ref_v) begin failures++; $display("burst %h want %h", burst_rdata, ref_v); end
    for (int i = 0; i < 8; i++) begin
      word_idx = 3'(i); #1;
      checks++;
      if (word_rdata !== ref_v[i]) begin failures++; $display("word %0d %h want %h", i, word_rdata, ref_v[i]); end
    end
  endtask

  initial begin
    ref_v = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      case ($urandom_range(0, 2))
        0: begin burst_we = 1; burst_wdata = {$urandom, $urandom, $urandom, $urandom}; ref_v = burst_wdata; end
        1: begin word_we = 1; word_idx = 3'($urandom); word_wdata = DEV_W'($urandom); ref_v[word_idx] = word_wdata; end
        default: begin
          burst_we = 1; word_we = 1; word_idx = 3'($urandom); word_wdata = DEV_W'($urandom);
          burst_wdata = {$urandom, $urandom, $urandom, $urandom}; ref_v = burst_wdata;
        end
      endcase
      @(negedge clk);
      burst_we = 0; word_we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
