// tb_score_ram -- writes random scores into random lanes and compares each
// 512-bit word read back with a shadow copy; checks one-cycle read latency.
module tb_score_ram;
  localparam int unsigned WORDS = 16;
  logic clk = 0;
  logic we;
  logic [$clog2(WORDS)+3:0] wr_idx;
  logic [31:0] wr_score;
  logic [$clog2(WORDS)-1:0] rd_addr;
  logic [511:0] rd_data;
  logic [15:0][31:0] shadow [WORDS];
  int checks = 0, failures = 0;

  score_ram #(.WORDS(WORDS)) dut (.clk, .we, .wr_idx, .wr_score, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wr_idx = 0; wr_score = 0; rd_addr = 0;
    // fill every lane once so that all read data is defined
    for (int i = 0; i < WORDS * 16; i++) begin
      @(negedge clk);
      we = 1; wr_idx = ($clog2(WORDS)+4)'(i); wr_score = $urandom;
      shadow[i / 16][i % 16] = wr_score;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom_range(1);
      wr_idx = ($clog2(WORDS)+4)'($urandom);
      wr_score = $urandom;
      rd_addr = $clog2(WORDS)'($urandom);
      if (we) shadow[wr_idx / 16][wr_idx % 16] = wr_score;
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != shadow[rd_addr]) begin
        // a same-cycle write to the read word returns the old value
        if (!(we && wr_idx / 16 == rd_addr)) begin
          failures++;
          if (failures < 5) $display("FAIL word %0d", rd_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
