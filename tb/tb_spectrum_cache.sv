// tb_spectrum_cache -- fills a window of packets, reads hits (data one cycle
// later), reads outside the window (miss raised, read held) and refills
// the window at the missed packet, after which the held read completes.
module tb_spectrum_cache;
  import xcorr_pkg::*;
  localparam int unsigned CW = 32;
  logic clk = 0, rst_n = 0;
  logic invalidate, fill_we, set_base, rd_req, rd_valid, miss;
  logic [$clog2(CW)-1:0] fill_addr;
  logic [BUS_DW-1:0] fill_data, rd_data;
  logic [PKT_W-1:0] base_in, rd_idx, miss_idx;
  int checks = 0, failures = 0, misses = 0;

  spectrum_cache #(.CACHE_WORDS(CW)) dut (.clk, .rst_n, .invalidate, .fill_we, .fill_addr,
    .fill_data, .set_base, .base_in, .rd_req, .rd_idx, .rd_valid, .rd_data, .miss, .miss_idx);
  always #5 clk = ~clk;

  function automatic logic [BUS_DW-1:0] pattern(int p);
    return {16{32'(p * 7919 + 13)}};
  endfunction

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load(int b);
    @(negedge clk);
    invalidate = 1;
    @(negedge clk);
    invalidate = 0;
    for (int w = 0; w < CW; w++) begin
      fill_we = 1; fill_addr = $clog2(CW)'(w); fill_data = pattern(b + w);
      @(negedge clk);
    end
    fill_we = 0;
    set_base = 1; base_in = PKT_W'(b);
    @(negedge clk);
    set_base = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, p, waited;
    invalidate = 0; fill_we = 0; set_base = 0; rd_req = 0; fill_addr = 0; fill_data = 0;
    base_in = 0; rd_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    b = 0;
    load(0);
    for (int t = 0; t < 400; t++) begin
      p = $urandom_range(255);
      @(negedge clk);
      rd_req = 1; rd_idx = PKT_W'(p);
      @(negedge clk);
      rd_req = 0;
      if (p >= b && p < b + CW) begin
        check(rd_valid && rd_data == pattern(p), "hit data after 1 cycle");
        check(!miss, "no miss on hit");
      end else begin
        check(!rd_valid, "no data on miss");
        check(miss && miss_idx == PKT_W'(p), "miss reported");
        misses++;
        b = (p + CW > 256) ? 256 - CW : p;   // refill window covering p
        load(b);
        waited = 0;
        while (!rd_valid && waited < 5) begin @(negedge clk); waited++; end
        check(rd_valid && rd_data == pattern(p), "held read served after refill");
        check(!miss, "miss cleared");
      end
    end
    check(misses > 10, "misses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
