// tb_sync_fifo -- random pushes and pops against a queue model; checks
// data order, full/empty flags and the count.
module tb_sync_fifo;
  localparam int unsigned W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .flush(1'b0), .in_valid, .in_ready,
    .in_data, .out_valid, .out_ready, .out_data, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // phases: mostly-push, mostly-pop, mixed
      in_valid  = ($urandom_range(99) < ((t / 500) % 3 == 0 ? 80 : (t / 500) % 3 == 1 ? 20 : 50));
      out_ready = ($urandom_range(99) < ((t / 500) % 3 == 0 ? 20 : (t / 500) % 3 == 1 ? 80 : 50));
      in_data   = W'($urandom);
      #1;
      check(count == q.size(), "count");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid && q.size() > 0) check(out_data == q[0], "data");
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
