// tb_find_max -- random and tie-heavy vectors into the comparator tree;
// the expected index is found by a linear scan (lowest index on ties).
module tb_find_max;
  localparam int unsigned N = 16, W = 17;
  logic [N-1:0][W-1:0] vals;
  logic [$clog2(N)-1:0] max_idx;
  logic [W-1:0] max_val;
  int checks = 0, failures = 0;

  find_max #(.N(N), .W(W)) dut (.vals, .max_idx, .max_val);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ei;
    logic [W-1:0] ev;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++)
        vals[i] = (t % 2) ? W'($urandom) : W'($urandom_range(3));  // many ties
      #1;
      ei = 0;
      ev = vals[0];
      for (int i = 1; i < N; i++)
        if (vals[i] > ev) begin ev = vals[i]; ei = i; end
      checks++;
      if (max_idx != ei[$clog2(N)-1:0] || max_val != ev) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got %0d/%0d exp %0d/%0d", t, max_idx, max_val, ei, ev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
