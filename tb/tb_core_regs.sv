// tb_core_regs -- writes and reads back every parameter register, checks
// the cfg outputs, the start pulse, busy/done and the cycle counter as the
// PEs report done.
module tb_core_regs;
  import xcorr_pkg::*;
  localparam int unsigned NUM_PE = 16;
  logic clk = 0, rst_n = 0;
  logic [3:0] csr_address;
  logic csr_write, csr_read, csr_readdatavalid, start;
  logic [31:0] csr_writedata, csr_readdata;
  core_cfg_t cfg;
  logic [NUM_PE-1:0] pe_done;
  int checks = 0, failures = 0, starts = 0;
  logic [31:0] val [2:9];

  core_regs #(.NUM_PE(NUM_PE)) dut (.clk, .rst_n, .csr_address, .csr_write, .csr_writedata,
    .csr_read, .csr_readdata, .csr_readdatavalid, .cfg, .start, .pe_done);
  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk);
    csr_address = 4'(a); csr_writedata = d; csr_write = 1;
    @(negedge clk);
    csr_write = 0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk);
    csr_address = 4'(a); csr_read = 1;
    @(negedge clk);
    csr_read = 0;
    check(csr_readdatavalid, "readdatavalid");
    d = csr_readdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    csr_address = 0; csr_write = 0; csr_read = 0; csr_writedata = 0; pe_done = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 2; a <= 9; a++) begin
      val[a] = $urandom;
      wr(a, val[a]);
    end
    for (int a = 2; a <= 9; a++) begin
      rd(a, d);
      check(d == val[a], "register readback");
    end
    check(cfg.num_spectra == val[2] && cfg.spec_base == val[3] && cfg.spec_stride == val[4] &&
          cfg.pep_base == val[5] && cfg.num_peptides == val[6] && cfg.tolerance == val[7] &&
          cfg.score_base == val[8] && cfg.score_stride == val[9], "cfg outputs");
    rd(1, d);
    check(d[1:0] == 2'b00, "idle status");
    wr(0, 1);
    @(negedge clk);
    check(starts == 1, "one start pulse");
    pe_done = '0;
    rd(1, d);
    check(d[0] == 1'b1, "busy after start");
    wr(2, 32'hDEAD);          // ignored while busy
    check(cfg.num_spectra == val[2], "write ignored while busy");
    repeat (20) @(negedge clk);
    pe_done = 16'h00FF;
    repeat (5) @(negedge clk);
    rd(1, d);
    check(d[1:0] == 2'b01, "still busy with some PEs running");
    rd(10, d);
    check(d == 32'h00FF, "PE_DONE");
    pe_done = '1;
    repeat (3) @(negedge clk);
    rd(1, d);
    check(d[1:0] == 2'b10, "done");
    rd(11, d);
    $display("cycles=%0d", d);
    check(d >= 30 && d <= 45, "cycle counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
