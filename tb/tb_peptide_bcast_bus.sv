// tb_peptide_bcast_bus -- issues reads on the memory side through a DRAM
// model and checks that each returning word is broadcast once, one cycle
// later, with the address it was read from.
module tb_peptide_bcast_bus;
  import xcorr_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  bcast_t   bc;
  int checks = 0, failures = 0, seen = 0;
  logic [31:0] exp_addr[$];

  dram_model #(.WORDS(256), .LAT(3), .STALL_PCT(30)) u_mem (.clk, .rst_n, .req, .rsp);
  peptide_bcast_bus dut (.clk, .rst_n, .s_req(req), .s_rsp(rsp), .bcast(bc));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && bc.valid) begin
    checks += 2;
    if (exp_addr.size() == 0) failures++;
    else begin
      logic [31:0] a;
      a = exp_addr.pop_front();
      if (bc.address != a) failures++;
      if (bc.data != {16{a}}) failures++;
    end
    seen++;
  end

  initial begin
    for (int i = 0; i < 256; i++) u_mem.mem[i] = {16{32'(i)}};
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      req.read = 1;
      req.address = 32'($urandom_range(255));
      do @(posedge clk); while (rsp.waitrequest);
      exp_addr.push_back(req.address);
      @(negedge clk);
      req.read = 0;
      while (!rsp.readdatavalid) @(negedge clk);
      repeat ($urandom_range(2)) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (seen != 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
