// tb_psum_vmem_buffer: writes random 384-bit entries to random addresses,
// then reads them back (one-cycle registered read); also checks that a read
// of the address being written in the same cycle returns the old value and
// that the read data holds while rd_en is low.
module tb_psum_vmem_buffer;
  localparam int N = 16, VW = 24, DEPTH = 2304;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [11:0] rd_addr = 0, wr_addr = 0;
  logic [N*VW-1:0] rd_data, wr_data = 0;
  int checks = 0, failures = 0;
  logic [N*VW-1:0] model [int];

  psum_vmem_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N*VW-1:0] rnd();
    logic [N*VW-1:0] r;
    for (int i = 0; i < N*VW/32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    int a;
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      a = (i == 0) ? 0 : (i == 1) ? DEPTH-1 : $urandom % DEPTH;
      wr_en = 1; wr_addr = 12'(a); wr_data = rnd(); model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    foreach (model[k]) begin
      rd_en = 1; rd_addr = 12'(k);
      @(negedge clk);
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("FAIL addr %0d", k); end
    end
    // read-first on a simultaneous write, then hold with rd_en low
    a = 5; model[a] = rnd(); wr_en = 1; wr_addr = 12'(a); wr_data = model[a];
    rd_en = 1; rd_addr = 12'(a);
    @(negedge clk); wr_en = 1; wr_data = ~model[a]; rd_en = 1;
    @(negedge clk); wr_en = 0; rd_en = 0;
    checks++;
    if (rd_data !== model[a]) begin failures++; $display("FAIL read-first"); end
    @(negedge clk);
    checks++;
    if (rd_data !== model[a]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
