// tb_sram_buffer: self-checking test of sram_buffer. Writes random words to
// every address of a small instance, reads them back in random order and
// checks the one-cycle read latency and that rdata holds while the buffer is
// not accessed.
module tb_sram_buffer;
  localparam int W = 24, D = 64;
  logic clk = 0, en, we;
  logic [$clog2(D)-1:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  sram_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      en = 1; we = 1; addr = a[$clog2(D)-1:0]; wdata = W'($urandom); ref_mem[a] = wdata;
      @(negedge clk);
    end
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(D-1);
      en = 1; we = 0; addr = a[$clog2(D)-1:0];
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("read %0d: got %h exp %h", a, rdata, ref_mem[a]); end
      // idle cycle: output must hold
      en = 0; addr = addr + 1'b1;
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("hold %0d failed", a); end
      // occasional overwrite
      if (n % 7 == 0) begin
        en = 1; we = 1; addr = a[$clog2(D)-1:0]; wdata = W'($urandom); ref_mem[a] = wdata;
        @(negedge clk);
        we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
