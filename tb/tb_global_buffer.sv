// tb_global_buffer: writes records from the core port, reads them back from
// both ports (one cycle latency), writes from the HBM port and reads from the
// core port, and checks the accumulated compressed-bit count.
module tb_global_buffer;
  localparam int DEPTH = 16, W = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_we, a_re, b_we, b_re;
  logic [$clog2(DEPTH)-1:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0] a_wbits, nz_bits;
  logic [W-1:0] ref_mem [DEPTH];
  longint bits = 0;
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_we = 0; a_re = 0; b_we = 0; b_re = 0; a_addr = 0; b_addr = 0;
    a_wdata = 0; b_wdata = 0; a_wbits = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_we = 1; a_addr = $clog2(DEPTH)'(i);
      a_wdata = {$urandom, $urandom};
      a_wbits = $urandom_range(100);
      ref_mem[i] = a_wdata;
      bits += a_wbits;
    end
    @(negedge clk) a_we = 0;
    checks++;
    if (nz_bits != 32'(bits)) begin failures++; $display("FAIL nz_bits"); end
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_re = 1; a_addr = $clog2(DEPTH)'(i);
      b_re = 1; b_addr = $clog2(DEPTH)'(DEPTH - 1 - i);
      @(negedge clk);
      a_re = 0; b_re = 0;
      checks += 2;
      if (a_rdata != ref_mem[i]) begin failures++; $display("FAIL a read %0d", i); end
      if (b_rdata != ref_mem[DEPTH-1-i]) begin failures++; $display("FAIL b read %0d", i); end
    end
    for (int i = 0; i < DEPTH; i += 3) begin
      @(negedge clk);
      b_we = 1; b_addr = $clog2(DEPTH)'(i); b_wdata = {$urandom, $urandom};
      ref_mem[i] = b_wdata;
    end
    @(negedge clk) b_we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_re = 1; a_addr = $clog2(DEPTH)'(i);
      @(negedge clk);
      a_re = 0;
      checks++;
      if (a_rdata != ref_mem[i]) begin failures++; $display("FAIL read after HBM write %0d", i); end
    end
    checks++;
    if (nz_bits != 32'(bits)) begin failures++; $display("FAIL nz_bits changed by port B"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
