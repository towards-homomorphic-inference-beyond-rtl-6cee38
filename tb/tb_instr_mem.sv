// tb_instr_mem: writes random instructions into a small instruction memory,
// reads them back in random order and checks data and the one-cycle read
// latency; also checks that the read register holds while re is low.
module tb_instr_mem;
  import rodent_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  instr_t wdata, rdata;
  instr_t ref_mem [DEPTH];
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = instr_t'({$urandom, $urandom});
      ref_mem[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = 6'(a);
      @(posedge clk); #1;
      re = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("MISMATCH addr %0d", a);
      end
      // overwrite the word just read while not reading: the read register must hold
      held = rdata;
      we = 1; waddr = raddr; wdata = instr_t'({$urandom, $urandom});
      ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      we = 0;
      checks++;
      if (rdata !== held) failures++;
      // one more idle cycle, now with a different read address
      raddr = 6'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
