// tb_driver: checks the driver's fetch/decode/drive sequence against a
// behavioural one-cycle instruction memory: a trigger in cycle t must give
// exactly one valid command, equal to the stored instruction, in cycle t+2;
// a NOP must give none; a restore must give "activate rows" in cycle t+2 and
// "activate columns" in cycle t+3.
module tb_driver;
  import rodent_pkg::*;
  localparam int DEPTH = 32, PC_W = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic trigger, restore, imem_re, busy;
  logic [PC_W-1:0] pc;
  logic [4:0] imem_addr;
  instr_t imem_rdata;
  array_cmd_t cmd;
  instr_t prog [DEPTH];
  int checks = 0, failures = 0;

  driver #(.IMEM_DEPTH(DEPTH), .PC_W(PC_W)) dut (.clk, .rst_n, .trigger, .pc, .restore,
    .imem_re, .imem_addr, .imem_rdata, .cmd, .busy);

  always_ff @(posedge clk) if (imem_re) imem_rdata <= prog[imem_addr];

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nops = 0;
    trigger = 0; restore = 0; pc = 0;
    for (int a = 0; a < DEPTH; a++) begin
      prog[a] = instr_t'({$urandom, $urandom});
      if (a % 5 == 0) prog[a].op = OP_NOP;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    chk(!cmd.valid, "idle after reset");
    for (int n = 0; n < 100; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      trigger = 1; pc = PC_W'(a);
      @(posedge clk); #1;            // cycle t+1
      trigger = 0; pc = PC_W'($urandom);
      chk(!cmd.valid, "no command in t+1");
      @(posedge clk); #1;            // cycle t+2
      if (prog[a].op == OP_NOP) begin
        nops++;
        chk(!cmd.valid, "NOP not driven");
      end else begin
        chk(cmd.valid, "command valid in t+2");
        chk(cmd.ins == prog[a], "command equals instruction");
      end
      @(posedge clk); #1;
      chk(!cmd.valid, "command lasts one cycle");
      if (n % 10 == 0) begin
        restore = 1;
        @(posedge clk); #1;
        restore = 0;
        chk(!cmd.valid, "no command in t+1 of restore");
        @(posedge clk); #1;
        chk(cmd.valid && cmd.ins.op == OP_ACT && !cmd.ins.col_mode, "activate rows");
        @(posedge clk); #1;
        chk(cmd.valid && cmd.ins.op == OP_ACT && cmd.ins.col_mode, "activate columns");
        @(posedge clk); #1;
        chk(!cmd.valid && !busy, "idle after restore");
      end
    end
    chk(nops > 0, "NOPs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
