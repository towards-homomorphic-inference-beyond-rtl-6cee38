// driver: CMOS driver of one column of computation arrays.
//
// On a trigger from the controller the driver fetches the instruction at the
// broadcast program counter from its instruction memory, decodes it and
// drives it, for exactly one clock cycle, into every array of its column
// (the same command reaches all 16 arrays, which act as one unit). On a
// restore request, issued by the controller after a restart in the compute
// phase, it drives the two dedicated instructions "activate rows" and
// "activate columns" so that the peripheral activation latches are rebuilt
// from the non-volatile bitmasks.
//
// Timing: trigger in cycle t -> memory read at the edge ending t ->
// command registered at the edge ending t+1 -> command valid in cycle t+2,
// executed by the arrays at the edge ending t+2. Restore in cycle t drives
// "activate rows" in cycle t+2 and "activate columns" in cycle t+3.
// Decoding is reduced to forwarding the fields: in silicon it selects the
// gate voltage and the row/column decoders, which the array model abstracts.
// A NOP is not driven (valid stays low). The pipeline is this design's choice.
module driver
  import rodent_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 4096,
  parameter int unsigned PC_W       = $clog2(IMEM_DEPTH) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          trigger,
  input  logic [PC_W-1:0]               pc,
  input  logic                          restore,
  output logic                          imem_re,
  output logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_rdata,
  output array_cmd_t                    cmd,
  output logic                          busy
);
  typedef enum logic [1:0] {D_IDLE, D_FETCH, D_ACT_ROW, D_ACT_COL} dstate_e;
  dstate_e st;

  assign imem_re   = trigger;
  assign imem_addr = pc[$clog2(IMEM_DEPTH)-1:0];
  assign busy      = (st != D_IDLE) || cmd.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= D_IDLE;
      cmd <= '0;
    end else begin
      cmd.valid <= 1'b0;
      unique case (st)
        D_IDLE: begin
          if (restore)      st <= D_ACT_ROW;
          else if (trigger) st <= D_FETCH;
        end
        D_FETCH: begin
          cmd.ins   <= imem_rdata;
          cmd.valid <= (imem_rdata.op != OP_NOP);
          st        <= D_IDLE;
        end
        D_ACT_ROW: begin
          cmd.ins   <= '{op: OP_ACT, in_a: '0, in_b: '0, out: '0, col_mode: 1'b0};
          cmd.valid <= 1'b1;
          st        <= D_ACT_COL;
        end
        D_ACT_COL: begin
          cmd.ins   <= '{op: OP_ACT, in_a: '0, in_b: '0, out: '0, col_mode: 1'b1};
          cmd.valid <= 1'b1;
          st        <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // A trigger or restore only arrives while the driver is idle.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (trigger || restore) |-> st == D_IDLE);
endmodule
