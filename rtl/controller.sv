// controller: the state machine that sequences the accelerator through
// Reception -> Encode -> Compute -> Transmit -> Reception and keeps its
// architectural state safe across power failures.
//
// Architectural state (non-volatile, survives rst_n):
//   * status register SR (which of the four phases is current) and program
//     counter PC, each held as two copies plus one parity bit that names the
//     valid copy. An update always writes the INVALID copy first and flips the
//     parity bit in a later cycle, so an interrupted update leaves the old
//     valid value intact;
//   * the "encode complete" flag.
// The receive-complete and transmit-complete flags live in the input buffer
// and the transmit unit; the controller clears them through rx_clear/tx_clear.
//
// Phases (one state per phase of the state diagram):
//   Reception : rx_enable hands control to the BLE receiver until rx_complete.
//               Then: encode-complete := 0, SR := Encode.
//   Encode    : enc_start (re)starts the encoder from the beginning; on
//               enc_done encode-complete := 1 and SR := Compute.
//   Compute   : while PC != prog_end, broadcast PC with drv_trigger, write
//               PC+1 into the invalid copy while the instruction executes,
//               and flip the PC parity bit once the instruction is certain to
//               have completed (INSTR_CYCLES cycles per instruction). When
//               PC == prog_end: transmit-complete := 0, SR := Transmit.
//   Transmit  : tx_enable hands control to the BLE transmitter until
//               tx_complete. Then: receive-complete := 0, SR := Reception.
// After a restart (rst_n) the machine resumes in the phase named by the
// valid SR copy. In Compute it first pulses drv_restore so the drivers
// re-activate rows and columns, then re-issues the instruction at the valid
// PC (at most one instruction is repeated). In Encode it restarts the
// encoder unless encode-complete is already set. In Reception and Transmit
// it hands control back to the radio.
//
// Following the description: duplicated SR/PC with parity bits, the four
// phases and their transition actions, one instruction at a time with the
// commit by parity flip. This design's choices: one parity bit per variable,
// the PC being reset to 0 on entry to Compute, the RESTORE_CYCLES wait, the
// cycle-level order of each transition, and the synchronous nv_init input
// that puts the non-volatile state in a known state at first power-up.
module controller
  import rodent_pkg::*;
#(
  parameter int unsigned PC_W           = 13,
  parameter int unsigned INSTR_CYCLES   = 4,
  parameter int unsigned RESTORE_CYCLES = 4
) (
  input  logic            clk,
  input  logic            rst_n,       // power-on restart: clears volatile state only
  input  logic            nv_init,     // first power-up: initialises the non-volatile state
  input  logic [PC_W-1:0] prog_end,    // END: number of instructions in the program
  // reception
  output logic            rx_enable,
  output logic            rx_clear,
  input  logic            rx_complete,
  // encoding
  output logic            enc_start,
  input  logic            enc_done,
  // transmission
  output logic            tx_enable,
  output logic            tx_clear,
  input  logic            tx_complete,
  // drivers
  output logic            drv_trigger,
  output logic            drv_restore,
  output logic [PC_W-1:0] drv_pc,
  // status
  output sr_e             sr_o,
  output logic [PC_W-1:0] pc_o,
  output logic            commit_o     // pulses when an instruction is committed
);
  initial assert (INSTR_CYCLES >= 4 && RESTORE_CYCLES >= 4)
    else $error("controller: INSTR_CYCLES must be >= 4 and RESTORE_CYCLES >= 3");

  // ---------------- non-volatile architectural state ----------------
  sr_e             sr_copy [2];
  logic            sr_par;
  logic [PC_W-1:0] pc_copy [2];
  logic            pc_par;
  logic            enc_flag;

  sr_e             sr;
  logic [PC_W-1:0] pc;
  assign sr = sr_copy[sr_par];
  assign pc = pc_copy[pc_par];

  // ---------------- volatile sequencing state ----------------
  typedef enum logic [3:0] {
    C_BOOT, C_DISPATCH, C_RESTORE, C_RX, C_ENC_START, C_ENC_WAIT,
    C_ISSUE, C_EXEC, C_TX, C_PRE, C_PRE2, C_SR_WRITE, C_SR_FLIP
  } cstate_e;
  cstate_e st;
  sr_e     next_sr;
  logic [$clog2(INSTR_CYCLES + RESTORE_CYCLES + 1)-1:0] cnt;

  // Volatile sequencing.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= C_BOOT;
      next_sr <= SR_RECEIVE;
      cnt     <= '0;
    end else begin
      unique case (st)
        C_BOOT:     st <= (sr == SR_COMPUTE) ? C_RESTORE : C_DISPATCH;
        C_RESTORE: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == RESTORE_CYCLES - 1) begin
            cnt <= '0;
            st  <= C_DISPATCH;
          end
        end
        C_DISPATCH: begin
          unique case (sr)
            SR_RECEIVE:  st <= C_RX;
            SR_ENCODE:   st <= enc_flag ? C_PRE : C_ENC_START;
            SR_COMPUTE:  st <= C_ISSUE;
            SR_TRANSMIT: st <= C_TX;
            default:     st <= C_RX;
          endcase
          next_sr <= (sr == SR_TRANSMIT) ? SR_RECEIVE : sr_e'(sr + 2'd1);
        end
        C_RX:        if (rx_complete) st <= C_PRE;
        C_ENC_START: st <= C_ENC_WAIT;
        C_ENC_WAIT:  if (enc_done) st <= C_PRE;
        C_ISSUE:     st <= (pc == prog_end) ? C_PRE : C_EXEC;
        C_EXEC: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == INSTR_CYCLES - 2) begin
            cnt <= '0;
            st  <= C_ISSUE;
          end
        end
        C_TX:        if (tx_complete) st <= C_PRE;
        C_PRE:       st <= C_PRE2;
        C_PRE2:      st <= C_SR_WRITE;
        C_SR_WRITE:  st <= C_SR_FLIP;
        C_SR_FLIP:   st <= C_DISPATCH;
        default:     st <= C_BOOT;
      endcase
    end
  end

  // Non-volatile state: never touched by rst_n.
  always_ff @(posedge clk) begin
    if (nv_init) begin
      sr_copy[0] <= SR_RECEIVE;
      sr_copy[1] <= SR_RECEIVE;
      sr_par     <= 1'b0;
      pc_copy[0] <= '0;
      pc_copy[1] <= '0;
      pc_par     <= 1'b0;
      enc_flag   <= 1'b0;
    end else if (rst_n) begin
      unique case (st)
        C_ENC_WAIT: if (enc_done) enc_flag <= 1'b1;
        C_EXEC: begin
          if (int'(cnt) == 0)                pc_copy[~pc_par] <= pc + 1'b1;  // backup into the invalid copy
          if (int'(cnt) == INSTR_CYCLES - 2) pc_par           <= ~pc_par;    // commit
        end
        C_PRE: begin
          if (next_sr == SR_ENCODE)  enc_flag          <= 1'b0;
          if (next_sr == SR_COMPUTE) pc_copy[~pc_par]  <= '0;
        end
        C_PRE2:     if (next_sr == SR_COMPUTE) pc_par <= ~pc_par;
        C_SR_WRITE: sr_copy[~sr_par] <= next_sr;
        C_SR_FLIP:  sr_par <= ~sr_par;
        default: ;
      endcase
    end
  end

  assign rx_enable   = (st == C_RX);
  assign tx_enable   = (st == C_TX);
  assign enc_start   = (st == C_ENC_START);
  assign rx_clear    = (st == C_PRE) && (next_sr == SR_RECEIVE);
  assign tx_clear    = (st == C_PRE) && (next_sr == SR_TRANSMIT);
  assign drv_trigger = (st == C_ISSUE) && (pc != prog_end);
  assign drv_restore = (st == C_RESTORE) && (int'(cnt) == 0);
  assign drv_pc      = pc;
  assign sr_o        = sr;
  assign pc_o        = pc;
  assign commit_o    = (st == C_EXEC) && (int'(cnt) == INSTR_CYCLES - 2);

  // Instructions are issued strictly one at a time, INSTR_CYCLES apart.
  a_issue_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    drv_trigger |=> !drv_trigger [*INSTR_CYCLES-1]);
endmodule
