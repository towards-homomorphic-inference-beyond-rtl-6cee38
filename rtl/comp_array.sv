// comp_array: one computation array of the in-memory accelerator, modelled at
// the bit level.
//
// What it does. The array stores M x N non-volatile bits (MTJ cells in the
// 2T-1M crossbar) and computes on them in place. One instruction applies one
// two-input gate (NOT, AND, NAND, OR, NOR) or a constant write in parallel:
//   * row logic (col_mode=0): in every ACTIVE row r,
//       cell[r][out] = f(cell[r][in_a], cell[r][in_b]);
//   * column logic (col_mode=1): in every ACTIVE column c,
//       cell[out][c] = f(cell[in_a][c], cell[in_b][c]).
// Which rows and columns are active is held in volatile activation latches in
// the peripheral circuitry; OP_ACT reloads them from the bitmasks stored in
// the array itself.
//
// Layout of the reserved cells (names from the bitmask figure of the
// accelerator description; the exact indices are this design's choice):
//   column 0 / column 1  : row bitmask copy 0 / copy 1 (one bit per data row)
//   row M-1 / row M-2    : column bitmask copy 0 / copy 1 (one bit per data column)
//   cell (M-1,0) = RP    : row parity, selects the valid row bitmask copy
//   cell (M-1,1) = CP    : column parity, selects the valid column bitmask copy
// Data rows are 0..M-3 and data columns 2..N-1 ("M-2 rows", "N-2 columns").
// Only data rows/columns can be active, so a row-parallel gate may write the
// row bitmask columns and a column-parallel gate the column bitmask rows.
// RP and CP are written by OP_SET with the parity flag (bit ADDR_W-1 of in_b).
//
// Neighbour transfer. If bit ADDR_W-1 of the output address is set, the
// result is not written here but handed, with the active mask, to the
// neighbouring array: below for column logic (xfer_col_*), to the right for
// row logic (xfer_row_*). The nbc_* / nbr_* inputs take the transfer from the
// array above / to the left. This models the transistors that connect the
// lines of neighbouring arrays. If an instruction makes two sources write the
// same line in one cycle, the neighbour's write wins; programs should avoid it.
//
// Sense amplifiers (HAS_SENSE=1, first array column only): a row-wide read
// port (registered, one cycle) and a masked row write port. Arrays without
// sense amplifiers ignore the sa_* inputs and read back zero.
//
// Timing: an instruction presented on cmd takes effect at the next clock
// edge, i.e. the model assumes the MTJ switching completes within one clock.
// rst_n is the power-on reset: it clears only volatile state (activation
// latches go to all-active, the read register to zero); the cells are
// non-volatile and are never reset.
module comp_array
  import rodent_pkg::*;
#(
  parameter int unsigned M         = 512,  // rows
  parameter int unsigned N         = 512,  // columns
  parameter bit          HAS_SENSE = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  array_cmd_t   cmd,
  // neighbour transfer in, from the array above (column logic)
  input  logic         nbc_v,
  input  logic [$clog2(M)-1:0] nbc_row,
  input  logic [N-1:0] nbc_data,
  input  logic [N-1:0] nbc_en,
  // neighbour transfer in, from the array to the left (row logic)
  input  logic         nbr_v,
  input  logic [$clog2(N)-1:0] nbr_col,
  input  logic [M-1:0] nbr_data,
  input  logic [M-1:0] nbr_en,
  // neighbour transfer out, to the array below
  output logic         xfer_col_v,
  output logic [$clog2(M)-1:0] xfer_col_row,
  output logic [N-1:0] xfer_col_data,
  output logic [N-1:0] xfer_col_en,
  // neighbour transfer out, to the array to the right
  output logic         xfer_row_v,
  output logic [$clog2(N)-1:0] xfer_row_col,
  output logic [M-1:0] xfer_row_data,
  output logic [M-1:0] xfer_row_en,
  // sense-amplifier port
  input  logic         sa_we,
  input  logic         sa_re,
  input  logic [$clog2(M)-1:0] sa_row,
  input  logic [N-1:0] sa_wdata,
  input  logic [N-1:0] sa_wmask,
  output logic [N-1:0] sa_rdata,
  // peripheral status
  output logic [M-1:0] row_act_o,
  output logic [N-1:0] col_act_o,
  output logic         rp_o,
  output logic         cp_o
);
  localparam int unsigned RW = $clog2(M);
  localparam int unsigned CW = $clog2(N);
  localparam logic [M-1:0] ROW_DATA = {2'b00, {(M-2){1'b1}}};  // rows 0..M-3
  localparam logic [N-1:0] COL_DATA = {{(N-2){1'b1}}, 2'b00};  // columns 2..N-1

  initial begin
    assert (M >= 4 && N >= 4 && (1 << RW) == M && (1 << CW) == N && RW < ADDR_W && CW < ADDR_W)
      else $error("comp_array: M and N must be powers of two that fit the address field");
  end

  logic [N-1:0] mem [M];          // non-volatile cells
  logic [M-1:0] row_act;          // volatile activation latches
  logic [N-1:0] col_act;

  instr_t          ins;
  logic            rp, cp;
  logic [RW-1:0]   ar, br, orow;
  logic [CW-1:0]   ac, bc, ocol;
  logic            nb_out, par_set, wr;
  logic [M-1:0]    rres, rmask;
  logic [N-1:0]    cres, cmask, va, vb;

  assign ins     = cmd.ins;
  assign rp      = mem[M-1][0];
  assign cp      = mem[M-1][1];
  assign ar      = ins.in_a[RW-1:0];
  assign br      = ins.in_b[RW-1:0];
  assign orow    = ins.out[RW-1:0];
  assign ac      = ins.in_a[CW-1:0];
  assign bc      = ins.in_b[CW-1:0];
  assign ocol    = ins.out[CW-1:0];
  assign nb_out  = ins.out[NB_BIT];
  assign par_set = (ins.op == OP_SET) && ins.in_b[NB_BIT];
  assign wr      = cmd.valid && op_writes(ins.op) && !par_set;
  assign rmask   = row_act & ROW_DATA;
  assign cmask   = col_act & COL_DATA;

  // Row logic: one gate per row, inputs and output in the same row.
  always_comb begin
    for (int unsigned r = 0; r < M; r++)
      rres[r] = gate_eval(ins.op, mem[r][ac], mem[r][bc], ins.in_a[0]);
  end

  // Column logic: one gate per column, inputs and output in the same column.
  assign va = mem[ar];
  assign vb = mem[br];
  always_comb begin
    for (int unsigned c = 0; c < N; c++)
      cres[c] = gate_eval(ins.op, va[c], vb[c], ins.in_a[0]);
  end

  // Transfers towards the neighbours.
  assign xfer_col_v    = wr && ins.col_mode && nb_out;
  assign xfer_col_row  = orow;
  assign xfer_col_data = cres;
  assign xfer_col_en   = cmask;
  assign xfer_row_v    = wr && !ins.col_mode && nb_out;
  assign xfer_row_col  = ocol;
  assign xfer_row_data = rres;
  assign xfer_row_en   = rmask;

  // Cell writes (no reset: the cells are non-volatile).
  always_ff @(posedge clk) begin
    if (wr && !nb_out) begin
      if (ins.col_mode) begin
        mem[orow] <= (cres & cmask) | (mem[orow] & ~cmask);
      end else begin
        for (int unsigned r = 0; r < M; r++)
          if (rmask[r]) mem[r][ocol] <= rres[r];
      end
    end
    if (cmd.valid && par_set) begin
      if (ins.col_mode) mem[M-1][1] <= ins.in_a[0];
      else              mem[M-1][0] <= ins.in_a[0];
    end
    if (nbr_v) begin
      for (int unsigned r = 0; r < M; r++)
        if (nbr_en[r]) mem[r][nbr_col] <= nbr_data[r];
    end
    if (nbc_v) mem[nbc_row] <= (nbc_data & nbc_en) | (mem[nbc_row] & ~nbc_en);
    if (HAS_SENSE && sa_we) mem[sa_row] <= (sa_wdata & sa_wmask) | (mem[sa_row] & ~sa_wmask);
  end

  // Activation latches (volatile peripheral state) and the sense read register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_act  <= ROW_DATA;
      col_act  <= COL_DATA;
      sa_rdata <= '0;
    end else begin
      if (cmd.valid && ins.op == OP_ACT) begin
        if (ins.col_mode) begin
          // copy 0 in row M-1, copy 1 in row M-2
          col_act <= (cp ? mem[M-2] : mem[M-1]) & COL_DATA;
        end else begin
          for (int unsigned r = 0; r < M; r++)
            row_act[r] <= ROW_DATA[r] & (rp ? mem[r][1] : mem[r][0]);
        end
      end
      if (HAS_SENSE && sa_re) sa_rdata <= mem[sa_row];
    end
  end

  assign row_act_o = rmask;
  assign col_act_o = cmask;
  assign rp_o      = rp;
  assign cp_o      = cp;

endmodule
