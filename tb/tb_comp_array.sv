// tb_comp_array: self-checking test of one computation array and its
// neighbour links.
//
// Three small arrays are wired as in the grid: A, the array B below A (same
// grid column, so it receives the same instructions) and the array C to the
// right of A (another grid column, idle here). All three have sense
// amplifiers so the test can read every cell. The cells are loaded with
// random data, then random instructions (every gate, both row and column
// logic, neighbour transfers, constant and parity writes, activations) are
// applied. After each one the test reads back all cells of the three arrays
// and the activation masks and compares them with a reference model written
// independently here.
module tb_comp_array;
  import rodent_pkg::*;
  localparam int M = 16, N = 16, RW = 4, CW = 4, NOPS = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  array_cmd_t cmd_ab, cmd_c;
  logic [2:0]        sa_we, sa_re;
  logic [RW-1:0]     sa_row;
  logic [N-1:0]      sa_wdata, sa_wmask;
  logic [N-1:0]      rd [3];
  logic [M-1:0]      ract [3];
  logic [N-1:0]      cact [3];
  // neighbour nets
  logic          a_xc_v, b_xc_v, c_xc_v, a_xr_v, b_xr_v, c_xr_v;
  logic [RW-1:0] a_xc_row, b_xc_row, c_xc_row;
  logic [N-1:0]  a_xc_d, a_xc_e, b_xc_d, b_xc_e, c_xc_d, c_xc_e;
  logic [CW-1:0] a_xr_col, b_xr_col, c_xr_col;
  logic [M-1:0]  a_xr_d, a_xr_e, b_xr_d, b_xr_e, c_xr_d, c_xr_e;

  comp_array #(.M(M), .N(N), .HAS_SENSE(1'b1)) u_a (
    .clk, .rst_n, .cmd(cmd_ab),
    .nbc_v(1'b0), .nbc_row('0), .nbc_data('0), .nbc_en('0),
    .nbr_v(1'b0), .nbr_col('0), .nbr_data('0), .nbr_en('0),
    .xfer_col_v(a_xc_v), .xfer_col_row(a_xc_row), .xfer_col_data(a_xc_d), .xfer_col_en(a_xc_e),
    .xfer_row_v(a_xr_v), .xfer_row_col(a_xr_col), .xfer_row_data(a_xr_d), .xfer_row_en(a_xr_e),
    .sa_we(sa_we[0]), .sa_re(sa_re[0]), .sa_row, .sa_wdata, .sa_wmask, .sa_rdata(rd[0]),
    .row_act_o(ract[0]), .col_act_o(cact[0]), .rp_o(), .cp_o());
  comp_array #(.M(M), .N(N), .HAS_SENSE(1'b1)) u_b (
    .clk, .rst_n, .cmd(cmd_ab),
    .nbc_v(a_xc_v), .nbc_row(a_xc_row), .nbc_data(a_xc_d), .nbc_en(a_xc_e),
    .nbr_v(1'b0), .nbr_col('0), .nbr_data('0), .nbr_en('0),
    .xfer_col_v(b_xc_v), .xfer_col_row(b_xc_row), .xfer_col_data(b_xc_d), .xfer_col_en(b_xc_e),
    .xfer_row_v(b_xr_v), .xfer_row_col(b_xr_col), .xfer_row_data(b_xr_d), .xfer_row_en(b_xr_e),
    .sa_we(sa_we[1]), .sa_re(sa_re[1]), .sa_row, .sa_wdata, .sa_wmask, .sa_rdata(rd[1]),
    .row_act_o(ract[1]), .col_act_o(cact[1]), .rp_o(), .cp_o());
  comp_array #(.M(M), .N(N), .HAS_SENSE(1'b1)) u_c (
    .clk, .rst_n, .cmd(cmd_c),
    .nbc_v(1'b0), .nbc_row('0), .nbc_data('0), .nbc_en('0),
    .nbr_v(a_xr_v), .nbr_col(a_xr_col), .nbr_data(a_xr_d), .nbr_en(a_xr_e),
    .xfer_col_v(c_xc_v), .xfer_col_row(c_xc_row), .xfer_col_data(c_xc_d), .xfer_col_en(c_xc_e),
    .xfer_row_v(c_xr_v), .xfer_row_col(c_xr_col), .xfer_row_data(c_xr_d), .xfer_row_en(c_xr_e),
    .sa_we(sa_we[2]), .sa_re(sa_re[2]), .sa_row, .sa_wdata, .sa_wmask, .sa_rdata(rd[2]),
    .row_act_o(ract[2]), .col_act_o(cact[2]), .rp_o(), .cp_o());

  // ---------------- reference model ----------------
  bit rm   [3][M][N];
  bit rra  [3][M];
  bit rca  [3][N];
  int checks = 0, failures = 0;
  int n_nb_col = 0, n_nb_row = 0, n_par = 0, n_act = 0;

  function automatic bit f(opcode_e op, bit a, bit b, bit k);
    case (op)
      OP_NOT:  return !a;
      OP_AND:  return a && b;
      OP_NAND: return !(a && b);
      OP_OR:   return a || b;
      OP_NOR:  return !(a || b);
      OP_SET:  return k;
      default: return 0;
    endcase
  endfunction

  // Apply one instruction to arrays 0 (A) and 1 (B); array 2 (C) only
  // receives A's row transfers.
  task automatic model(instr_t i);
    bit nb, pset, writes;
    bit nxt [3][M][N];
    int ia, ib, io;
    nxt = rm;
    nb     = i.out[NB_BIT];
    pset   = (i.op == OP_SET) && i.in_b[NB_BIT];
    writes = i.op inside {OP_NOT, OP_AND, OP_NAND, OP_OR, OP_NOR, OP_SET};
    ia = int'(i.in_a[RW-1:0]); ib = int'(i.in_b[RW-1:0]); io = int'(i.out[RW-1:0]);
    for (int k = 0; k < 2; k++) begin
      if (pset) begin
        nxt[k][M-1][i.col_mode ? 1 : 0] = i.in_a[0];
      end else if (writes && i.col_mode) begin
        for (int c = 2; c < N; c++)
          if (rca[k][c]) begin
            if (!nb)         nxt[k][io][c] = f(i.op, rm[k][ia][c], rm[k][ib][c], i.in_a[0]);
            else if (k == 0) nxt[1][io][c] = f(i.op, rm[0][ia][c], rm[0][ib][c], i.in_a[0]);
          end
      end else if (writes) begin
        for (int r = 0; r < M - 2; r++)
          if (rra[k][r]) begin
            if (!nb)         nxt[k][r][io] = f(i.op, rm[k][r][ia], rm[k][r][ib], i.in_a[0]);
            else if (k == 0) nxt[2][r][io] = f(i.op, rm[0][r][ia], rm[0][r][ib], i.in_a[0]);
          end
      end
      if (i.op == OP_ACT) begin
        if (i.col_mode) for (int c = 2; c < N; c++) rca[k][c] = rm[k][rm[k][M-1][1] ? M-2 : M-1][c];
        else            for (int r = 0; r < M - 2; r++) rra[k][r] = rm[k][r][rm[k][M-1][0] ? 1 : 0];
      end
    end
    rm = nxt;
  endtask

  task automatic compare_all();
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < M; r++) begin
        sa_re  = 3'b001 << k;
        sa_row = RW'(r);
        @(posedge clk); #1;
        sa_re = '0;
        for (int c = 0; c < N; c++) begin
          checks++;
          if (rd[k][c] !== rm[k][r][c]) begin
            failures++;
            if (failures < 10) $display("MISMATCH array %0d cell (%0d,%0d): got %0b exp %0b", k, r, c, rd[k][c], rm[k][r][c]);
          end
        end
      end
    for (int k = 0; k < 3; k++) begin
      for (int r = 0; r < M; r++) begin checks++; if (ract[k][r] !== (r < M-2 && rra[k][r])) failures++; end
      for (int c = 0; c < N; c++) begin checks++; if (cact[k][c] !== (c >= 2 && rca[k][c])) failures++; end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t i;
    cmd_ab = '0; cmd_c = '0; sa_we = '0; sa_re = '0; sa_row = '0; sa_wdata = '0; sa_wmask = '0;
    // after reset every data row and column is active
    for (int k = 0; k < 3; k++) begin
      for (int r = 0; r < M; r++) rra[k][r] = (r < M - 2);
      for (int c = 0; c < N; c++) rca[k][c] = (c >= 2);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // load random contents through the sense amplifiers, half-masked on the last pass
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < M; r++) begin
        sa_we = 3'b001 << k; sa_row = RW'(r);
        sa_wdata = N'($urandom); sa_wmask = '1;
        for (int c = 0; c < N; c++) rm[k][r][c] = sa_wdata[c];
        @(posedge clk); #1;
      end
    sa_we = 3'b001; sa_row = 3; sa_wdata = N'($urandom); sa_wmask = 16'h0ff0;
    for (int c = 0; c < N; c++) if (sa_wmask[c]) rm[0][3][c] = sa_wdata[c];
    @(posedge clk); #1;
    sa_we = '0;
    compare_all();
    for (int n = 0; n < NOPS; n++) begin
      i.op       = opcode_e'($urandom_range(1, 7));
      i.col_mode = 1'($urandom);
      i.in_a     = ADDR_W'($urandom_range(0, M - 1));
      i.in_b     = ADDR_W'($urandom_range(0, M - 1));
      i.out      = ADDR_W'($urandom_range(0, M - 1));
      if ($urandom_range(0, 4) == 0) i.out[NB_BIT] = 1'b1;
      if (i.op == OP_SET && $urandom_range(0, 2) == 0) i.in_b[NB_BIT] = 1'b1;
      if (i.op inside {OP_NOT, OP_AND, OP_NAND, OP_OR, OP_NOR, OP_SET} && i.out[NB_BIT] && !(i.op == OP_SET && i.in_b[NB_BIT])) begin
        if (i.col_mode) n_nb_col++; else n_nb_row++;
      end
      if (i.op == OP_SET && i.in_b[NB_BIT]) n_par++;
      if (i.op == OP_ACT) n_act++;
      cmd_ab.valid = 1'b1; cmd_ab.ins = i;
      @(posedge clk); #1;
      cmd_ab.valid = 1'b0;
      model(i);
      if (n % 8 == 7 || n < 16) compare_all();
    end
    compare_all();
    $display("events: col-transfers=%0d row-transfers=%0d parity-writes=%0d activations=%0d", n_nb_col, n_nb_row, n_par, n_act);
    checks++; if (n_nb_col == 0 || n_nb_row == 0 || n_par == 0 || n_act == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
