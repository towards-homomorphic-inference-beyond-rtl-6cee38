// rodent_e2e: end-to-end test harness for rodent_top, shared by the reduced
// test (tb_rodent_top) and the full-size test (tb_rodent_full).
//
// One complete inference round trip: the model data are written into grid
// column 0 through the sense-amplifier port; the BLE receiver model delivers
// NP input elements; the encoder model reads them from the input buffer and
// writes one data row per element into grid column 0; a generated program
// runs on all grid columns; the transmitter model collects the AR*TXR result
// rows. A reference model of the array grid, written independently of the
// RTL, executes the same program and predicts every transmitted row.
//
// The program starts with a prologue that sets both copies of the row and
// column bitmasks, the parity cells and the activations (and clears the data
// of the other grid columns), followed by random gates, neighbour transfers
// and bitmask updates (write the invalid copy, flip the parity cell,
// activate). It obeys the rules that make an instruction idempotent: the
// output line is never an input line and never the valid bitmask.
//
// Power is cut (rst_n) in every phase: during reception between a packet's
// write and its valid bit, during encoding, several times during compute
// (after the prologue), and during transmission while a packet is in flight.
// Each mechanism is counted, and one that never happened counts as a failure.
module rodent_e2e
  import rodent_pkg::*;
#(
  parameter bit FULL = 1'b0,
  parameter int M    = 16,
  parameter int N    = 16,
  parameter int AR   = 2,
  parameter int AC   = 2,
  parameter int IMD  = 128,
  parameter int NP   = 8,
  parameter int W    = 3,
  parameter int TXR  = 4,
  parameter int BODY = 60,
  parameter int CUTS = 4,
  parameter int WATCHDOG = 200000
) ();
  localparam int RW = $clog2(M), CW = $clog2(N), PC_W = $clog2(IMD) + 1;
  localparam int NTX = AR * TXR;
  localparam int ENC_ROW0 = TXR;                          // encoder rows follow the result rows
  localparam logic [N-1:0] COL_DATA = {{(N-2){1'b1}}, 2'b00};
  localparam logic [M-1:0] ROW_DATA = {2'b00, {(M-2){1'b1}}};

  logic clk = 0, rst_n = 0, nv_init = 0;
  always #5 clk = ~clk;

  logic [PC_W-1:0] prog_end;
  logic imem_we;
  logic [$clog2(AC)-1:0] imem_col;
  logic [$clog2(IMD)-1:0] imem_addr;
  instr_t imem_wdata;
  logic rx_enable, rx_pkt_v, rx_pkt_ready, rx_pkt_ack;
  logic [$clog2(NP)-1:0] rx_pkt_idx;
  logic [W-1:0] rx_pkt_data;
  logic tx_enable, tx_valid, tx_ack;
  logic [$clog2(NTX+1)-1:0] tx_idx;
  logic [N-1:0] tx_data;
  logic enc_start, enc_done;
  logic [$clog2(NP)-1:0] enc_rd_idx;
  logic [W-1:0] enc_rd_data;
  logic arr_wr_v;
  logic [$clog2(AR)-1:0] arr_wr_arr;
  logic [RW-1:0] arr_wr_row;
  logic [N-1:0] arr_wr_data, arr_wr_mask;
  sr_e sr;
  logic [PC_W-1:0] pc;
  logic commit, restore;

  if (FULL) begin : g_full
    rodent_top u_dut (.*);
  end else begin : g_small
    rodent_top #(.M(M), .N(N), .ARR_ROWS(AR), .ARR_COLS(AC), .IMEM_DEPTH(IMD),
      .NUM_PACKETS(NP), .PKT_W(W), .TX_ROWS(TXR)) u_dut (.*);
  end

  int checks = 0, failures = 0;
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference model of the grid ----------------
  logic [N-1:0] gm  [AR][AC][M];
  logic [M-1:0] gra [AR][AC];
  logic [N-1:0] gca [AR][AC];

  function automatic logic [N-1:0] fv(opcode_e op, logic [N-1:0] a, logic [N-1:0] b, bit k);
    case (op)
      OP_NOT:  return ~a;
      OP_AND:  return a & b;
      OP_NAND: return ~(a & b);
      OP_OR:   return a | b;
      OP_NOR:  return ~(a | b);
      OP_SET:  return k ? '1 : '0;
      default: return '0;
    endcase
  endfunction

  task automatic model_step(instr_t ins [AC]);
    logic [N-1:0] nxt [AR][AC][M];
    nxt = gm;
    for (int d = 0; d < AC; d++) begin
      instr_t i;
      int ia, ib, io;
      bit nb, pset, wr;
      i = ins[d];
      ia = int'(i.in_a[RW-1:0]); ib = int'(i.in_b[RW-1:0]); io = int'(i.out[RW-1:0]);
      nb = i.out[NB_BIT];
      pset = (i.op == OP_SET) && i.in_b[NB_BIT];
      wr = (i.op inside {OP_NOT, OP_AND, OP_NAND, OP_OR, OP_NOR, OP_SET}) && !pset;
      for (int a = 0; a < AR; a++) begin
        if (pset) nxt[a][d][M-1][i.col_mode ? 1 : 0] = i.in_a[0];
        if (wr && i.col_mode) begin
          logic [N-1:0] res;
          res = fv(i.op, gm[a][d][ia], gm[a][d][ib], i.in_a[0]);
          if (!nb)             nxt[a][d][io]   = (res & gca[a][d]) | (nxt[a][d][io] & ~gca[a][d]);
          else if (a + 1 < AR) nxt[a+1][d][io] = (res & gca[a][d]) | (nxt[a+1][d][io] & ~gca[a][d]);
        end
        if (wr && !i.col_mode) begin
          for (int r = 0; r < M - 2; r++) begin
            if (gra[a][d][r]) begin
              logic [N-1:0] va, vb, res;
              va = {N{gm[a][d][r][ia]}}; vb = {N{gm[a][d][r][ib]}};
              res = fv(i.op, va, vb, i.in_a[0]);
              if (!nb)             nxt[a][d][r][io]   = res[0];
              else if (d + 1 < AC) nxt[a][d+1][r][io] = res[0];
            end
          end
        end
        if (i.op == OP_ACT) begin
          if (i.col_mode) gca[a][d] = (gm[a][d][M-1][1] ? gm[a][d][M-2] : gm[a][d][M-1]) & COL_DATA;
          else for (int r = 0; r < M; r++) gra[a][d][r] = ROW_DATA[r] & gm[a][d][r][gm[a][d][M-1][0] ? 1 : 0];
        end
      end
    end
    gm = nxt;
  endtask

  // ---------------- program generation ----------------
  localparam int PRO = 8 + (M - 2);
  localparam int PLEN = PRO + BODY;
  instr_t prog [PLEN][AC];
  int n_gate = 0, n_xcol = 0, n_xrow = 0, n_mask = 0, n_nop = 0;

  function automatic instr_t mk(opcode_e op, int a, int b, int o, bit cm);
    instr_t i;
    i.op = op; i.in_a = ADDR_W'(a); i.in_b = ADDR_W'(b); i.out = ADDR_W'(o); i.col_mode = cm;
    return i;
  endfunction

  function automatic instr_t nop();
    return mk(OP_NOP, 0, 0, 0, 0);
  endfunction

  task automatic gen_program();
    bit rp [AC], cp [AC];
    int p;
    for (int d = 0; d < AC; d++) begin
      prog[0][d] = mk(OP_SET, 1, 0, 0, 0);                       // row bitmask copy 0 := 1
      prog[1][d] = mk(OP_SET, 1, 0, 1, 0);                       // row bitmask copy 1 := 1
      prog[2][d] = mk(OP_SET, 1, 0, M - 1, 1);                   // column bitmask copy 0 := 1
      prog[3][d] = mk(OP_SET, 1, 0, M - 2, 1);                   // column bitmask copy 1 := 1
      prog[4][d] = mk(OP_SET, 0, 1 << NB_BIT, 0, 0);             // RP := 0
      prog[5][d] = mk(OP_SET, 0, 1 << NB_BIT, 0, 1);             // CP := 0
      prog[6][d] = mk(OP_ACT, 0, 0, 0, 0);
      prog[7][d] = mk(OP_ACT, 0, 0, 0, 1);
      for (int r = 0; r < M - 2; r++)
        prog[8 + r][d] = (d == 0) ? nop() : mk(OP_SET, 0, 0, r, 1);   // clear the other grid columns
      rp[d] = 0; cp[d] = 0;
    end
    p = PRO;
    while (p < PLEN) begin
      if (p + 3 <= PLEN && $urandom_range(0, 7) == 0) begin
        // bitmask update in one grid column: write invalid copy, flip parity, activate
        int d;
        bit cm;
        d = $urandom_range(0, AC - 1);
        cm = 1'($urandom);
        for (int k = 0; k < 3; k++) for (int e = 0; e < AC; e++) prog[p + k][e] = nop();
        if (!cm) begin
          int src;
          src = $urandom_range(2, N - 1);
          prog[p][d] = mk(OP_OR, src, src, rp[d] ? 0 : 1, 0);
          prog[p + 1][d] = mk(OP_SET, !rp[d], 1 << NB_BIT, 0, 0);
          rp[d] = !rp[d];
        end else begin
          int src;
          src = $urandom_range(0, M - 3);
          prog[p][d] = mk(OP_OR, src, src, cp[d] ? M - 1 : M - 2, 1);
          prog[p + 1][d] = mk(OP_SET, !cp[d], 1 << NB_BIT, 0, 1);
          cp[d] = !cp[d];
        end
        prog[p + 2][d] = mk(OP_ACT, 0, 0, 0, cm);
        n_mask++;
        p += 3;
      end else begin
        for (int d = 0; d < AC; d++) prog[p][d] = nop();
        for (int d = 0; d < AC; d++) begin
          opcode_e op;
          bit cm, nb;
          int a, b, o;
          if (d > 0 && prog[p][d-1].out[NB_BIT] && !prog[p][d-1].col_mode && prog[p][d-1].op != OP_NOP) begin
            n_nop++;
            continue;                                    // receives a row transfer this cycle
          end
          if ($urandom_range(0, 5) == 0) begin n_nop++; continue; end
          op = opcode_e'($urandom_range(1, 6));
          cm = 1'($urandom);
          nb = ($urandom_range(0, 3) == 0);
          if (!cm && d == AC - 1) nb = 0;
          if (cm) begin
            a = $urandom_range(0, M - 1); b = $urandom_range(0, M - 1);
            do o = $urandom_range(0, M - 3); while (o == a || o == b);
          end else begin
            a = $urandom_range(0, N - 1); b = $urandom_range(0, N - 1);
            do o = $urandom_range(2, N - 1); while (o == a || o == b);
          end
          prog[p][d] = mk(op, a, b, o | (nb ? (1 << NB_BIT) : 0), cm);
          n_gate++;
          if (nb && cm) n_xcol++;
          if (nb && !cm) n_xrow++;
        end
        p++;
      end
    end
  endtask

  // ---------------- environment models ----------------
  logic [W-1:0] in_elem [NP];
  int n_rx_lost = 0, n_enc_starts = 0, n_tx_resend = 0, n_restore = 0, n_commit = 0;
  int n_cut [4] = '{0, 0, 0, 0};
  int commit_gap_bad = 0, commit_gap_ok = 0, last_commit = -1, cyc = 0;
  bit powered_gap = 1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) powered_gap = 0;
    if (rst_n && restore) n_restore++;
    if (rst_n && enc_start) n_enc_starts++;
    if (rst_n && commit) begin
      n_commit++;
      if (last_commit >= 0 && powered_gap) begin
        if (cyc - last_commit == 4) commit_gap_ok++; else commit_gap_bad++;
      end
      last_commit = cyc;
      powered_gap = 1;
    end
  end

  task automatic power_cut();
    n_cut[sr]++;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
  endtask

  // Encoder model: on enc_start, one data row per element, then enc_done.
  // Row value: the element repeated over the data columns. A power cut
  // stops it; the controller restarts it from the beginning.
  int enc_i = -1;
  bit enc_cut_pending = 1;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) enc_i <= -1;
    else if (enc_start) enc_i <= 0;
    else if (enc_i >= 0 && enc_i < NP) enc_i <= enc_i + 1;
    else if (enc_i == NP) enc_i <= -1;
  end
  function automatic logic [N-1:0] enc_row(logic [W-1:0] v);
    logic [N-1:0] r;
    for (int c = 0; c < N; c++) r[c] = v[c % W];
    return r;
  endfunction
  always_comb begin
    enc_rd_idx  = (enc_i >= 0 && enc_i < NP) ? $clog2(NP)'(enc_i) : '0;
    enc_done    = (enc_i == NP) && rst_n;
    arr_wr_v    = 1'b0;
    arr_wr_arr  = '0;
    arr_wr_row  = '0;
    arr_wr_data = '0;
    arr_wr_mask = COL_DATA;
    if (enc_i >= 0 && enc_i < NP && rst_n) begin
      arr_wr_v    = 1'b1;
      arr_wr_arr  = $clog2(AR)'(enc_i % AR);
      arr_wr_row  = RW'(ENC_ROW0 + enc_i / AR);
      arr_wr_data = enc_row(enc_rd_data);
    end else if (preload_v) begin
      arr_wr_v    = 1'b1;
      arr_wr_arr  = preload_arr;
      arr_wr_row  = preload_row;
      arr_wr_data = preload_data;
    end
  end
  logic preload_v = 0;
  logic [$clog2(AR)-1:0] preload_arr;
  logic [RW-1:0] preload_row;
  logic [N-1:0] preload_data;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t row_ins [AC];
    int ntx;
    bit cut_done;
    rx_pkt_v = 0; rx_pkt_idx = '0; rx_pkt_data = '0; tx_ack = 0;
    imem_we = 0; imem_col = '0; imem_addr = '0; imem_wdata = '0;
    gen_program();
    prog_end = PC_W'(PLEN);
    chk(PLEN <= IMD, "program fits the instruction memory");
    // first power-up of the non-volatile state
    nv_init = 1;
    @(posedge clk); #1;
    nv_init = 0;
    // program load
    for (int p = 0; p < PLEN; p++)
      for (int d = 0; d < AC; d++) begin
        imem_we = 1; imem_col = $clog2(AC)'(d); imem_addr = $clog2(IMD)'(p); imem_wdata = prog[p][d];
        @(posedge clk); #1;
      end
    imem_we = 0;
    // model data into grid column 0 (data columns only)
    for (int a = 0; a < AR; a++)
      for (int r = 0; r < M - 2; r++) begin
        preload_v = 1; preload_arr = $clog2(AR)'(a); preload_row = RW'(r);
        preload_data = {$urandom, $urandom, $urandom, $urandom};
        if (N > 128) for (int k = 0; k < N; k += 32) preload_data[k +: 32] = $urandom;
        gm[a][0][r] = (preload_data & COL_DATA);
        @(posedge clk); #1;
      end
    preload_v = 0;
    for (int a = 0; a < AR; a++)
      for (int d = 0; d < AC; d++) begin
        gra[a][d] = ROW_DATA; gca[a][d] = COL_DATA;
        for (int r = 0; r < M; r++) if (d != 0 || r >= M - 2) gm[a][d][r] = '0;
      end
    // power on
    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    chk(sr == SR_RECEIVE && rx_enable, "reception first");

    // ---- reception ----
    for (int i = 0; i < NP; i++) in_elem[i] = W'($urandom);
    for (int i = 0; i < NP; i++) begin
      bit acked;
      acked = 0;
      while (!acked) begin
        rx_pkt_v = 1; rx_pkt_idx = $clog2(NP)'(i); rx_pkt_data = in_elem[i];
        #1;
        while (!rx_pkt_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
        rx_pkt_v = 0;
        if (i == NP / 2 && n_rx_lost == 0) begin
          n_rx_lost++;
          power_cut();                      // written, valid bit not yet set
          repeat (2) @(posedge clk); #1;
        end else begin
          acked = rx_pkt_ack;
          @(posedge clk); #1;
        end
      end
    end
    wait (sr == SR_ENCODE);
    // ---- encoding, cut once in the middle ----
    wait (enc_i == NP / 2 + 1); #1;
    power_cut();
    wait (sr == SR_COMPUTE); #1;
    chk(n_enc_starts == 2, "encoder restarted after the cut");
    for (int i = 0; i < NP; i++) gm[i % AR][0][ENC_ROW0 + i / AR] =
      (enc_row(in_elem[i]) & COL_DATA) | (gm[i % AR][0][ENC_ROW0 + i / AR] & ~COL_DATA);

    // ---- compute, with power cuts after the prologue ----
    for (int k = 0; k < CUTS; k++) begin
      int target;
      target = PRO + 2 + (k * (PLEN - PRO - 4)) / CUTS + $urandom_range(0, 2);
      while (sr == SR_COMPUTE && int'(pc) < target) @(posedge clk);
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
      if (sr == SR_COMPUTE) power_cut();
    end
    wait (sr == SR_TRANSMIT); #1;
    chk(int'(pc) == PLEN, "program ran to END");
    for (int p = 0; p < PLEN; p++) begin
      for (int d = 0; d < AC; d++) row_ins[d] = prog[p][d];
      model_step(row_ins);
    end

    // ---- transmission, cut once with a packet in flight ----
    ntx = 0;
    cut_done = 0;
    while (ntx < NTX) begin
      @(posedge clk); #1;
      if (tx_valid) begin
        chk(int'(tx_idx) == ntx, "packet order");
        if (int'(tx_idx) != ntx) break;
        chk(tx_data == gm[ntx / TXR][0][ntx % TXR], $sformatf("result packet %0d", ntx));
        if (ntx == NTX / 2 && !cut_done) begin
          cut_done = 1;
          n_tx_resend++;
          power_cut();
        end else begin
          repeat ($urandom_range(0, 2)) @(posedge clk);
          #1 tx_ack = 1;
          @(posedge clk); #1 tx_ack = 0;
          ntx++;
        end
      end
    end
    wait (sr == SR_RECEIVE);
    repeat (3) @(posedge clk); #1;
    chk(rx_enable, "back to reception");

    // ---- mechanisms that must have happened ----
    $display("cuts R/E/C/T=%0d/%0d/%0d/%0d restores=%0d encoder-starts=%0d lost-rx-packets=%0d resent-tx-packets=%0d",
      n_cut[0], n_cut[1], n_cut[2], n_cut[3], n_restore, n_enc_starts, n_rx_lost, n_tx_resend);
    $display("program: %0d instructions, gates=%0d col-transfers=%0d row-transfers=%0d bitmask-updates=%0d nops=%0d commits=%0d",
      PLEN, n_gate, n_xcol, n_xrow, n_mask, n_nop, n_commit);
    chk(n_cut[0] > 0 && n_cut[1] > 0 && n_cut[2] > 0 && n_cut[3] > 0, "power cut in every phase");
    chk(n_restore == n_cut[2], "one restore per restart in compute");
    chk(n_rx_lost > 0, "a packet lost between write and valid bit was received again");
    chk(n_tx_resend > 0, "a packet in flight at a power cut was sent again");
    chk(n_commit >= PLEN && n_commit <= PLEN + n_cut[2], "each instruction committed, at most one repeat per cut");
    chk(n_xcol > 0 && n_xrow > 0 && n_mask > 0 && n_nop > 0 && n_gate > 0, "program exercised transfers, bitmask updates and NOPs");
    chk(commit_gap_bad == 0 && commit_gap_ok > 0, "one instruction per INSTR_CYCLES");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
