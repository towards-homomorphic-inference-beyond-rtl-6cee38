// tb_svm_kernel: runs the core of the SVM workload on the accelerator: the
// integer dot products of one input sample (D elements of 3 bits) with many
// support vectors at once, computed entirely by in-memory gates, with power
// cuts during the computation.
//
// Mapping. Each data column of the arrays in grid column 0 is one lane, i.e.
// one support vector (2 arrays x 126 columns = 252 lanes here). Its weights
// w[j] (3 bits each) are loaded into rows as a model would be; the encoder
// model writes input bit x[j][b] replicated across a row, the way a scalar is
// batched into every slot. The program then forms, with column logic only,
//   acc = sum_j x[j] * w[j]   (ACC_W-bit, shift-and-add)
// using AND for the partial products and full/half adders built from OR,
// NAND and AND (XOR(a,b) = AND(OR(a,b), NAND(a,b))). The accumulator
// ping-pongs between two row groups so that no gate overwrites its own
// input, which keeps every instruction safe to repeat after a power cut.
// The final accumulator rows are sent through the transmit unit; each lane
// is compared with the dot product computed here in plain integers.
//
// Sizes: D=14 is the input size of the ADULT benchmark of the evaluation;
// the larger benchmarks (561 and 784 elements) need the same program with
// more rows and would differ only in size. What is not modelled: the
// ciphertext form (36-bit residues, modular reduction, NTT) and the final
// squaring and class decision, which happen outside the accelerator.
module tb_svm_kernel;
  import rodent_pkg::*;

  localparam int D     = 14;        // input elements
  localparam int W     = 3;         // bits per element and per weight
  localparam int ACC_W = 10;        // D * 7 * 7 = 686 < 1024
  localparam int M = 128, N = 128, AR = 2, AC = 2, IMD = 4096;
  localparam int TXR = ACC_W, NTX = AR * TXR;
  localparam int CUTS = 6;
  localparam int RW = $clog2(M), PC_W = $clog2(IMD) + 1;
  localparam logic [N-1:0] COL_DATA = {{(N-2){1'b1}}, 2'b00};

  // row layout (data rows 0..M-3)
  localparam int A0 = 0, A1 = ACC_W;                 // accumulator ping-pong
  localparam int X0 = 2 * ACC_W;                     // x[j][b] at X0 + W*j + b
  localparam int W0 = X0 + W * D;                    // w[j][k] at W0 + W*j + k
  localparam int P0 = W0 + W * D;                    // partial products P0..P0+2
  localparam int T1 = P0 + W, T2 = T1 + 1, TX = T2 + 1, T3 = TX + 1, T4 = T3 + 1,
                 T5 = T4 + 1, T6 = T5 + 1, C0 = T6 + 1;   // carries C0, C0+1

  logic clk = 0, rst_n = 0, nv_init = 0;
  always #5 clk = ~clk;

  logic [PC_W-1:0] prog_end;
  logic imem_we;
  logic [$clog2(AC)-1:0] imem_col;
  logic [$clog2(IMD)-1:0] imem_addr;
  instr_t imem_wdata;
  logic rx_enable, rx_pkt_v, rx_pkt_ready, rx_pkt_ack;
  logic [$clog2(D)-1:0] rx_pkt_idx;
  logic [W-1:0] rx_pkt_data;
  logic tx_enable, tx_valid, tx_ack;
  logic [$clog2(NTX+1)-1:0] tx_idx;
  logic [N-1:0] tx_data;
  logic enc_start, enc_done;
  logic [$clog2(D)-1:0] enc_rd_idx;
  logic [W-1:0] enc_rd_data;
  logic arr_wr_v;
  logic [$clog2(AR)-1:0] arr_wr_arr;
  logic [RW-1:0] arr_wr_row;
  logic [N-1:0] arr_wr_data, arr_wr_mask;
  sr_e sr;
  logic [PC_W-1:0] pc;
  logic commit, restore;

  rodent_top #(.M(M), .N(N), .ARR_ROWS(AR), .ARR_COLS(AC), .IMEM_DEPTH(IMD),
    .NUM_PACKETS(D), .PKT_W(W), .TX_ROWS(TXR)) u_dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- program generation ----------------
  instr_t prog [$];

  function automatic addr_t ra(int r);
    return addr_t'(r);
  endfunction
  task automatic g(opcode_e op, int a, int b, int o);   // column logic on rows
    instr_t i;
    i.op = op; i.in_a = ra(a); i.in_b = ra(b); i.out = ra(o); i.col_mode = 1'b1;
    prog.push_back(i);
  endtask
  task automatic g_raw(opcode_e op, addr_t a, addr_t b, addr_t o, bit cm);
    instr_t i;
    i.op = op; i.in_a = a; i.in_b = b; i.out = o; i.col_mode = cm;
    prog.push_back(i);
  endtask
  // s = a XOR b (via T1, T2)
  task automatic g_xor(int a, int b, int s);
    g(OP_OR, a, b, T1); g(OP_NAND, a, b, T2); g(OP_AND, T1, T2, s);
  endtask

  int cur;     // accumulator group holding the running sum
  task automatic gen_program();
    int nxt, c;
    // prologue: valid row/column bitmasks with every data line active,
    // parity cells 0, accumulator cleared
    g_raw(OP_SET, 12'd1, 12'd0, 12'd0, 1'b0);                      // row bitmask copy 0 := 1
    g_raw(OP_SET, 12'd0, addr_t'(1 << NB_BIT), 12'd0, 1'b0);       // RP := 0
    g_raw(OP_SET, 12'd1, 12'd0, addr_t'(M - 1), 1'b1);             // column bitmask copy 0 := 1
    g_raw(OP_SET, 12'd0, addr_t'(1 << NB_BIT), 12'd0, 1'b1);       // CP := 0
    g_raw(OP_ACT, 12'd0, 12'd0, 12'd0, 1'b0);
    g_raw(OP_ACT, 12'd0, 12'd0, 12'd0, 1'b1);
    for (int i = 0; i < ACC_W; i++) g(OP_SET, 0, 0, A0 + i);
    cur = A0;
    for (int j = 0; j < D; j++)
      for (int b = 0; b < W; b++) begin
        nxt = (cur == A0) ? A1 : A0;
        for (int k = 0; k < W; k++) g(OP_AND, W0 + W * j + k, X0 + W * j + b, P0 + k);
        for (int i = 0; i < b; i++) g(OP_OR, cur + i, cur + i, nxt + i);   // copy low bits
        // position b: half adder without carry in
        g_xor(cur + b, P0, nxt + b);
        g(OP_AND, cur + b, P0, C0);
        c = C0;
        for (int i = b + 1; i < ACC_W; i++) begin
          int cn;
          cn = (c == C0) ? C0 + 1 : C0;
          if (i - b < W) begin                                   // full adder
            g_xor(cur + i, P0 + (i - b), TX);
            g(OP_OR, TX, c, T3); g(OP_NAND, TX, c, T4); g(OP_AND, T3, T4, nxt + i);
            g(OP_AND, cur + i, P0 + (i - b), T5); g(OP_AND, TX, c, T6);
            g(OP_OR, T5, T6, cn);
          end else begin                                          // half adder
            g_xor(cur + i, c, nxt + i);
            g(OP_AND, cur + i, c, cn);
          end
          c = cn;
        end
        cur = nxt;
      end
    if (cur != A0) for (int i = 0; i < ACC_W; i++) g(OP_OR, A1 + i, A1 + i, A0 + i);
  endtask

  // ---------------- data ----------------
  logic [W-1:0] x [D];
  logic [W-1:0] wt [AR][N][D];
  int unsigned expect_acc [AR][N];

  // power cuts and counters
  int n_cut = 0, n_restore = 0, n_commit = 0;
  always @(posedge clk) begin
    if (rst_n && restore) n_restore++;
    if (rst_n && commit) n_commit++;
  end
  task automatic power_cut();
    n_cut++;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
  endtask

  // Encoder model: on enc_start, writes row X0 + W*j + b of every array of
  // grid column 0 with bit b of element j replicated, then enc_done.
  localparam int NENC = D * W * AR;
  int enc_i = -1;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) enc_i <= -1;
    else if (enc_start) enc_i <= 0;
    else if (enc_i >= 0 && enc_i < NENC) enc_i <= enc_i + 1;
    else if (enc_i == NENC) enc_i <= -1;
  end
  logic preload_v = 0;
  logic [$clog2(AR)-1:0] preload_arr;
  logic [RW-1:0] preload_row;
  logic [N-1:0] preload_data;
  always_comb begin
    int j, b, a;
    j = (enc_i >= 0) ? enc_i / (W * AR) : 0;
    b = (enc_i >= 0) ? (enc_i / AR) % W : 0;
    a = (enc_i >= 0) ? enc_i % AR : 0;
    enc_rd_idx  = $clog2(D)'(j);
    enc_done    = (enc_i == NENC) && rst_n;
    arr_wr_v    = 1'b0;
    arr_wr_arr  = '0;
    arr_wr_row  = '0;
    arr_wr_data = '0;
    arr_wr_mask = COL_DATA;
    if (enc_i >= 0 && enc_i < NENC && rst_n) begin
      arr_wr_v    = 1'b1;
      arr_wr_arr  = $clog2(AR)'(a);
      arr_wr_row  = RW'(X0 + W * j + b);
      arr_wr_data = {N{enc_rd_data[b]}};
    end else if (preload_v) begin
      arr_wr_v    = 1'b1;
      arr_wr_arr  = preload_arr;
      arr_wr_row  = preload_row;
      arr_wr_data = preload_data;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int plen, ntx;
    instr_t nop;
    rx_pkt_v = 0; rx_pkt_idx = '0; rx_pkt_data = '0; tx_ack = 0;
    imem_we = 0; imem_col = '0; imem_addr = '0; imem_wdata = '0;
    nop = '0;
    gen_program();
    plen = prog.size();
    prog_end = PC_W'(plen);
    chk(plen <= IMD, "program fits the instruction memory");
    chk(C0 + 1 <= M - 3, "row layout fits the data rows");
    $display("D=%0d lanes=%0d program=%0d instructions", D, AR * (N - 2), plen);

    nv_init = 1;
    @(posedge clk); #1;
    nv_init = 0;
    for (int p = 0; p < plen; p++)
      for (int d = 0; d < AC; d++) begin
        imem_we = 1; imem_col = $clog2(AC)'(d); imem_addr = $clog2(IMD)'(p);
        imem_wdata = (d == 0) ? prog[p] : nop;
        @(posedge clk); #1;
      end
    imem_we = 0;

    // model: random 3-bit weights per lane and element
    for (int a = 0; a < AR; a++)
      for (int c = 0; c < N; c++)
        for (int j = 0; j < D; j++) wt[a][c][j] = W'($urandom);
    for (int a = 0; a < AR; a++)
      for (int j = 0; j < D; j++)
        for (int k = 0; k < W; k++) begin
          preload_v = 1; preload_arr = $clog2(AR)'(a); preload_row = RW'(W0 + W * j + k);
          for (int c = 0; c < N; c++) preload_data[c] = wt[a][c][j][k];
          @(posedge clk); #1;
        end
    preload_v = 0;

    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    chk(sr == SR_RECEIVE && rx_enable, "reception first");

    // ---- reception of the sample ----
    for (int j = 0; j < D; j++) x[j] = W'($urandom);
    for (int j = 0; j < D; j++) begin
      rx_pkt_v = 1; rx_pkt_idx = $clog2(D)'(j); rx_pkt_data = x[j];
      #1;
      while (!rx_pkt_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      rx_pkt_v = 0;
      @(posedge clk); #1;
    end
    wait (sr == SR_COMPUTE); #1;

    // ---- compute, power cut at random instructions ----
    for (int k = 0; k < CUTS; k++) begin
      int target;
      target = 10 + (k * (plen - 20)) / CUTS + $urandom_range(0, 5);
      while (sr == SR_COMPUTE && int'(pc) < target) @(posedge clk);
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
      if (sr == SR_COMPUTE) power_cut();
    end
    wait (sr == SR_TRANSMIT); #1;
    chk(int'(pc) == plen, "program ran to its end");

    for (int a = 0; a < AR; a++)
      for (int c = 0; c < N; c++) begin
        expect_acc[a][c] = 0;
        for (int j = 0; j < D; j++) expect_acc[a][c] += int'(x[j]) * int'(wt[a][c][j]);
      end

    // ---- transmission of the dot products, one bit plane per packet ----
    ntx = 0;
    while (ntx < NTX) begin
      @(posedge clk); #1;
      if (tx_valid) begin
        int a, bit_i;
        logic [N-1:0] want;
        chk(int'(tx_idx) == ntx, "packet order");
        a = ntx / TXR; bit_i = ntx % TXR;
        for (int c = 0; c < N; c++) want[c] = expect_acc[a][c][bit_i];
        chk((tx_data & COL_DATA) == (want & COL_DATA), $sformatf("dot-product bit %0d of array %0d", bit_i, a));
        #1 tx_ack = 1;
        @(posedge clk); #1 tx_ack = 0;
        ntx++;
      end
    end
    wait (sr == SR_RECEIVE); #1;
    $display("power cuts=%0d restores=%0d commits=%0d (program %0d)", n_cut, n_restore, n_commit, plen);
    chk(n_cut == CUTS && n_restore == CUTS, "every cut in compute restored the activations");
    chk(n_commit >= plen && n_commit <= plen + n_cut, "at most one instruction repeated per cut");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
