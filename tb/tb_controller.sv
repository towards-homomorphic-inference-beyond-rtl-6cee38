// tb_controller: runs the controller through two full rounds of
// Reception -> Encode -> Compute -> Transmit with behavioural models of the
// receiver, encoder and transmitter, and cuts the power (rst_n) at random
// moments in every phase. It checks:
//   * the SR sequence and the enable/start/clear outputs of each phase;
//   * that the program counter values broadcast to the drivers are
//     0..END-1 in order, with at most one instruction repeated per power cut;
//   * one instruction every INSTR_CYCLES cycles while powered;
//   * a restore pulse after every restart in Compute, an encoder restart
//     after every restart in Encode.
module tb_controller;
  import rodent_pkg::*;
  localparam int PC_W = 6, IC = 4, END = 25;
  logic clk = 0, rst_n = 0, nv_init = 0;
  always #5 clk = ~clk;

  logic rx_enable, rx_clear, rx_complete, enc_start, enc_done;
  logic tx_enable, tx_clear, tx_complete, drv_trigger, drv_restore, commit;
  logic [PC_W-1:0] drv_pc, pc;
  sr_e sr;

  controller #(.PC_W(PC_W), .INSTR_CYCLES(IC)) dut (
    .clk, .rst_n, .nv_init, .prog_end(PC_W'(END)),
    .rx_enable, .rx_clear, .rx_complete, .enc_start, .enc_done,
    .tx_enable, .tx_clear, .tx_complete, .drv_trigger, .drv_restore, .drv_pc,
    .sr_o(sr), .pc_o(pc), .commit_o(commit));

  int checks = 0, failures = 0;
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- behavioural environment ----
  bit rx_bit = 0, tx_bit = 0;   // non-volatile complete bits of the radio side
  int rx_cnt = 0, tx_cnt = 0, enc_cnt = -1;
  assign rx_complete = rx_bit;
  assign tx_complete = tx_bit;
  always_ff @(posedge clk) begin
    if (rx_clear) rx_bit <= 0;
    else if (rx_enable) begin rx_cnt <= rx_cnt + 1; if (rx_cnt == 12) rx_bit <= 1; end
    if (tx_clear) begin tx_bit <= 0; tx_cnt <= 0; end
    else if (tx_enable) begin tx_cnt <= tx_cnt + 1; if (tx_cnt == 15) tx_bit <= 1; end
    if (!rx_enable) rx_cnt <= 0;
    if (enc_start) enc_cnt <= 10;
    else if (enc_cnt > 0) enc_cnt <= enc_cnt - 1;
    if (!rst_n) enc_cnt <= -1;      // the encoder loses its progress too
  end
  assign enc_done = (enc_cnt == 0) && rst_n;

  // ---- monitors ----
  int pcs [$];
  int last_trig = -1, cyc = 0, n_restore = 0, n_enc_start = 0, n_cuts_compute = 0;
  int n_cuts [4] = '{0, 0, 0, 0};
  int n_commit = 0, spacing_bad = 0, spacing_ok = 0;
  bit powered_since_trig = 1;
  sr_e sr_hist [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) powered_since_trig = 0;
    if (rst_n && drv_trigger) begin
      pcs.push_back(int'(drv_pc));
      if (last_trig >= 0 && powered_since_trig) begin
        if (cyc - last_trig == IC) spacing_ok++; else spacing_bad++;
      end
      last_trig = cyc;
      powered_since_trig = 1;
    end
    if (rst_n && drv_restore) n_restore++;
    if (rst_n && enc_start) n_enc_start++;
    if (rst_n && commit) n_commit++;
    if (rst_n && (sr_hist.size() == 0 || sr_hist[$] != sr)) sr_hist.push_back(sr);
  end

  task automatic power_cut();
    n_cuts[sr]++;
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int round_start;
    nv_init = 1;
    @(posedge clk); #1;
    nv_init = 0;
    #1 rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      round_start = pcs.size();
      // Reception
      repeat (3) @(posedge clk); #1;
      chk(sr == SR_RECEIVE && rx_enable, "receiving");
      repeat ($urandom_range(1, 8)) @(posedge clk);
      #1 power_cut();
      wait (sr == SR_ENCODE); #1;
      chk(!tx_enable && !rx_enable, "nothing enabled in encode");
      // Encode: cut during encoding, then let it finish
      repeat ($urandom_range(3, 8)) @(posedge clk);
      #1 power_cut();
      wait (sr == SR_COMPUTE); #1;
      chk(pc == 0, "PC reset on entry to compute");
      // Compute: several random power cuts
      for (int k = 0; k < 4; k++) begin
        repeat ($urandom_range(5, 18)) @(posedge clk);
        #1 if (sr == SR_COMPUTE) begin power_cut(); n_cuts_compute++; end
      end
      wait (sr == SR_TRANSMIT); #1;
      chk(pc == END, "PC reached END");
      repeat ($urandom_range(2, 8)) @(posedge clk);
      #1 power_cut();
      wait (sr == SR_RECEIVE); #1;
      // program-order check for this round
      begin
        int expect_pc, repeats;
        expect_pc = 0;
        repeats = 0;
        for (int i = round_start; i < pcs.size(); i++) begin
          if (pcs[i] == expect_pc) expect_pc++;
          else if (pcs[i] == expect_pc - 1) repeats++;
          else chk(0, $sformatf("PC out of order: %0d expected %0d", pcs[i], expect_pc));
        end
        chk(expect_pc == END, "every instruction issued");
        chk(repeats <= n_cuts_compute, "at most one repeat per power cut");
        $display("round %0d: issued=%0d repeats=%0d", round, pcs.size() - round_start, repeats);
      end
    end
    repeat (2) @(posedge clk);
    // SR history: R E C T R E C T R
    chk(sr_hist.size() == 9, $sformatf("SR history length %0d", sr_hist.size()));
    for (int i = 0; i < sr_hist.size(); i++) chk(sr_hist[i] == sr_e'(i % 4), "SR order");
    chk(spacing_bad == 0 && spacing_ok > 20, "INSTR_CYCLES between instructions");
    chk(n_restore == n_cuts[SR_COMPUTE], "one restore per restart in compute");
    chk(n_enc_start == 2 + n_cuts[SR_ENCODE], "encoder restarted after each cut in encode");
    chk(n_commit >= 2 * END, "commits");
    $display("cuts R/E/C/T=%0d/%0d/%0d/%0d restores=%0d enc_starts=%0d spacing_ok=%0d",
      n_cuts[0], n_cuts[1], n_cuts[2], n_cuts[3], n_restore, n_enc_start, spacing_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
