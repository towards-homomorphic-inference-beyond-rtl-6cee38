// tb_tx_unit: a small transmit unit reads rows from a behavioural model of
// the sense amplifiers (one-cycle registered read, row contents a known
// function of array and row) and offers them to a radio model that
// acknowledges after a random delay. The test checks packet order, packet
// contents and the read addresses, cuts the power while a packet is in
// flight (that packet, and no other, must be sent again), and checks
// tx_complete after the last acknowledgement and its clearing by tx_clear.
module tb_tx_unit;
  localparam int M = 8, N = 16, AR = 4, TR = 3, NP = AR * TR;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tx_enable, tx_clear, tx_complete, sa_re, tx_valid, tx_ack;
  logic [1:0] sa_arr;
  logic [2:0] sa_row;
  logic [N-1:0] sa_rdata, tx_data;
  logic [$clog2(NP+1)-1:0] tx_idx;
  int checks = 0, failures = 0, n_resend = 0;

  tx_unit #(.M(M), .N(N), .ARR_ROWS(AR), .TX_ROWS(TR)) dut (.clk, .rst_n, .tx_enable,
    .tx_clear, .tx_complete, .sa_re, .sa_arr, .sa_row, .sa_rdata, .tx_valid, .tx_idx,
    .tx_data, .tx_ack);

  function automatic logic [N-1:0] row_val(int a, int r);
    return N'(16'hA5C3 ^ (a * 16'h1111) ^ (r * 16'h0303));
  endfunction
  always_ff @(posedge clk) if (sa_re) sa_rdata <= row_val(int'(sa_arr), int'(sa_row));

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
    int next = 0, last_seen = -1;
    tx_enable = 0; tx_clear = 0; tx_ack = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    tx_clear = 1; @(posedge clk); #1; tx_clear = 0;
    chk(!tx_complete, "not complete after clear");
    tx_enable = 1;
    while (next < NP) begin
      @(posedge clk); #1;
      if (sa_re) chk(int'(sa_arr) == next / TR && int'(sa_row) == next % TR, "read address");
      if (tx_valid) begin
        chk(int'(tx_idx) == next, "packet order");
        chk(tx_data == row_val(next / TR, next % TR), "packet data");
        if (int'(tx_idx) == last_seen) n_resend++;
        last_seen = int'(tx_idx);
        repeat ($urandom_range(0, 2)) @(posedge clk);
        #1;
        if (next % 5 == 3 && n_resend < (next / 5) + 1) begin
          // power cut while the packet is in flight: it must come again
          rst_n = 0; @(posedge clk); #1; rst_n = 1;
        end else begin
          tx_ack = 1; @(posedge clk); #1; tx_ack = 0;
          next++;
          if (next < NP) chk(!tx_complete, "not complete early");
        end
      end
    end
    @(posedge clk); #1;
    chk(tx_complete, "complete after the last packet");
    repeat (5) @(posedge clk); #1;
    chk(!tx_valid && !sa_re, "idle when complete");
    chk(n_resend > 0, "resend exercised");
    tx_clear = 1; @(posedge clk); #1; tx_clear = 0;
    chk(!tx_complete, "cleared");
    $display("resends=%0d", n_resend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
