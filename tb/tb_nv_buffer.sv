// tb_nv_buffer: fills a small input buffer packet by packet in random order,
// cuts the power in the cycle between a packet's write and its valid bit
// (that packet must stay invalid and be accepted again when resent), checks
// that "completed" rises only once every packet is valid and that the stored
// elements read back unchanged, then checks that rx_clear empties the buffer.
module tb_nv_buffer;
  localparam int NP = 20, W = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rx_clear, rx_enable, pkt_v, pkt_ready, pkt_ack, rx_complete;
  logic [4:0] pkt_idx, rd_idx;
  logic [W-1:0] pkt_data, rd_data;
  logic [W-1:0] ref_data [NP];
  int checks = 0, failures = 0, n_lost = 0;

  nv_buffer #(.NUM_PACKETS(NP), .PKT_W(W)) dut (.clk, .rst_n, .rx_clear, .rx_enable,
    .pkt_v, .pkt_idx, .pkt_data, .pkt_ready, .pkt_ack, .rx_complete, .rd_idx, .rd_data);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Offer one packet; if cut is set, remove power right after the data write.
  task automatic send(int idx, bit cut, output bit acked);
    pkt_v = 1; pkt_idx = 5'(idx); pkt_data = ref_data[idx];
    #1;
    while (!pkt_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    pkt_v = 0;
    if (cut) begin
      rst_n = 0; #1;
      @(posedge clk); #1;
      rst_n = 1;
      acked = 0;
    end else begin
      acked = pkt_ack;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [NP];
    bit acked;
    rx_clear = 0; rx_enable = 0; pkt_v = 0; pkt_idx = 0; pkt_data = 0; rd_idx = 0;
    for (int i = 0; i < NP; i++) begin ref_data[i] = W'($urandom); order[i] = i; end
    order.shuffle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    rx_clear = 1; @(posedge clk); #1; rx_clear = 0;
    chk(!rx_complete, "empty after clear");
    chk(!pkt_ready, "not ready while receiver disabled");
    rx_enable = 1;
    for (int k = 0; k < NP; k++) begin
      bit cut;
      cut = (k % 6 == 2) || (k == NP - 1);   // the last one too: only its valid bit is missing
      send(order[k], cut, acked);
      if (cut) begin
        n_lost++;
        repeat (3) @(posedge clk); #1;
        chk(!rx_complete, "incomplete after a lost packet");
        send(order[k], 0, acked);
      end
      chk(acked, $sformatf("packet acknowledged k=%0d", k));
      if (k < NP - 1) begin
        @(posedge clk); #1;
        chk(!rx_complete, "not complete before the last packet");
      end
    end
    repeat (2) @(posedge clk); #1;
    chk(rx_complete, "complete after all packets");
    chk(!pkt_ready, "no new packets once complete");
    for (int i = 0; i < NP; i++) begin
      rd_idx = 5'(i); #1;
      chk(rd_data == ref_data[i], "stored element");
    end
    // a power cut does not lose the completed state
    rst_n = 0; @(posedge clk); #1; rst_n = 1; @(posedge clk); #1;
    chk(rx_complete, "completed bit is non-volatile");
    rx_clear = 1; @(posedge clk); #1; rx_clear = 0;
    repeat (2) @(posedge clk); #1;
    chk(!rx_complete && pkt_ready, "cleared for the next input");
    chk(n_lost > 0, "lost packets exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
