// nv_buffer: non-volatile input buffer filled by the BLE receiver.
//
// The input has a fixed size, NUM_PACKETS packets of PKT_W bits, so the
// buffer has one dedicated region and one valid bit per packet, plus a
// "completed" bit. rx_clear resets every valid bit and the completed bit
// before a new reception. A packet offered on pkt_v/pkt_idx/pkt_data while
// pkt_ready is high is written into its region in that cycle; its valid bit
// is set one cycle later (strictly after the data), and pkt_ack is high in
// that second cycle. A power failure between the two leaves the packet
// invalid, so the sender must offer it again. When every valid bit is set,
// the completed bit is set in the following cycle; rx_complete tells the
// controller to move on to encoding. rx_clear acts even while rst_n is
// low, so it can also initialise the buffer at first power-up. The encoder reads packets through the
// combinational rd_idx/rd_data port.
//
// Following the description: a region and a valid bit per packet, valid set
// strictly after the write, completed bit once all are valid. This design's
// choices: a packet is one input element (the evaluation assumes an
// interruption costs one element), the two-cycle write and the ready/ack
// handshake. Data, valid and completed bits are non-volatile (no reset);
// only the write-in-progress flag is volatile.
module nv_buffer #(
  parameter int unsigned NUM_PACKETS = 784,   // MNIST: 28 x 28 inputs
  parameter int unsigned PKT_W       = 3      // 3-bit input elements
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           rx_clear,
  input  logic                           rx_enable,
  input  logic                           pkt_v,
  input  logic [$clog2(NUM_PACKETS)-1:0] pkt_idx,
  input  logic [PKT_W-1:0]               pkt_data,
  output logic                           pkt_ready,
  output logic                           pkt_ack,
  output logic                           rx_complete,
  input  logic [$clog2(NUM_PACKETS)-1:0] rd_idx,
  output logic [PKT_W-1:0]               rd_data
);
  localparam int unsigned IW = $clog2(NUM_PACKETS);

  logic [PKT_W-1:0]       data [NUM_PACKETS];   // non-volatile
  logic [NUM_PACKETS-1:0] valid;                // non-volatile
  logic                   completed;            // non-volatile
  logic                   pending;              // volatile
  logic [IW-1:0]          pend_idx;

  assign pkt_ready   = rx_enable && !pending && !completed;
  assign pkt_ack     = pending;
  assign rx_complete = completed;
  assign rd_data     = data[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending  <= 1'b0;
      pend_idx <= '0;
    end else begin
      pending <= 1'b0;
      if (pkt_v && pkt_ready && !rx_clear && 32'(pkt_idx) < NUM_PACKETS) begin
        pending  <= 1'b1;
        pend_idx <= pkt_idx;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rx_clear) begin
      valid     <= '0;
      completed <= 1'b0;
    end else if (rst_n) begin
      if (pkt_v && pkt_ready && 32'(pkt_idx) < NUM_PACKETS) data[pkt_idx] <= pkt_data;
      if (pending) valid[pend_idx] <= 1'b1;
      if (&valid)  completed <= 1'b1;
    end
  end
endmodule
