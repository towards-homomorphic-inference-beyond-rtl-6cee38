// tx_unit: hands the results, packet by packet, to the BLE transmitter.
//
// The results are left by the program in the first column of computation
// arrays, the only arrays with sense amplifiers. Packet k is row
// (k mod TX_ROWS) of array (k div TX_ROWS) of that column, read whole (N
// bits) through the sense amplifiers. While tx_enable is high and transmit
// is not complete, the unit requests the read of packet tx_count (sa_re,
// sa_arr, sa_row), captures the row one cycle later, and offers it on
// tx_valid/tx_idx/tx_data until the radio acknowledges it with tx_ack. The
// count of acknowledged packets, tx_count, and the transmit-complete bit are
// non-volatile: after a power failure only the packet in flight is read and
// sent again. tx_clear (from the controller on entering the transmit phase)
// zeroes both, also while rst_n is low (first power-up initialisation).
//
// Following the description: results leave through the sense amplifiers of
// the first array column, the controller waits for a complete signal, an
// interruption costs one resent packet. This design's choices: the packet
// size (one array row), the order of packets and the handshake.
module tx_unit #(
  parameter int unsigned M        = 512,
  parameter int unsigned N        = 512,
  parameter int unsigned ARR_ROWS = 16,
  parameter int unsigned TX_ROWS  = 256,  // 4096 ciphertext elements / 16 arrays
  parameter int unsigned NPKT     = ARR_ROWS * TX_ROWS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        tx_enable,
  input  logic                        tx_clear,
  output logic                        tx_complete,
  // sense-amplifier read of the first array column
  output logic                        sa_re,
  output logic [$clog2(ARR_ROWS)-1:0] sa_arr,
  output logic [$clog2(M)-1:0]        sa_row,
  input  logic [N-1:0]                sa_rdata,
  // BLE transmitter
  output logic                        tx_valid,
  output logic [$clog2(NPKT+1)-1:0]   tx_idx,
  output logic [N-1:0]                tx_data,
  input  logic                        tx_ack
);
  initial assert (TX_ROWS <= M - 2) else $error("tx_unit: TX_ROWS exceeds the data rows");

  typedef enum logic [1:0] {T_IDLE, T_READ, T_CAP, T_SEND} tstate_e;
  tstate_e st;
  logic [$clog2(NPKT+1)-1:0] count;   // non-volatile
  logic                      done;    // non-volatile

  assign tx_complete = done;
  assign sa_re       = (st == T_READ);
  logic [31:0] quot, rem;
  assign quot        = 32'(count) / TX_ROWS;
  assign rem         = 32'(count) % TX_ROWS;
  assign sa_arr      = quot[$clog2(ARR_ROWS)-1:0];
  assign sa_row      = rem[$clog2(M)-1:0];
  assign tx_valid    = (st == T_SEND);
  assign tx_idx      = count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= T_IDLE;
      tx_data <= '0;
    end else begin
      unique case (st)
        T_IDLE: if (tx_enable && !done && !tx_clear) st <= T_READ;
        T_READ: st <= T_CAP;
        T_CAP: begin
          tx_data <= sa_rdata;
          st      <= T_SEND;
        end
        T_SEND: if (tx_ack) st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
      if (tx_clear) st <= T_IDLE;
    end
  end

  always_ff @(posedge clk) begin
    if (tx_clear) begin
      count <= '0;
      done  <= 1'b0;
    end else if (rst_n) begin
      if (st == T_SEND && tx_ack) begin
        count <= count + 1'b1;
        if (32'(count) + 1 == NPKT) done <= 1'b1;
      end
    end
  end
endmodule
