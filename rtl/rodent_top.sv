// rodent_top: the complete in-memory homomorphic SVM accelerator.
//
// Structure. A grid of ARR_ROWS x ARR_COLS computation arrays (16 x 3 arrays
// of 512 x 512 cells by default) holds the ciphertexts, plaintexts and
// twiddle factors and computes on them with bit-level logic. Arrays in the
// same grid column are driven as one unit by one driver, which reads its
// own instruction memory at the program counter broadcast by the
// controller. Neighbouring arrays exchange results through the inter-array
// transistors: column-logic results move down a grid column, row-logic
// results move right along a grid row. Only grid column 0 has sense
// amplifiers; it is where the encoder writes its plaintexts and where the
// transmit unit reads the results. The non-volatile input buffer collects
// the packets from the BLE receiver.
//
// External parts are reached through ports: the BLE radio (rx_* and tx_*
// packet interfaces), the homomorphic encoder (enc_start/enc_done, the
// buffer read port enc_rd_*, and the array write port arr_wr_* into grid
// column 0, which also serves to load the model), and the power supply,
// whose failures appear as the restart reset rst_n. nv_init initialises the
// non-volatile state of the controller, input buffer and transmit unit once
// at first power-up; imem_* loads the
// programs.
//
// Timing: one instruction every INSTR_CYCLES clock cycles (4 by default;
// 30.3 MHz with current MTJs or 90.9 MHz with projected MTJs in the
// evaluation the design comes from). The whole program is a single stream of
// 40-bit instructions per grid column, executed in lock step.
//
// Following the description: the 16 x 3 grid of 512 x 512 arrays, a driver
// and instruction memory per grid column, sense amplifiers in the first
// column only, the inter-array transistors, one controller with a dedicated
// input buffer. This design's choices: the direction of the neighbour links
// (down and right only), sharing the column-0 sense port between the
// encoder/model load and the transmit unit (the transmit unit has priority
// while it reads), the instruction memory depth and nv_init.
module rodent_top
  import rodent_pkg::*;
#(
  parameter int unsigned M            = 512,
  parameter int unsigned N            = 512,
  parameter int unsigned ARR_ROWS     = 16,
  parameter int unsigned ARR_COLS     = 3,
  parameter int unsigned IMEM_DEPTH   = 4096,
  parameter int unsigned NUM_PACKETS  = 784,
  parameter int unsigned PKT_W        = 3,
  parameter int unsigned INSTR_CYCLES = 4,
  parameter int unsigned TX_ROWS      = 256,
  parameter int unsigned PC_W         = $clog2(IMEM_DEPTH) + 1,
  parameter int unsigned NPKT_TX      = ARR_ROWS * TX_ROWS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           nv_init,
  input  logic [PC_W-1:0]                prog_end,
  // program loading
  input  logic                           imem_we,
  input  logic [$clog2(ARR_COLS)-1:0]    imem_col,
  input  logic [$clog2(IMEM_DEPTH)-1:0]  imem_addr,
  input  instr_t                         imem_wdata,
  // BLE receiver
  output logic                           rx_enable,
  input  logic                           rx_pkt_v,
  input  logic [$clog2(NUM_PACKETS)-1:0] rx_pkt_idx,
  input  logic [PKT_W-1:0]               rx_pkt_data,
  output logic                           rx_pkt_ready,
  output logic                           rx_pkt_ack,
  // BLE transmitter
  output logic                           tx_enable,
  output logic                           tx_valid,
  output logic [$clog2(NPKT_TX+1)-1:0]   tx_idx,
  output logic [N-1:0]                   tx_data,
  input  logic                           tx_ack,
  // encoder
  output logic                           enc_start,
  input  logic                           enc_done,
  input  logic [$clog2(NUM_PACKETS)-1:0] enc_rd_idx,
  output logic [PKT_W-1:0]               enc_rd_data,
  input  logic                           arr_wr_v,
  input  logic [$clog2(ARR_ROWS)-1:0]    arr_wr_arr,
  input  logic [$clog2(M)-1:0]           arr_wr_row,
  input  logic [N-1:0]                   arr_wr_data,
  input  logic [N-1:0]                   arr_wr_mask,
  // status
  output sr_e                            sr,
  output logic [PC_W-1:0]                pc,
  output logic                           commit,
  output logic                           restore
);
  localparam int unsigned RW = $clog2(M);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned AW = $clog2(ARR_ROWS);

  // ---------------- controller ----------------
  logic rx_clear, rx_complete, tx_clear, tx_complete, drv_trigger;
  logic [PC_W-1:0] drv_pc;

  controller #(.PC_W(PC_W), .INSTR_CYCLES(INSTR_CYCLES)) u_ctrl (
    .clk, .rst_n, .nv_init, .prog_end,
    .rx_enable, .rx_clear, .rx_complete,
    .enc_start, .enc_done,
    .tx_enable, .tx_clear, .tx_complete,
    .drv_trigger, .drv_restore(restore), .drv_pc,
    .sr_o(sr), .pc_o(pc), .commit_o(commit)
  );

  // ---------------- input buffer ----------------
  nv_buffer #(.NUM_PACKETS(NUM_PACKETS), .PKT_W(PKT_W)) u_buf (
    .clk, .rst_n, .rx_clear(rx_clear || nv_init), .rx_enable,
    .pkt_v(rx_pkt_v), .pkt_idx(rx_pkt_idx), .pkt_data(rx_pkt_data),
    .pkt_ready(rx_pkt_ready), .pkt_ack(rx_pkt_ack), .rx_complete,
    .rd_idx(enc_rd_idx), .rd_data(enc_rd_data)
  );

  // ---------------- transmit unit ----------------
  logic          tx_sa_re;
  logic [AW-1:0] tx_sa_arr;
  logic [RW-1:0] tx_sa_row;
  logic [N-1:0]  sa_rdata [ARR_ROWS];

  tx_unit #(.M(M), .N(N), .ARR_ROWS(ARR_ROWS), .TX_ROWS(TX_ROWS)) u_tx (
    .clk, .rst_n, .tx_enable, .tx_clear(tx_clear || nv_init), .tx_complete,
    .sa_re(tx_sa_re), .sa_arr(tx_sa_arr), .sa_row(tx_sa_row), .sa_rdata(sa_rdata[tx_sa_arr]),
    .tx_valid, .tx_idx, .tx_data, .tx_ack
  );

  // ---------------- drivers and instruction memories ----------------
  array_cmd_t cmd [ARR_COLS];

  for (genvar d = 0; d < ARR_COLS; d++) begin : g_col
    logic                          im_re;
    logic [$clog2(IMEM_DEPTH)-1:0] im_raddr;
    instr_t                        im_rdata;

    instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
      .clk,
      .we(imem_we && 32'(imem_col) == d), .waddr(imem_addr), .wdata(imem_wdata),
      .re(im_re), .raddr(im_raddr), .rdata(im_rdata)
    );

    driver #(.IMEM_DEPTH(IMEM_DEPTH), .PC_W(PC_W)) u_drv (
      .clk, .rst_n, .trigger(drv_trigger), .pc(drv_pc), .restore,
      .imem_re(im_re), .imem_addr(im_raddr), .imem_rdata(im_rdata),
      .cmd(cmd[d]), .busy()
    );
  end

  // ---------------- computation array grid ----------------
  logic          xc_v    [ARR_ROWS][ARR_COLS];
  logic [RW-1:0] xc_row  [ARR_ROWS][ARR_COLS];
  logic [N-1:0]  xc_data [ARR_ROWS][ARR_COLS];
  logic [N-1:0]  xc_en   [ARR_ROWS][ARR_COLS];
  logic          xr_v    [ARR_ROWS][ARR_COLS];
  logic [CW-1:0] xr_col  [ARR_ROWS][ARR_COLS];
  logic [M-1:0]  xr_data [ARR_ROWS][ARR_COLS];
  logic [M-1:0]  xr_en   [ARR_ROWS][ARR_COLS];

  for (genvar a = 0; a < ARR_ROWS; a++) begin : g_arow
    for (genvar d = 0; d < ARR_COLS; d++) begin : g_acol
      logic          nbc_v, nbr_v;
      logic [RW-1:0] nbc_row;
      logic [N-1:0]  nbc_data, nbc_en;
      logic [CW-1:0] nbr_col;
      logic [M-1:0]  nbr_data, nbr_en;
      logic          sa_we, sa_re;
      logic [N-1:0]  rdata;

      if (a == 0) begin : g_top_edge
        assign nbc_v = 1'b0;  assign nbc_row = '0;  assign nbc_data = '0;  assign nbc_en = '0;
      end else begin : g_from_above
        assign nbc_v    = xc_v[a-1][d];
        assign nbc_row  = xc_row[a-1][d];
        assign nbc_data = xc_data[a-1][d];
        assign nbc_en   = xc_en[a-1][d];
      end
      if (d == 0) begin : g_left_edge
        assign nbr_v = 1'b0;  assign nbr_col = '0;  assign nbr_data = '0;  assign nbr_en = '0;
        assign sa_we = arr_wr_v && 32'(arr_wr_arr) == a;
        assign sa_re = tx_sa_re && 32'(tx_sa_arr) == a;
        assign sa_rdata[a] = rdata;
      end else begin : g_from_left
        assign nbr_v    = xr_v[a][d-1];
        assign nbr_col  = xr_col[a][d-1];
        assign nbr_data = xr_data[a][d-1];
        assign nbr_en   = xr_en[a][d-1];
        assign sa_we = 1'b0;
        assign sa_re = 1'b0;
      end

      comp_array #(.M(M), .N(N), .HAS_SENSE(d == 0)) u_arr (
        .clk, .rst_n, .cmd(cmd[d]),
        .nbc_v, .nbc_row, .nbc_data, .nbc_en,
        .nbr_v, .nbr_col, .nbr_data, .nbr_en,
        .xfer_col_v(xc_v[a][d]), .xfer_col_row(xc_row[a][d]),
        .xfer_col_data(xc_data[a][d]), .xfer_col_en(xc_en[a][d]),
        .xfer_row_v(xr_v[a][d]), .xfer_row_col(xr_col[a][d]),
        .xfer_row_data(xr_data[a][d]), .xfer_row_en(xr_en[a][d]),
        .sa_we, .sa_re, .sa_row(sa_re ? tx_sa_row : arr_wr_row),
        .sa_wdata(arr_wr_data), .sa_wmask(arr_wr_mask), .sa_rdata(rdata),
        .row_act_o(), .col_act_o(), .rp_o(), .cp_o()
      );
    end
  end
endmodule
