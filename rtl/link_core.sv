// link_core: synthesizable digital part of the synchronizer-free link.
//
// Sender address logic, ring buffer, receiver port and clocked threshold
// controller, wired together; the two clocks come in from the oscillators
// and the two mode bits go out to them. Every rising edge of clk_snd writes
// wr_data into the next cell; every rising edge of clk_rcv reads the next
// cell into rd_data. Nothing in this module handshakes: the sender and the
// receiver each move one cell per own clock cycle, and the controller keeps
// the two clocks close enough in phase (through md_snd/md_rcv) that the
// sender never overtakes the receiver nor the receiver the sender. Latency
// is at most N receiver cycles, throughput one word per cycle.
//
// The structure follows the published N = 2 implementation; the data path
// width and the reset are this implementation's choices. flags, snd_addr and
// rcv_addr are brought out for observation. USE_RCV_ADDR selects the
// controller variant: 1 (default) shares the receiver's read pointer as the
// controller's multiplexer select, 0 gives the controller its own
// sample-address counter (see ctrl).
module link_core
  import link_pkg::*;
#(
  parameter int unsigned N      = N_DEFAULT,
  parameter int unsigned DATA_W = DATA_W_DEFAULT,
  parameter bit          USE_RCV_ADDR = 1'b1,
  localparam int unsigned AW    = addr_width(N)
) (
  input  logic              clk_snd,
  input  logic              clk_rcv,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] wr_data,
  output logic [DATA_W-1:0] rd_data,
  output logic              md_snd,
  output logic              md_rcv,
  output logic [N-1:0]      flags,
  output logic [AW-1:0]     snd_addr_o,
  output logic [AW-1:0]     rcv_addr_o
);
  timeunit 1ps; timeprecision 1ps;

  logic [N-1:0]             e_snd, e_rcv;
  logic [N-1:0][DATA_W-1:0] cell_data;

  initial begin
    assert (N >= 2 && N % 2 == 0) else $fatal(1, "link_core: N must be even and >= 2");
  end

  snd_addr #(.N(N)) u_snd (
    .clk_snd (clk_snd),
    .rst_n   (rst_n),
    .addr    (snd_addr_o),
    .e_snd   (e_snd)
  );

  ring_buffer #(.N(N), .DATA_W(DATA_W)) u_buff (
    .clk_snd   (clk_snd),
    .clk_rcv   (clk_rcv),
    .rst_n     (rst_n),
    .e_snd     (e_snd),
    .e_rcv     (e_rcv),
    .wr_data   (wr_data),
    .cell_data (cell_data),
    .flags     (flags)
  );

  rcv_port #(.N(N), .DATA_W(DATA_W)) u_rcv (
    .clk_rcv   (clk_rcv),
    .rst_n     (rst_n),
    .cell_data (cell_data),
    .addr      (rcv_addr_o),
    .e_rcv     (e_rcv),
    .rd_data   (rd_data)
  );

  ctrl #(.N(N), .USE_RCV_ADDR(USE_RCV_ADDR)) u_ctrl (
    .clk_rcv  (clk_rcv),
    .rst_n    (rst_n),
    .flags    (flags),
    .rcv_addr (rcv_addr_o),
    .md_rcv   (md_rcv),
    .md_snd   (md_snd)
  );

endmodule
