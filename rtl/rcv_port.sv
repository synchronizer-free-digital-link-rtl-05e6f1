// rcv_port: receiver side of the link: read pointer, cell enables and read
// register.
//
// A modulo-N read pointer advances on every falling edge of clk_rcv, starting
// at cell 0, and is decoded into one-hot enables e_rcv for the buffer cells.
// On every rising edge of clk_rcv the receiver reads the addressed cell: the
// cell's flag is cleared (inside the buffer cell, through e_rcv) and its data
// word is taken into rd_data, which holds it for the following cycle. The
// pointer, moved on the falling edge, is stable half a cycle before each read;
// it is also the select of the controller's flag multiplexer (addr_rcv).
// The toggling pointer flip-flop for N = 2 and the falling-edge update follow
// the published implementation; the read register and the asynchronous
// active-low reset (pointer 0, rd_data 0) are this implementation's choices.
module rcv_port
  import link_pkg::*;
#(
  parameter int unsigned N      = N_DEFAULT,
  parameter int unsigned DATA_W = DATA_W_DEFAULT,
  localparam int unsigned AW    = addr_width(N)
) (
  input  logic                   clk_rcv,
  input  logic                   rst_n,
  input  logic [N-1:0][DATA_W-1:0] cell_data,
  output logic [AW-1:0]          addr,
  output logic [N-1:0]           e_rcv,
  output logic [DATA_W-1:0]      rd_data
);
  timeunit 1ps; timeprecision 1ps;

  always_ff @(negedge clk_rcv or negedge rst_n) begin
    if (!rst_n)              addr <= '0;
    else if (addr == AW'(N - 1)) addr <= '0;
    else                     addr <= addr + 1'b1;
  end

  always_comb begin
    e_rcv = '0;
    e_rcv[addr] = 1'b1;
  end

  always_ff @(posedge clk_rcv or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else        rd_data <= cell_data[addr];
  end

endmodule
