// ring_buffer: the link's ring buffer (BUFF) of N cells.
//
// Each cell has a data register, written from the sender clock domain, and a
// buffer_cell holding its full/empty flag. On a rising edge of clk_snd the
// cell selected by the one-hot e_snd takes wr_data and its flag goes to 1; on
// a rising edge of clk_rcv the cell selected by e_rcv has its flag cleared
// (its data is read by the receiver from cell_data). At reset cells
// 0 .. N/2-1 are valid (flag 1) and cells N/2 .. N-1 invalid (flag 0), with
// all data registers 0. The N flags go out to the controller, which samples
// them from the receiver domain.
//
// The flag cells and their initial state follow the design description; the
// data registers, their width and their reset value are this
// implementation's choices. The two correctness rules of the link are
// checked by assertions: the receiver accesses only valid cells (no
// underrun) and the sender accesses only invalid cells (no overflow).
module ring_buffer
  import link_pkg::*;
#(
  parameter int unsigned N      = N_DEFAULT,
  parameter int unsigned DATA_W = DATA_W_DEFAULT
) (
  input  logic                     clk_snd,
  input  logic                     clk_rcv,
  input  logic                     rst_n,
  input  logic [N-1:0]             e_snd,
  input  logic [N-1:0]             e_rcv,
  input  logic [DATA_W-1:0]        wr_data,
  output logic [N-1:0][DATA_W-1:0] cell_data,
  output logic [N-1:0]             flags
);
  timeunit 1ps; timeprecision 1ps;

  for (genvar i = 0; i < N; i++) begin : g_cell
    buffer_cell #(.INIT(i < N / 2)) u_flag (
      .clk_snd (clk_snd),
      .clk_rcv (clk_rcv),
      .rst_n   (rst_n),
      .e_snd   (e_snd[i]),
      .e_rcv   (e_rcv[i]),
      .flag    (flags[i])
    );

    always_ff @(posedge clk_snd or negedge rst_n) begin
      if (!rst_n)        cell_data[i] <= '0;
      else if (e_snd[i]) cell_data[i] <= wr_data;
    end

    // No overflow: the sender writes only invalid (empty) cells.
    a_no_overflow : assert property (@(posedge clk_snd) disable iff (!rst_n)
                                     e_snd[i] |-> !flags[i])
      else $error("ring_buffer: overflow, sender wrote valid cell %0d", i);

    // No underrun: the receiver reads only valid (full) cells.
    a_no_underrun : assert property (@(posedge clk_rcv) disable iff (!rst_n)
                                     e_rcv[i] |-> flags[i])
      else $error("ring_buffer: underrun, receiver read invalid cell %0d", i);
  end

endmodule
