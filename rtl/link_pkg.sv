// link_pkg: constants and helpers shared by the synchronizer-free link.
//
// The link moves data words from a sender clock domain to a receiver clock
// domain through a ring buffer of N cells (N even). The default N = 2 and the
// two cell-address conventions below (reader starts at cell 0, writer at cell
// N/2, the controller looks at the cell opposite the reader) follow the
// design description; the data width is this implementation's choice.
package link_pkg;
  timeunit 1ps; timeprecision 1ps;

  // Default ring size and data-word width.
  localparam int unsigned N_DEFAULT      = 2;
  localparam int unsigned DATA_W_DEFAULT = 8;

  // Width of a cell address for an N-cell ring (at least one bit).
  function automatic int unsigned addr_width(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Cell opposite to cell a in an N-cell ring: (a + N/2) mod N.
  function automatic int unsigned opposite(int unsigned a, int unsigned n);
    return (a + n / 2) % n;
  endfunction

endpackage
