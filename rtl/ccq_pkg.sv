// Shared defaults of the chained crosspoint-queued (CCQ) switch core.
//
// The switch is an N x N single-chip crosspoint-queued switch whose
// crosspoint buffers hold B cells each. Every module takes these numbers as
// parameter defaults so that one edit here resizes the whole design.
//   N_PORTS   = 32  : the 32 x 32 switch used throughout the evaluation.
//   BUF_CELLS = 40  : crosspoint buffer size B = 40 cells of that switch.
//   CELL_BITS = 512 : a cell is 64 bytes.
//   WC_BITS   = 16  : width of wait-counters and RR-counters; the counters
//                     wrap, and 16 bits cover the largest span of counters
//                     that can coexist in one daisy chain (N*B + ceil(K/N)).
// POLLS_PER_SLOT gives the number of polls an output arbiter performs in one
// slot, N + K + 1 with a deflection bound K = N - 1, i.e. 2N.
// Lint note: a module that imports only some of these defaults makes a
// linter report the others as unused parameters (UNUSEDPARAM) when the
// package is compiled along with it; that is expected.
package ccq_pkg;
  parameter int unsigned N_PORTS   = 32;
  parameter int unsigned BUF_CELLS = 40;
  parameter int unsigned CELL_BITS = 512;
  parameter int unsigned WC_BITS   = 16;
endpackage
