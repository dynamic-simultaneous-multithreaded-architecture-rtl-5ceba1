// dsmt_pkg: constants and types shared by the DSMT thread-speculation units.
//
// The sizes follow the evaluated machine: 8 hardware contexts (the largest
// configuration evaluated and the one behind the headline speedups), 64
// architectural registers per context (Register 0..63 in the context
// diagram), two fetch ports of up to eight instructions (ICount2.8), four
// data-cache ports, 64-entry instruction and load/store queues and a 32-entry
// reorder buffer per context. Data and address width (32 bits) is this
// design's choice; the paper's simulator runs 32-bit PISA code.
package dsmt_pkg;

  parameter int unsigned NCTX        = 8;   // hardware contexts
  parameter int unsigned NREGS       = 64;  // registers per context
  parameter int unsigned XLEN        = 32;  // register width
  parameter int unsigned AW          = 32;  // address / PC width
  parameter int unsigned FETCH_PORTS = 2;   // ICount2.8: two fetch ports
  parameter int unsigned FETCH_WIDTH = 8;   // ICount2.8: eight instructions per port
  parameter int unsigned DC_PORTS    = 4;   // data-cache ports
  parameter int unsigned IQ_SIZE     = 64;  // instruction queue entries per context
  parameter int unsigned ROB_SIZE    = 32;  // reorder buffer entries per context
  parameter int unsigned LSQ_SIZE    = 64;  // load/store queue entries per context

  // Execution mode of the processor.
  typedef enum logic [1:0] {
    MODE_NON  = 2'd0,   // non-DSMT: one context, plain superscalar
    MODE_PRE  = 2'd1,   // pre-DSMT: loop found, learning anchors / strides
    MODE_FULL = 2'd2    // full-DSMT: iterations run as speculative threads
  } dsmt_mode_e;

  // 2-bit saturating counter helpers (LSST, register read confidence, BTB).
  function automatic logic [1:0] sat_inc(input logic [1:0] c);
    return (c == 2'b11) ? c : c + 2'b01;
  endfunction

  function automatic logic [1:0] sat_dec(input logic [1:0] c);
    return (c == 2'b00) ? c : c - 2'b01;
  endfunction

endpackage
