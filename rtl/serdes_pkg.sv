// serdes_pkg: constants and types shared by the serial link.
//
// Frame geometry follows the link's specification: eight parallel data
// streams of 32 bits are carried per frame. The framing (an 8-bit sync
// header 8'hF0 sent before every frame and an alternating 1010 idle pattern
// between frames), the bit order (stream 0 first, MSB first) and the
// oversampling ratio of the CDR (4 samples per bit) are this design's own
// choices. The modules take these values as parameter defaults through
// qualified names; linting the package on its own therefore reports its
// parameters as unused, which is expected.
`timescale 1ps/1ps
package serdes_pkg;
  parameter int unsigned NUM_WORDS = 8;          // parallel data streams per frame
  parameter int unsigned WORD_W    = 32;         // bits per stream
  parameter int unsigned SYNC_W    = 8;          // sync header length
  parameter logic [SYNC_W-1:0] SYNC_WORD = 8'hF0; // cannot occur inside 1010 idle
  parameter int unsigned OSR       = 4;          // CDR samples per bit
  parameter int unsigned JW        = 4;          // width of the jitter scan field

  typedef enum logic [1:0] {SER_IDLE, SER_SYNC, SER_DATA} ser_state_e;
  typedef enum logic [1:0] {DES_HUNT, DES_DATA} des_state_e;
endpackage
