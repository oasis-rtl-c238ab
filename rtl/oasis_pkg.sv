// oasis_pkg -- configuration constants shared by the accelerator modules.
//
// The numbers are the main configuration of the design (W4A4, 1-4096-4096
// GEMM, 16 PE lines, 28 nm / 500 MHz table of the paper). Modules take them as
// parameter defaults so that a testbench can shrink an instance.
package oasis_pkg;
  localparam int unsigned NW_DEF        = 4;     // weight index bits
  localparam int unsigned NA_DEF        = 4;     // activation index bits
  localparam int unsigned K_DEF         = 4096;  // reduction length = Concat Units per line
  localparam int unsigned N_OUT_DEF     = 4096;  // output channels of the GEMM
  localparam int unsigned N_LINES_DEF   = 16;    // PE lines per chip
  localparam int unsigned N_IC_DEF      = 32;    // Index Counters per line
  localparam int unsigned IC_IN_DEF     = 16;    // inputs per Index Counter
  localparam int unsigned MT_IN_DEF     = 32;    // MAC tree inputs
  localparam int unsigned N_MAC_DEF     = 8;     // error-compensation MACs per line
  localparam int unsigned N_CLUST_DEF   = 4;     // Clustering Units per chip
  localparam int unsigned CLUST_LPC_DEF = 2;     // search levels resolved per cycle
  localparam int unsigned ORZ_LOAD_DEF  = 16;    // leaves loaded into Orizuru per cycle
  localparam int unsigned OBUF_WORDS_DEF = 32768; // 64 KB of FP16
  localparam int unsigned AIB_ROWS_DEF  = 8;     // 16 KB act index buffer = 8 rows of 4096 x 4 bit
endpackage
