// barista_pkg: types and constants shared by the blocked-GEMM training kernel.
//
// The kernel multiplies FP32 matrices (wordlength WL = 32, as in the evaluated
// design) on a Tr x Tc systolic mesh. Off-chip memory is addressed in 32-bit
// words. The constants below are the evaluated configuration
// <Tr,Tc,Tp> = <16,16,64> with an FP32 multiplier latency of Q = 10 cycles;
// the address and length widths are this design's own choice.
package barista_pkg;
  localparam int unsigned WL       = 32;  // element wordlength (FP32)
  localparam int unsigned TR_DEF   = 16;  // mesh rows, Tr
  localparam int unsigned TC_DEF   = 16;  // mesh columns, Tc
  localparam int unsigned TP_DEF   = 64;  // inner tile size, Tp
  localparam int unsigned Q_DEF    = 10;  // FP32 multiplier latency, Q
  localparam int unsigned ADDR_W   = 32;  // word address width (own choice)
  localparam int unsigned LEN_W    = 16;  // burst length field width (own choice)
  localparam int unsigned CNT_W    = 16;  // tile count argument width (own choice)

  typedef logic [WL-1:0]     word_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;

  // FP32 field layout
  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] man;
  } fp32_t;

  localparam word_t FP32_ZERO = 32'h0000_0000;
  localparam word_t FP32_QNAN = 32'h7fc0_0000;

  // Phases of the kernel controller (exported for observation)
  typedef enum logic [3:0] {
    ST_IDLE, ST_LOAD_A, ST_LOAD_B, ST_FEED, ST_DRAIN, ST_REDUCE,
    ST_CAPTURE, ST_WRITE, ST_DONE
  } ctrl_state_e;
endpackage
