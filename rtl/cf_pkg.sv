// cf_pkg -- shared constants and record types of the TPC cluster finder.
//
// The cluster finder turns a zero-suppressed stream of TPC charges into
// clusters. Charges are first grouped along the time direction into
// sequences (one per ALTRO bunch); sequences on neighbouring pads are then
// merged into clusters. A cluster is described relative to its upper-left
// corner (highest time a, first pad b) by five integers: a, b, the total
// charge Q, the pad moment P = sum_k k*Q_(b+k) and the time moment
// T = sum_j [ sum_k k*q_(a_j-k) + (a-a_j)*Q_j ]. The host then forms the
// centroids G_P = b + P/Q and G_T = a - T/Q.
//
// The 10-bit charge range, the 10-bit ALTRO word and the five output
// integers follow the paper. Field widths of rows, pads, sums and the
// multiplicand limit are this design's choices, sized so that no sum can
// wrap for the largest cluster the multiplicand limit admits.
package cf_pkg;

  // ALTRO data words and charges are 10 bits (ADC range 0..1023).
  localparam int unsigned WORD_W  = 10;
  localparam int unsigned CHG_W   = 10;
  localparam int unsigned TIME_W  = 10;   // time bin 0..1023
  localparam int unsigned PAD_W   = 8;    // pad in a row, 0..255
  localparam int unsigned ROW_W   = 8;    // pad row, 0..255

  // Limit of the SmartMult multiplicand: sequences may hold at most
  // 2**MULT_BITS charges, clusters at most 2**MULT_BITS pads and a height
  // difference (a-a_j) of at most 2**MULT_BITS-1. Larger clusters overflow.
  localparam int unsigned MULT_BITS = 4;

  localparam int unsigned SEQQ_W  = 16;   // Q_j   <= 16*1023
  localparam int unsigned SEQS_W  = 20;   // sum k*q <= 120*1023
  localparam int unsigned CLQ_W   = 20;   // Q     <= 16*16*1023
  localparam int unsigned SUM_W   = 24;   // P and T moments
  localparam int unsigned MID_W   = TIME_W + 1; // geometric middle, half-bin units
  localparam int unsigned NPAD_W  = MULT_BITS + 1;

  // One sequence, as the Decoder hands it to the Merger.
  typedef struct packed {
    logic              eoe;   // end-of-event marker, no sequence data
    logic [ROW_W-1:0]  row;
    logic [PAD_W-1:0]  pad;
    logic [TIME_W-1:0] a;     // time of the top (first, highest) charge
    logic [SEQQ_W-1:0] q;     // Q_j, total charge of the sequence
    logic [SEQS_W-1:0] s;     // sum_k k*q_(a_j-k), k counted from the top
    logic [MID_W-1:0]  mid2;  // 2 * geometric middle = 2*a - (len-1)
    logic              ovf;   // sequence longer than 2**MULT_BITS
  } seq_t;

  // One started cluster, as stored in the ring buffer.
  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [TIME_W-1:0] a;      // highest start time of the merged sequences
    logic [PAD_W-1:0]  b;      // first pad
    logic [CLQ_W-1:0]  q;      // Q
    logic [SUM_W-1:0]  psum;   // sum_k k*Q_(b+k)
    logic [SUM_W-1:0]  tsum;   // time moment relative to a
    logic [MID_W-1:0]  mid2;   // middle of the last appended sequence
    logic [NPAD_W-1:0] npads;  // number of merged pads (n+1)
    logic [SEQQ_W-1:0] lastq;  // Q_j of the last appended sequence
    logic              falling;// last Q_j was below the one before it
    logic              ovf;    // cluster exceeded the multiplicand limit
  } cluster_t;

  // One finished cluster, as sent to the host.
  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [TIME_W-1:0] a;
    logic [PAD_W-1:0]  b;
    logic [CLQ_W-1:0]  q;
    logic [SUM_W-1:0]  psum;
    logic [SUM_W-1:0]  tsum;
  } cl_out_t;

  // Merger states (names as in the paper's state diagram).
  typedef enum logic [3:0] {
    S_IDLE          = 4'd0,
    S_CALC_DIST     = 4'd1,
    S_MERGE_MULT    = 4'd2,
    S_MERGE_ADD     = 4'd3,
    S_MERGE_STORE   = 4'd4,
    S_INSERT_SEQ    = 4'd5,
    S_SEND_ONE      = 4'd6,
    S_SEND_MANY     = 4'd7,
    S_SEND_ALL      = 4'd8,
    S_SPLIT_CLUSTER = 4'd9
  } mstate_t;

  localparam int unsigned NSTATES = 10;

endpackage
