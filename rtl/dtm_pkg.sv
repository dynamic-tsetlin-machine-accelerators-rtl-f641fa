// dtm_pkg: types and constants shared by the Dynamic Tsetlin Machine (DTM)
// accelerator. It holds the TM-type and feedback encodings, the run-time
// configuration record that the stream decoder fills in, the stream opcodes
// and a tap table for maximal-length LFSRs.
//
// Encodings that follow the paper: TM type 2'b01 = Vanilla TM, 2'b10 = CoTM;
// clause feedback 2'b00 = none, 2'b01 = Type I, 2'b10 = Type II.
// The stream opcodes and field positions are this design's own choice.
package dtm_pkg;

  typedef enum logic [1:0] {
    TM_NONE    = 2'b00,
    TM_VANILLA = 2'b01,
    TM_COTM    = 2'b10
  } tm_type_e;

  typedef enum logic [1:0] {
    FB_NONE  = 2'b00,
    FB_TYPE1 = 2'b01,
    FB_TYPE2 = 2'b10
  } feedback_e;

  // Stream opcodes, word[31:28].
  typedef enum logic [3:0] {
    OP_NOP       = 4'h0,
    OP_FEATURES  = 4'h1,  // [15:0] number of Boolean features f
    OP_CLAUSES   = 4'h2,  // [15:0] clauses c (per class for Vanilla, total for CoTM)
    OP_CLASSES   = 4'h3,  // [7:0] classes h, [9:8] TM type
    OP_THRESHOLD = 4'h4,  // [15:0] threshold T
    OP_SPEC      = 4'h5,  // [15:0] specificity s; the decoder derives 2^L/s
    OP_SEED      = 4'h6,  // [27:0] master PRNG seed
    OP_FLAGS     = 4'h7,  // [0] boost true positive feedback
    OP_INIT      = 4'h8,  // initialise TA states and weights from the PRNG
    OP_DATA      = 4'h9   // [0] train, [15:8] target class; feature words follow
  } opcode_e;

  // Run-time model configuration (Sec. IV-D a: TM type, feature, clause and
  // class numbers, T and the precomputed TA update probability).
  typedef struct packed {
    tm_type_e    tm_type;
    logic [15:0] n_features;
    logic [15:0] n_clauses;
    logic [7:0]  n_classes;
    logic [15:0] threshold;
    logic [31:0] p_ta;       // 2^L_LFSR / s, saturated to 2^L_LFSR-1
    logic        boost_tpf;
  } cfg_t;

  // Tap mask of a maximal-length Fibonacci LFSR (taps from the usual
  // tables of maximal-length polynomials), bit k-1 set for tap k.
  function automatic logic [31:0] lfsr_taps(input int unsigned len);
    case (len)
      3:  return 32'h0000_0006;  // 3,2
      4:  return 32'h0000_000C;  // 4,3
      5:  return 32'h0000_0014;  // 5,3
      6:  return 32'h0000_0030;  // 6,5
      7:  return 32'h0000_0060;  // 7,6
      8:  return 32'h0000_00B8;  // 8,6,5,4
      9:  return 32'h0000_0110;  // 9,5
      10: return 32'h0000_0240;  // 10,7
      11: return 32'h0000_0500;  // 11,9
      12: return 32'h0000_0829;  // 12,6,4,1
      13: return 32'h0000_100D;  // 13,4,3,1
      14: return 32'h0000_2015;  // 14,5,3,1
      15: return 32'h0000_6000;  // 15,14
      16: return 32'h0000_D008;  // 16,15,13,4
      17: return 32'h0001_2000;  // 17,14
      18: return 32'h0002_0400;  // 18,11
      19: return 32'h0004_0023;  // 19,6,2,1
      20: return 32'h0009_0000;  // 20,17
      21: return 32'h0014_0000;  // 21,19
      22: return 32'h0030_0000;  // 22,21
      23: return 32'h0042_0000;  // 23,18
      24: return 32'h00E1_0000;  // 24,23,22,17
      default: return 32'h8020_0003;  // 32,22,2,1
    endcase
  endfunction

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
