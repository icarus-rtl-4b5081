// icarus_pkg: number formats, sizes, opcodes and the instruction word shared by
// every block of the ICARUS plenoptic core.
//
// Number formats (all two's complement unless noted):
//   input data (positions, directions)  16 bit, 12 fraction bits
//   frequency matrix entries            16 bit,  6 fraction bits, unit: turns per unit length
//   PEU phase                           16 bit binary angle (2^16 = one full turn)
//   activations                         12 bit,  8 fraction bits
//   weights                              9 bit sign-magnitude, magnitude / 2^7
//   biases, network outputs             16 bit,  8 fraction bits
//   sample spacing delta                16 bit unsigned, 12 fraction bits
//   transmittance, exp, pixel colour    16 bit unsigned, 15 fraction bits (1.0 = 32768)
// The 64-wide sub-MVM, the 9-bit signed-magnitude weight, the 2-byte input data and
// the batch of 128 samples follow the paper; the other formats are this design's
// own choice (the paper states only that fixed point is used). The 12-bit
// activation width is derived from the 48 KB activation memories, which hold
// exactly 128 samples x 256 neurons x 12 bits.
package icarus_pkg;

  localparam int LANES      = 64;   // sub-MVM size, RMCM blocks per MONB, SSAs per RMCM
  localparam int BATCH      = 128;  // samples per batch (weights stay stationary)

  localparam int IN_W       = 16;
  localparam int IN_FRAC    = 12;
  localparam int FREQ_W     = 16;
  localparam int FREQ_FRAC  = 6;
  localparam int PHASE_W    = 16;
  localparam int NFREQ      = 128;  // entries per frequency memory bank (3 x 128)

  localparam int ACT_W      = 12;
  localparam int ACT_FRAC   = 8;
  localparam int WGT_W      = 9;    // sign + 8-bit magnitude
  localparam int WGT_FRAC   = 7;
  localparam int PROD_W     = ACT_W + WGT_W;       // 21-bit signed product
  localparam int PSUM_W     = 32;
  localparam int BIAS_W     = 16;
  localparam int OUT_W      = 16;   // SONB output, 8 fraction bits
  localparam int OUT_FRAC   = 8;
  localparam int DELTA_W    = 16;
  localparam int DELTA_FRAC = 12;
  localparam int UQ_W       = 16;   // unsigned Q1.15 quantities
  localparam int UQ_FRAC    = 15;

  localparam int STREAM_W   = 64;   // input/output stream and register data width

  // memory geometry: one word = one 64-lane chunk of one sample
  localparam int IMEM_CHUNKS = 8;   // 96 KB = 128 x 8 x 64 x 12 bit
  localparam int AMEM_CHUNKS = 4;   // 48 KB = 128 x 4 x 64 x 12 bit
  localparam int WMEM_WORDS  = 10325; // 726 KB / (64 x 9 bit)
  localparam int SWMEM_WORDS = 16;    // 1.125 KB = 16 x 64 x 9 bit
  localparam int BMEM_WORDS  = 64;    // MONB bias words (64 x 16 bit each)
  localparam int SBMEM_WORDS = 16;    // SONB bias entries

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic        [WGT_W-1:0]  wgt_t;   // {sign, magnitude[7:0]}
  typedef logic signed [IN_W-1:0]   in_t;
  typedef logic signed [FREQ_W-1:0] freq_t;

  // a sample record of the data buffer: position, direction, spacing, end of ray
  typedef struct packed {
    logic              last;
    logic [DELTA_W-1:0] delta;
    in_t [2:0]         dir;
    in_t [2:0]         pos;
  } sample_t;

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_LD_FRQ = 4'd1,   // load frequency memory entries (1 beat each)
    OP_LD_WM  = 4'd2,   // load MONB weight memory words (9 beats each)
    OP_LD_WS  = 4'd3,   // load SONB weight memory words (9 beats each)
    OP_LD_BM  = 4'd4,   // load MONB bias words (16 beats each)
    OP_LD_BS  = 4'd5,   // load SONB bias entries (1 beat each)
    OP_LD_SMP = 4'd6,   // load a batch of samples into the data buffer (2 beats each)
    OP_ENC    = 4'd7,   // positional encoding of the batch into the input memory
    OP_MONB   = 4'd8,   // one hidden layer on the MONB
    OP_SONB   = 4'd9,   // one output layer on the SONB
    OP_END    = 4'd10   // raise the done flag
  } opcode_e;

  typedef enum logic [1:0] {SRC_IMEM = 2'd0, SRC_AM1 = 2'd1, SRC_AM2 = 2'd2} src_e;
  typedef enum logic [1:0] {ENC_POS = 2'd0, ENC_DIR = 2'd1, ENC_R6 = 2'd2} enc_e;
  // SONB destinations after the results are stored in the result buffer
  typedef enum logic [1:0] {SD_KEEP = 2'd0, SD_VRU = 2'd1, SD_OUT = 2'd2} sdst_e;

  // 64-bit instruction word written to the Op register
  typedef struct packed {
    opcode_e     op;        // [63:60]
    logic [1:0]  src;       // src_e (MONB/SONB), enc_e (ENC), bank (LD_FRQ)
    logic [3:0]  src_base;  // first chunk in the source; destination chunk for ENC
    logic [3:0]  n_in;      // chunks taken from the source
    logic [3:0]  cat_base;  // first input-memory chunk appended (skip connection)
    logic [3:0]  n_cat;     // input-memory chunks appended
    logic [2:0]  n_out;     // output chunks (MONB) or output neurons (SONB), 1..4
    logic [1:0]  dst;       // MONB: SRC_AM1/SRC_AM2; SONB: sdst_e
    logic        relu;
    logic [13:0] addr;      // weight base, load base, frequency base
    logic [7:0]  bias;      // bias base
    logic [11:0] count;     // entries to load, frequencies to encode
    logic [1:0]  rcol;      // SONB: first result-buffer column written
  } instr_t;

endpackage
