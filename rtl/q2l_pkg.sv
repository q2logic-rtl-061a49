// q2l_pkg: types and constants shared by the Q2Logic state-vector simulator.
//
// A quantum state amplitude is one complex number held as two IEEE-754
// single-precision floats (64 bits in all). The real part sits in the low
// 32 bits and the imaginary part in the high 32 bits, the layout of a C
// struct {float re; float im;} on a little-endian host. Two amplitudes travel
// together on every internal stream (cpair_t), which is the width of the
// streams between the serializer, the quantum processing units (QPUs) and the
// state writer.
//
// Each QPU is configured by a 44-byte record (qpu_cfg_t). The 44-byte size is
// the paper's; the split of those bytes into fields is this design's choice:
// 32 bytes hold the 2x2 complex gate matrix [a b; c d], the last 12 bytes
// hold three 32-bit words: the gate kind, the target label bit and the
// control label bit. Bytes arrive first-field-first and every multi-byte
// field most-significant byte first, so the shift register of a QPU can be
// cast directly to qpu_cfg_t.
package q2l_pkg;

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    fp32_t im;
    fp32_t re;
  } cplx_t;

  // Two amplitudes, element 0 in the low half.
  typedef cplx_t [1:0] cpair_t;

  // Gate kinds held in the configuration record.
  typedef enum logic [31:0] {
    GATE_UNARY      = 32'd0,  // apply [a b; c d] to every pair
    GATE_CONTROLLED = 32'd1,  // apply it only where the control bit is 1 (CNOT when the matrix is X)
    GATE_PASS       = 32'd2   // pass the stream through unchanged (QPU left idle by the schedule)
  } gate_kind_e;

  typedef struct packed {
    cplx_t      a;
    cplx_t      b;
    cplx_t      c;
    cplx_t      d;
    gate_kind_e kind;
    logic [31:0] target;   // label bit the gate acts on, below the QPU's N_SYSQBITS
    logic [31:0] control;  // label bit that controls a GATE_CONTROLLED gate
  } qpu_cfg_t;

  // Observation bits of the top level, one per mechanism of the pipeline.
  typedef struct packed {
    logic reader_done;     // the reader has received the last state word
    logic word_fifo_full;  // the wide-word FIFO is full (reader out of credits)
    logic pair_fifo_full;  // the pair FIFO is full (first QPU not accepting)
    logic qpu_overlap;     // some QPU loads one bank while computing the other
    logic qpu_stall;       // some QPU holds its pipeline on back-pressure
    logic qpu_kept;        // some QPU passes stored values (control bit 0 or idle QPU)
    logic write_stall;     // the memory refuses a write
  } obs_t;

  localparam int unsigned CFG_BYTES = 44;
  localparam int unsigned CFG_BITS  = CFG_BYTES * 8;

  // Memory-side sizes: addresses count complex amplitudes of the state vector.
  localparam int unsigned ADDR_W = 32;

endpackage
