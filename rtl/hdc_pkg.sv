// hdc_pkg: sizes and shared types of the in-memory hyperdimensional
// computing (HDC) inference/training engine.
//
// The default sizes are those of the main configuration: hypervectors of
// d = 10,000 bits, an item memory (IM) of h = 27 symbols (26 letters plus
// space), an associative memory (AM) of up to c = 22 classes (the language
// task, the largest class count evaluated) and a partition factor f = 10.
// The n-gram depth, the sequence-length counter width and the ADC width are
// choices of this design, not numbers from the original description.
package hdc_pkg;

  localparam int unsigned D_DEF     = 10000; // hypervector dimension d
  localparam int unsigned H_DEF     = 27;    // IM symbols h
  localparam int unsigned C_DEF     = 22;    // AM classes c
  localparam int unsigned F_DEF     = 10;    // AM partition factor f
  localparam int unsigned NMAX_DEF  = 8;     // deepest n-gram supported (own choice)
  localparam int unsigned LEN_W_DEF = 21;    // sequence length / n-gram count width (own choice)
  localparam int unsigned MINTERMS  = 2;     // minterms used by the encoder (k)

  // Operating mode of one encoded sequence.
  typedef enum logic {
    MODE_INFER = 1'b0,  // query hypervector -> AM search -> class index
    MODE_TRAIN = 1'b1   // prototype hypervector -> written into the AM rows of its label
  } hdc_mode_e;

endpackage
