// dsaen_pkg: constants and types shared by the DSAE classifier core.
//
// The network is a fully connected 10-32-16-3 perceptron: ten operating
// measurements of a fuel-cell stack go in, two hidden layers of 32 and 16
// ReLU neurons follow, and three class scores come out (class 0: HFR below
// 89 mOhm, class 1: 89..91 mOhm, class 2: 91 mOhm and above).  The layer
// sizes are the published ones.  The arithmetic is plain two's-complement
// 32-bit integer arithmetic, the C "int" the host uses for the stream
// buffers; the weight width is this design's own choice, as the trained
// weight format is not published.
package dsaen_pkg;

  // Layer sizes (published).
  parameter int IN_N  = 10;   // input features
  parameter int H1_N  = 32;   // first hidden layer
  parameter int H2_N  = 16;   // second hidden layer
  parameter int OUT_N = 3;    // class scores

  // Word widths (own choice: 32-bit int, like the host stream buffers).
  parameter int DATA_W = 32;  // activations, stream words, accumulators
  parameter int W_W    = 32;  // weights and biases

  typedef logic signed [DATA_W-1:0] data_t;

  // Selects which parameter memory a configuration write goes to.
  typedef enum logic [2:0] {
    MEM_W1 = 3'd0,
    MEM_B1 = 3'd1,
    MEM_W2 = 3'd2,
    MEM_B2 = 3'd3,
    MEM_W3 = 3'd4,
    MEM_B3 = 3'd5
  } mem_sel_e;

  // Phases of one inference, in the order the core runs them.
  typedef enum logic [2:0] {
    S_LOAD = 3'd0,   // read IN_N words from the input stream
    S_L1   = 3'd1,   // hidden layer 1
    S_L2   = 3'd2,   // hidden layer 2
    S_L3   = 3'd3,   // output layer
    S_OUT  = 3'd4    // send the scores and the class
  } state_e;

endpackage
