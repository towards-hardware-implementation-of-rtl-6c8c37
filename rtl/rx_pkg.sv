// rx_pkg: dimensions of the neural-network receiver.
//
// The receiver decides which of M = 256 messages was sent over N = 4 complex
// channel uses. Its network is a complex-to-real stage (2N = 8 real inputs),
// a dense layer of 64 ReLU units, a dense layer of 32 ReLU units and a dense
// output layer of M units whose largest pre-activation is the decision.
package rx_pkg;

  localparam int unsigned N_DEF  = 4;    // complex channel uses per message
  localparam int unsigned M_DEF  = 256;  // number of messages
  localparam int unsigned H1_DEF = 64;   // units of the first hidden layer
  localparam int unsigned H2_DEF = 32;   // units of the second hidden layer

endpackage
