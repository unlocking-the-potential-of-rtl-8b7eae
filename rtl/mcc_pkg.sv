// mcc_pkg: number format and shared constants of the MCC (multisensory
// cooperative computing) network.
//
// All data (features, weights, biases, contexts, outputs) are signed two's
// complement fixed point. The default, DATA_W / FRAC_W, is 16-bit Q3.12:
// 1 sign bit, 3 integer bits, 12 fraction bits, range -8.0 (0x8000) ..
// 7.999755859375 (0x7FFF), step 2^-12, the format of the original FPGA
// prototype. Every datapath module takes parameters W (word width) and F
// (fraction bits) with these defaults and derives its word type q_t and its
// constants (0, 1.0, 6.0) from them, so the whole network can also be built
// in the 11-bit Q3.7 format (W = 11, F = 7) reported as sufficient for the
// deep model. The q_t and Q_* constants below are the 16-bit defaults. The layer sizes
// are those of the shallow audio-visual model (audio 22:24:12:6:22, video
// 50:24:12:6:22).
package mcc_pkg;

  localparam int DATA_W = 16;   // word width
  localparam int FRAC_W = 12;   // fraction bits (Q3.12)

  typedef logic signed [DATA_W-1:0] q_t;

  localparam q_t Q_MAX  = 16'sh7FFF;            //  7.99976
  localparam q_t Q_MIN  = 16'sh8000;            // -8.0
  localparam q_t Q_ZERO = 16'sh0000;
  localparam q_t Q_ONE  = q_t'(1 << FRAC_W);    //  1.0
  localparam q_t Q_SIX  = q_t'(6 << FRAC_W);    //  6.0

  // Weight memory: up to 1023 weights plus one bias per unit.
  localparam int WMEM_DEPTH = 1024;
  localparam int WMEM_AW    = 10;

  // Activation functions selectable at compile time.
  typedef enum logic [0:0] {
    ACT_RELU6 = 1'b0,   // ReLU clipped at 6.0
    ACT_NONE  = 1'b1    // identity
  } act_e;

endpackage
