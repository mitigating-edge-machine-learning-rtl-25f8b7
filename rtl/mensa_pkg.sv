// mensa_pkg -- types and helpers shared by the three Mensa accelerators.
//
// All models run on the accelerators are 8-bit quantised, so activations and
// parameters are signed 8-bit values (data_t) and every PE accumulates into a
// signed 32-bit partial sum (acc_t).  Results leave a PE through requant(): an
// arithmetic right shift by a per-layer amount followed by saturation to 8 bits
// and an optional ReLU.  The shift/saturate scheme, the 32-bit accumulator and
// the command descriptor layout are choices of this design; the 8-bit data width
// follows the paper.
//
// cmd_t is the layer descriptor the runtime scheduler (host software) sends to
// one accelerator.  Each accelerator reads the fields as documented in its own
// header; the field names below give the general meaning.
package mensa_pkg;

  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Accelerator a layer is mapped to.
  typedef enum logic [1:0] {
    ACC_PASCAL   = 2'd0,  // Clusters 1 and 2 (compute-centric)
    ACC_PAVLOV   = 2'd1,  // Cluster 3 (LSTM gates, fully connected)
    ACC_JACQUARD = 2'd2   // Clusters 4 and 5 (data-centric convolutions)
  } accel_e;

  // Operation.  OP_LSTM_CELL is only understood by Pavlov.
  typedef enum logic [1:0] {
    OP_MATMUL    = 2'd0,  // matrix-matrix / matrix-vector product
    OP_LSTM_CELL = 2'd1   // element-wise LSTM cell-state update
  } op_e;

  typedef struct packed {
    accel_e      target;   // accelerator that executes the layer
    op_e         op;
    logic [15:0] rows;     // output channels / matrix rows / LSTM hidden size
    logic [15:0] red;      // reduction length (Pascal, Pavlov) or chunk count (Jacquard)
    logic [15:0] cols;     // tiles (Pascal), batch of cells (Pavlov), pixels (Jacquard)
    logic [16:0] in_base;  // activation-buffer base of the inputs
    logic [16:0] out_base; // activation-buffer base of the outputs
    logic [16:0] aux_base; // activation-buffer base of initial values / previous cell state
    logic [16:0] par_base; // parameter-buffer base (Pascal, Jacquard)
    logic [4:0]  shift;    // requantisation right shift
    logic        relu;     // apply ReLU on the way out
    logic        init_en;  // Pavlov: start accumulators from values at aux_base
  } cmd_t;

  // Requantise a 32-bit accumulator to an 8-bit activation.  The variable
  // shift is written as a five-stage barrel shifter (one fixed shift per bit
  // of the amount), which is the circuit a variable shift becomes anyway.
  function automatic data_t requant(acc_t a, logic [4:0] shift, logic relu);
    acc_t s;
    s = a;
    for (int i = 0; i < 5; i++)
      if (shift[i]) s = s >>> (1 << i);
    if (relu && s < 0)  s = '0;
    if (s > 127)        return data_t'(8'sd127);
    if (s < -128)       return data_t'(-8'sd128);
    return data_t'(s[DATA_W-1:0]);
  endfunction

endpackage
