// lstm_pkg: sizes, memory map, activation coefficients and control types
// shared by the gait-analysis LSTM accelerator.
//
// The network is fixed by the application: one LSTM layer of 20 cells fed
// by 4 input channels (three gyroscope axes plus their magnitude), then a
// 20-neuron fully connected layer with ReLU and a 2-neuron output layer
// whose larger output is the class. Every gate of every cell owns one
// parameter word of 25 values (20 recurrent weights, 4 input weights and a
// bias); every FC neuron owns one word of 21 values (20 weights and a
// bias). The 102 words sit at fixed addresses: gate words 0..79 at
// 4*cell + gate, FC1 words 80..99, FC2 words 100..101. The word layout
// and the cell-major gate order are this design's choice; the address
// ranges are the paper's.
//
// Input samples are always FxP(10,8). Activation coefficients are
// FxP(18,13): the polynomial coefficients of the paper rounded to the
// nearest multiple of 2^-13 (coefficient * 8192).
package lstm_pkg;

  // Network shape
  localparam int unsigned N_CELLS   = 20;   // LSTM cells
  localparam int unsigned N_IN      = 4;    // input channels of X_t
  localparam int unsigned N_GATES   = 4;    // i, f, g, o
  localparam int unsigned N_FC1     = 20;   // FC1 neurons
  localparam int unsigned N_FC2     = 2;    // FC2 neurons (classes)
  localparam int unsigned N_VEC     = 20;   // length of the shared operand vector
  localparam int unsigned N_SLOTS   = N_VEC + N_IN + 1;  // 25 parameters per word

  // Word slots (0-based): 0..19 vector weights, 20..23 input weights,
  // 24 bias of a gate word; slot 20 is the bias of an FC word.
  localparam int unsigned SLOT_XW   = N_VEC;
  localparam int unsigned SLOT_GB   = N_VEC + N_IN;
  localparam int unsigned SLOT_FB   = N_VEC;

  // Memory map
  localparam int unsigned ADDR_W    = 7;
  localparam int unsigned MEM_DEPTH = 102;
  localparam int unsigned ADDR_FC1  = 80;
  localparam int unsigned ADDR_FC2  = 100;

  // Input sample format FxP(10,8)
  localparam int unsigned XW = 10;
  localparam int unsigned XF = 8;

  // Activation coefficient format FxP(18,13)
  localparam int unsigned CW = 18;
  localparam int unsigned CF = 13;

  typedef enum logic [1:0] {GATE_I = 2'd0, GATE_F = 2'd1, GATE_G = 2'd2, GATE_O = 2'd3} gate_e;
  typedef enum logic {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_fn_e;

  // What the datapath does in the current cycle.
  typedef enum logic [2:0] {
    STEP_GATE  = 3'd0,   // one gate of one cell: dot product + activation
    STEP_CELL  = 3'd1,   // store cycle of a cell: c_t, h_t
    STEP_FC1   = 3'd2,   // one FC1 neuron
    STEP_FC1_S = 3'd3,   // FC1 store cycle
    STEP_FC2   = 3'd4,   // one FC2 neuron
    STEP_FC2_S = 3'd5    // FC2 store cycle: MAX, cls_rdy
  } step_e;

  typedef struct packed {
    logic        en;           // a step is executed this cycle
    step_e       step;
    gate_e       gate;         // STEP_GATE
    logic [4:0]  idx;          // cell (LSTM) or neuron (FC)
    logic        first_gate;   // first gate cycle of a sample: X_t is on the port
    logic        last_sample;  // the sample is the last of the window
    logic        clear;        // write mode: forget the state of an unfinished window
  } ctl_t;

  // Piecewise polynomial a*x^2 + b*x + c in FxP(18,13), four segments each.
  // Sigmoid segments: (-6,-3], (-3,0], (0,3], (3,6]; tanh: (-3,-1], (-1,0], (0,1], (1,3].
  typedef struct packed {
    logic signed [CW-1:0] a;
    logic signed [CW-1:0] b;
    logic signed [CW-1:0] c;
  } poly_t;

  function automatic poly_t sig_coef(input logic [1:0] seg);
    case (seg)
      2'd0:    return '{a:  18'sd53,  b: 18'sd588,  c: 18'sd1665};  // 0.00642, 0.07176, 0.20323
      2'd1:    return '{a:  18'sd333, b: 18'sd2234, c: 18'sd4112};  // 0.04059, 0.27269, 0.50195
      2'd2:    return '{a: -18'sd332, b: 18'sd2234, c: 18'sd4080};  // -0.04058, 0.27266, 0.49805
      default: return '{a: -18'sd53,  b: 18'sd588,  c: 18'sd6527};  // -0.00642, 0.07175, 0.79675
    endcase
  endfunction

  function automatic poly_t tanh_coef(input logic [1:0] seg);
    case (seg)
      2'd0:    return '{a:  18'sd738,  b: 18'sd3811, c: -18'sd3262}; // 0.09007, 0.46527, -0.39814
      2'd1:    return '{a:  18'sd2588, b: 18'sd8879, c:  18'sd26};   // 0.31592, 1.08381, 0.00314
      2'd2:    return '{a: -18'sd2595, b: 18'sd8891, c: -18'sd29};   // -0.31676, 1.08538, -0.00349
      default: return '{a: -18'sd738,  b: 18'sd3810, c:  18'sd3267}; // -0.09013, 0.46509, 0.39878
    endcase
  endfunction

endpackage
