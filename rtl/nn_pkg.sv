// nn_pkg: constants and types shared by the neural thrust controller.
//
// The network is the deepsets policy: a self encoder E^q (18 -> 16 -> 16,
// ReLU after both layers), a neighbour encoder MLP B applied to each of the
// K neighbours (6 -> 8 -> 8, ReLU after both), the mean of the K outputs of B,
// and the output network H on the concatenation [e^q, e^k] (24 -> 32 -> 4,
// ReLU after the hidden layer only). Layer sizes and activations follow the
// paper. All numbers are two's-complement fixed point with FRAC_BITS
// fractional bits; the paper chooses the number of fractional bits by search
// and does not print it, so FRAC_BITS, the 32-bit word and K = 6 neighbours
// are this design's choices.
//
// Weights live in main memory, one layer after another. A layer with IN
// inputs and OUT outputs takes OUT*IN words of W (row-major, W[j][i] at
// j*IN + i) followed by OUT words of bias.
package nn_pkg;

  localparam int DATA_W    = 32;  // word width of data, weights and memory
  localparam int ACC_W     = 64;  // accumulator width of one dot product
  localparam int FRAC_BITS = 12;  // fractional bits n
  localparam int ADDR_W    = 16;  // word address width of the memory bus

  // Observation sizes: o^q = (p, v, R flattened, omega) and o^l = (p, v).
  localparam int SELF_OBS  = 18;
  localparam int NB_OBS    = 6;
  localparam int K_NEIGH   = 6;   // number of neighbours k
  localparam int EQ_HID    = 16;  // E^q hidden width
  localparam int B_HID     = 8;   // B hidden width
  localparam int H_HID     = 32;  // H hidden width
  localparam int N_ACT     = 4;   // outputs a, one per motor
  localparam int E_LEN     = EQ_HID + B_HID;  // concatenation [e^q, e^k]

  typedef logic signed [DATA_W-1:0] fxp_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;

  // Scratchpad (activation buffer) layout inside the accelerator.
  localparam int SP_XQ   = 0;                  // o^q, 18 words
  localparam int SP_XN   = SP_XQ + SELF_OBS;   // current o^l, 6 words
  localparam int SP_HQ1  = SP_XN + NB_OBS;     // E^q hidden 1, 16 words
  localparam int SP_E    = SP_HQ1 + EQ_HID;    // e = [e^q, e^k], 24 words
  localparam int SP_EK   = SP_E + EQ_HID;      // e^k part of e
  localparam int SP_HB1  = SP_E + E_LEN;       // B hidden 1, 8 words
  localparam int SP_HB2  = SP_HB1 + B_HID;     // B hidden 2, 8 words
  localparam int SP_HH   = SP_HB2 + B_HID;     // H hidden, 32 words
  localparam int SP_A    = SP_HH + H_HID;      // a, 4 words
  localparam int SP_WORDS = SP_A + N_ACT;      // 116
  localparam int SP_AW   = $clog2(SP_WORDS);

  // One fully connected layer.
  typedef struct packed {
    logic [7:0]  in_len;
    logic [7:0]  out_len;
    logic [7:0]  in_off;    // scratchpad offset of the input vector
    logic [7:0]  out_off;   // scratchpad offset of the output vector
    addr_t       w_off;     // word offset of W in the weight image
    logic        relu;
  } layer_t;

  localparam int N_LAYERS = 6;
  localparam int L_EQ1 = 0, L_EQ2 = 1, L_B1 = 2, L_B2 = 3, L_H1 = 4, L_H2 = 5;

  function automatic int layer_words(int in_len, int out_len);
    return in_len * out_len + out_len;
  endfunction

  localparam int W_EQ1 = 0;
  localparam int W_EQ2 = W_EQ1 + layer_words(SELF_OBS, EQ_HID);
  localparam int W_B1  = W_EQ2 + layer_words(EQ_HID, EQ_HID);
  localparam int W_B2  = W_B1  + layer_words(NB_OBS, B_HID);
  localparam int W_H1  = W_B2  + layer_words(B_HID, B_HID);
  localparam int W_H2  = W_H1  + layer_words(E_LEN, H_HID);
  localparam int W_WORDS = W_H2 + layer_words(H_HID, N_ACT);  // 1636

  function automatic layer_t mk_layer(int in_len, int out_len, int in_off,
                                      int out_off, int w_off, bit relu);
    layer_t l;
    l.in_len  = 8'(in_len);
    l.out_len = 8'(out_len);
    l.in_off  = 8'(in_off);
    l.out_off = 8'(out_off);
    l.w_off   = addr_t'(w_off);
    l.relu    = relu;
    return l;
  endfunction

  function automatic layer_t layer_desc(int idx);
    case (idx)
      L_EQ1:   return mk_layer(SELF_OBS, EQ_HID, SP_XQ,  SP_HQ1, W_EQ1, 1'b1);
      L_EQ2:   return mk_layer(EQ_HID,   EQ_HID, SP_HQ1, SP_E,   W_EQ2, 1'b1);
      L_B1:    return mk_layer(NB_OBS,   B_HID,  SP_XN,  SP_HB1, W_B1,  1'b1);
      L_B2:    return mk_layer(B_HID,    B_HID,  SP_HB1, SP_HB2, W_B2,  1'b1);
      L_H1:    return mk_layer(E_LEN,    H_HID,  SP_E,   SP_HH,  W_H1,  1'b1);
      default: return mk_layer(H_HID,    N_ACT,  SP_HH,  SP_A,   W_H2,  1'b0);
    endcase
  endfunction

  // Memory bus: a request is accepted in the cycle gnt is high; read data
  // returns with rvalid exactly one cycle after the grant.
  typedef struct packed {
    logic  req;
    logic  we;
    addr_t addr;
    fxp_t  wdata;
  } mem_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    fxp_t  rdata;
  } mem_rsp_t;

  // Coherence bus: every write accepted by the interconnect is broadcast.
  typedef struct packed {
    logic  valid;
    logic  [1:0] src;   // master that wrote
    addr_t addr;
  } snoop_t;

endpackage
