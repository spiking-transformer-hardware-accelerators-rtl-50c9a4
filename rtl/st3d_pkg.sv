// st3d_pkg: constants and types shared by the spiking-transformer accelerators.
//
// The sizes below are the main configuration: a 16x128 MLP systolic array with
// 8-bit weights and 16-bit synaptic integration, a 16x16 reconfigurable
// attention array, 3072x128b global buffers and 96x128b / 96x256b local
// buffers. These numbers follow the published design. The membrane-potential
// width, the time-tile length of the MLP array and the glb_sel_e encoding are
// this implementation's own choices.
package st3d_pkg;

  // Memory macros (global buffers on the top tier, local buffers on the bottom tier)
  localparam int GLB_WORDS  = 3072;
  localparam int GLB_WIDTH  = 128;
  localparam int LBUF_WORDS = 96;
  localparam int LBUF_WIDTH = 128;
  localparam int XBUF_WIDTH = 256;

  // Spiking MLP accelerator: H x W array, weight / synaptic-integration widths
  localparam int MLP_H      = 16;
  localparam int MLP_W      = 128;
  localparam int MLP_WW     = 8;
  localparam int MLP_XW     = 16;
  localparam int MLP_VW     = 20;   // membrane potential width (own choice)
  localparam int MLP_T_TILE = 4;    // timesteps per column group (own choice)

  // Spiking self-attention accelerator
  localparam int ATT_H  = 16;       // query tokens per tile (array rows)
  localparam int ATT_W  = 16;       // key tokens per tile (array columns)
  localparam int ATT_AW = 5;        // log2(d)+1 with d = 128/8 = 16
  localparam int ATT_XW = 16;
  localparam int ATT_VW = 20;       // membrane potential width (own choice)

  // Host-side selection of a global buffer
  typedef enum logic [1:0] {
    GLB_ACT0 = 2'd0,   // Act GLB0: layer input spikes (Q, K, V for attention)
    GLB_ACT1 = 2'd1,   // Act GLB1: layer output spikes
    GLB_AUX  = 2'd2    // W GLB (MLP) or X GLB (attention)
  } glb_sel_e;

  // Mode of the reconfigurable attention array
  typedef enum logic {
    MODE_QK = 1'b0,    // mode 1: A = Q K^T, attention-stationary
    MODE_AV = 1'b1     // mode 2: X = A V, X streams left to right
  } attn_mode_e;

endpackage
