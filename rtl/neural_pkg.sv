// neural_pkg -- shared sizes, types and constants of the NEURAL spiking
// accelerator.
//
// The array sizes follow the size table printed with the architecture
// overview: 64 sparse detection units (an 8x8 tile of output positions),
// 256 processing elements, a 640-byte spike FIFO and a 1-kbyte weight FIFO.
// Weights are 8-bit two's-complement fixed point. The 3x3 convolution kernel,
// the 16-bit membrane potential and the packing of FIFO words are choices of
// this implementation.
package neural_pkg;

  // ---- numeric formats --------------------------------------------------
  localparam int unsigned W_BITS   = 8;   // weight width (8-bit fixed point)
  localparam int unsigned MP_BITS  = 16;  // membrane potential width
  localparam int unsigned KSIZE    = 3;   // convolution kernel is KSIZE x KSIZE
  localparam int unsigned KTAPS    = KSIZE * KSIZE;  // 9 kernel taps (a..i)
  localparam int unsigned KIDX_BITS = 4;  // index of one tap, 0..8
  localparam int unsigned KCNT_BITS = 4;  // vld_cnt of one event list, 0..9

  // ---- array sizes (size table of the architecture figure) --------------
  localparam int unsigned SDA_DIM   = 8;                  // 8x8 = 64 SDUs
  localparam int unsigned SDU_NUM   = SDA_DIM * SDA_DIM;  // 64
  localparam int unsigned PE_NUM    = 256;                // PE array size
  localparam int unsigned OC_PAR    = PE_NUM / SDU_NUM;   // 4 output channels at a time
  localparam int unsigned S_FIFO_BYTES = 640;
  localparam int unsigned W_FIFO_BYTES = 1024;

  // ---- feature map store --------------------------------------------------
  localparam int unsigned ROW_W      = 32;  // widest feature map row (CIFAR 32x32)
  localparam int unsigned COORD_BITS = 6;   // signed tile-relative coordinates

  // One SDU's event list: the kernel-tap indexes of the input spikes that
  // fall into this output position's 3x3 receptive field, and their count.
  typedef struct packed {
    logic [KCNT_BITS-1:0]              cnt;  // vld_cnt: number of valid entries
    logic [KTAPS-1:0][KIDX_BITS-1:0]   idx;  // idx[0] is the oldest event
  } event_list_t;

  localparam int unsigned EVENT_LIST_BITS = $bits(event_list_t);  // 40

  // S-FIFO word: the event lists of all SDUs for one input channel of a tile.
  localparam int unsigned WINDOW_BITS  = SDU_NUM * EVENT_LIST_BITS;          // 2560
  localparam int unsigned S_FIFO_DEPTH = (S_FIFO_BYTES * 8) / WINDOW_BITS;   // 2

  // W-FIFO word: either the 3x3 kernels of OC_PAR output channels for one
  // input channel, or (is_bias = 1) the OC_PAR biases that close a tile.
  localparam int unsigned WPAYLOAD_BITS = OC_PAR * KTAPS * W_BITS;           // 288
  typedef struct packed {
    logic                      is_bias;
    logic [WPAYLOAD_BITS-1:0]  payload;
  } wword_t;
  localparam int unsigned WWORD_BITS   = $bits(wword_t);                     // 289
  localparam int unsigned W_FIFO_DEPTH = (W_FIFO_BYTES * 8) / WWORD_BITS;    // 28

  // Write-back modes of the on-the-fly QKFormer unit.
  typedef enum logic [1:0] {
    WB_NORMAL = 2'd0,  // spikes are written to the spiking buffer unchanged
    WB_Q      = 2'd1,  // Q spikes only update atten_reg, nothing is written
    WB_K      = 2'd2   // K spikes are masked per channel by atten_reg
  } wb_mode_e;

  // Description of one convolution layer, given by the host with start.
  typedef struct packed {
    logic [5:0]         img_h;      // feature map height (input = output, stride 1)
    logic [5:0]         img_w;      // feature map width
    logic [9:0]         n_ic_main;  // input channels read from the spikemap buffer
    logic [9:0]         n_ic_sc;    // input channels read from the shortcutmap buffer
    logic [9:0]         n_oc;       // output channels
    logic [11:0]        src_base;   // spikemap address of input channel 0, row 0
    logic [11:0]        sc_base;    // shortcutmap address of shortcut channel 0, row 0
    logic [11:0]        dst_base;   // spikemap address of output channel 0, row 0
    logic               wr_sc;      // also copy the output into the shortcutmap buffer
    logic [MP_BITS-1:0] vth;        // firing threshold
    wb_mode_e           mode;       // write-back mode (normal, Q, K)
    logic               atten_clr;  // clear atten_reg before the layer
    logic [23:0]        w_base;     // off-chip word address of the layer's weights
  } layer_cfg_t;

  // Event counters of the top level, for observing the data-event execution.
  typedef struct packed {
    logic [31:0] tiles;            // tiles fired by the PE array
    logic [31:0] windows;          // windows passed through the S-FIFO
    logic [31:0] events;           // spikes mapped onto the SDU array
    logic [31:0] sfifo_full;       // cycles PipeSDA waited for S-FIFO room
    logic [31:0] wait_spikes;      // cycles the PE array had weights but no window
    logic [31:0] wait_weights;     // cycles the PE array had a window but no weights
    logic [31:0] fetch_overlap;    // cycles the WMU fetched while replaying
    logic [31:0] masked_rows;      // K rows zeroed by the QK token mask
    logic [31:0] fc_skips;         // empty pooling windows skipped by the FC core
  } stats_t;

endpackage
