// Shared constants and types of the dual-dataflow (weight-stationary /
// output-stationary) CNN accelerator.
//
// DATA_W is the operand width of the PE multiplier (16-bit integers, as in the
// accelerator description). ACC_W, the width of partial sums, is this design's
// choice. pe_ctrl_t is the per-cycle command that the layer controller sends to
// every PE of the array at once (the array is driven in lock-step). op_desc_t
// describes one tile operation of a layer; the dataflow is chosen per operation.
package sqz_pkg;

  localparam int unsigned DATA_W   = 16;   // multiplier operand width
  localparam int unsigned ACC_W    = 32;   // partial-sum width (own choice)
  localparam int unsigned ADDR_W   = 16;   // global-buffer line address width
  localparam int unsigned RFA_W    = 8;    // register-file address field width
  localparam int unsigned EXT_AW   = 32;   // external (DRAM) line address width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Dataflow selected for one layer (or one tile of it).
  typedef enum logic {
    MODE_WS = 1'b0,   // weight stationary: weights held in PEs, pixels broadcast per row
    MODE_OS = 1'b1    // output stationary: outputs held in PE register files, weights broadcast
  } mode_e;

  // Command applied to every PE in the same cycle.
  typedef struct packed {
    logic             act_ld;   // input MUX: take operand from the PE above (top row: preload buffer)
    logic             mul_en;   // multiplier result used (0: product forced to 0)
    logic             add_top;  // adder's second operand: 1 = partial sum from PE above, 0 = register file
    logic             rf_clr;   // register-file operand read as 0
    logic             rf_we;    // write adder result into the register file
    logic             out_we;   // write adder result into the partial-sum output register
    logic [RFA_W-1:0] rf_addr;  // register-file entry (one per output channel in OS mode)
  } pe_ctrl_t;

  // One tile operation. Addresses count global-buffer lines (one line = N data words).
  typedef struct packed {
    mode_e             mode;
    logic [ADDR_W-1:0] w_base;    // WS: N weight rows; OS: C*F*F weight lines, K filters per line
    logic [ADDR_W-1:0] in_base;   // WS: first pixel line; OS: input tile, 2 (stride 1) or 3 (stride 2) lines per row
    logic [ADDR_W-1:0] out_base;  // first output line
    logic [15:0]       n_pix;     // WS: number of pixel vectors streamed
    logic [3:0]        f;         // OS: filter size F (F x F)
    logic [11:0]       n_ch;      // OS: number of input channels C
    logic [8:0]        n_k;       // OS: number of filters K held in the register files
    logic [4:0]        shift;     // result requantisation: arithmetic right shift before saturation
    logic              os_keep;   // OS: do not clear the register files, keep accumulating
    logic              os_hold;   // OS: do not drain, leave the partial sums in the register files
    logic              os_s2;     // OS: stride 2 (output pixel (r, c) reads input (2r+ky, 2c+kx))
  } op_desc_t;

  // Row sequence for the preload buffer (see preload_buffer for the meaning).
  typedef struct packed {
    logic [ADDR_W-1:0] base;       // first line of the block
    logic [ADDR_W-1:0] ch_stride;  // lines per channel
    logic [11:0]       n_ch;       // channels
    logic [4:0]        n_kx;       // column offsets per channel
    logic [5:0]        rows;       // rows of phase 0
    logic [5:0]        rows1;      // rows of phase 1 (0: no phase 1)
    logic              y_off;      // phase 0 takes rows y = 2i + y_off when step2 (phase 1: 2i + !y_off)
    logic              step2;      // row y spacing 2 and word c = pixel 2c + kx (stride 2)
    logic [1:0]        n_lines;    // lines per row: 1 = the row is one line, 2 or 3 = window over them
  } pl_cmd_t;

  // Global-buffer copy command for the DMA controller.
  typedef enum logic {
    DMA_LOAD  = 1'b0,   // external memory -> global buffer
    DMA_STORE = 1'b1    // global buffer -> external memory
  } dma_dir_e;

  typedef struct packed {
    dma_dir_e          dir;
    logic [EXT_AW-1:0] ext_addr;  // first external line
    logic [ADDR_W-1:0] gb_addr;   // first global-buffer line
    logic [ADDR_W-1:0] len;       // number of lines
  } dma_cmd_t;

  // Round-to-floor shift then saturate a partial sum to a data word.
  function automatic data_t requant(acc_t v, logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < acc_t'(-32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction

endpackage
