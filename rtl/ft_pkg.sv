// Shared constants and types of the FlexHyCA fault-tolerant accelerator.
//
// Data are signed 8-bit integers; a multiplier produces a 16-bit product and
// the accumulators are 24 bits wide. An output neuron is the 8-bit window
// acc[trunc_lsb+7 : trunc_lsb] of its accumulator. The quantization
// constraint Q_SCALE is the lowest allowed trunc_lsb. The two bit-protection
// depths are the number of high bits of that window that are triplicated:
// NB_TH for ordinary neurons (2D array) and IB_TH for important neurons
// (DPPU). The defaults are the optimum the paper reports for fault rate I
// (BER 1e-4): Q_scale = 7, IB_TH (IN_TH) = 2, NB_TH = 1, Dot_size = 52.
package ft_pkg;
  localparam int DATA_W = 8;          // operand width
  localparam int PROD_W = 16;         // multiplier output width
  localparam int ACC_W  = 24;         // accumulator width
  localparam int TRUNC_W = 5;         // width of a truncation position 0..16

  localparam int DEF_Q_SCALE = 7;     // lowest allowed truncation LSB
  localparam int DEF_NB_TH   = 1;     // protected high bits, ordinary neurons
  localparam int DEF_IB_TH   = 2;     // protected high bits, important neurons
  localparam int DEF_DOT_SIZE = 52;   // DPPU multipliers

  localparam int ARRAY_ROWS = 32;
  localparam int ARRAY_COLS = 32;

  // Source of DPPU operands chosen by the data load controller.
  typedef enum logic {SRC_REUSE = 1'b0, SRC_DRAM = 1'b1} dppu_src_e;

  // One important neuron: its position in the 2D array.
  typedef struct packed {
    logic [4:0] col;
    logic [4:0] row;
  } pos_entry_t;

  // Lowest accumulator bit that may be important for a given quantization
  // constraint and protection depth: the top s bits of any window whose LSB is
  // at least q lie at or above q + 8 - s.
  function automatic int prot_lo(int q, int s);
    return q + DATA_W - s;
  endfunction
endpackage
