// red_pkg: types and constants shared by the RED energy-optimising eDRAM
// processing-in-memory template.
//
// The template has one reconfigurable eDRAM PIM macro (B banks of L
// subarrays of R x C 2T cells) and a unified eDRAM buffer. Both can run at
// one of NUM_VPD pull-down voltage (VPD) levels: a lower VPD gives a larger
// read-bitline swing, longer retention and higher access energy. The levels
// follow the evaluation (0, 200, 300, 400 and 500 mV). A reference voltage
// (VREF) is pre-computed for every VPD level, so VREF is addressed with the
// same level index.
//
// Data are INT8 activations and weights; partial sums are 32-bit (the
// output width is not given and is this design's choice). The unified
// buffer is byte addressed and accessed as 32-bit words.
package red_pkg;

  // Number of VPD (and VREF) levels: 0, 200, 300, 400, 500 mV.
  localparam int unsigned NUM_VPD  = 5;
  localparam int unsigned VSEL_W   = 3;
  // Activation / weight / partial-sum bit widths (I, W, O in the paper's Table 1).
  localparam int unsigned IBITS    = 8;
  localparam int unsigned WBITS    = 8;
  localparam int unsigned OBITS    = 32;
  // Widths of matrix sizes, addresses, energies and cycle counts.
  localparam int unsigned DIM_W    = 16;   // M, K, N up to 65535
  localparam int unsigned LOG_W    = 5;    // log2 of a tile size
  localparam int unsigned ADDR_W   = 20;   // unified-buffer byte address
  localparam int unsigned CYC_W    = 48;   // lifetimes and retention times in cycles
  localparam int unsigned EN_W     = 64;   // energies
  localparam int unsigned TAB_W    = 32;   // one spec-table entry

  typedef logic [VSEL_W-1:0] vsel_t;

  // Loop orders of Fig. 6 (outermost loop first).
  //  ORDER_LJI : for l (N/n) { for j (K/k) { for i (M/m) } }  weight tile reused over i
  //  ORDER_LIJ : for l (N/n) { for i (M/m) { for j (K/k) } }  output tile reused over j
  typedef enum logic [0:0] {ORDER_LJI = 1'b0, ORDER_LIJ = 1'b1} loop_order_e;

  // How weights are laid out in the cell array (Fig. 8).
  typedef enum logic [0:0] {MAP_BIT_SERIAL = 1'b0, MAP_BIT_PARALLEL = 1'b1} wmap_e;

  // Tile shape as base-2 logarithms (m, k, n are powers of two).
  typedef struct packed {
    logic [LOG_W-1:0] lm;
    logic [LOG_W-1:0] lk;
    logic [LOG_W-1:0] ln;
  } tile_t;

  // Result of the retention-aware scheduling: what the energy optimizer
  // holds and forwards to the PIM macro controller (Fig. 7 register fields).
  typedef struct packed {
    loop_order_e      order;      // Loop Order
    tile_t            tile;       // Tile Shape
    vsel_t            macro_vpd;  // Macro VPD
    vsel_t            macro_vref; // Macro VREF
    vsel_t            buf_vpd;    // Buf VPD
    vsel_t            buf_vref;   // Buf VREF
    logic [EN_W-1:0]  min_e;      // Min E
  } sched_result_t;

  // One row of the memory specification table, per VPD level.
  typedef struct packed {
    logic [TAB_W-1:0] p_acc;   // E_P_Acc : macro energy per access cycle
    logic [TAB_W-1:0] p_ref;   // E_P_Ref : macro energy per refresh of the weight tile
    logic [TAB_W-1:0] p_ret;   // T_P_Retention in clock cycles
    logic [TAB_W-1:0] b_acc;   // E_B_Acc : buffer energy per word access
    logic [TAB_W-1:0] b_ref;   // E_B_Ref : buffer energy per refresh of a tile
    logic [TAB_W-1:0] b_ret;   // T_B_Retention in clock cycles
  } spec_entry_t;

  // Retention times at 200 MHz. 100 us at the largest swing (VPD 0 mV) and
  // 9 us at the smallest are the paper's; the levels between are
  // interpolated by this design.
  function automatic logic [TAB_W-1:0] default_ret(input int unsigned lvl);
    case (lvl)
      0: return 32'd20000;  // 100 us
      1: return 32'd8000;   //  40 us
      2: return 32'd4000;   //  20 us
      3: return 32'd2400;   //  12 us
      default: return 32'd1800; // 9 us
    endcase
  endfunction

  // Illustrative relative energies per level (arbitrary units). Access
  // energy falls with VPD; refresh energy of a tile falls with it too.
  function automatic spec_entry_t default_spec(input int unsigned lvl);
    spec_entry_t e;
    case (lvl)
      0: begin e.p_acc = 32'd920; e.b_acc = 32'd46; end
      1: begin e.p_acc = 32'd600; e.b_acc = 32'd30; end
      2: begin e.p_acc = 32'd400; e.b_acc = 32'd20; end
      3: begin e.p_acc = 32'd320; e.b_acc = 32'd16; end
      default: begin e.p_acc = 32'd265; e.b_acc = 32'd13; end
    endcase
    e.p_ref = e.p_acc * 32'd64;
    e.b_ref = e.b_acc * 32'd64;
    e.p_ret = default_ret(lvl);
    e.b_ret = default_ret(lvl);
    return e;
  endfunction

  // Ceiling of a / 2^lg.
  function automatic logic [DIM_W-1:0] ceil_shr(input logic [DIM_W-1:0] a,
                                                input logic [LOG_W-1:0] lg);
    logic [DIM_W:0] s;
    s = {1'b0, a} + (({{DIM_W{1'b0}}, 1'b1} << lg) - 1'b1);
    return DIM_W'(s >> lg);
  endfunction

endpackage
