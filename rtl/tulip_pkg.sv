// tulip_pkg: types and constants shared by the TULIP binary-neural-network
// accelerator.
//
// The processing element (PE) is a cluster of four clocked threshold gates
// ("binary neurons"), each with weights [2,1,1,1] on its inputs a,b,c,d and a
// threshold T that is chosen every cycle. Every neuron input is picked by a
// 32-way routing multiplexer with a 5-bit select. The select code map below is
// this design's own ordering of the sources the routing mux is built from:
// 4 input-channel bits, 9 neighbour bits, the neuron's own output (feedback),
// the constants 0 and 1, and the 16 bits of the neuron's own local register.
// The nine neighbour bits are, for each of the three other neurons, its output
// and the values on its shared b and c lines.
//
// One control word (pe_ctrl_t) drives a whole PE for one cycle; the sequence
// generator broadcasts the same word to every PE of the chip.
package tulip_pkg;

  // ---- sizes taken from the paper ----------------------------------------
  localparam int unsigned NEURONS   = 4;   // neurons per PE
  localparam int unsigned NIN       = 4;   // inputs a,b,c,d per neuron
  localparam int unsigned LREG_BITS = 16;  // local register bits per neuron
  localparam int unsigned SEL_W     = 5;   // routing-mux select width
  localparam int unsigned THR_W     = 3;   // threshold code, T = 0..6

  // ---- routing-mux select codes (order is this design's choice) ----------
  localparam logic [SEL_W-1:0] SEL_IN0   = 5'd0;   // input channel bits 0..3
  localparam logic [SEL_W-1:0] SEL_NY0   = 5'd4;   // neighbour k output, k=0..2
  localparam logic [SEL_W-1:0] SEL_NB0   = 5'd7;   // neighbour k shared b line
  localparam logic [SEL_W-1:0] SEL_NC0   = 5'd10;  // neighbour k shared c line
  localparam logic [SEL_W-1:0] SEL_FB    = 5'd13;  // own output (feedback)
  localparam logic [SEL_W-1:0] SEL_ZERO  = 5'd14;  // constant 0
  localparam logic [SEL_W-1:0] SEL_ONE   = 5'd15;  // constant 1
  localparam logic [SEL_W-1:0] SEL_R0    = 5'd16;  // own local register bit 0..15

  // Width of the input-window index each neuron uses to pick its four
  // input-channel bits out of the processing unit's product vector.
  localparam int unsigned IDX_W = 9;

  // Per-neuron part of a control word.
  typedef struct packed {
    logic [NIN-1:0][SEL_W-1:0] sel;  // [0]=a (weight 2), [1]=b, [2]=c, [3]=d
    logic [NIN-1:0]            inv;  // invert the selected bit before weighting
    logic [THR_W-1:0]          thr;  // threshold T
    logic                      en;   // clock enable (neuron holds when 0)
    logic                      we;   // write the new output into the local register
    logic [3:0]                wa;   // local-register bit written
    logic [IDX_W-1:0]          ibase; // first of the 4 product bits on the input channel
  } neuron_ctrl_t;

  // One PE-wide control word, the same for every PE.
  typedef struct packed {
    neuron_ctrl_t [NEURONS-1:0] n;
    logic                       capture; // output buffer samples the result neuron
    logic [1:0]                 out_sel; // which neuron carries the PE result
  } pe_ctrl_t;

  localparam int unsigned PE_CTRL_W = $bits(pe_ctrl_t);

  // ---- chip-level sizes ---------------------------------------------------
  localparam int unsigned NPU      = 32;  // processing units (paper)
  localparam int unsigned PE_PER_PU = 8;  // TULIP-PEs per processing unit (paper)
  localparam int unsigned NIFM     = 32;  // IFMs held on chip (paper)
  localparam int unsigned PIX_W    = 12;  // input width, "up to 12-bit inputs" (paper)
  localparam int unsigned KMAX     = 7;   // largest kernel of the MAC (paper: 5x5, 7x7)
  localparam int unsigned KBIN     = 3;   // binary-layer kernel (paper: 288 inputs = 3x3x32)
  localparam int unsigned TH_BITS  = 10;  // threshold bits per PE (adder tree is 10 bits wide)
  localparam int unsigned NPROD    = KBIN*KBIN*NIFM;    // 288 products per PE
  localparam int unsigned PE_SLOT  = NPROD + TH_BITS;   // kernel bits per PE
  localparam int unsigned MAC_NW   = KMAX*KMAX*NIFM;    // 1568 MAC weights
  localparam int unsigned ACC_W    = 24;  // MAC accumulator (assumed)
  localparam int unsigned MAC_SLOT = MAC_NW + ACC_W;    // kernel bits per MAC
  localparam int unsigned PU_SLOT  = MAC_SLOT + PE_PER_PU*PE_SLOT;

  // memory-controller commands
  typedef enum logic [1:0] {CMD_KERNEL = 2'd0, CMD_IMAGE = 2'd1, CMD_FETCH = 2'd2} mem_cmd_e;

  // Mux select code of neighbour `k` (0..2) of neuron `self` as seen by
  // neuron `self`: neighbour k is neuron (self+k+1) mod 4.
  function automatic int unsigned nbr_index(int unsigned self, int unsigned other);
    return (other + NEURONS - self - 1) % NEURONS;
  endfunction

endpackage
