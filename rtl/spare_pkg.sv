// spare_pkg: constants, types and embedded-ROM contents shared by the SPARE
// spiking-network accelerator.
//
// Sizes follow the accelerator's published micro-architecture table: 32-bit
// data words, 8-bit synaptic weights, 8-bit membrane potentials, a 32 KB
// ROM-embedded SRAM per processing element (PE) and 32-entry spike buffers.
// Everything else here (address map of the look-up tables, fixed-point
// formats, the LIF and synapse constants, K of the exponential table) is this
// design's own choice.
//
// ROM contents. Every word of the PE memory carries one hard-wired ROM word
// (in silicon: which of two word lines each access transistor is wired to).
// rom_word() returns that pattern for a row:
//   rows   0..255  LUT_ISYN : synaptic current I_syn(w) = w >>> ISYN_SHIFT,
//                             offset = weight byte (two's complement)
//   rows 256..511  LUT_DVDT : LIF leak term dV(V) = -((V - LIF_EL) >>> LIF_LEAK_SHIFT),
//                             offset = Vmem byte (two's complement)
//   rows 512..527  LUT_EXP  : 2^(d/2^EXP_K) in unsigned Q1.15, offset = d
//   all other rows          : ROM word 0 (free for further tables)
// Values are stored sign-extended to 32 bits.
package spare_pkg;

  // ---- micro-architecture sizes -------------------------------------------
  localparam int DATA_W    = 32;
  localparam int WEIGHT_W  = 8;
  localparam int VMEM_W    = 8;
  localparam int MEM_BYTES = 32768;
  localparam int MEM_WORDS = MEM_BYTES / (DATA_W / 8);   // 8192 rows
  localparam int ADDR_W    = $clog2(MEM_WORDS);          // 13
  localparam int BUF_DEPTH = 32;
  localparam int TAG_W     = 4;                          // layer tag width
  localparam int CNT_W     = 16;                         // neuron / step counters

  // ---- look-up tables -------------------------------------------------------
  localparam int EXP_K          = 4;                     // 2^K entries in exp table
  localparam int LUT_ISYN_BASE  = 0;
  localparam int LUT_DVDT_BASE  = 256;
  localparam int LUT_EXP_BASE   = 512;
  localparam int ISYN_SHIFT     = 1;                     // I_syn = w / 2
  localparam int LIF_EL         = 0;                     // leak reversal level
  localparam int LIF_LEAK_SHIFT = 4;                     // g_L*dt/C = 1/16

  // Fixed-point constants of the exponential range reduction
  //   EXP_INV_LN2 = round(2^K / ln2 * 2^8)   (Q.8)
  //   EXP_LN2_K   = round(ln2 / 2^K * 2^16)  (Q0.16)
  localparam int EXP_INV_LN2 = 5909;
  localparam int EXP_LN2_K   = 2839;

  typedef enum logic [1:0] {
    LUT_ISYN = 2'd0,
    LUT_DVDT = 2'd1,
    LUT_EXP  = 2'd2
  } lut_e;

  // ---- memory transactions --------------------------------------------------
  typedef enum logic [1:0] {
    MEM_RAM_RD = 2'd0,
    MEM_RAM_WR = 2'd1,
    MEM_ROM_RD = 2'd2
  } mem_op_e;

  typedef struct packed {
    mem_op_e             op;
    logic [ADDR_W-1:0]   addr;
    logic [DATA_W-1:0]   wdata;
  } mem_req_t;

  // ---- host access ------------------------------------------------------------
  typedef enum logic [1:0] {
    HOST_GMEM   = 2'd0,   // global spike memory
    HOST_CU     = 2'd1,   // control-unit registers
    HOST_PE_RAM = 2'd2,   // RAM of one PE
    HOST_PE_CFG = 2'd3    // configuration registers of one PE
  } host_tgt_e;

  typedef struct packed {
    host_tgt_e          tgt;
    logic [7:0]         pe;
    logic               we;
    logic [15:0]        addr;
    logic [DATA_W-1:0]  wdata;
  } host_req_t;

  typedef struct packed {
    logic               we;
    logic               cfg;      // 1: configuration register, 0: RAM word
    logic [15:0]        addr;
    logic [DATA_W-1:0]  wdata;
  } pe_host_req_t;

  // ---- PE configuration -------------------------------------------------------
  typedef struct packed {
    logic               enable;
    logic               training;
    logic [TAG_W-1:0]   tag;
    logic [CNT_W-1:0]   n_in;
    logic [CNT_W-1:0]   n_out;
    logic [ADDR_W-1:0]  w_base;
    logic [ADDR_W-1:0]  v_base;
    logic [ADDR_W-1:0]  t_base;
    logic signed [7:0]  v_th;
    logic signed [7:0]  v_reset;
    logic [CNT_W-1:0]   n_steps;
    logic [7:0]         tau_inv;   // Q0.8, STDP time scale
    logic [7:0]         a_plus;    // STDP amplitude in weight LSBs
  } pe_cfg_t;

  // ---- PE activity counters ---------------------------------------------------
  typedef struct packed {
    logic [31:0] in_zero;     // input spikes that were '0' (synapse/neuron skipped)
    logic [31:0] in_one;      // input spikes that were '1' (events processed)
    logic [31:0] ram_rd;
    logic [31:0] ram_wr;
    logic [31:0] rom_rd;
    logic [31:0] fires;       // output spikes
    logic [31:0] w_updates;   // STDP weight updates
    logic [31:0] steps;       // time steps completed
  } pe_stats_t;

  // ---- ROM contents -----------------------------------------------------------
  typedef logic [15:0] exp_table_t [2**EXP_K];

  function automatic exp_table_t gen_exp_table();
    exp_table_t t;
    for (int d = 0; d < 2**EXP_K; d++)
      t[d] = 16'($rtoi(2.0 ** (real'(d) / real'(2**EXP_K)) * 32768.0 + 0.5));
    return t;
  endfunction

  localparam exp_table_t EXP_TABLE = gen_exp_table();

  function automatic logic [DATA_W-1:0] rom_word(logic [ADDR_W-1:0] row);
    logic signed [7:0]  b;
    logic signed [31:0] v;
    b = row[7:0];
    v = '0;
    if (int'(row) >= LUT_ISYN_BASE && int'(row) < LUT_ISYN_BASE + 256)
      v = 32'(b) >>> ISYN_SHIFT;
    else if (int'(row) >= LUT_DVDT_BASE && int'(row) < LUT_DVDT_BASE + 256)
      v = -((32'(b) - LIF_EL) >>> LIF_LEAK_SHIFT);
    else if (int'(row) >= LUT_EXP_BASE && int'(row) < LUT_EXP_BASE + 2**EXP_K)
      v = {16'd0, EXP_TABLE[row[EXP_K-1:0]]};
    return v;
  endfunction

endpackage
