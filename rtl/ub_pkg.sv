// Shared types and constants of the push-memory accelerator.
//
// All tiles, controllers and the global buffer use the widths defined here.
// The data word is 16 bits and the wide SRAM fetches four words, as in the
// reference design; the loop depth, counter and schedule widths are this
// implementation's own choice (the reference leaves them open).
//
// A "port controller" is the trio IterationDomain (ID), AddressGenerator (AG)
// and ScheduleGenerator (SG). Its configuration is the packed struct
// port_cfg_t: number of loop levels, the extent of each level, and for the AG
// and the SG a per-level delta plus a constant offset (recurrence form: the
// running value is increased by the delta of the outermost loop level that
// is incremented).
package ub_pkg;

  parameter int unsigned DATA_W     = 16;   // word width (reference: 16-bit PEs)
  parameter int unsigned FETCH_W    = 4;    // words per SRAM access (reference: 4)
  parameter int unsigned SRAM_DEPTH = 512;  // wide words per SRAM (reference: 512x64)
  parameter int unsigned SRAM_AW    = $clog2(SRAM_DEPTH);
  parameter int unsigned AGG_DEPTH  = 8;    // words per aggregator (reference: 4 to 8)
  parameter int unsigned TB_DEPTH   = 8;    // words per transpose buffer (reference: 4 to 8)
  parameter int unsigned MAX_DIMS   = 6;    // loop levels per iteration domain (own choice)
  parameter int unsigned LVL_W      = $clog2(MAX_DIMS);
  parameter int unsigned CNT_W      = 16;   // loop extent width (own choice)
  parameter int unsigned ADDR_W     = 16;   // logical address width of an AG (own choice)
  parameter int unsigned TIME_W     = 16;   // cycle counter / schedule width (own choice)
  parameter int unsigned TILEID_W   = ADDR_W - SRAM_AW;
  parameter int unsigned CFG_W      = 32;   // configuration bus data width (own choice)
  parameter int unsigned CFG_TILE_W = 10;   // tile field of a configuration address
  parameter int unsigned CFG_WORD_W = 8;    // word field of a configuration address
  parameter int unsigned NUM_TRACKS = 5;    // routing tracks per side and width (own choice)
  parameter int unsigned CB_SEL_W   = $clog2(4 * NUM_TRACKS + 1);

  typedef logic [DATA_W-1:0]           word_t;
  typedef word_t [FETCH_W-1:0]         vec_t;
  typedef logic [TIME_W-1:0]           time_t;
  typedef logic [ADDR_W-1:0]           addr_t;
  typedef logic [LVL_W-1:0]            lvl_t;

  typedef struct packed {
    logic [2:0]                        dims;    // active loop levels, 1..MAX_DIMS
    logic [MAX_DIMS-1:0][CNT_W-1:0]    extent;  // iterations of each level, level 0 innermost
  } id_cfg_t;

  typedef struct packed {
    logic [MAX_DIMS-1:0][ADDR_W-1:0]   delta;
    logic [ADDR_W-1:0]                 offset;
  } ag_cfg_t;

  typedef struct packed {
    logic [MAX_DIMS-1:0][TIME_W-1:0]   delta;
    logic [TIME_W-1:0]                 offset;
  } sg_cfg_t;

  typedef struct packed {
    logic    enable;
    id_cfg_t id;
    ag_cfg_t ag;
    sg_cfg_t sg;
  } port_cfg_t;

  // Processing element
  typedef enum logic [3:0] {
    OP_ADD, OP_SUB, OP_MUL, OP_ABSD, OP_MIN, OP_MAX, OP_SHL, OP_SHR,
    OP_ASHR, OP_AND, OP_OR, OP_XOR, OP_SEL, OP_PASSA, OP_MULH, OP_NOP
  } pe_op_t;

  typedef enum logic [2:0] {
    CMP_EQ, CMP_NE, CMP_LT, CMP_LE, CMP_GT, CMP_GE, CMP_ZERO, CMP_ONE
  } pe_cmp_t;

  typedef enum logic [1:0] { IN_DIRECT, IN_REG, IN_CONST } in_mode_t;

  typedef struct packed {
    pe_op_t              op;
    logic                is_signed;
    pe_cmp_t             cmp;
    in_mode_t            a_mode;
    in_mode_t            b_mode;
    word_t               a_const;
    word_t               b_const;
    logic [2:0][1:0]     bit_mode;   // per 1-bit input: 0 direct, 1 registered, 2 constant
    logic [2:0]          bit_const;
    logic [7:0]          lut;        // 3-input truth table
    logic                bit_out_lut;// 1: 1-bit output from LUT, 0: from COND
  } pe_cfg_t;

  // Memory tile: two input ports, two output ports
  typedef struct packed {
    logic [TILEID_W-1:0]  tile_id;
    port_cfg_t [1:0]      agg_in;    // AGG write side (tile input port)
    port_cfg_t [1:0]      agg_out;   // AGG read side = SRAM write schedule (shared)
    port_cfg_t            sram_wr;   // ID+AG of the SRAM write address (stepped by the shared SG)
    port_cfg_t            sram_rd;   // ID+AG+SG of the SRAM read
    ag_cfg_t              tb_sel;    // AG on the SRAM read ID selecting the receiving TB
    port_cfg_t [1:0]      tb_in;     // ID+AG of the TB write address (stepped by delayed read)
    port_cfg_t [1:0]      tb_out;    // ID+AG+SG of the TB read (tile output port)
  } mem_cfg_t;

  // Sides of a tile
  typedef enum logic [1:0] { SIDE_N, SIDE_E, SIDE_S, SIDE_W } side_t;

  // Routing configuration of one tile (16-bit and 1-bit networks)
  typedef struct packed {
    logic [3:0][NUM_TRACKS-1:0][2:0] sb16;
    logic [3:0][NUM_TRACKS-1:0][2:0] sb1;
    logic [1:0][CB_SEL_W-1:0]        cb16;   // core 16-bit inputs
    logic [2:0][CB_SEL_W-1:0]        cb1;    // core 1-bit inputs (PE only)
  } route_cfg_t;

  typedef struct packed { route_cfg_t route; pe_cfg_t  core; } pe_tile_cfg_t;
  typedef struct packed { route_cfg_t route; mem_cfg_t core; } mem_tile_cfg_t;

  // Configuration bus: one 32-bit word per write
  typedef struct packed {
    logic                  we;
    logic [CFG_TILE_W-1:0] tile;
    logic [CFG_WORD_W-1:0] word;
    logic [CFG_W-1:0]      data;
  } cfg_bus_t;

  // Global buffer bank: one stream into the CGRA, one stream out of it
  parameter int unsigned GLB_CFG_BASE = 768;  // configuration tile index of bank 0
  typedef struct packed { port_cfg_t load; port_cfg_t store; } glb_bank_cfg_t;

endpackage
