// Global buffer: the large, banked, double-buffered memory between the host
// side of the SoC and the CGRA.
//
// BANKS banks of BANK_WORDS 16-bit words (16 x 128K words = 4 MB by default).
// Every bank is split into two halves. While a data tile is processed
// (`run` high), the CGRA streams own half `active_half` of every bank and the
// host port owns the other half, so the next tile can be loaded while the
// current one is computed; between runs the host owns both halves.
//
// Streams. Bank b feeds CGRA column 2b (`to_cgra[2b]`) and receives column
// 2b+1 (`from_cgra[2b+1]`). Each direction is an ID/AG/SG port controller
// running on the shared run cycle counter, so the CGRA sees a fixed,
// deterministic latency: a load scheduled at cycle t reads the bank and
// drives `to_cgra` from cycle t+1; a store scheduled at cycle t writes the
// value present on `from_cgra` in cycle t. The port controllers of bank b
// are configured through the configuration bus at tile index GLB_CFG_BASE+b
// (struct glb_bank_cfg_t).
//
// The odd columns of `to_cgra` carry no load stream and are driven with
// zero, so a quarter of this module's output bits are constant by design.
// Host port: word address {bank, half, word}; writes take effect at the clock
// edge, read data appears one cycle after `host_re`. Host accesses to the
// half that is being streamed are ignored (read data is zero).
// The 4 MB capacity, banking and double buffering are the reference
// design's; bank count, the column assignment and the port protocol are this
// design's choices.
module global_buffer
  import ub_pkg::*;
#(
  parameter int unsigned BANKS      = 16,
  parameter int unsigned BANK_WORDS = 131072,
  parameter int unsigned COLS       = 2 * BANKS,
  parameter int unsigned HOST_AW    = $clog2(BANKS) + $clog2(BANK_WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               stall,
  input  logic               run,
  input  logic               active_half,
  input  time_t              cycle,
  input  cfg_bus_t           cfg_bus,
  input  logic               host_we,
  input  logic               host_re,
  input  logic [HOST_AW-1:0] host_addr,
  input  word_t              host_wdata,
  output word_t              host_rdata,
  output word_t [COLS-1:0]   to_cgra,
  input  word_t [COLS-1:0]   from_cgra
);

  localparam int unsigned HALF_WORDS = BANK_WORDS / 2;
  localparam int unsigned HW_AW      = $clog2(HALF_WORDS);
  localparam int unsigned BANK_W     = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned CFG_WORDS  = ($bits(glb_bank_cfg_t) + CFG_W - 1) / CFG_W;

  logic [BANK_W-1:0] h_bank;
  logic              h_half;
  logic [HW_AW-1:0]  h_word;
  assign {h_bank, h_half, h_word} = host_addr;

  logic              h_re_q;
  logic [BANK_W-1:0] h_bank_q;
  word_t [BANKS-1:0] bank_hdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_re_q   <= 1'b0;
      h_bank_q <= '0;
    end else begin
      h_re_q   <= host_re;
      h_bank_q <= h_bank;
    end
  end
  assign host_rdata = h_re_q ? bank_hdata[h_bank_q] : '0;

  for (genvar b = 0; b < int'(BANKS); b++) begin : g_bank
    logic [CFG_WORDS*CFG_W-1:0] cfg_q;
    glb_bank_cfg_t              bcfg;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cfg_q <= '0;
      else if (cfg_bus.we && cfg_bus.tile == CFG_TILE_W'(GLB_CFG_BASE + b) &&
               int'(cfg_bus.word) < int'(CFG_WORDS))
        cfg_q[int'(cfg_bus.word) * CFG_W +: CFG_W] <= cfg_bus.data;
    end
    assign bcfg = glb_bank_cfg_t'(cfg_q[$bits(glb_bank_cfg_t)-1:0]);

    logic  ld_en, st_en, ld_done, st_done;
    addr_t ld_addr, st_addr;
    lvl_t  ld_level, st_level;

    port_ctrl #(.USE_SG(1'b1)) u_load (
      .clk, .rst_n, .clear, .stall, .cycle, .ext_step (1'b0),
      .cfg (bcfg.load), .valid (ld_en), .addr (ld_addr), .level (ld_level), .done (ld_done)
    );
    port_ctrl #(.USE_SG(1'b1)) u_store (
      .clk, .rst_n, .clear, .stall, .cycle, .ext_step (1'b0),
      .cfg (bcfg.store), .valid (st_en), .addr (st_addr), .level (st_level), .done (st_done)
    );

    logic h_sel;      // host addresses this bank
    assign h_sel = (h_bank == BANK_W'(b));

    word_t [1:0] hq;  // host read data per half
    word_t [1:0] sq;  // stream read data per half

    for (genvar h = 0; h < 2; h++) begin : g_half
      word_t mem [HALF_WORDS];
      logic  stream_owned;
      assign stream_owned = run && (active_half == 1'(h));

      always_ff @(posedge clk) begin
        if (stream_owned) begin
          if (st_en) mem[st_addr[HW_AW-1:0]] <= from_cgra[2*b+1];
          if (ld_en) sq[h] <= mem[ld_addr[HW_AW-1:0]];
        end else begin
          if (host_we && h_sel && h_half == 1'(h)) mem[h_word] <= host_wdata;
          if (host_re && h_sel && h_half == 1'(h)) hq[h] <= mem[h_word];
          else if (host_re && h_sel)               hq[h] <= '0;
        end
      end
    end

    logic h_half_q;
    always_ff @(posedge clk) if (host_re && h_sel) h_half_q <= h_half;
    assign bank_hdata[b] = hq[h_half_q];

    assign to_cgra[2*b]   = sq[active_half];
    assign to_cgra[2*b+1] = '0;
  end

endmodule
