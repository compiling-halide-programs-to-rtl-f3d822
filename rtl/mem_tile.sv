// Memory tile core: the physical unified buffer with a wide-fetch
// single-port SRAM.
//
// Data path (two input ports, two output ports):
//   data_in[i] -> AGG[i] --(4-word vector)--> mux -> SRAM (512 x 4 words)
//   SRAM --(1-cycle read)--> TB[0] / TB[1] -> output mux -> data_out[i]
//
// Schedules. Each AGG write side and each TB read side is a full ID/AG/SG
// port controller, configured by the compiler. Following the
// resource-sharing arrangement of the reference design, the AGG read
// schedules are also the SRAM write schedule: their enables are OR-ed into
// the SRAM write enable and encoded into the select of the AGG mux, and an
// ID+AG without a schedule of its own, stepped by that OR, produces the SRAM
// write address. The SRAM read port has its own ID/AG/SG; its enable goes
// through one register (the SRAM read delay) and then writes the read vector
// into a transpose buffer. Which TB receives it is chosen by a second AG on
// the SRAM read ID (an AG at a multiplexer select line, as the reference
// design does for port sharing); the selector's lowest bit names the TB.
//
// Chaining. An AG address is logical: its upper bits are a tile ID and its
// lower SRAM_AW bits the physical SRAM address (TileID = floor(a/C),
// PhysicalAddress = a mod C). A write or read takes effect only when the
// tile ID matches `cfg.tile_id`. Each TB slot remembers whether its vector
// came from this tile; an output port drives its own TB word when that bit
// is set and otherwise passes `chain_in[i]` from the next tile of the chain.
//
// The SRAM is single-ported: the compiler must not schedule a write and a
// read in the same cycle (asserted below); if it does, the write wins.
// Timing: a word on data_in[i] is taken in the cycle its AGG schedule fires;
// an SRAM read scheduled at cycle t can be emitted by the TB from t+2 on;
// data_out is combinational from the TB read schedule and chain_in.
// Lint reports rst_n as both asynchronous and synchronous: the synchronous
// use is only the `disable iff` of the two assertions, not logic.
module mem_tile
  import ub_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           stall,
  input  time_t          cycle,
  input  mem_cfg_t       cfg,
  input  word_t [1:0]    data_in,
  input  word_t [1:0]    chain_in,
  output word_t [1:0]    data_out,
  output logic  [1:0]    out_valid
);

  // ---------------- input side: aggregators and shared SRAM write schedule
  logic [1:0] agg_valid;
  vec_t [1:0] agg_vec;

  for (genvar i = 0; i < 2; i++) begin : g_agg
    aggregator u_agg (
      .clk, .rst_n, .clear, .stall, .cycle,
      .in_cfg    (cfg.agg_in[i]),
      .out_cfg   (cfg.agg_out[i]),
      .data_in   (data_in[i]),
      .vec_valid (agg_valid[i]),
      .vec_out   (agg_vec[i])
    );
  end

  logic  wr_en, wr_sel;
  addr_t wr_addr;
  lvl_t  wr_level;
  logic  wr_done, wr_step;
  vec_t  wr_vec;

  assign wr_sel = agg_valid[1];                 // encoder
  assign wr_en  = agg_valid[0] | agg_valid[1];  // OR of the shared schedules
  assign wr_vec = wr_sel ? agg_vec[1] : agg_vec[0];

  port_ctrl #(.USE_SG(1'b0)) u_wr_addr (
    .clk, .rst_n, .clear, .stall, .cycle,
    .ext_step (wr_en),
    .cfg      (cfg.sram_wr),
    .valid    (wr_step),
    .addr     (wr_addr),
    .level    (wr_level),
    .done     (wr_done)
  );

  // ---------------- SRAM read controller (ID + AG + SG + TB-select AG)
  logic  rd_en, rd_last, rd_done;
  lvl_t  rd_level;
  addr_t rd_addr, rd_sel_val;
  time_t rd_sched;
  logic [MAX_DIMS-1:0][CNT_W-1:0] rd_iter;

  iteration_domain u_rd_id (
    .clk, .rst_n, .clear,
    .step  (rd_en),
    .cfg   (cfg.sram_rd.id),
    .level (rd_level),
    .last  (rd_last),
    .done  (rd_done),
    .iter  (rd_iter)
  );

  schedule_gen u_rd_sg (
    .clk, .rst_n, .clear, .stall,
    .port_enable (cfg.sram_rd.enable),
    .domain_done (rd_done),
    .level       (rd_level),
    .cycle,
    .cfg         (cfg.sram_rd.sg),
    .en          (rd_en),
    .sched       (rd_sched)
  );

  address_gen #(.W(ADDR_W)) u_rd_ag (
    .clk, .rst_n, .clear,
    .step   (rd_en),
    .level  (rd_level),
    .delta  (cfg.sram_rd.ag.delta),
    .offset (cfg.sram_rd.ag.offset),
    .value  (rd_addr)
  );

  address_gen #(.W(ADDR_W)) u_rd_sel (
    .clk, .rst_n, .clear,
    .step   (rd_en),
    .level  (rd_level),
    .delta  (cfg.tb_sel.delta),
    .offset (cfg.tb_sel.offset),
    .value  (rd_sel_val)
  );

  // ---------------- chaining: tile-ID match on the logical addresses
  logic wr_match, rd_match;
  assign wr_match = wr_step && (wr_addr[ADDR_W-1:SRAM_AW] == cfg.tile_id);
  assign rd_match = rd_en   && (rd_addr[ADDR_W-1:SRAM_AW] == cfg.tile_id);

  logic               sram_cen, sram_wen;
  logic [SRAM_AW-1:0] sram_addr;
  vec_t               sram_rdata;

  assign sram_cen  = wr_match || rd_match;
  assign sram_wen  = wr_match;
  assign sram_addr = wr_match ? wr_addr[SRAM_AW-1:0] : rd_addr[SRAM_AW-1:0];

  sram_sp u_sram (
    .clk,
    .cen   (sram_cen),
    .wen   (sram_wen),
    .addr  (sram_addr),
    .wdata (wr_vec),
    .rdata (sram_rdata)
  );

  // ---------------- delay register between SRAM read and TB write
  logic rd_en_d, rd_match_d, rd_sel_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en_d    <= 1'b0;
      rd_match_d <= 1'b0;
      rd_sel_d   <= 1'b0;
    end else if (!stall) begin
      rd_en_d    <= rd_en;
      rd_match_d <= rd_match;
      rd_sel_d   <= rd_sel_val[0];
    end
  end

  // ---------------- output side: transpose buffers and chain muxes
  logic  [1:0] tb_valid, tb_own;
  word_t [1:0] tb_word;

  for (genvar i = 0; i < 2; i++) begin : g_tb
    transpose_buffer u_tb (
      .clk, .rst_n, .clear, .stall, .cycle,
      .in_cfg    (cfg.tb_in[i]),
      .out_cfg   (cfg.tb_out[i]),
      .vec_we    (rd_en_d && (rd_sel_d == 1'(i))),
      .vec_in    (sram_rdata),
      .vec_own   (rd_match_d),
      .out_valid (tb_valid[i]),
      .out_word  (tb_word[i]),
      .out_own   (tb_own[i])
    );
    assign out_valid[i] = tb_valid[i];
    assign data_out[i]  = (tb_valid[i] && tb_own[i]) ? tb_word[i] : chain_in[i];
  end

  // The compiler schedules the single SRAM port without conflicts.
  a_one_access: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(wr_match && rd_match));
  a_one_agg:    assert property (@(posedge clk) disable iff (!rst_n)
                                 !(agg_valid[0] && agg_valid[1]));

endmodule
