// ai_mcu: the AI microcontroller's compute subsystem. The near-memory
// computing unit (NMCU) is tightly coupled to eight banks of 4-bit/cell
// embedded flash (4 Mb in all) that hold the weights and need no power in
// standby. A shared high-voltage pump serves the banks' program operations.
//
// Host side: the RISC-V core, SRAM, DMA, peripherals and the system bus are not
// part of this RTL. The NMCU's bus slave port (see nmcu) and a row-programming
// port for the flash are brought out instead, so that a host, a DMA engine or a
// testbench can load a model and run it.
//   pgm_start/erase with pgm_bank, pgm_addr, pgm_data: program one 256-cell row
//   of one bank to the given states (weights are stored as state = weight + 8)
//   or erase it; pgm_busy is high while any bank programs, pgm_done pulses.
// Reads: the NMCU reads the same word line of all eight banks at once and gets
// 8 x 1024 bits; rd_valid is taken from all banks together.
// The bank count, widths and the coupling are the chip's; the program port and
// its sharing of one pump are this design's choices.
module ai_mcu
  import nmcu_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // system bus slave (NMCU)
  input  logic                 bus_valid,
  input  logic                 bus_we,
  input  logic [11:0]          bus_addr,
  input  logic [31:0]          bus_wdata,
  output logic [31:0]          bus_rdata,
  output logic                 nmcu_busy,
  output logic                 nmcu_irq,
  // weight programming
  input  logic                 pgm_start,
  input  logic                 erase,
  input  logic [2:0]           pgm_bank,
  input  logic [ROW_W-1:0]     pgm_addr,
  input  logic [BANK_W-1:0]    pgm_data,
  output logic                 pgm_busy,
  output logic                 pgm_done,
  // pump observation
  output logic [3:0][15:0]     vpp_mv,
  output logic [3:0][15:0]     vps_mv,
  output logic                 hv_ready
);

  logic                           fl_rd_en;
  logic [ROW_W-1:0]               fl_addr;
  logic [N_BANKS-1:0]             bank_valid, bank_busy, bank_done, bank_hv_req;
  logic [N_BANKS-1:0][BANK_W-1:0] fl_data;
  logic                           hv_en, hv_clk_on;

  nmcu u_nmcu (
    .clk, .rst_n,
    .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .fl_rd_en, .fl_addr, .fl_rd_valid(&bank_valid), .fl_data,
    .busy(nmcu_busy), .irq_done(nmcu_irq)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    eflash_bank #(.SEED(32'h1234_5670 + b)) u_bank (
      .clk, .rst_n,
      .rd_en(fl_rd_en), .rd_addr(fl_addr), .rd_data(fl_data[b]), .rd_valid(bank_valid[b]),
      .pgm_start(pgm_start && pgm_bank == 3'(b)), .erase(erase && pgm_bank == 3'(b)),
      .pgm_addr, .pgm_data,
      .pgm_busy(bank_busy[b]), .pgm_done(bank_done[b]), .pgm_pulses(),
      .vps4_mv(vps_mv[3]), .hv_ready, .hv_req(bank_hv_req[b]), .wl_mv()
    );
  end

  assign hv_en    = |bank_hv_req;
  assign pgm_busy = |bank_busy;
  assign pgm_done = |bank_done;

  hv_generator u_hv (
    .clk, .rst_n, .en(hv_en), .vpp_mv, .vps_mv, .clk_on(hv_clk_on), .ready(hv_ready)
  );

  // Weights are not read while a row is being programmed.
  a_no_mvm_while_pgm: assert property (@(posedge clk) disable iff (!rst_n)
    fl_rd_en |-> !pgm_busy);

endmodule
