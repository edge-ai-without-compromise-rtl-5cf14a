// neurram_top: the 48-core chip, cores arranged as 8 rows x 6 columns.
//
// Every core holds a 256x256 RRAM weight matrix and can run MVMs on its
// own; a model is spread over the cores by the host (one layer per core,
// duplicated layers, merged or split matrices), so the chip itself only
// has to let the host reach every core and run any set of cores in
// parallel. This top provides:
//   - per-core power enable (core_pwr_en); a powered-down core keeps its
//     weights, loses its registers and takes no commands;
//   - one command port broadcast to the cores selected by cmd_core_mask;
//     the command is taken by all selected cores in the same cycle, and
//     only when all of them are ready (cmd_ready);
//   - per-core done/busy/clk_en status;
//   - register access through the parallel random-access port (ra_*) or
//     through the SPI port; an SPI request wins the cycle it arrives;
//     rdata and read_g come from the core last addressed;
//   - the analog levels the test board supplies, as codes, shared by all
//     cores.
// The number of cores and their arrangement follow the paper; the port
// set and the broadcast/mask scheme are this design's choices (the paper
// gives the multi-core organisation, not the chip's I/O protocol).
//
// Lint note: rst_n is reported as used both as an asynchronous reset and
// synchronously. The synchronous use is only the "disable iff (!rst_n)"
// of the handshake assertions in the cores, which are not hardware.
module neurram_top
  import neurram_pkg::*;
#(
  parameter int unsigned ROWS    = 8,
  parameter int unsigned COLS    = 6,
  parameter int unsigned NCORE   = ROWS * COLS,
  parameter int unsigned D       = 16,
  parameter int unsigned WL_WAIT = 2,
  parameter int unsigned G_INIT  = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NCORE-1:0]     core_pwr_en,
  // commands
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  input  logic [NCORE-1:0]     cmd_core_mask,
  output logic                 cmd_ready,
  output logic [NCORE-1:0]     core_done,
  output logic [NCORE-1:0]     core_busy,
  output logic [NCORE-1:0]     core_clk_en,
  // random-access register port
  input  logic                 ra_valid,
  input  logic [5:0]           ra_core,
  input  bus_req_t             ra_req,
  output logic [REG_W-1:0]     rdata,
  // SPI register port
  input  logic                 spi_sclk,
  input  logic                 spi_cs_n,
  input  logic                 spi_mosi,
  output logic                 spi_miso,
  // board analog levels
  input  logic [7:0]           v_read,
  input  logic [7:0]           v_decr,
  input  logic [7:0]           v_lfsr,
  input  logic [7:0]           v_prog,
  input  logic [3:0]           wl_width_ns,
  output logic [G_W-1:0]       read_g
);
  logic            spi_valid;
  logic [5:0]      spi_core;
  bus_req_t        spi_req;
  logic            bus_valid;
  logic [5:0]      bus_core, last_core;
  bus_req_t        bus_req;

  spi_slave #(.CORE_W(6)) u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .req_valid(spi_valid), .req_core(spi_core), .req(spi_req), .rdata
  );

  always_comb begin
    if (spi_valid) begin
      bus_valid = 1'b1; bus_core = spi_core; bus_req = spi_req;
    end else begin
      bus_valid = ra_valid; bus_core = ra_core; bus_req = ra_req;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_core <= '0;
    else if (bus_valid) last_core <= bus_core;
  end

  logic [5:0] sel_core;
  assign sel_core = bus_valid ? bus_core : last_core;

  logic [NCORE-1:0]            ready;
  logic [NCORE-1:0][REG_W-1:0] core_rdata;
  logic [NCORE-1:0][G_W-1:0]   core_read_g;

  assign cmd_ready = &(ready | ~cmd_core_mask);

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    bus_req_t cbus;
    always_comb begin
      cbus = bus_req;
      if (!(bus_valid && bus_core == 6'(c))) begin
        cbus.we  = 1'b0;
        cbus.clr = 1'b0;
      end
    end
    cim_core #(.D(D), .WL_WAIT(WL_WAIT), .G_INIT(G_INIT)) u_core (
      .clk, .rst_n, .pwr_en(core_pwr_en[c]),
      .cmd_valid(cmd_valid && cmd_core_mask[c] && cmd_ready), .cmd_in(cmd),
      .cmd_ready(ready[c]), .done(core_done[c]), .busy(core_busy[c]),
      .clk_en(core_clk_en[c]), .bus(cbus), .rdata(core_rdata[c]),
      .v_read, .v_decr, .v_lfsr, .v_prog, .wl_width_ns, .read_g(core_read_g[c])
    );
  end

  assign rdata  = (32'(sel_core) < NCORE) ? core_rdata[sel_core]  : '0;
  assign read_g = (32'(sel_core) < NCORE) ? core_read_g[sel_core] : '0;

  initial assert (NCORE <= 64) else $error("core index is 6 bits");
endmodule
