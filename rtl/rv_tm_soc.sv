// Top level: the reduced RISC-V core with its two tightly coupled memories,
// as used for Tsetlin-machine inference. The core's instruction bus reaches
// IMEM and its data bus reaches DMEM, each over AXI4-Lite through an
// axil_sram_bridge. Each memory has a second, host port: before reset is
// released the host writes the program into IMEM and the trained model
// (clause data) and the Booleanized test input into DMEM; after the program
// has run the host reads the predicted class back from DMEM. Both memories
// start at address 0 and addresses wrap modulo their size; the core starts
// at RESET_PC. Memory sizes and the host-port scheme are this design's; the
// core-AXI-TCM arrangement follows the source.
module rv_tm_soc
  import axil_pkg::*;
#(
  parameter int unsigned IMEM_BYTES = 65536,
  parameter int unsigned DMEM_BYTES = 8388608,
  parameter logic [31:0] RESET_PC   = 32'h0000_0000,
  localparam int unsigned IAW = $clog2(IMEM_BYTES / 4),
  localparam int unsigned DAW = $clog2(DMEM_BYTES / 4)
) (
  input  logic           clk,
  input  logic           rst_n,
  // IMEM host port (word addressed)
  input  logic           imem_host_en,
  input  logic [3:0]     imem_host_we,
  input  logic [IAW-1:0] imem_host_addr,
  input  logic [31:0]    imem_host_wdata,
  output logic [31:0]    imem_host_rdata,
  // DMEM host port (word addressed)
  input  logic           dmem_host_en,
  input  logic [3:0]     dmem_host_we,
  input  logic [DAW-1:0] dmem_host_addr,
  input  logic [31:0]    dmem_host_wdata,
  output logic [31:0]    dmem_host_rdata
);

  ax_t  i_ar;  logic i_ar_ready;
  r_t   i_r;   logic i_r_ready;
  ax_t  i_aw;  logic i_aw_ready;
  w_t   i_w;   logic i_w_ready;
  b_t   i_b;   logic i_b_ready;

  ax_t  d_ar;  logic d_ar_ready;
  r_t   d_r;   logic d_r_ready;
  ax_t  d_aw;  logic d_aw_ready;
  w_t   d_w;   logic d_w_ready;
  b_t   d_b;   logic d_b_ready;

  // The instruction bus never writes
  assign i_aw      = '0;
  assign i_w       = '0;
  assign i_b_ready = 1'b1;

  rv_core #(.RESET_PC(RESET_PC)) u_core (
    .clk, .rst_n,
    .ibus_ar(i_ar), .ibus_ar_ready(i_ar_ready), .ibus_r(i_r), .ibus_r_ready(i_r_ready),
    .dbus_ar(d_ar), .dbus_ar_ready(d_ar_ready), .dbus_r(d_r), .dbus_r_ready(d_r_ready),
    .dbus_aw(d_aw), .dbus_aw_ready(d_aw_ready), .dbus_w(d_w), .dbus_w_ready(d_w_ready),
    .dbus_b(d_b), .dbus_b_ready(d_b_ready)
  );

  // IMEM
  logic           im_en;
  logic [3:0]     im_we;
  logic [IAW-1:0] im_addr;
  logic [31:0]    im_wdata, im_rdata;

  axil_sram_bridge #(.WORDS(IMEM_BYTES / 4)) u_imem_axi (
    .clk, .rst_n,
    .ar(i_ar), .ar_ready(i_ar_ready), .r(i_r), .r_ready(i_r_ready),
    .aw(i_aw), .aw_ready(i_aw_ready), .w(i_w), .w_ready(i_w_ready),
    .b(i_b), .b_ready(i_b_ready),
    .mem_en(im_en), .mem_we(im_we), .mem_addr(im_addr), .mem_wdata(im_wdata),
    .mem_rdata(im_rdata)
  );

  tcm_ram #(.BYTES(IMEM_BYTES)) u_imem (
    .clk,
    .a_en(im_en), .a_we(im_we), .a_addr(im_addr), .a_wdata(im_wdata), .a_rdata(im_rdata),
    .b_en(imem_host_en), .b_we(imem_host_we), .b_addr(imem_host_addr),
    .b_wdata(imem_host_wdata), .b_rdata(imem_host_rdata)
  );

  // DMEM
  logic           dm_en;
  logic [3:0]     dm_we;
  logic [DAW-1:0] dm_addr;
  logic [31:0]    dm_wdata, dm_rdata;

  axil_sram_bridge #(.WORDS(DMEM_BYTES / 4)) u_dmem_axi (
    .clk, .rst_n,
    .ar(d_ar), .ar_ready(d_ar_ready), .r(d_r), .r_ready(d_r_ready),
    .aw(d_aw), .aw_ready(d_aw_ready), .w(d_w), .w_ready(d_w_ready),
    .b(d_b), .b_ready(d_b_ready),
    .mem_en(dm_en), .mem_we(dm_we), .mem_addr(dm_addr), .mem_wdata(dm_wdata),
    .mem_rdata(dm_rdata)
  );

  tcm_ram #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk,
    .a_en(dm_en), .a_we(dm_we), .a_addr(dm_addr), .a_wdata(dm_wdata), .a_rdata(dm_rdata),
    .b_en(dmem_host_en), .b_we(dmem_host_we), .b_addr(dmem_host_addr),
    .b_wdata(dmem_host_wdata), .b_rdata(dmem_host_rdata)
  );

endmodule
