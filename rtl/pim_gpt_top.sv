// pim_gpt_top: the PIM-GPT system: the ASIC and NCH GDDR6-PIM channels.
//
// Each channel holds 16 banks with a MAC unit per bank and a 2 KB global
// buffer; the ASIC holds the instruction scheduler, queues, crossbars,
// packetizers, the 128 KB SRAM buffer and the computation engine. The
// off-chip GDDR6 link between them (16 pins at 16 Gb/s per channel, i.e. 256
// bits per 1 GHz cycle) is modelled as a direct 256-bit-per-cycle
// valid/ready connection per channel in each direction; the physical
// interface itself is not part of this RTL.
// Use: load the instruction memory and the SRAM through the host ports,
// pulse start, wait for done, read results from the SRAM.
module pim_gpt_top
  import pimgpt_pkg::*;
#(
  parameter int unsigned NCH        = N_CH,
  parameter int unsigned ROWS       = BANK_ROWS,
  parameter int unsigned VL         = VLANES,
  parameter int unsigned TL         = 16,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned TREFI      = T_REFI
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          host_we,
  input  logic [SROW_AW-1:0]            host_addr,
  input  logic [SROW_W-1:0]             host_wdata,
  input  logic                          host_re,
  output logic [SROW_W-1:0]             host_rdata,
  input  logic                          start,
  output logic                          done,
  output logic [31:0]                   stall_cycles,
  output logic [NCH-1:0]                refreshing
);
  logic [NCH-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  pim_req_t       req [NCH];
  pim_rsp_t       rsp [NCH];

  pim_gpt_asic #(.NCH(NCH), .VL(VL), .TL(TL), .IMEM_DEPTH(IMEM_DEPTH)) u_asic (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata,
    .host_we, .host_addr, .host_wdata, .host_re, .host_rdata,
    .start, .done, .stall_cycles,
    .ch_req_valid(req_valid), .ch_req_ready(req_ready), .ch_req(req),
    .ch_rsp_valid(rsp_valid), .ch_rsp_ready(rsp_ready), .ch_rsp(rsp));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    pim_channel #(.ROWS(ROWS), .TREFI(TREFI), .CH_ID(CH_AW'(c))) u_ch (
      .clk, .rst_n,
      .cmd_valid(req_valid[c]), .cmd_ready(req_ready[c]), .cmd(req[c]),
      .rsp_valid(rsp_valid[c]), .rsp_ready(rsp_ready[c]), .rsp(rsp[c]),
      .refreshing(refreshing[c]));
  end
endmodule
