// pim_gpt_asic: the PIM-GPT ASIC: everything except the PIM channels.
//
// Request path (ASIC to PIM): instruction scheduler -> address-mapping
// packetizer -> request queue -> request crossbar -> channels. The write-back
// packetizer also feeds the request queue, ahead of the address-mapping
// packetizer, so that read data can always drain.
// Response path (PIM to ASIC): channels -> response crossbar -> data queue ->
// either the SRAM buffer (route RT_SRAM, word tag.addr + channel) or the
// write-back packetizer, which sends Key/Value results straight back to the
// reserved bank rows without touching the SRAM (the paper's two paths for
// data read from PIM).
// SRAM ports: read port A serves the engine while it runs and the packetizer
// otherwise; read port B serves the engine, or the host when nothing runs.
// The single write port serves the engine first, then the host (only while
// nothing runs), then the data queue; the data queue waits meanwhile.
// Host interface (this design's own): instruction-memory writes, SRAM row
// writes and reads, start and done.
module pim_gpt_asic
  import pimgpt_pkg::*;
#(
  parameter int unsigned NCH        = N_CH,
  parameter int unsigned VL         = VLANES,
  parameter int unsigned TL         = 16,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned QDEPTH     = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
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
  // PIM channels
  output logic [NCH-1:0]                ch_req_valid,
  input  logic [NCH-1:0]                ch_req_ready,
  output pim_req_t                      ch_req [NCH],
  input  logic [NCH-1:0]                ch_rsp_valid,
  output logic [NCH-1:0]                ch_rsp_ready,
  input  pim_rsp_t                      ch_rsp [NCH]
);
  // scheduler <-> packetizer / engine
  logic   am_valid, am_ready, am_busy, eng_start, eng_busy, sets_we, running;
  instr_t am_instr;
  vop_t   eng_vop;
  logic [2:0] sets_idx;
  bf16_t  sets_val;
  bf16_t  sreg [8];       // engine scalar registers, visible for debug
  logic [31:0] issued;    // instruction count, visible for debug

  // request path
  logic     ap_valid, ap_ready, wb_valid, wb_ready, rq_in_valid, rq_in_ready;
  pim_req_t ap_req, wb_req, rq_in, rq_out;
  logic     rq_out_valid, rq_out_ready;
  logic [$clog2(QDEPTH):0] rq_cnt, dq_cnt;

  // response path
  logic     rx_valid, rx_ready, dq_valid, dq_ready, wbin_valid, wbin_ready;
  pim_rsp_t rx, dq;
  logic     dq_to_sram;

  // SRAM
  logic                   s_rea, s_reb, s_we;
  logic [SROW_AW-1:0]     s_raddra, s_raddrb, s_waddr;
  logic [SROW_W-1:0]      s_rdataa, s_rdatab, s_wdata;
  logic [7:0]             s_wmask;
  logic                   e_rea, e_reb, e_we, a_re;
  logic [SROW_AW-1:0]     e_raddra, e_raddrb, e_waddr, a_raddr;
  logic [SROW_W-1:0]      e_wdata;

  instr_scheduler #(.IMEM_DEPTH(IMEM_DEPTH), .MAX_OUT(QDEPTH), .NCH(NCH)) u_sched (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .start, .done, .running,
    .am_valid, .am_ready, .am_instr, .am_busy,
    .eng_start, .eng_vop, .eng_busy, .sets_we, .sets_idx, .sets_val,
    .rsp_consumed(dq_valid && dq_ready),
    .queues_empty(rq_cnt == '0 && dq_cnt == '0 && !wb_valid),
    .stall_cycles, .issued);

  addr_map_packetizer u_amp (
    .clk, .rst_n, .cmd_valid(am_valid), .cmd_ready(am_ready), .cmd(am_instr), .busy(am_busy),
    .sram_re(a_re), .sram_raddr(a_raddr), .sram_rdata(s_rdataa),
    .out_valid(ap_valid), .out_ready(ap_ready), .out(ap_req));

  // request queue input: write-back first
  always_comb begin
    rq_in_valid = wb_valid || ap_valid;
    rq_in       = wb_valid ? wb_req : ap_req;
    wb_ready    = rq_in_ready;
    ap_ready    = rq_in_ready && !wb_valid;
  end

  sync_fifo #(.T(pim_req_t), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n, .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in),
    .out_valid(rq_out_valid), .out_ready(rq_out_ready), .out_data(rq_out), .count(rq_cnt));

  req_xbar #(.NCH(NCH)) u_reqx (
    .clk, .rst_n, .in_valid(rq_out_valid), .in_ready(rq_out_ready), .in(rq_out),
    .out_valid(ch_req_valid), .out_ready(ch_req_ready), .out(ch_req));

  rsp_xbar #(.NCH(NCH)) u_rspx (
    .clk, .rst_n, .in_valid(ch_rsp_valid), .in_ready(ch_rsp_ready), .in(ch_rsp),
    .out_valid(rx_valid), .out_ready(rx_ready), .out(rx));

  sync_fifo #(.T(pim_rsp_t), .DEPTH(QDEPTH)) u_dataq (
    .clk, .rst_n, .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx),
    .out_valid(dq_valid), .out_ready(dq_ready), .out_data(dq), .count(dq_cnt));

  // data queue output: to SRAM or to the write-back packetizer
  assign dq_to_sram = (dq.tag.route == RT_SRAM);
  assign wbin_valid = dq_valid && !dq_to_sram;
  assign dq_ready   = dq_to_sram ? !(e_we || (host_we && !running)) : wbin_ready;

  wb_packetizer u_wbp (
    .clk, .rst_n, .in_valid(wbin_valid), .in_ready(wbin_ready), .in(dq),
    .out_valid(wb_valid), .out_ready(wb_ready), .out(wb_req));

  compute_engine #(.VL(VL), .TL(TL), .SROWS(SRAM_ROWS)) u_eng (
    .clk, .rst_n, .start(eng_start), .vop(eng_vop), .busy(eng_busy),
    .sets_we, .sets_idx, .sets_val, .sreg,
    .rea(e_rea), .raddra(e_raddra), .rdataa(s_rdataa[VL*16-1:0]),
    .reb(e_reb), .raddrb(e_raddrb), .rdatab(s_rdatab[VL*16-1:0]),
    .we(e_we), .waddr(e_waddr), .wdata(e_wdata[VL*16-1:0]));

  if (VL * 16 < SROW_W) begin : g_pad
    assign e_wdata[SROW_W-1:VL*16] = '0;
  end

  // SRAM port arbitration
  logic [SWORD_AW-1:0] dq_word;
  assign dq_word = dq.tag.addr + SWORD_AW'(dq.ch);
  always_comb begin
    s_rea    = eng_busy ? e_rea : a_re;
    s_raddra = eng_busy ? e_raddra : a_raddr;
    s_reb    = eng_busy ? e_reb : host_re;
    s_raddrb = eng_busy ? e_raddrb : host_addr;
    if (e_we) begin
      s_we = 1'b1; s_waddr = e_waddr; s_wmask = (VL * 16 >= SROW_W) ? 8'hFF : 8'((1 << (VL*16/WORD_W)) - 1);
      s_wdata = e_wdata;
    end else if (host_we && !running) begin
      s_we = 1'b1; s_waddr = host_addr; s_wmask = 8'hFF; s_wdata = host_wdata;
    end else begin
      s_we = dq_valid && dq_to_sram; s_waddr = SROW_AW'(dq_word >> 3);
      s_wmask = 8'(1) << dq_word[2:0]; s_wdata = {(SROW_W/WORD_W){dq.data}};
    end
  end
  assign host_rdata = s_rdatab;

  sram_buffer u_sram (
    .clk, .rea(s_rea), .raddra(s_raddra), .rdataa(s_rdataa),
    .reb(s_reb), .raddrb(s_raddrb), .rdatab(s_rdatab),
    .we(s_we), .waddr(s_waddr), .wmask(s_wmask), .wdata(s_wdata));
endmodule
