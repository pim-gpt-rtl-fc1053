// instr_scheduler: the ASIC's instruction scheduler.
//
// Holds the compiled instruction stream of one token-generation step (the
// paper compiles the computation graph into an instruction sequence) in an
// instruction memory loaded by the host, and issues it in order once start is
// pulsed. PIM commands and SRAM-to-PIM copies go to the address-mapping
// packetizer; computation-engine operations go to the engine.
//
// Issue rules (this design's; the paper states only that an instruction is
// issued when the units it needs are idle):
//  * OP_PIM waits for the packetizer. A read (RD, RD_MAC) also waits until
//    its responses (8 for a broadcast) fit in the data queue together with
//    those still outstanding (MAX_OUT), so read data can always drain.
//  * OP_GBLOAD / OP_STORE wait until the packetizer and the engine are idle
//    (they share an SRAM read port).
//  * OP_VOP / OP_SETS wait until the engine and packetizer are idle and no
//    read is outstanding, so the operands in the SRAM are complete.
//  * OP_WAIT waits until every read has returned and all queues are empty.
//  * OP_HALT stops; done goes high.
// PIM work and engine work therefore overlap: PIM commands keep issuing while
// the engine runs. An instruction takes 2 cycles (fetch, issue) when nothing
// waits. stall_cycles counts issue cycles spent waiting.
module instr_scheduler
  import pimgpt_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned MAX_OUT    = 16,
  parameter int unsigned NCH        = N_CH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          start,
  output logic                          done,
  output logic                          running,
  // packetizer
  output logic                          am_valid,
  input  logic                          am_ready,
  output instr_t                        am_instr,
  input  logic                          am_busy,
  // engine
  output logic                          eng_start,
  output vop_t                          eng_vop,
  input  logic                          eng_busy,
  output logic                          sets_we,
  output logic [2:0]                    sets_idx,
  output bf16_t                         sets_val,
  // read tracking
  input  logic                          rsp_consumed,
  input  logic                          queues_empty,
  output logic [31:0]                   stall_cycles,
  output logic [31:0]                   issued
);
  localparam int unsigned PA = $clog2(IMEM_DEPTH);
  typedef enum logic [1:0] {Q_IDLE, Q_FETCH, Q_ISSUE, Q_DONE} st_e;
  st_e     st;
  logic [PA-1:0] pc;
  instr_t  imem [IMEM_DEPTH];
  instr_t  ir;
  logic [7:0] outstanding;
  logic    is_rd, go;
  logic [7:0] nrd;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
    ir <= imem[pc];
  end

  always_comb begin
    is_rd = (ir.cmd == CMD_RD || ir.cmd == CMD_RD_MAC);
    nrd   = (ir.opc == OP_PIM && is_rd) ? (ir.bcast ? 8'(NCH) : 8'd1) : 8'd0;
    go = 1'b0;
    unique case (ir.opc)
      OP_PIM:    go = !am_busy && (32'(outstanding) + 32'(nrd) <= 32'(MAX_OUT));
      OP_GBLOAD,
      OP_STORE:  go = !am_busy && !eng_busy;
      OP_VOP,
      OP_SETS:   go = !am_busy && !eng_busy && outstanding == '0;
      OP_WAIT:   go = !am_busy && !eng_busy && outstanding == '0 && queues_empty;
      OP_HALT:   go = 1'b1;
      default:   go = 1'b1;
    endcase
    am_valid  = (st == Q_ISSUE) && go && (ir.opc inside {OP_PIM, OP_GBLOAD, OP_STORE});
    am_instr  = ir;
    eng_start = (st == Q_ISSUE) && go && ir.opc == OP_VOP;
    eng_vop   = ir.vop;
    sets_we   = (st == Q_ISSUE) && go && ir.opc == OP_SETS;
    sets_idx  = ir.vop.sd;
    sets_val  = ir.imm;
  end

  assign done    = (st == Q_DONE);
  assign running = (st == Q_FETCH) || (st == Q_ISSUE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= Q_IDLE; pc <= '0; outstanding <= '0; stall_cycles <= '0; issued <= '0;
    end else begin
      outstanding <= outstanding + ((am_valid && am_ready) ? nrd : 8'd0) - 8'(rsp_consumed);
      unique case (st)
        Q_IDLE, Q_DONE: if (start) begin pc <= '0; st <= Q_FETCH; end
        Q_FETCH: st <= Q_ISSUE;
        Q_ISSUE: begin
          if (go && (!am_valid || am_ready)) begin
            issued <= issued + 1;
            if (ir.opc == OP_HALT) st <= Q_DONE;
            else begin pc <= pc + 1'b1; st <= Q_FETCH; end
          end else begin
            stall_cycles <= stall_cycles + 1;
          end
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
