// pe: processing element of a compute unit.
//
// Executes the processing stream: one 21b instruction per cycle from the
// instruction memory, each with an 18b compute field (opcode, src1, src2, dst)
// and three flow-control bits (ld0, ld1, st). There are no pipeline stages in
// the datapath: operands are read from the register file, the posit unit
// computes, and the result is written to dst in the same cycle.
//  - ld0/ld1 move one or two words from the load FIFO into the register file
//    (write ports 0 and 1, each to the destination register carried with the
//    word), in parallel with the compute operation. They are honoured on every
//    instruction. The words become readable in the next cycle.
//  - st pushes the result of an add/mul/max/min onto the store FIFO.
//  - The PE stalls while a requested load word is not in the FIFO or a
//    requested store finds the FIFO full.
//  - local barrier: waits until the store streaming unit is idle.
//  - global barrier: waits until the store streaming unit is idle, then holds
//    arrive high until the global sync unit answers go, and leaves in that
//    cycle.
//  - set_ld_stream_len: waits for the previous load stream to be fully issued,
//    then writes the 15b immediate {src1,src2,dst} to the load stream length.
//  - set_precision: immediate[1:0] selects 1x32b, 2x16b or 4x8b.
// The program length (number of instructions) is a register written by the
// host; done rises when that many instructions have executed. start restarts
// the program from address 0 with 32b precision; after reset the PE is idle
// (done low) until the first start.
// Timing: the instruction memory has a one-cycle read; the next instruction
// is fetched while the current one executes, so an unstalled PE runs one
// instruction per cycle. From the paper: field widths, the instruction set,
// single-cycle execution, the flow control and the barrier behaviour. This
// design's choices: bit positions, opcode values, immediates, the program
// length register and that loaded words are not forwarded within the cycle.
module pe
  import dpu_pkg::*;
#(
  parameter int unsigned IMEM_D     = IMEM_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PAW = $clog2(IMEM_D),
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [PAW:0]      plen,
  // instruction memory read port
  output logic              im_re,
  output logic [PAW-1:0]    im_raddr,
  input  instr_t            im_rdata,
  // load FIFO pop side
  input  logic [CW-1:0]     ldf_count,
  input  ld_data_t          ldf_data0,
  input  ld_data_t          ldf_data1,
  output logic [1:0]        ldf_pop_cnt,
  // store FIFO push side
  input  logic              stf_full,
  output logic              stf_push,
  output logic [WORD_W-1:0] stf_wdata,
  // load / store streaming unit status and control
  input  logic              st_idle,
  input  logic              ld_rem_zero,
  output logic              ldsl_we,
  output logic [14:0]       ldsl_val,
  // global sync unit
  output logic              arrive,
  input  logic              go,
  output logic              done
);

  logic [PAW:0]   pc;        // next address to fetch
  logic [PAW:0]   n_exec;    // executed instructions
  logic           rd_pending;
  logic           run;       // set by start, the PE is idle before the first start
  instr_t         hold, ins;
  logic           hold_v, ins_v;
  prec_e          prec;
  logic           exec;
  logic           ld_ok, st_ok, cond_ok;
  logic           is_alu;
  logic [1:0]     n_pop;
  logic [14:0]    imm;

  assign ins    = rd_pending ? im_rdata : hold;
  assign ins_v  = rd_pending | hold_v;
  assign is_alu = (ins.op inside {OP_ADD, OP_MUL, OP_MAX, OP_MIN});
  assign imm    = {ins.src1, ins.src2, ins.dst};
  assign done   = run && (n_exec == plen);

  // flow control
  assign n_pop  = 2'(ins.ld0) + 2'(ins.ld1);
  assign ld_ok  = 32'(ldf_count) >= 32'(n_pop);
  assign st_ok  = !(is_alu && ins.st) || !stf_full;

  always_comb begin
    unique case (ins.op)
      OP_LBARRIER: cond_ok = st_idle;
      OP_GBARRIER: cond_ok = st_idle && go;
      OP_SET_LDSL: cond_ok = ld_rem_zero;
      default:     cond_ok = 1'b1;
    endcase
  end

  assign arrive = done || (ins_v && ins.op == OP_GBARRIER && st_idle && ld_ok);
  assign exec   = run && ins_v && !done && ld_ok && st_ok && cond_ok;

  // fetch
  assign im_re    = run && !start && (pc < plen) && (!ins_v || exec);
  assign im_raddr = pc[PAW-1:0];

  // register file and posit unit
  logic [2:0]                we;
  logic [2:0][REG_AW-1:0]    waddr;
  logic [2:0][WORD_W-1:0]    wdata;
  logic [WORD_W-1:0]         opa, opb, res;
  ld_data_t                  w1_src;

  // with only ld1 set, the single word popped is the FIFO head
  assign w1_src = ins.ld0 ? ldf_data1 : ldf_data0;

  always_comb begin
    we       = '0;
    we[0]    = exec && ins.ld0;
    we[1]    = exec && ins.ld1;
    we[2]    = exec && is_alu;
    waddr[0] = ldf_data0.dst;
    wdata[0] = ldf_data0.data;
    waddr[1] = w1_src.dst;
    wdata[1] = w1_src.data;
    waddr[2] = ins.dst;
    wdata[2] = res;
  end

  register_file u_rf (
    .clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata),
    .raddr0(ins.src1), .raddr1(ins.src2), .rdata0(opa), .rdata1(opb));

  posit_unit u_posit (.op(ins.op), .prec(prec), .a(opa), .b(opb), .y(res));

  assign ldf_pop_cnt = exec ? n_pop : 2'd0;
  assign stf_push    = exec && is_alu && ins.st;
  assign stf_wdata   = res;
  assign ldsl_we     = exec && ins.op == OP_SET_LDSL;
  assign ldsl_val    = imm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc         <= '0;
      n_exec     <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
      hold       <= '0;
      prec       <= PREC_32;
      run        <= 1'b0;
    end else if (start) begin
      run        <= 1'b1;
      pc         <= '0;
      n_exec     <= '0;
      rd_pending <= 1'b0;
      hold_v     <= 1'b0;
      prec       <= PREC_32;
    end else begin
      rd_pending <= im_re;
      if (im_re) pc <= pc + 1'b1;
      if (exec)            hold_v <= 1'b0;
      else if (rd_pending) begin
        hold   <= im_rdata;
        hold_v <= 1'b1;
      end
      if (exec) begin
        n_exec <= n_exec + 1'b1;
        if (ins.op == OP_SET_PREC) prec <= prec_e'(imm[1:0]);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (exec && ins.op == OP_SET_PREC) |-> imm[1:0] != 2'd3)
    else $error("pe: set_precision with an undefined precision code");

endmodule
