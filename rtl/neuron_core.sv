// neuron_core: event-driven programmable neuron core (NC).
//
// A neuron core runs the neuron, synapse and learning programs of up to 256
// neurons. It is a seven-stage in-order pipeline - Fetch, Decode, Address,
// Read memory, Read back, Execute, Write back - in which an instruction can
// take one operand straight from data memory and write its result back to
// memory (a register-memory machine), so that "accumulate this weight into
// that neuron's current" is one instruction (LOCACC) instead of a load, an add
// and a store. The stage list, the memories (1K x 16-bit instruction memory,
// 8K x 16-bit unified data memory), the depth-4 input events FIFO, the output
// events memory and the instruction names come from the paper. The encoding,
// the 16 registers, the operand roles and the hazard handling are this
// design's own.
//
// Instruction word (32 bits, two 16-bit instruction-memory words):
//   op[31:26] rd[25:22] rs1[21:18] fp[17] imm[16] imm16[15:0]
//   with imm=0, imm16 = {off12, rs2}.
// Memory operand address: R[rs1] + imm16 (imm=1); R[rs1] + R[rs2] + off12
// for LD/ST with imm=0; R[rs1] + off12 otherwise.
//   RECV  rd, fire_pc : wait for an event; on one, R[rd..rd+2] <= neuron id,
//                       axon id, data. When the FIRE stage has begun and no
//                       event is waiting, jump to fire_pc instead.
//   SEND  rd, rs1, t  : mark neuron R[rd] fired (t=1: delayed spike) with
//                       16-bit value R[rs1].
//   FINDIDX rd,*rs1,rs2 : R[rd] <= index of axon R[rs2] in the bitmap at
//                       R[rs1] of off12 words (see nc_findidx); flag <= found.
//   LOCACC *mem, rd   : mem <= mem + R[rd]
//   DIFF  rd, *mem, rs2 : R[rd] <= R[rs2] * R[rd] + mem   (v = tau*v + c)
//   ADD/SUB/MUL/AND/OR/XOR rd, rs1, rs2|imm ; ADDC/SUBC/MULC only if flag
//   CMP   cond, rs1, rs2|imm : flag <= R[rs1] cond operand
//   MOV   rd, rs2|imm ; LD rd, *mem ; ST *mem, rd
//   B     target ; BC target (taken if flag != rd[0]); target = imm16 or R[rs1]
// fp selects FP16 instead of INT16 arithmetic.
//
// Hazards are resolved by interlock: Decode waits while an older instruction
// in Address..Execute will write a register it reads (a RECV counts as writing
// all), or, for a memory-reading instruction, while an older one will write
// memory. Branches are resolved in Execute and cost four bubbles. FINDIDX holds
// Execute for about floor(axon/16)+3 cycles; RECV holds it until an event arrives.
//
// Interface: run=0 holds the core at PC 0 (INIT stage). fire_start pulses once
// when the chip enters FIRE. ev_* is the event input (valid/ready). The output
// events memory is read and cleared by the scheduler through oe_*; oe_any
// is high while any fired bit is set. cfg is the
// scheduler's configuration/probe port to both memories; cfg_rdata is valid
// the cycle after a read request. idle is high while the core waits in RECV
// with nothing to do.
module neuron_core
  import taibai_pkg::*;
#(
  parameter int IMEM_WORDS = 1024,   // 16-bit words
  parameter int DMEM_WORDS = 8192,
  localparam int IAW = $clog2(IMEM_WORDS / 2),
  localparam int DAW = $clog2(DMEM_WORDS)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  input  logic        fire_start,
  // input events
  input  logic        ev_valid,
  output logic        ev_ready,
  input  nc_event_t   ev_data,
  // output events memory, scheduler side
  input  logic [3:0]  oe_word,
  output logic [15:0] oe_fired,
  output logic [15:0] oe_type,
  input  logic [4:0]  oe_float_idx,
  output logic [15:0] oe_float,
  input  logic        oe_clr_v,
  input  logic [7:0]  oe_clr_nid,
  output logic        oe_any,
  // configuration and probe
  input  nc_cfg_t     cfg,
  output logic [15:0] cfg_rdata,
  output logic        idle
);
  // ------------------------------------------------------------ pipeline regs
  typedef struct packed {
    logic           valid;
    logic [IAW-1:0] pc;
    instr_t         ins;
    logic [15:0]    a, b, c, m;
    logic [DAW-1:0] addr;
    logic           rd_we;     // writes R[rd]
    logic           mem_rd;
    logic           mem_wr;
  } pipe_t;

  pipe_t ra, rm, rb, ex, wb;   // Address, Read memory, Read back, Execute, Write back
  logic           d_valid;
  logic [IAW-1:0] d_pc, f_pc;
  instr_t         d_ins;
  logic [15:0]    wb_res;
  logic [2:0]     wb_nreg;     // 3 for RECV
  logic           wb_regwrite, wb_memwrite;

  logic [15:0] regs [16];
  logic        flag;
  logic        fire_pending;

  // ------------------------------------------------------------ memories
  logic [1:0][15:0]    im_q_lo, im_q_hi;
  logic [1:0]          im_re;
  logic [1:0][IAW-1:0] im_raddr;
  logic                im_we_lo, im_we_hi;

  logic [2:0]          dm_re;
  logic [2:0][DAW-1:0] dm_raddr;
  logic [2:0][15:0]    dm_q;
  logic [1:0]          dm_we;
  logic [1:0][DAW-1:0] dm_waddr;
  logic [1:0][15:0]    dm_wdata;

  logic ex_stall, hazard, redirect;
  logic [IAW-1:0] redirect_pc;

  assign im_we_lo = cfg.req && cfg.we && cfg.imem && !cfg.addr[0];
  assign im_we_hi = cfg.req && cfg.we && cfg.imem &&  cfg.addr[0];
  assign im_re[1]    = cfg.req && !cfg.we && cfg.imem;
  assign im_raddr[1] = cfg.addr[IAW:1];

  ram_mp #(.W(16), .DEPTH(IMEM_WORDS / 2), .NR(2), .NW(1)) u_imem_lo (
    .clk, .re(im_re), .raddr(im_raddr), .rdata(im_q_lo),
    .we(im_we_lo), .waddr(cfg.addr[IAW:1]), .wdata(cfg.wdata));
  ram_mp #(.W(16), .DEPTH(IMEM_WORDS / 2), .NR(2), .NW(1)) u_imem_hi (
    .clk, .re(im_re), .raddr(im_raddr), .rdata(im_q_hi),
    .we(im_we_hi), .waddr(cfg.addr[IAW:1]), .wdata(cfg.wdata));

  ram_mp #(.W(16), .DEPTH(DMEM_WORDS), .NR(3), .NW(2)) u_dmem (
    .clk, .re(dm_re), .raddr(dm_raddr), .rdata(dm_q),
    .we(dm_we), .waddr(dm_waddr), .wdata(dm_wdata));

  // configuration port of the data memory (read port 2, write port 0)
  assign dm_re[2]    = cfg.req && !cfg.we && !cfg.imem;
  assign dm_raddr[2] = cfg.addr[DAW-1:0];
  assign dm_we[0]    = cfg.req && cfg.we && !cfg.imem;
  assign dm_waddr[0] = cfg.addr[DAW-1:0];
  assign dm_wdata[0] = cfg.wdata;

  logic cfg_rd_imem_q, cfg_rd_hi_q;
  always_ff @(posedge clk) begin
    cfg_rd_imem_q <= cfg.imem;
    cfg_rd_hi_q   <= cfg.addr[0];
  end
  assign cfg_rdata = cfg_rd_imem_q ? (cfg_rd_hi_q ? im_q_hi[1] : im_q_lo[1]) : dm_q[2];

  // ------------------------------------------------------------ input events
  logic      fifo_valid, fifo_pop;
  nc_event_t fifo_q;
  sync_fifo #(.W($bits(nc_event_t)), .DEPTH(4)) u_evfifo (
    .clk, .rst,
    .in_valid(ev_valid), .in_ready(ev_ready), .in_data(ev_data),
    .out_valid(fifo_valid), .out_ready(fifo_pop), .out_data(fifo_q), .count());

  // ------------------------------------------------------------ output events
  logic oe_set_v;
  nc_out_events u_oe (
    .clk, .rst,
    .set_v(oe_set_v), .set_nid(ex.c[7:0]), .set_delay(ex.ins.imm[0]), .set_data(ex.a),
    .rd_word(oe_word), .fired_q(oe_fired), .type_q(oe_type),
    .float_idx(oe_float_idx), .float_q(oe_float),
    .clr_v(oe_clr_v), .clr_nid(oe_clr_nid), .any_fired(oe_any));

  // ------------------------------------------------------------ fetch
  logic prun;   // pipeline active
  assign prun = run && !rst;
  assign im_re[0]    = prun && (redirect || !(ex_stall || hazard));
  assign im_raddr[0] = redirect ? redirect_pc : f_pc;
  assign d_ins       = instr_t'({im_q_hi[0], im_q_lo[0]});

  always_ff @(posedge clk) begin
    if (!prun) begin
      f_pc    <= '0;
      d_pc    <= '0;
      d_valid <= 1'b0;
    end else if (redirect) begin
      f_pc    <= redirect_pc + 1'b1;
      d_pc    <= redirect_pc;
      d_valid <= 1'b1;
    end else if (!(ex_stall || hazard)) begin
      f_pc    <= f_pc + 1'b1;
      d_pc    <= f_pc;
      d_valid <= 1'b1;
    end
  end

  // ------------------------------------------------------------ decode
  function automatic logic writes_reg(opcode_e op);
    return op inside {OP_RECV, OP_FINDIDX, OP_DIFF, OP_ADD, OP_SUB, OP_MUL, OP_ADDC,
                      OP_SUBC, OP_MULC, OP_AND, OP_OR, OP_XOR, OP_MOV, OP_LD};
  endfunction
  function automatic logic reads_mem(opcode_e op);
    return op inside {OP_LD, OP_LOCACC, OP_DIFF};
  endfunction
  function automatic logic writes_mem(opcode_e op);
    return op inside {OP_ST, OP_LOCACC};
  endfunction

  function automatic logic [15:0] rf(logic [3:0] r);
    // register read with write-back bypass
    if (wb.valid && wb_regwrite) begin
      for (int k = 0; k < 3; k++)
        if (k < int'(wb_nreg) && (wb.ins.rd + 4'(k)) == r)
          return (wb.ins.op == OP_RECV) ? ((k == 0) ? 16'(wb.m[7:0]) : (k == 1) ? wb.a : wb.b)
                                        : wb_res;
    end
    return regs[r];
  endfunction

  // conflict of a later reader with an older writer
  function automatic logic conflict(pipe_t p, instr_t di);
    logic dm_rd;
    dm_rd = reads_mem(di.op);
    if (!p.valid) return 1'b0;
    if (p.ins.op == OP_RECV) return 1'b1;
    if (dm_rd && p.mem_wr) return 1'b1;
    if (p.rd_we && ((p.ins.rd == di.rd) || (p.ins.rd == di.rs1) ||
                    (!di.use_imm && p.ins.rd == di.imm[3:0]))) return 1'b1;
    return 1'b0;
  endfunction

  assign hazard = d_valid && (conflict(ra, d_ins) || conflict(rm, d_ins) ||
                              conflict(rb, d_ins) || conflict(ex, d_ins));

  // ------------------------------------------------------------ execute
  logic [15:0] alu_res;
  logic        alu_flag;
  nc_alu u_alu (
    .op(ex.ins.op), .fp(ex.ins.fp), .cond(ex.ins.rd),
    .a(ex.a), .b(ex.b), .c(ex.c), .m(ex.m),
    .result(alu_res), .cmp_flag(alu_flag));

  logic        fi_start, fi_busy, fi_done, fi_found, fi_running;
  logic [15:0] fi_idx;
  nc_findidx #(.AW(DAW)) u_findidx (
    .clk, .rst,
    .start(fi_start), .base(ex.a[DAW-1:0]), .nwords(ex.ins.imm[15:4]), .axon(ex.b),
    .busy(fi_busy), .done(fi_done), .idx(fi_idx), .found(fi_found),
    .mem_re(dm_re[1]), .mem_addr(dm_raddr[1]), .mem_rdata(dm_q[1]));

  logic ex_is_recv, ex_is_fi, recv_take, recv_fire;
  assign ex_is_recv = ex.valid && ex.ins.op == OP_RECV;
  assign ex_is_fi   = ex.valid && ex.ins.op == OP_FINDIDX;
  assign recv_take  = ex_is_recv && fifo_valid;
  assign recv_fire  = ex_is_recv && !fifo_valid && fire_pending;
  assign fifo_pop   = recv_take;
  assign fi_start   = ex_is_fi && !fi_running;
  assign ex_stall   = (ex_is_recv && !recv_take && !recv_fire) || (ex_is_fi && !fi_done);
  assign oe_set_v   = ex.valid && ex.ins.op == OP_SEND;
  assign idle       = !prun || (ex_is_recv && !fifo_valid && !fire_pending);

  logic br_taken;
  always_comb begin
    br_taken = 1'b0;
    if (ex.valid) begin
      if (ex.ins.op == OP_B)  br_taken = 1'b1;
      if (ex.ins.op == OP_BC) br_taken = (flag != ex.ins.rd[0]);
    end
    redirect    = br_taken || recv_fire;
    redirect_pc = recv_fire ? ex.ins.imm[IAW-1:0]
                : (ex.ins.use_imm ? ex.ins.imm[IAW-1:0] : ex.a[IAW-1:0]);
  end

  always_ff @(posedge clk) begin
    if (rst) fi_running <= 1'b0;
    else if (fi_done) fi_running <= 1'b0;
    else if (fi_start) fi_running <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst || !run) fire_pending <= 1'b0;
    else if (fire_start) fire_pending <= 1'b1;
    else if (recv_fire) fire_pending <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) flag <= 1'b0;
    else if (!ex_stall && ex.valid) begin
      if (ex.ins.op == OP_CMP) flag <= alu_flag;
      if (ex.ins.op == OP_FINDIDX) flag <= fi_found;
    end
  end

  // ------------------------------------------------------------ pipeline flow
  logic [15:0] d_rs1, d_rs2, d_rd;
  assign d_rs1 = rf(d_ins.rs1);
  assign d_rs2 = rf(d_ins.imm[3:0]);
  assign d_rd  = rf(d_ins.rd);

  always_ff @(posedge clk) begin
    if (!prun) begin
      ra.valid <= 1'b0; rm.valid <= 1'b0; rb.valid <= 1'b0;
      ex.valid <= 1'b0; wb.valid <= 1'b0;
    end else if (!ex_stall) begin
      // Decode -> Address
      if (redirect || hazard || !d_valid) ra.valid <= 1'b0;
      else begin
        ra.valid  <= 1'b1;
        ra.pc     <= d_pc;
        ra.ins    <= d_ins;
        ra.a      <= d_rs1;
        ra.b      <= d_ins.use_imm ? d_ins.imm : d_rs2;
        ra.c      <= d_rd;
        ra.m      <= '0;
        ra.addr   <= '0;
        ra.rd_we  <= writes_reg(d_ins.op);
        ra.mem_rd <= reads_mem(d_ins.op);
        ra.mem_wr <= writes_mem(d_ins.op);
      end
      // Address -> Read memory
      rm <= ra;
      rm.valid <= ra.valid && !redirect;
      if (ra.ins.use_imm)
        rm.addr <= DAW'(ra.a + ra.ins.imm);
      else if (ra.ins.op inside {OP_LD, OP_ST})
        rm.addr <= DAW'(ra.a + ra.b + {{4{ra.ins.imm[15]}}, ra.ins.imm[15:4]});
      else
        rm.addr <= DAW'(ra.a + {{4{ra.ins.imm[15]}}, ra.ins.imm[15:4]});
      // Read memory -> Read back (read issued below)
      rb <= rm;
      rb.valid <= rm.valid && !redirect;
      // Read back -> Execute
      ex <= rb;
      ex.valid <= rb.valid && !redirect;
      ex.m <= dm_q[0];
      // Execute -> Write back
      wb <= ex;
      if (recv_take) begin
        wb.m <= 16'(fifo_q.nid);
        wb.a <= 16'(fifo_q.axon);
        wb.b <= fifo_q.data;
      end
      wb_res      <= (ex.ins.op == OP_FINDIDX) ? fi_idx : alu_res;
      wb_nreg     <= (ex.ins.op == OP_RECV) ? 3'd3 : 3'd1;
      wb_regwrite <= ex.valid && writes_reg(ex.ins.op) && !recv_fire &&
                     (!(ex.ins.op inside {OP_ADDC, OP_SUBC, OP_MULC}) || flag);
      wb_memwrite <= ex.valid && writes_mem(ex.ins.op);
    end else begin
      wb.valid <= 1'b0;
    end
  end

  assign dm_re[0]    = prun && rm.valid && rm.mem_rd && !ex_stall;
  assign dm_raddr[0] = rm.addr;

  // Write back: registers and memory
  assign dm_we[1]    = wb.valid && wb_memwrite;
  assign dm_waddr[1] = wb.addr;
  assign dm_wdata[1] = (wb.ins.op == OP_ST) ? wb.c : wb_res;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 16; i++) regs[i] <= '0;
    end else if (wb.valid && wb_regwrite) begin
      if (wb.ins.op == OP_RECV) begin
        regs[wb.ins.rd]        <= wb.m;
        regs[wb.ins.rd + 4'd1] <= wb.a;
        regs[wb.ins.rd + 4'd2] <= wb.b;
      end else begin
        regs[wb.ins.rd] <= wb_res;
      end
    end
  end

  // a taken branch never coincides with a stalled execute stage
  assert property (@(posedge clk) disable iff (rst) !(redirect && ex_stall));
endmodule
