// tb_lif_prog.svh: a leaky integrate-and-fire neuron program for the neuron
// core, shared by the testbenches that run neurons (included inside a module
// that imports taibai_pkg).
//
// Data memory map of a core:
//   MODE (0)      0: event axon id is the weight's address (dense/local axon)
//                 1: axon id is a global axon id, looked up with FINDIDX in
//                    the neuron's connection bitmap (sparse connections)
//   DECAY (1)     FP16 leak factor tau;  VTH (2) FP16 threshold
//   V_BASE+n      membrane potential of neuron n (FP16)
//   CUR_BASE+n    accumulated input current of neuron n (FP16)
//   BM_BASE + n*BM_STRIDE: BM_NW bitmap words then the neuron's weights
// INTEG code (PC 0): per event, weight w found directly or through FINDIDX,
//   CUR[nid] += w * data (LOCACC). An unconnected axon is ignored.
// FIRE code (PC FIRE_PC): for n in 0..nn-1: v = tau*v + CUR[n] (DIFF),
//   CUR[n] = 0; if v >= VTH: v = 0 and SEND n with payload 1.0, as a delayed
//   spike if n >= dly; V[n] = v.
localparam int LIF_MODE = 0, LIF_DECAY = 1, LIF_VTH = 2;
localparam int LIF_V_BASE = 256, LIF_CUR_BASE = 512, LIF_BM_BASE = 2048;
localparam int LIF_BM_NW = 4, LIF_BM_STRIDE = 24;
localparam int LIF_FIRE_PC = 13, LIF_LEN = 38;

function automatic void lif_prog(output instr_t p [LIF_LEN], input int nn, input int dly);
  for (int i = 0; i < LIF_LEN; i++) p[i] = mk_instr(OP_NOP, 0, 0, 0, 0, 0);
  // ---- INTEG
  p[0]  = mk_instr(OP_RECV, 4'd1, 4'd0, 0, 1, 16'(LIF_FIRE_PC));
  p[1]  = mk_instr(OP_LD, 4'd7, 4'd0, 0, 1, 16'(LIF_MODE));
  p[2]  = mk_instr(OP_CMP, CC_EQ, 4'd7, 0, 1, 16'd0);
  p[3]  = mk_instr(OP_BC, 4'd0, 4'd0, 0, 1, 16'd9);          // dense -> 9
  p[4]  = mk_instr(OP_MUL, 4'd8, 4'd1, 0, 1, 16'(LIF_BM_STRIDE));
  p[5]  = mk_instr(OP_ADD, 4'd8, 4'd8, 0, 1, 16'(LIF_BM_BASE));
  p[6]  = mk_rr(OP_FINDIDX, 4'd9, 4'd8, 4'd2, 0, 12'(LIF_BM_NW));
  p[7]  = mk_instr(OP_BC, 4'd1, 4'd0, 0, 1, 16'd0);          // not connected -> RECV
  p[8]  = mk_rr(OP_ADD, 4'd2, 4'd8, 4'd9, 0, 12'd0);         // weight address
  p[9]  = mk_instr(OP_LD, 4'd6, 4'd2, 0, 1, 16'd0);
  p[10] = mk_rr(OP_MUL, 4'd6, 4'd6, 4'd3, 1, 12'd0);
  p[11] = mk_instr(OP_LOCACC, 4'd6, 4'd1, 1, 1, 16'(LIF_CUR_BASE));
  p[12] = mk_instr(OP_B, 4'd0, 4'd0, 0, 1, 16'd0);
  // ---- FIRE
  p[13] = mk_instr(OP_LD, 4'd13, 4'd0, 0, 1, 16'(LIF_DECAY));
  p[14] = mk_instr(OP_LD, 4'd15, 4'd0, 0, 1, 16'(LIF_VTH));
  p[15] = mk_instr(OP_MOV, 4'd12, 4'd0, 0, 1, 16'h3C00);     // payload 1.0
  p[16] = mk_instr(OP_MOV, 4'd1, 4'd0, 0, 1, 16'd0);
  p[17] = mk_instr(OP_LD, 4'd14, 4'd1, 0, 1, 16'(LIF_V_BASE));
  p[18] = mk_rr(OP_DIFF, 4'd14, 4'd1, 4'd13, 1, 12'(LIF_CUR_BASE));
  p[19] = mk_instr(OP_ST, 4'd0, 4'd1, 0, 1, 16'(LIF_CUR_BASE));
  p[20] = mk_rr(OP_CMP, CC_LT, 4'd14, 4'd15, 1, 12'd0);
  p[21] = mk_instr(OP_BC, 4'd0, 4'd0, 0, 1, 16'd28);         // below threshold -> 28
  p[22] = mk_instr(OP_MOV, 4'd14, 4'd0, 0, 1, 16'd0);
  p[23] = mk_instr(OP_CMP, CC_GE, 4'd1, 0, 1, 16'(dly));
  p[24] = mk_instr(OP_BC, 4'd1, 4'd0, 0, 1, 16'd27);         // n < dly -> 27
  p[25] = mk_instr(OP_SEND, 4'd1, 4'd12, 0, 1, SEND_DELAY);
  p[26] = mk_instr(OP_B, 4'd0, 4'd0, 0, 1, 16'd28);
  p[27] = mk_instr(OP_SEND, 4'd1, 4'd12, 0, 1, SEND_NEU);
  p[28] = mk_instr(OP_ST, 4'd14, 4'd1, 0, 1, 16'(LIF_V_BASE));
  p[29] = mk_instr(OP_ADD, 4'd1, 4'd1, 0, 1, 16'd1);
  p[30] = mk_instr(OP_CMP, CC_LT, 4'd1, 0, 1, 16'(nn));
  p[31] = mk_instr(OP_BC, 4'd0, 4'd0, 0, 1, 16'd17);
  p[32] = mk_instr(OP_B, 4'd0, 4'd0, 0, 1, 16'd0);
endfunction

// FP16 helpers for exactly representable test values (normal numbers only)
function automatic real lif_f2r(logic [15:0] h);
  real v;
  if (h[14:0] == 0) return 0.0;
  v = 1.0 + real'(h[9:0]) / 1024.0;
  for (int k = 15; k < int'(h[14:10]); k++) v = v * 2.0;
  for (int k = int'(h[14:10]); k < 15; k++) v = v / 2.0;
  return h[15] ? -v : v;
endfunction

function automatic logic [15:0] lif_r2f(real r);
  real x;
  int  e;
  logic s;
  s = (r < 0.0);
  x = s ? -r : r;
  if (x < 1.0 / 16384.0) return 16'h0000;
  e = 0;
  while (x >= 2.0) begin x = x / 2.0; e++; end
  while (x < 1.0)  begin x = x * 2.0; e--; end
  return {s, 5'(e + 15), 10'($rtoi((x - 1.0) * 1024.0))};
endfunction
