// tb_pkt.svh: packet builders for the testbenches that configure and probe
// cortical columns through the network (included inside a module that
// imports taibai_pkg).
function automatic packet_t pk_mem(pkt_type_e t, dest_t d, logic [3:0] sel, logic alt,
                                   int addr, logic [15:0] data);
  packet_t p;
  mem_body_t b;
  b.sel = sel; b.alt = alt; b.addr = 16'(addr); b.data = data; b.spare = '0;
  p.ptype = t; p.phase = PH_TRAVEL; p.dest = d; p.body = b;
  return p;
endfunction

function automatic packet_t pk_spike(pkt_type_e t, dest_t d, logic [3:0] tag, int index,
                                     int gaxon, logic [15:0] data);
  packet_t p;
  spike_body_t b;
  b.tag = tag; b.index = 11'(index); b.spare = 1'b0; b.gaxon = 11'(gaxon); b.data = data;
  p.ptype = t; p.phase = PH_TRAVEL; p.dest = d; p.body = b;
  return p;
endfunction

function automatic dest_t node(int x, int y);
  return {4'(x), 4'(y), 4'(x), 4'(y)};
endfunction

// Writes of one configuration item as a list of packets, appended to q.
// Entries wider than 16 bits take two packets (low half staged, then high).
function automatic void cfg_wide(ref packet_t q[$], input dest_t d, input logic [3:0] sel,
                                 input int addr, input logic [31:0] v);
  q.push_back(pk_mem(PKT_MEM_WR, d, sel, 1'b0, addr, v[15:0]));
  q.push_back(pk_mem(PKT_MEM_WR, d, sel, 1'b1, addr, v[31:16]));
endfunction

function automatic void cfg_word(ref packet_t q[$], input dest_t d, input logic [3:0] sel,
                                 input logic alt, input int addr, input logic [15:0] v);
  q.push_back(pk_mem(PKT_MEM_WR, d, sel, alt, addr, v));
endfunction
