// snn_pkg: constants, types and flit helpers shared by the spiking-network chip.
//
// A flit is one 45-bit word (bits 0..44). The field positions follow the flit
// drawing of the design: bit 0 is the type (0 = spike, 1 = memory access),
// bits 1..9 the destination PE as X (1..3), Y (4..6), Z (7..9), then for a
// spike the source PE (10..18) and the firing neuron ID (19..31), and for a
// memory access a memory type (10..11), a read/write bit (12) and data
// (13..31). Bits 32..44 form the parity field; this design puts one even
// parity bit over bits 0..31 in bit 32 and keeps 33..44 zero (its own choice).
// Numeric codes of the type and memory-type fields are this design's choice.
package snn_pkg;

  localparam int FLIT_W   = 45;   // bits 0..44
  localparam int PE_AW    = 9;    // 3 bits each for X, Y, Z
  localparam int COORD_W  = 3;
  localparam int NID_W    = 13;   // neural ID field, bits 19..31
  localparam int DATA_W   = 19;   // memory data field, bits 13..31
  localparam int N_PORTS  = 7;    // router ports: L, N, E, W, S, U, D

  typedef logic [FLIT_W-1:0] flit_t;
  typedef logic [PE_AW-1:0]  pe_addr_t;

  typedef enum logic [2:0] {
    P_L = 3'd0, P_N = 3'd1, P_E = 3'd2, P_W = 3'd3,
    P_S = 3'd4, P_U = 3'd5, P_D = 3'd6
  } port_e;

  typedef enum logic [1:0] {
    MEM_WEIGHT = 2'd0,   // weight RAM (serial burst)
    MEM_SPARSE = 2'd1,   // address look-up tables
    MEM_OTHER  = 2'd2,   // other registers
    MEM_REPLY  = 2'd3    // data returned by a read
  } mem_type_e;

  // Field extraction. Figure bit i is flit[i].
  function automatic logic f_is_mem(flit_t f);          return f[0];              endfunction
  function automatic pe_addr_t f_dest(flit_t f);        return f[9:1];            endfunction
  function automatic pe_addr_t f_src(flit_t f);         return f[18:10];          endfunction
  function automatic logic [NID_W-1:0] f_nid(flit_t f); return f[31:19];          endfunction
  function automatic mem_type_e f_mtype(flit_t f);      return mem_type_e'(f[11:10]); endfunction
  function automatic logic f_write(flit_t f);           return f[12];             endfunction
  function automatic logic [DATA_W-1:0] f_data(flit_t f); return f[31:13];        endfunction
  function automatic logic f_parity_ok(flit_t f);       return (^f[31:0]) == f[32]; endfunction

  // Coordinates: X in destination bits 1..3, Y in 4..6, Z in 7..9.
  function automatic logic [COORD_W-1:0] a_x(pe_addr_t a); return a[2:0]; endfunction
  function automatic logic [COORD_W-1:0] a_y(pe_addr_t a); return a[5:3]; endfunction
  function automatic logic [COORD_W-1:0] a_z(pe_addr_t a); return a[8:6]; endfunction
  function automatic pe_addr_t mk_addr(int x, int y, int z);
    return pe_addr_t'({z[2:0], y[2:0], x[2:0]});
  endfunction

  function automatic flit_t add_parity(flit_t f);
    flit_t r = f;
    r[44:32] = '0;
    r[32]    = ^f[31:0];
    return r;
  endfunction

  function automatic flit_t mk_spike(pe_addr_t dst, pe_addr_t src, logic [NID_W-1:0] nid);
    flit_t f = '0;
    f[0]     = 1'b0;
    f[9:1]   = dst;
    f[18:10] = src;
    f[31:19] = nid;
    return add_parity(f);
  endfunction

  function automatic flit_t mk_mem(pe_addr_t dst, mem_type_e mt, logic wr, logic [DATA_W-1:0] d);
    flit_t f = '0;
    f[0]     = 1'b1;
    f[9:1]   = dst;
    f[11:10] = mt;
    f[12]    = wr;
    f[31:13] = d;
    return add_parity(f);
  endfunction

endpackage
