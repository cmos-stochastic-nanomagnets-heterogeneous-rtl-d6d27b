// pbit_pkg -- types, fixed-point formats and topology helpers shared by the
// p-computer RTL.
//
// Number formats. Weights J_ij and biases h_i are 10-bit two's complement
// fixed point with 6 integer and 3 fraction bits ("s[6][3]"), the format of
// the FPGA p-computer this design follows. The tanh table is addressed with an
// 8-bit s[4][3] value: the p-bit input is clipped to [-16, +15.875] first,
// which loses nothing because tanh is saturated there. Random words and table
// words are 32 bits.
//
// Topologies. TOPO_CHIMERA is a Chimera graph made of K4,4 unit cells laid on
// a grid CHIMERA_COLS cells wide (32 nodes = 2 x 2 cells, the deep Boltzmann
// machine of the design). Node i sits in cell i/8; inside the cidx, k = i%8,
// side = k/4 (0 = "vertical", 1 = "horizontal") and t = k%4. Nodes of the two
// sides of a cidx are all coupled; vertical node t couples to vertical node t
// of the cidx above and below, horizontal node t to horizontal node t of the
// cidx left and right. The graph is bipartite with class side ^ parity(cell).
// TOPO_FULL couples every pair (the 5-node full adder and the 4-node
// update-order network).
//
// Clock map. Five asynchronous clocks are shared by all p-bits. For the
// Chimera graph clocks 0..2 serve only class-0 nodes and clocks 3..4 only
// class-1 nodes, so p-bits that share a clock are never neighbours and a
// common edge updates an independent set, which is a valid parallel Gibbs
// step. For TOPO_FULL p-bit i uses clock i mod NUM_CLK; this is only correct
// when N <= NUM_CLK.
//
// LFSR taps are 32 different primitive degree-32 polynomials with five terms
// (so every p-bit's LFSR is maximal length, period 2^32-1); seeds are a fixed
// hash of the p-bit index.
package pbit_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int W_WEIGHT = 10;   // s[6][3]
  localparam int W_FRAC   = 3;
  localparam int W_LUTIN  = 8;    // s[4][3]
  localparam int W_RNG    = 32;
  localparam int NUM_CLK  = 5;
  localparam int CHIMERA_COLS = 2;

  typedef logic signed [W_WEIGHT-1:0] weight_t;

  typedef enum logic [0:0] {TOPO_CHIMERA = 1'b0, TOPO_FULL = 1'b1} topo_e;

  // Clock source of the p-bits.
  typedef enum logic [0:0] {SRC_DIGITAL = 1'b0, SRC_SMTJ = 1'b1} clk_src_e;

  // Register map, byte addresses of 32-bit registers. Bits [19:18] select
  // the region.
  localparam logic [1:0] REG_CTRL_REGION   = 2'd0;
  localparam logic [1:0] REG_BIAS_REGION   = 2'd1;  // h_i at 4*i
  localparam logic [1:0] REG_WEIGHT_REGION = 2'd2;  // J_ij at 4*(256*i+j)
  localparam logic [1:0] REG_SAMPLE_REGION = 2'd3;  // sample k at 4*k
  localparam logic [5:0] REG_CTRL      = 6'd0;  // [0] run [1] src_smtj [2] capture start (write 1)
  localparam logic [5:0] REG_STATUS    = 6'd1;  // [0] busy [1] done [31:16] samples stored
  localparam logic [5:0] REG_CLK_DIV   = 6'd2;  // digital clock period, system cycles
  localparam logic [5:0] REG_SMP_DIV   = 6'd3;  // sampling period, system cycles
  localparam logic [5:0] REG_SMP_COUNT = 6'd4;  // samples per capture
  localparam logic [5:0] REG_STATE     = 6'd5;  // live p-bit states
  localparam logic [5:0] REG_ID        = 6'd6;  // [7:0] N, [8] topology

  function automatic int chimera_class(int i);
    int cidx, row, col, side;
    cidx = i / 8;
    row  = cidx / CHIMERA_COLS;
    col  = cidx % CHIMERA_COLS;
    side = (i % 8) / 4;
    return side ^ ((row + col) % 2);
  endfunction

  function automatic bit adjacent(topo_e topo, int i, int j);
    int ci, cj, ri, rj, coi, coj, si, sj, ti, tj;
    if (i == j) return 1'b0;
    if (topo == TOPO_FULL) return 1'b1;
    ci = i / 8;  cj = j / 8;
    ri = ci / CHIMERA_COLS;  rj = cj / CHIMERA_COLS;
    coi = ci % CHIMERA_COLS; coj = cj % CHIMERA_COLS;
    si = (i % 8) / 4;  sj = (j % 8) / 4;
    ti = i % 4;  tj = j % 4;
    if (ci == cj) return si != sj;
    if (si != sj || ti != tj) return 1'b0;
    if (si == 0) return (coi == coj) && (ri - rj == 1 || rj - ri == 1);
    return (ri == rj) && (coi - coj == 1 || coj - coi == 1);
  endfunction

  function automatic int clk_of(topo_e topo, int i);
    if (topo == TOPO_FULL) return i % NUM_CLK;
    if (chimera_class(i) == 0) return (i / 2) % 3;
    return 3 + (i / 2) % 2;
  endfunction

  function automatic logic [31:0] lfsr_taps(int i);
    case (i % 32)
       0: return 32'hE0000200; // taps 32,31,30,10
       1: return 32'hD0000001; // taps 32,31,29,1
       2: return 32'hC2020000; // taps 32,31,26,18
       3: return 32'hC2000100; // taps 32,31,26,9
       4: return 32'hC2000040; // taps 32,31,26,7
       5: return 32'hC0400200; // taps 32,31,23,10
       6: return 32'hC0210000; // taps 32,31,22,17
       7: return 32'hC0108000; // taps 32,31,21,16
       8: return 32'hC0100010; // taps 32,31,21,5
       9: return 32'hC0020200; // taps 32,31,18,10
      10: return 32'hC0008002; // taps 32,31,16,2
      11: return 32'hC0004200; // taps 32,31,15,10
      12: return 32'hC0002008; // taps 32,31,14,4
      13: return 32'hC0001080; // taps 32,31,13,8
      14: return 32'hC0000140; // taps 32,31,9,7
      15: return 32'hC0000018; // taps 32,31,5,4
      16: return 32'hC0000005; // taps 32,31,3,1
      17: return 32'hB0400000; // taps 32,30,29,23
      18: return 32'hB0080000; // taps 32,30,29,20
      19: return 32'hB0008000; // taps 32,30,29,16
      20: return 32'hB0004000; // taps 32,30,29,15
      21: return 32'hA4800000; // taps 32,30,27,24
      22: return 32'hA4100000; // taps 32,30,27,21
      23: return 32'hA4000800; // taps 32,30,27,12
      24: return 32'hA4000080; // taps 32,30,27,8
      25: return 32'hA3000000; // taps 32,30,26,25
      26: return 32'hA2001000; // taps 32,30,26,13
      27: return 32'hA1008000; // taps 32,30,25,16
      28: return 32'hA0408000; // taps 32,30,23,16
      29: return 32'hA0402000; // taps 32,30,23,14
      30: return 32'hA0400008; // taps 32,30,23,4
      default: return 32'hA0102000; // taps 32,30,21,14
    endcase
  endfunction

  // Seed of p-bit i: a multiplicative hash, never the XNOR lock-up state.
  function automatic logic [31:0] lfsr_seed(int i, logic [31:0] base);
    logic [31:0] s;
    s = (base ^ 32'h9E3779B9) * (i + 1) + 32'h7F4A7C15;
    s = s ^ (s >> 15);
    if (s == 32'hFFFF_FFFF) s = 32'h1234_5678;
    return s;
  endfunction

  // tanh by exp series, for elaboration-time table generation only.
  function automatic real exp_r(real x);
    real s, t;
    int  k, n;
    // range reduction: exp(x) = exp(x/2^n)^(2^n)
    n = 0;
    while (x > 0.5 || x < -0.5) begin x = x / 2.0; n++; end
    s = 1.0; t = 1.0;
    for (k = 1; k < 20; k++) begin t = t * x / k; s = s + t; end
    for (k = 0; k < n; k++) s = s * s;
    return s;
  endfunction

  function automatic real tanh_r(real x);
    real e;
    if (x > 20.0) return 1.0;
    if (x < -20.0) return -1.0;
    e = exp_r(2.0 * x);
    return (e - 1.0) / (e + 1.0);
  endfunction

  // Table word for address a (s[4][3]): round(-tanh(beta*I) * 2^31), clipped.
  function automatic logic [31:0] lut_word(int a, real beta);
    real x, v;
    longint q;
    x = real'(a) / 8.0;
    v = -tanh_r(beta * x) * 2147483648.0;
    q = longint'(v);  // real to integer conversion rounds to nearest
    if (q > 64'sd2147483647) q = 64'sd2147483647;
    if (q < -64'sd2147483648) q = -64'sd2147483648;
    return q[31:0];
  endfunction
endpackage
