// pcomp_regs -- memory-mapped register bank of the p-computer.
//
// Sits behind axi4_slave on a simple register bus (one-cycle write, read data
// one cycle after reg_re). Byte addresses, bits [19:18] select a region:
//   0x00000 control  CTRL      [0] run, [1] clock source (1 = sMTJ),
//                              [2] write 1 to start a capture (self-clearing)
//            0x00004 STATUS    [0] capture busy, [1] done, [31:16] stored
//            0x00008 CLK_DIV   digital clock period in system cycles
//            0x0000C SMP_DIV   sampling period in system cycles
//            0x00010 SMP_COUNT samples per capture
//            0x00014 STATE     live p-bit states m[N-1:0]
//            0x00018 ID        [7:0] N, [8] topology (1 = all-to-all)
//   0x40000 + 4*i              bias h_i (s[6][3], bits [9:0])
//   0x80000 + 4*(256*i + j)    weight J_ij (s[6][3], bits [9:0])
//   0xC0000 + 4*k              sample k of the last capture (read only)
// Byte strobes are honoured. Only weights of edges that exist in the
// topology are stored; writes to other J_ij are ignored, so a Chimera build
// keeps 5 weights per p-bit instead of N. Biases and weights are write-only
// (they read as 0); the host
// keeps its own copy. The host writes both J_ij and J_ji of a symmetric
// network. Reset values: everything 0 except CLK_DIV = SMP_DIV = 37500
// (2 kHz at a 75 MHz system clock). The map is this design's choice.
// Accesses are whole words, so address bits [1:0] are not decoded; reads
// need only the control and sample regions, so read address bits [17:16]
// are not decoded either (lint reports them as unused).
module pcomp_regs #(
  parameter int              N      = 32,
  parameter pbit_pkg::topo_e TOPO   = pbit_pkg::TOPO_CHIMERA,
  parameter int              ADDR_W = 20,
  parameter int              W_DIV  = 24,
  parameter int              W_CNT  = 15,
  parameter int              W_SADDR = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                reg_we,
  input  logic [ADDR_W-1:0]   reg_waddr,
  input  logic [31:0]         reg_wdata,
  input  logic [3:0]          reg_wstrb,
  input  logic                reg_re,
  input  logic [ADDR_W-1:0]   reg_raddr,
  output logic [31:0]         reg_rdata,
  // control
  output logic                run,
  output logic                src_smtj,
  output logic                cap_start,
  output logic [W_DIV-1:0]    clk_div,
  output logic [W_DIV-1:0]    smp_div,
  output logic [W_CNT-1:0]    smp_count,
  output pbit_pkg::weight_t   J [N][N],
  output pbit_pkg::weight_t   h [N],
  // status
  input  logic                cap_busy,
  input  logic                cap_done,
  input  logic [W_CNT-1:0]    cap_stored,
  input  logic [N-1:0]        state,
  // sample memory read port
  output logic [W_SADDR-1:0]  smp_raddr,
  input  logic [31:0]         smp_rdata
);
  timeunit 1ns; timeprecision 1ps;
  import pbit_pkg::*;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic [1:0]  wreg_region, rreg_region, rreg_region_q;
  logic [5:0]  wreg_sel, rreg_sel;
  logic [7:0]  wi, wj;
  logic [31:0] ctrl_rdata_q;
  logic [31:0] ctrl_word;

  always_comb begin
    wreg_region = reg_waddr[19:18];
    wreg_sel    = reg_waddr[7:2];
    wi          = reg_waddr[17:10];
    wj          = reg_waddr[9:2];
    rreg_region = reg_raddr[19:18];
    rreg_sel    = reg_raddr[7:2];
    smp_raddr   = reg_raddr[W_SADDR+1:2];
    ctrl_word   = {30'b0, src_smtj, run};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      src_smtj  <= 1'b0;
      cap_start <= 1'b0;
      clk_div   <= W_DIV'(37500);
      smp_div   <= W_DIV'(37500);
      smp_count <= '0;
      for (int i = 0; i < N; i++) begin
        h[i] <= '0;
        for (int j = 0; j < N; j++) J[i][j] <= '0;
      end
    end else begin
      cap_start <= 1'b0;
      if (reg_we) begin
        case (wreg_region)
          REG_CTRL_REGION: case (wreg_sel)
            REG_CTRL: begin
              logic [31:0] v;
              v = merge(ctrl_word, reg_wdata, reg_wstrb);
              run       <= v[0];
              src_smtj  <= v[1];
              cap_start <= reg_wstrb[0] & reg_wdata[2];
            end
            REG_CLK_DIV:   clk_div   <= W_DIV'(merge(32'(clk_div), reg_wdata, reg_wstrb));
            REG_SMP_DIV:   smp_div   <= W_DIV'(merge(32'(smp_div), reg_wdata, reg_wstrb));
            REG_SMP_COUNT: smp_count <= W_CNT'(merge(32'(smp_count), reg_wdata, reg_wstrb));
            default: ;
          endcase
          REG_BIAS_REGION:
            for (int i = 0; i < N; i++)
              if (wi == 8'(i >> 8) && wj == 8'(i))
                h[i] <= W_WEIGHT'(merge(32'(h[i]), reg_wdata, reg_wstrb));
          REG_WEIGHT_REGION:
            for (int i = 0; i < N; i++)
              for (int j = 0; j < N; j++)
                if (adjacent(TOPO, i, j) && wi == 8'(i) && wj == 8'(j))
                  J[i][j] <= W_WEIGHT'(merge(32'(J[i][j]), reg_wdata, reg_wstrb));
          default: ;
        endcase
      end
    end
  end

  // read path: one-cycle latency, matching the sample memory
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_rdata_q  <= '0;
      rreg_region_q <= '0;
    end else if (reg_re) begin
      rreg_region_q <= rreg_region;
      ctrl_rdata_q  <= '0;
      if (rreg_region == REG_CTRL_REGION)
        case (rreg_sel)
          REG_CTRL:      ctrl_rdata_q <= ctrl_word;
          REG_STATUS:    ctrl_rdata_q <= {16'(cap_stored), 14'b0, cap_done, cap_busy};
          REG_CLK_DIV:   ctrl_rdata_q <= 32'(clk_div);
          REG_SMP_DIV:   ctrl_rdata_q <= 32'(smp_div);
          REG_SMP_COUNT: ctrl_rdata_q <= 32'(smp_count);
          REG_STATE:     ctrl_rdata_q <= 32'(state);
          REG_ID:        ctrl_rdata_q <= {23'b0, (TOPO == TOPO_FULL), 8'(N)};
          default: ;
        endcase
    end
  end

  always_comb reg_rdata = (rreg_region_q == REG_SAMPLE_REGION) ? smp_rdata : ctrl_rdata_q;
endmodule
