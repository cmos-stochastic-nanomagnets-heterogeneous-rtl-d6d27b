// tb_pcomp_regs -- register bank, driven directly on its register bus.
//
// A 32-p-bit Chimera bank. Random writes (with random byte strobes) go to
// the control registers, the biases and every J_ij, including pairs that
// are not edges of the graph. A shadow model predicts every output: J/h
// arrays (non-edges must stay 0), run, clock source, dividers, sample count,
// and the one-cycle capture-start pulse. Reads check the one-cycle latency,
// STATUS/STATE/ID assembly from the inputs, and the sample-memory mux.
module tb_pcomp_regs;
  timeunit 1ns; timeprecision 1ps;
  import pbit_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic reg_we = 0, reg_re = 0;
  logic [19:0] reg_waddr = 0, reg_raddr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic [3:0]  reg_wstrb = 0;
  logic run, src_smtj, cap_start;
  logic [23:0] clk_div, smp_div;
  logic [14:0] smp_count;
  weight_t J [N][N];
  weight_t h [N];
  logic cap_busy = 0, cap_done = 0;
  logic [14:0] cap_stored = 0;
  logic [N-1:0] state = 0;
  logic [13:0] smp_raddr;
  logic [31:0] smp_rdata;
  int checks = 0, failures = 0;

  weight_t sJ [N][N];
  weight_t sh [N];
  logic [31:0] sctrl, sclk, ssmp, scnt;

  pcomp_regs #(.N(N), .TOPO(TOPO_CHIMERA)) dut (.*);

  // sample memory model: data is a function of the address, latency 1
  always_ff @(posedge clk) smp_rdata <= {18'h2A5A5, smp_raddr};

  always #5 clk = ~clk;

  initial begin : watchdog
    #5000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] merge(logic [31:0] o, logic [31:0] n, logic [3:0] s);
    for (int b = 0; b < 4; b++) if (s[b]) o[8*b +: 8] = n[8*b +: 8];
    return o;
  endfunction

  task automatic wr(logic [19:0] a, logic [31:0] d, logic [3:0] s);
    @(posedge clk); #1;
    reg_we = 1; reg_waddr = a; reg_wdata = d; reg_wstrb = s;
    @(posedge clk); #1;
    reg_we = 0;
    checks++;
    if (cap_start !== (a == 20'h0 && s[0] && d[2])) begin
      failures++; $display("FAIL: cap_start pulse %0b after write %h", cap_start, a);
    end
    @(posedge clk); #1;
    checks++;
    if (cap_start !== 1'b0) begin failures++; $display("FAIL: cap_start stuck"); end
  endtask

  task automatic rd(logic [19:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    reg_re = 1; reg_raddr = a;
    @(posedge clk); #1;
    reg_re = 0; reg_raddr = $urandom;   // address may change after the strobe
    d = reg_rdata;
  endtask

  task automatic compare_outputs();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (h[i] !== sh[i]) begin failures++; $display("FAIL: h[%0d] %0d exp %0d", i, h[i], sh[i]); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (J[i][j] !== sJ[i][j]) begin failures++; $display("FAIL: J[%0d][%0d] %0d exp %0d", i, j, J[i][j], sJ[i][j]); end
      end
    end
    checks++;
    if ({src_smtj, run} !== sctrl[1:0] || clk_div !== sclk[23:0] || smp_div !== ssmp[23:0] || smp_count !== scnt[14:0]) begin
      failures++; $display("FAIL: control outputs %b %0d %0d %0d", {src_smtj, run}, clk_div, smp_div, smp_count);
    end
  endtask

  initial begin
    logic [31:0] d, q;
    logic [3:0] s;
    int i, j, sel;
    for (int a = 0; a < N; a++) begin sh[a] = 0; for (int b = 0; b < N; b++) sJ[a][b] = 0; end
    sctrl = 0; sclk = 37500; ssmp = 37500; scnt = 0;
    #23 rst_n = 1;
    compare_outputs();
    for (int it = 0; it < 3000; it++) begin
      d = $urandom;
      s = (it % 4 == 0) ? 4'hF : 4'($urandom);
      case ($urandom % 4)
        0: begin
          sel = $urandom % 5;
          wr(20'(sel * 4), d, s);
          case (sel)
            0: sctrl = {30'b0, merge(sctrl, d, s) & 32'h3};
            2: sclk = merge(sclk, d, s) & 32'hFFFFFF;
            3: ssmp = merge(ssmp, d, s) & 32'hFFFFFF;
            4: scnt = merge(scnt, d, s) & 32'h7FFF;
            default: ;
          endcase
        end
        1: begin
          i = $urandom % N;
          wr(20'h40000 + 20'(4 * i), d, s);
          sh[i] = weight_t'(merge(32'(sh[i]), d, s));
        end
        default: begin
          i = $urandom % N; j = $urandom % N;
          wr(20'h80000 + 20'(4 * (256 * i + j)), d, s);
          if (adjacent(TOPO_CHIMERA, i, j)) sJ[i][j] = weight_t'(merge(32'(sJ[i][j]), d, s));
        end
      endcase
      if (it % 100 == 0) compare_outputs();
      if (it % 10 == 0) begin
        cap_busy = $urandom; cap_done = $urandom; cap_stored = $urandom; state = $urandom;
        case ($urandom % 8)
          0: begin rd(20'h0, q);  checks++; if (q !== sctrl) begin failures++; $display("FAIL: CTRL read %h", q); end end
          1: begin rd(20'h4, q);  checks++; if (q !== {16'(cap_stored), 14'b0, cap_done, cap_busy}) begin failures++; $display("FAIL: STATUS read %h", q); end end
          2: begin rd(20'h8, q);  checks++; if (q !== sclk) begin failures++; $display("FAIL: CLK_DIV read %h", q); end end
          3: begin rd(20'hC, q);  checks++; if (q !== ssmp) begin failures++; $display("FAIL: SMP_DIV read %h", q); end end
          4: begin rd(20'h10, q); checks++; if (q !== scnt) begin failures++; $display("FAIL: SMP_COUNT read %h", q); end end
          5: begin rd(20'h14, q); checks++; if (q !== state) begin failures++; $display("FAIL: STATE read %h", q); end end
          6: begin rd(20'h18, q); checks++; if (q !== 32'h20) begin failures++; $display("FAIL: ID read %h", q); end end
          default: begin
            i = $urandom % 16384;
            rd(20'hC0000 + 20'(4 * i), q);
            checks++;
            if (q !== {18'h2A5A5, 14'(i)}) begin failures++; $display("FAIL: sample read %h at %0d", q, i); end
          end
        endcase
      end
    end
    compare_outputs();
    // capture start pulse with a full-word write
    wr(20'h0, 32'h5, 4'h1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
