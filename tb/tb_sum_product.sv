// tb_sum_product: a small probabilistic-circuit workload run end to end on
// the processor at its default size (no parameter overrides).
//
// The graph is a two-level sum-product network over 64 leaf values:
//   level 1, tree t (t = 0..7):  r_t = x[8t]x[8t+1] + x[8t+2]x[8t+3]
//                                     + x[8t+4]x[8t+5] + x[8t+6]x[8t+7]
//   level 2, tree 0:             y   = r_0 r_1 + r_2 r_3 + r_4 r_5 + r_6 r_7
// i.e. 63 nodes (multiplies in the leaf layer, additions above), evaluated
// for NS independent input samples, one data-memory row of 64 leaves each.
//
// The program is what a compiler would emit for it, hand-scheduled here:
//   load row i            every bank gets its leaf in register 0
//   3 x nop               keeps the exec D+1 slots after the load
//   exec                  8 trees compute r_t; the root of tree t writes
//                         bank 8t (register 0, released by the same exec)
//   3 x nop
//   exec                  the crossbar gathers banks 0, 8, .., 56 into
//                         tree 0; its root writes y into bank 0
//   3 x nop
//   store_4               word 0 of output row OUT_BASE + i, releasing y
// Each consumer reads its operands in the very cycle they are written back
// (write-through), and every value is released on its last read, so the
// banks are empty again after each sample and the write addresses repeat.
//
// Checked: y of every sample against a direct evaluation, the untouched
// words of the output rows, the cycle count (one instruction per cycle:
// NI + D + 5 from start to done), the overflow flag and empty banks at the
// end. Arithmetic is 32-bit and wraps, as in the PEs.
module tb_sum_product;
  import dpu_pkg::*;
  localparam int D = 3, B = 64, W = 32;
  localparam int NIN = 8, T = 8, NPT = 7, NPE = 56;
  localparam int LR = 5, LB = 6, MA = 11, IA = 12, LSEL = 2, IL = 1076, IM = 4096;
  localparam int NS = 32;            // input samples
  localparam int OUT_BASE = 1024;    // first output row
  localparam int PER = 13;           // instructions per sample
  localparam int NI = NS * PER;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, overflow;
  logic [31:0] prog_bits;
  logic imem_we = 0;
  logic [IA-1:0] imem_waddr = '0;
  logic [IL-1:0] imem_wdata = '0;
  logic dmem_en = 0, dmem_we = 0;
  logic [MA-1:0] dmem_addr = '0;
  logic [B-1:0] dmem_wmask = '0;
  logic [W-1:0] dmem_wdata [B], dmem_rdata [B];

  dpu_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .prog_bits(prog_bits), .busy(busy),
    .done(done), .overflow(overflow), .imem_we(imem_we), .imem_waddr(imem_waddr),
    .imem_wdata(imem_wdata), .dmem_en(dmem_en), .dmem_we(dmem_we), .dmem_addr(dmem_addr),
    .dmem_wmask(dmem_wmask), .dmem_wdata(dmem_wdata), .dmem_rdata(dmem_rdata));

  always #5 clk = ~clk;

  logic [R_DEF-1:0] hw_valid [B];
  for (genvar j = 0; j < B; j++) begin : g_obs
    assign hw_valid[j] = dut.g_bank[j].u_bank.valid_o;
  end

  int checks = 0, failures = 0;
  int n_kind [6];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0h exp=%0h", what, got, exp);
    end
  endtask

  // Program assembly: fields are appended from bit 0 upwards.
  logic [IL-1:0] rows [IM];
  logic [IL-1:0] ins;
  int ipos, spos;

  task automatic put(longint unsigned v, int w);
    for (int i = 0; i < w; i++) ins[ipos + i] = v[i];
    ipos += w;
  endtask

  task automatic emit(int kind);
    for (int i = 0; i < ipos; i++) rows[(spos + i) / IL][(spos + i) % IL] = ins[i];
    spos += ipos;
    ins = '0; ipos = 0;
    n_kind[kind]++;
  endtask

  task automatic nops(int n);
    for (int k = 0; k < n; k++) begin put(OP_NOP, 4); emit(0); end
  endtask

  // exec: rd[b] = read bank b (register 0, released); xs = crossbar select of
  // each tree input; wb[b] = bank b writes the root (layer D-1) result.
  task automatic exec(logic [B-1:0] rd, int xs [B], logic [B-1:0] wb);
    put(OP_EXEC, 4);
    for (int b = 0; b < B; b++) begin put(0, LR); put(rd[b], 1); end
    for (int j = 0; j < B; j++) put(xs[j], LB);
    for (int p = 0; p < NPE; p++) put(((p % NPT) < 4) ? PE_MUL : PE_ADD, 2);
    for (int b = 0; b < B; b++) begin put(wb[b], 1); put(D - 1, LSEL); end
    emit(1);
  endtask

  logic [W-1:0] x [NS][B];
  logic [W-1:0] y_exp [NS];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    int xs [B];
    logic [B-1:0] rd, wb;
    logic [W-1:0] r [T];
    for (int k = 0; k < 6; k++) n_kind[k] = 0;
    for (int a = 0; a < IM; a++) rows[a] = '0;
    for (int j = 0; j < B; j++) dmem_wdata[j] = '0;
    ins = '0; ipos = 0; spos = 0;

    // ---- inputs and reference results
    for (int i = 0; i < NS; i++) begin
      for (int j = 0; j < B; j++) x[i][j] = $urandom();
      for (int t = 0; t < T; t++)
        r[t] = x[i][8*t] * x[i][8*t+1] + x[i][8*t+2] * x[i][8*t+3]
             + x[i][8*t+4] * x[i][8*t+5] + x[i][8*t+6] * x[i][8*t+7];
      y_exp[i] = r[0] * r[1] + r[2] * r[3] + r[4] * r[5] + r[6] * r[7];
    end

    // ---- program
    for (int i = 0; i < NS; i++) begin
      put(OP_LOAD, 4); put({B{1'b1}}, B); put(i, MA); emit(2);
      nops(D);
      // level 1: identity crossbar, every bank read and released
      for (int j = 0; j < B; j++) xs[j] = j;
      rd = '1; wb = '0;
      for (int t = 0; t < T; t++) wb[8*t] = 1'b1;
      exec(rd, xs, wb);
      nops(D);
      // level 2: gather the eight partial results into tree 0
      for (int j = 0; j < B; j++) xs[j] = (j < NIN) ? 8 * j : j;
      rd = '0;
      for (int t = 0; t < T; t++) rd[8*t] = 1'b1;
      wb = '0; wb[0] = 1'b1;
      exec(rd, xs, wb);
      nops(D);
      // store y (bank 0, register 0) into word 0 of the output row
      put(OP_STORE4, 4); put(OUT_BASE + i, MA);
      for (int k = 0; k < NSLOT; k++) begin put(0, LB); put(0, LR); put(1, 1); end
      emit(4);
    end
    prog_bits = spos;
    $display("program: %0d instructions, %0d bits, %0d rows", NI, spos, (spos + IL - 1) / IL);

    // ---- load memories through the host ports
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < (spos + IL - 1) / IL; a++) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = IA'(a); imem_wdata = rows[a];
    end
    @(negedge clk);
    imem_we = 0;
    for (int a = 0; a < NS; a++) begin
      @(negedge clk);
      dmem_en = 1; dmem_we = 1; dmem_addr = MA'(a); dmem_wmask = '1;
      for (int j = 0; j < B; j++) dmem_wdata[j] = x[a][j];
    end
    for (int a = OUT_BASE; a < OUT_BASE + NS; a++) begin
      @(negedge clk);
      dmem_en = 1; dmem_we = 1; dmem_addr = MA'(a); dmem_wmask = '1;
      for (int j = 0; j < B; j++) dmem_wdata[j] = 32'h5A5A_0000 + j;
    end
    @(negedge clk);
    dmem_en = 0; dmem_we = 0;

    // ---- run
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < NI * 4) begin @(negedge clk); cyc++; end
    check("cycles from start to done", cyc, NI + D + 5);
    check("overflow flag", overflow, 0);
    for (int b = 0; b < B; b++) check($sformatf("bank %0d empty at the end", b), hw_valid[b], 0);

    // ---- results
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      dmem_en = 1; dmem_we = 0; dmem_addr = MA'(OUT_BASE + i);
      @(negedge clk);
      dmem_en = 0;
      check($sformatf("sample %0d result", i), dmem_rdata[0], y_exp[i]);
      for (int j = 1; j < B; j++)
        check($sformatf("sample %0d untouched word %0d", i, j), dmem_rdata[j], 32'h5A5A_0000 + j);
    end

    $display("kinds: nop=%0d exec=%0d load=%0d store_4=%0d", n_kind[0], n_kind[1], n_kind[2], n_kind[4]);
    check("loads issued", n_kind[2], NS);
    check("execs issued", n_kind[1], 2 * NS);
    check("stores issued", n_kind[4], NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
