// tb_instr_fetch: self-checking test of the fetch/alignment unit.
// Random-length instructions (7..64 bits, the length stored in the low 7
// bits of each) are packed back to back into 64-bit memory rows, so most of
// them straddle two rows. The test checks that every instruction is
// presented whole and in order, one per cycle without a gap, that the first
// one appears three cycles after start, and that done follows the last one.
// The program is run twice to check restart.
module tb_instr_fetch;
  localparam int unsigned IL = 64, DEPTH = 256, LA = 8, LW = 16, K = 300;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] prog_bits;
  logic [LA-1:0] imem_raddr;
  logic [IL-1:0] imem_rdata, instr;
  logic instr_valid, busy, done;
  logic [LW-1:0] instr_len;
  logic [IL-1:0] mem [DEPTH];
  logic [IL-1:0] prog [K];
  int unsigned plen [K];
  logic [DEPTH*IL+IL-1:0] stream;
  int checks = 0, failures = 0;

  instr_fetch #(.IL(IL), .IMEM_DEPTH(DEPTH), .LW(LW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .prog_bits(prog_bits),
    .imem_raddr(imem_raddr), .imem_rdata(imem_rdata), .instr(instr),
    .instr_valid(instr_valid), .instr_len(instr_len), .busy(busy), .done(done));

  // memory with one cycle read latency
  always_ff @(posedge clk) imem_rdata <= mem[imem_raddr];
  assign instr_len = LW'(instr[6:0]);

  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0h exp=%0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned pos;
    logic [63:0] rnd;
    for (int a = 0; a < DEPTH; a++) mem[a] = '0;
    pos = 0;
    stream = '0;
    for (int k = 0; k < K; k++) begin
      plen[k] = (k % 10 == 0) ? 64 : $urandom_range(64, 7);
      rnd[31:0] = $urandom();
      rnd[63:32] = $urandom();
      prog[k] = rnd;
      prog[k][6:0] = 7'(plen[k]);
      if (plen[k] < 64) prog[k] &= (64'(1) << plen[k]) - 1;
      stream[pos +: IL] = prog[k];
      pos += plen[k];
    end
    prog_bits = pos;
    for (int a = 0; a < DEPTH; a++) mem[a] = stream[a*IL +: IL];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int k, cyc;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      k = 0; cyc = 1;
      while (!instr_valid && cyc < 10) begin @(negedge clk); cyc++; end
      check("first instruction latency", cyc, 3);
        while (instr_valid) begin
        logic [IL-1:0] got;
        got = instr;
        if (plen[k] < 64) got &= (64'(1) << plen[k]) - 1;
        check("instruction", got, prog[k]);
        k++;
        @(negedge clk);
      end
      check("instruction count", k, K);
      check("done", done, 1);
      @(negedge clk);
      check("idle", busy, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
