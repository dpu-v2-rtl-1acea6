// tb_dpu_top: end-to-end test of the whole processor at its default size
// (D = 3, B = 64 banks, R = 32, 8 trees of 7 PEs, 2048 x 64-word data
// memory, 4096 x 1076-bit instruction memory).
//
// The test acts as a small compiler. It generates a random but legal
// program of NI instructions (load, exec, copy_4, store, store_4, nop) while
// running its own slot-by-slot model of the machine: one instruction per
// cycle, results written back D+1 slots after issue into the lowest empty
// register of each bank, valid bits released by valid_rst. Because the
// model predicts every write address, the program only reads registers
// that will hold the intended value, exactly as the paper's compiler does.
// Operands are chosen among registers that are valid at the instruction's
// slot, which includes results written back in that very slot (forwarded),
// so dependent instructions D+1 apart occur.
//
// The program is packed densely into instruction rows and loaded through
// the host port together with the input rows of the data memory. After the
// run the test compares every stored data-memory row, every bank's valid
// bits and every live register with the model, checks the cycle count
// (one instruction per cycle: NI + D + 5 cycles from start to done) and
// the overflow flag, and requires each mechanism to have occurred: every
// instruction kind, every PE operation, writes from every layer, crossbar
// broadcast, forwarding, reuse of released registers, and instructions
// that straddle two instruction rows.
module tb_dpu_top;
  import dpu_pkg::*;
  localparam int D = 3, B = 64, R = 32, W = 32, DM = 2048, IM = 4096;
  localparam int NIN = 8, T = 8, NPT = 7, NPE = 56;
  localparam int LR = 5, LB = 6, MA = 11, IA = 12, LSEL = 2, IL = 1076;
  localparam int NI = 600;           // instructions in the program
  localparam int IN_ROWS = 32;       // data-memory rows holding inputs
  localparam int OUT_BASE = 512;     // first row used by stores
  localparam int OUT_ROWS = 64;
  localparam int PQ = D + 2;         // pending-write ring size

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, overflow;
  logic [31:0] prog_bits;
  logic imem_we = 0;
  logic [IA-1:0] imem_waddr;
  logic [IL-1:0] imem_wdata;
  logic dmem_en = 0, dmem_we = 0;
  logic [MA-1:0] dmem_addr;
  logic [B-1:0] dmem_wmask;
  logic [W-1:0] dmem_wdata [B], dmem_rdata [B];

  dpu_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .prog_bits(prog_bits), .busy(busy),
    .done(done), .overflow(overflow), .imem_we(imem_we), .imem_waddr(imem_waddr),
    .imem_wdata(imem_wdata), .dmem_en(dmem_en), .dmem_we(dmem_we), .dmem_addr(dmem_addr),
    .dmem_wmask(dmem_wmask), .dmem_wdata(dmem_wdata), .dmem_rdata(dmem_rdata));

  always #5 clk = ~clk;

  // Observation of the banks' state at the end of the run.
  logic [R-1:0] hw_valid [B];
  logic [W-1:0] hw_reg [B][R];
  for (genvar j = 0; j < B; j++) begin : g_obs
    assign hw_valid[j] = dut.g_bank[j].u_bank.valid_o;
    for (genvar r = 0; r < R; r++) begin : g_r
      assign hw_reg[j][r] = dut.g_bank[j].u_bank.regs[r];
    end
  end

  int checks = 0, failures = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0h exp=%0h", what, got, exp);
    end
  endtask

  // ---------------- model state ----------------
  logic [W-1:0] m_reg [B][R];
  logic [R-1:0] m_valid [B];
  logic [R-1:0] m_freed [B];       // released since last written
  logic [W-1:0] m_mem [DM][B];
  int           m_pend [B];        // writes in flight per bank
  // pending write-backs, ring indexed by slot % PQ
  logic [B-1:0] p_we [PQ];
  logic [W-1:0] p_wd [PQ][B];
  logic         p_st [PQ];
  logic [MA-1:0] p_sa [PQ];
  logic [B-1:0] p_sm [PQ];
  logic [W-1:0] p_sd [PQ][B];
  logic [B-1:0] landed;            // banks written in the current slot
  logic [LR-1:0] landed_addr [B];

  // ---------------- program image ----------------
  logic [IL-1:0] rows [IM];
  logic [IL-1:0] ins;
  int ipos, spos;

  // mechanism counters
  int n_kind [6];
  int n_op [4];
  int n_layer [D];
  int n_bcast, n_fwd, n_reuse, n_straddle;

  task automatic put(longint unsigned v, int w);
    for (int i = 0; i < w; i++) ins[ipos + i] = v[i];
    ipos += w;
  endtask

  task automatic emit();
    if (spos / IL != (spos + ipos - 1) / IL) n_straddle++;
    for (int i = 0; i < ipos; i++) rows[(spos + i) / IL][(spos + i) % IL] = ins[i];
    spos += ipos;
  endtask

  function automatic int lowest_free(int b);
    for (int r = 0; r < R; r++) if (!m_valid[b][r]) return r;
    return -1;
  endfunction

  function automatic int count_valid(int b);
    int c = 0;
    for (int r = 0; r < R; r++) c += int'(m_valid[b][r]);
    return c;
  endfunction

  function automatic bit has_room(int b);
    return count_valid(b) + m_pend[b] < R - 1;
  endfunction

  function automatic int pick_valid(int b);
    int c = count_valid(b), k;
    if (c == 0) return -1;
    k = $urandom_range(c - 1);
    for (int r = 0; r < R; r++) if (m_valid[b][r]) begin
      if (k == 0) return r;
      k--;
    end
    return -1;
  endfunction

  function automatic logic [W-1:0] pe_f(int op, logic [W-1:0] a, logic [W-1:0] b);
    case (op)
      0: return a + b;
      1: return a * b;
      2: return a;
      default: return b;
    endcase
  endfunction

  // Land the write-backs due in slot s (issued in slot s-D-1).
  task automatic land(int s);
    int q = s % PQ;
    landed = '0;
    for (int b = 0; b < B; b++) if (p_we[q][b]) begin
      int a = lowest_free(b);
      if (a < 0) begin
        $display("TB ERROR: model bank %0d full", b);
        failures++;
      end else begin
        if (m_freed[b][a]) n_reuse++;
        m_freed[b][a] = 1'b0;
        m_reg[b][a] = p_wd[q][b];
        m_valid[b][a] = 1'b1;
        landed[b] = 1'b1;
        landed_addr[b] = LR'(a);
      end
      m_pend[b]--;
    end
    if (p_st[q]) begin
      for (int j = 0; j < B; j++) if (p_sm[q][j]) m_mem[p_sa[q]][j] = p_sd[q][j];
    end
    p_we[q] = '0;
    p_st[q] = 1'b0;
  endtask

  // Build instruction s; fills ins/ipos and schedules its effects.
  task automatic gen(int s);
    int q = (s + D + 1) % PQ;
    int ra [B];
    logic [B-1:0] rst;
    logic [W-1:0] rv [B];
    int kind, roll;
    ins = '0; ipos = 0;
    for (int b = 0; b < B; b++) begin ra[b] = -1; rv[b] = '0; end
    rst = '0;
    roll = $urandom_range(99);
    if (s < 6) kind = 2;
    else if (s >= NI - 4) kind = 0;
    else if (roll < 45) kind = 1;
    else if (roll < 62) kind = 2;
    else if (roll < 72) kind = 5;
    else if (roll < 80) kind = 3;
    else if (roll < 90) kind = 4;
    else kind = 0;
    // reads used by exec / store
    if (kind == 1 || kind == 3) begin
      for (int b = 0; b < B; b++) if ($urandom_range(99) < 80) begin
        ra[b] = pick_valid(b);
        if (ra[b] >= 0) begin
          rv[b] = m_reg[b][ra[b]];
          if (landed[b] && landed_addr[b] == LR'(ra[b])) n_fwd++;
          rst[b] = ($urandom_range(99) < ((count_valid(b) > R/2) ? 60 : 25));
        end
      end
    end
    case (kind)
      1: begin : k_exec
        int xs [B];
        logic [W-1:0] lane [B];
        logic [W-1:0] v [T][NPT];
        int op [NPE];
        int nread = 0;
        int rb [B];
        for (int b = 0; b < B; b++) if (ra[b] >= 0) begin rb[nread] = b; nread++; end
        if (nread == 0) begin kind = 0; put(0, 4); end
        else begin
          for (int j = 0; j < B; j++) begin
            xs[j] = rb[$urandom_range(nread - 1)];
            lane[j] = rv[xs[j]];
          end
          for (int j = 0; j < B; j++) for (int k = j + 1; k < B; k++)
            if (xs[j] == xs[k]) begin n_bcast++; break; end
          for (int p = 0; p < NPE; p++) begin op[p] = $urandom_range(3); n_op[op[p]]++; end
          for (int t = 0; t < T; t++) begin
            for (int i = 0; i < 4; i++)
              v[t][i] = pe_f(op[t*NPT+i], lane[t*NIN+2*i], lane[t*NIN+2*i+1]);
            for (int i = 0; i < 2; i++)
              v[t][4+i] = pe_f(op[t*NPT+4+i], v[t][2*i], v[t][2*i+1]);
            v[t][6] = pe_f(op[t*NPT+6], v[t][4], v[t][5]);
          end
          put(OP_EXEC, 4);
          for (int b = 0; b < B; b++) begin put((ra[b] < 0) ? 0 : ra[b], LR); put(rst[b], 1); end
          for (int j = 0; j < B; j++) put(xs[j], LB);
          for (int p = 0; p < NPE; p++) put(op[p], 2);
          for (int j = 0; j < B; j++) begin
            int l = $urandom_range(D - 1);
            bit we = ($urandom_range(99) < 45) && has_room(j);
            int k = j % NIN;
            int pidx = (l == 0) ? k / 2 : (l == 1) ? 4 + k / 4 : 6;
            put(we, 1); put(l, LSEL);
            if (we) begin
              p_we[q][j] = 1'b1;
              p_wd[q][j] = v[j / NIN][pidx];
              m_pend[j]++;
              n_layer[l]++;
            end
          end
        end
      end
      2: begin : k_load
        int row = $urandom_range(IN_ROWS - 1);
        logic [B-1:0] mask;
        for (int j = 0; j < B; j++) begin
          mask[j] = ($urandom_range(99) < 85) && has_room(j);
          if (mask[j]) begin
            p_we[q][j] = 1'b1;
            p_wd[q][j] = m_mem[row][j];
            m_pend[j]++;
          end
        end
        put(OP_LOAD, 4); put(mask, B); put(row, MA);
      end
      3: begin : k_store
        int row = OUT_BASE + $urandom_range(OUT_ROWS - 1);
        logic [B-1:0] mask;
        for (int j = 0; j < B; j++) mask[j] = (ra[j] >= 0) && ($urandom_range(99) < 70);
        put(OP_STORE, 4); put(mask, B); put(row, MA);
        for (int b = 0; b < B; b++) begin put((ra[b] < 0) ? 0 : ra[b], LR); put(rst[b], 1); end
        p_st[q] = 1'b1; p_sa[q] = MA'(row); p_sm[q] = mask;
        for (int j = 0; j < B; j++) p_sd[q][j] = rv[j];
      end
      4: begin : k_store4
        int row = OUT_BASE + $urandom_range(OUT_ROWS - 1);
        int bk [4];
        logic [B-1:0] mask = '0;
        put(OP_STORE4, 4); put(row, MA);
        for (int k = 0; k < 4; k++) begin
          int tries = 0;
          do begin bk[k] = $urandom_range(B - 1); tries++; end
          while ((mask[bk[k]] || count_valid(bk[k]) == 0) && tries < 200);
          if (mask[bk[k]] || count_valid(bk[k]) == 0) bk[k] = (k == 0) ? 0 : bk[k-1];
          if (!mask[bk[k]]) begin
            ra[bk[k]] = pick_valid(bk[k]);
            rst[bk[k]] = (ra[bk[k]] >= 0) && ($urandom_range(99) < 50);
            if (ra[bk[k]] >= 0 && landed[bk[k]] && landed_addr[bk[k]] == LR'(ra[bk[k]])) n_fwd++;
          end
          mask[bk[k]] = 1'b1;
        end
        for (int k = 0; k < 4; k++) begin
          put(bk[k], LB); put((ra[bk[k]] < 0) ? 0 : ra[bk[k]], LR); put(rst[bk[k]], 1);
        end
        p_st[q] = 1'b1; p_sa[q] = MA'(row); p_sm[q] = '0;
        for (int k = 0; k < 4; k++) if (ra[bk[k]] >= 0) begin
          p_sm[q][bk[k]] = 1'b1;
          p_sd[q][bk[k]] = m_reg[bk[k]][ra[bk[k]]];
        end
      end
      5: begin : k_copy
        logic [B-1:0] used_s = '0, used_d = '0;
        int sb [4], db [4];
        bit ok = 1'b1;
        for (int k = 0; k < 4 && ok; k++) begin
          int tries = 0;
          do begin sb[k] = $urandom_range(B - 1); tries++; end
          while ((used_s[sb[k]] || count_valid(sb[k]) == 0) && tries < 400);
          do begin db[k] = $urandom_range(B - 1); tries++; end
          while ((used_d[db[k]] || !has_room(db[k])) && tries < 800);
          if (used_s[sb[k]] || count_valid(sb[k]) == 0 || used_d[db[k]] || !has_room(db[k]))
            ok = 1'b0;
          used_s[sb[k]] = 1'b1; used_d[db[k]] = 1'b1;
        end
        if (!ok) begin kind = 0; put(OP_NOP, 4); end
        else begin
          for (int k = 0; k < 4; k++) begin
            ra[sb[k]] = pick_valid(sb[k]);
            rst[sb[k]] = ($urandom_range(99) < 50);
            if (landed[sb[k]] && landed_addr[sb[k]] == LR'(ra[sb[k]])) n_fwd++;
          end
          put(OP_COPY4, 4);
          for (int k = 0; k < 4; k++) begin
            put(sb[k], LB); put(ra[sb[k]], LR); put(rst[sb[k]], 1); put(db[k], LB);
            p_we[q][db[k]] = 1'b1;
            p_wd[q][db[k]] = m_reg[sb[k]][ra[sb[k]]];
            m_pend[db[k]]++;
          end
        end
      end
      default: put(OP_NOP, 4);
    endcase
    n_kind[kind]++;
    // releases take effect at the end of the slot
    for (int b = 0; b < B; b++) if (rst[b] && ra[b] >= 0) begin
      m_valid[b][ra[b]] = 1'b0;
      m_freed[b][ra[b]] = 1'b1;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    // ---- initial model state
    for (int b = 0; b < B; b++) begin m_valid[b] = '0; m_freed[b] = '0; m_pend[b] = 0; end
    for (int a = 0; a < DM; a++) for (int j = 0; j < B; j++)
      m_mem[a][j] = (a < IN_ROWS) ? ((a % 4 == 0) ? W'($urandom_range(9)) : $urandom()) : '0;
    for (int q = 0; q < PQ; q++) begin p_we[q] = '0; p_st[q] = 1'b0; end
    for (int a = 0; a < IM; a++) rows[a] = '0;
    for (int k = 0; k < 6; k++) n_kind[k] = 0;
    for (int k = 0; k < 4; k++) n_op[k] = 0;
    for (int k = 0; k < D; k++) n_layer[k] = 0;
    n_bcast = 0; n_fwd = 0; n_reuse = 0; n_straddle = 0; spos = 0;
    landed = '0;
    // ---- generate the program together with the model run
    for (int s = 0; s < NI; s++) begin
      land(s);
      gen(s);
      emit();
    end
    for (int s = NI; s < NI + D + 2; s++) land(s);
    prog_bits = spos;
    $display("program: %0d instructions, %0d bits, %0d rows", NI, spos, (spos + IL - 1) / IL);

    // ---- reset, load memories through the host ports
    imem_waddr = '0; imem_wdata = '0; dmem_addr = '0; dmem_wmask = '0;
    for (int j = 0; j < B; j++) dmem_wdata[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < (spos + IL - 1) / IL; a++) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = IA'(a); imem_wdata = rows[a];
    end
    @(negedge clk);
    imem_we = 0;
    for (int a = 0; a < OUT_BASE + OUT_ROWS; a++) begin
      @(negedge clk);
      dmem_en = 1; dmem_we = 1; dmem_addr = MA'(a); dmem_wmask = '1;
      for (int j = 0; j < B; j++) dmem_wdata[j] = (a < IN_ROWS) ? m_mem[a][j] : '0;
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
    check("cycles from start to done (one instruction per cycle)", cyc, NI + D + 5);
    check("overflow flag", overflow, 0);
    @(negedge clk);
    check("idle after done", busy, 0);

    // ---- compare register banks
    for (int b = 0; b < B; b++) begin
      check($sformatf("bank %0d valid bits", b), hw_valid[b], m_valid[b]);
      for (int r = 0; r < R; r++) if (m_valid[b][r]) check("live register", hw_reg[b][r], m_reg[b][r]);
    end
    // ---- compare stored rows
    for (int a = OUT_BASE; a < OUT_BASE + OUT_ROWS; a++) begin
      @(negedge clk);
      dmem_en = 1; dmem_we = 0; dmem_addr = MA'(a);
      @(negedge clk);
      dmem_en = 0;
      for (int j = 0; j < B; j++) check($sformatf("data memory row %0d word %0d", a, j), dmem_rdata[j], m_mem[a][j]);
    end

    // ---- every mechanism must have happened
    $display("kinds: nop=%0d exec=%0d load=%0d store=%0d store_4=%0d copy_4=%0d",
             n_kind[0], n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_kind[5]);
    $display("pe ops add=%0d mul=%0d passa=%0d passb=%0d; layer writes %0d/%0d/%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_layer[0], n_layer[1], n_layer[2]);
    $display("broadcast=%0d forwarded reads=%0d reused registers=%0d straddling instructions=%0d",
             n_bcast, n_fwd, n_reuse, n_straddle);
    for (int k = 0; k < 6; k++) check($sformatf("instruction kind %0d occurred", k), n_kind[k] > 0, 1);
    for (int k = 0; k < 4; k++) check($sformatf("pe op %0d occurred", k), n_op[k] > 0, 1);
    for (int k = 0; k < D; k++) check($sformatf("write from layer %0d occurred", k), n_layer[k] > 0, 1);
    check("crossbar broadcast occurred", n_bcast > 0, 1);
    check("write-through forwarding occurred", n_fwd > 0, 1);
    check("released register reused", n_reuse > 0, 1);
    check("instruction straddling rows occurred", n_straddle > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
