// tb_decoder: self-checking test of the instruction decoder at the default
// configuration (D = 3, B = 64, R = 32, 2048 data-memory rows).
// The test encodes random instructions of every kind bit by bit from the
// documented field layout, decodes them, and checks every control output
// and the reported length (exec 1076, store 463, load 79, store_4 63,
// copy_4 76, nop 4 bits).
module tb_decoder;
  import dpu_pkg::*;
  localparam int D = 3, B = 64, R = 32, DM = 2048;
  localparam int LR = 5, LB = 6, MA = 11, NPE = 56, LSEL = 2, IL = 1076;

  logic [IL-1:0]   instr;
  logic            instr_valid;
  logic [15:0]     len;
  logic [LR-1:0]   rd_addr [B];
  logic [B-1:0]    rd_rst;
  logic [LB-1:0]   xsel [B];
  pe_op_e          pe_op [NPE];
  logic            ld_en, st_en, is_exec;
  logic [MA-1:0]   ld_addr, st_addr;
  logic [B-1:0]    wr_en, st_mask;
  logic [LSEL-1:0] wr_lsel [B];
  wsrc_e           wsrc;
  opcode_e         opcode;
  int checks = 0, failures = 0;
  int pos;

  decoder #(.D(D), .B(B), .R(R), .DMEM_DEPTH(DM)) dut (
    .instr(instr), .instr_valid(instr_valid), .len(len),
    .rd_addr(rd_addr), .rd_rst(rd_rst), .xsel(xsel), .pe_op(pe_op),
    .ld_en(ld_en), .ld_addr(ld_addr), .wr_en(wr_en), .wr_lsel(wr_lsel), .wsrc(wsrc),
    .st_en(st_en), .st_addr(st_addr), .st_mask(st_mask), .is_exec(is_exec), .opcode(opcode));

  // Append a field to the instruction being built.
  task automatic put(longint unsigned v, int w);
    for (int i = 0; i < w; i++) instr[pos + i] = v[i];
    pos += w;
  endtask

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got=%0h exp=%0h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LR-1:0] e_ra [B];
    logic [B-1:0]  e_rst, e_we, e_mask;
    logic [LB-1:0] e_xs [B];
    logic [1:0]    e_op [NPE];
    logic [LSEL-1:0] e_ls [B];
    logic [MA-1:0] e_ma;
    int kind;
    for (int n = 0; n < 600; n++) begin
      kind = n % 6;
      instr = '0; pos = 0;
      instr_valid = (n % 50 != 49);
      for (int j = 0; j < B; j++) begin
        e_ra[j] = LR'($urandom()); e_xs[j] = LB'($urandom()); e_ls[j] = LSEL'($urandom_range(2));
        e_rst[j] = $urandom_range(1); e_we[j] = $urandom_range(1); e_mask[j] = $urandom_range(1);
      end
      for (int p = 0; p < NPE; p++) e_op[p] = 2'($urandom());
      e_ma = MA'($urandom());
      case (kind)
        0: begin  // exec
          put(1, 4);
          for (int j = 0; j < B; j++) begin put(e_ra[j], LR); put(e_rst[j], 1); end
          for (int j = 0; j < B; j++) put(e_xs[j], LB);
          for (int p = 0; p < NPE; p++) put(e_op[p], 2);
          for (int j = 0; j < B; j++) begin put(e_we[j], 1); put(e_ls[j], LSEL); end
        end
        1: begin put(2, 4); put(e_mask, B); put(e_ma, MA); end           // load
        2: begin                                                          // store
          put(3, 4); put(e_mask, B); put(e_ma, MA);
          for (int j = 0; j < B; j++) begin put(e_ra[j], LR); put(e_rst[j], 1); end
        end
        3: begin                                                          // store_4: banks 3k+1
          put(4, 4); put(e_ma, MA);
          for (int k = 0; k < 4; k++) begin put(3*k+1, LB); put(e_ra[3*k+1], LR); put(e_rst[3*k+1], 1); end
        end
        4: begin                                                          // copy_4: bank 2k -> 5k+3
          put(5, 4);
          for (int k = 0; k < 4; k++) begin put(2*k, LB); put(e_ra[2*k], LR); put(e_rst[2*k], 1); put(5*k+3, LB); end
        end
        default: put(0, 4);                                               // nop
      endcase
      // random bits beyond the instruction must be ignored
      for (int i = pos; i < IL; i++) instr[i] = $urandom_range(1);
      #1;
      if (!instr_valid) begin
        check("invalid is nop: len", len, 4);
        check("invalid is nop: wr_en", wr_en, 0);
        check("invalid is nop: st/ld", {st_en, ld_en}, 0);
        check("invalid is nop: rst", rd_rst, 0);
        continue;
      end
      check("length", len, pos);
      case (kind)
        0: begin
          check("is_exec", is_exec, 1);
          check("wsrc", wsrc, WSRC_EXEC);
          check("rd_rst", rd_rst, e_rst);
          check("wr_en", wr_en, e_we);
          for (int j = 0; j < B; j++) begin
            check("rd_addr", rd_addr[j], e_ra[j]);
            check("xsel", xsel[j], e_xs[j]);
            check("wr_lsel", wr_lsel[j], e_ls[j]);
          end
          for (int p = 0; p < NPE; p++) check("pe_op", pe_op[p], e_op[p]);
          check("no mem", {ld_en, st_en}, 0);
        end
        1: begin
          check("ld_en", ld_en, 1); check("ld_addr", ld_addr, e_ma);
          check("wr_en=mask", wr_en, e_mask); check("wsrc", wsrc, WSRC_LOAD);
          check("st_en", st_en, 0); check("rd_rst", rd_rst, 0);
        end
        2: begin
          check("st_en", st_en, 1); check("st_addr", st_addr, e_ma);
          check("st_mask", st_mask, e_mask); check("wr_en", wr_en, 0);
          check("rd_rst", rd_rst, e_rst);
          for (int j = 0; j < B; j++) begin
            check("rd_addr", rd_addr[j], e_ra[j]);
            check("xsel identity", xsel[j], j);
          end
        end
        3: begin
          check("st_en", st_en, 1); check("st_addr", st_addr, e_ma);
          check("st_mask", st_mask, (64'(1) << 1) | (64'(1) << 4) | (64'(1) << 7) | (64'(1) << 10));
          check("wr_en", wr_en, 0);
          for (int k = 0; k < 4; k++) begin
            check("rd_addr", rd_addr[3*k+1], e_ra[3*k+1]);
            check("rd_rst", rd_rst[3*k+1], e_rst[3*k+1]);
          end
        end
        4: begin
          check("wsrc", wsrc, WSRC_COPY);
          check("wr_en", wr_en, (64'(1) << 3) | (64'(1) << 8) | (64'(1) << 13) | (64'(1) << 18));
          check("no mem", {ld_en, st_en}, 0);
          for (int k = 0; k < 4; k++) begin
            check("copy xsel", xsel[5*k+3], 2*k);
            check("copy rd_addr", rd_addr[2*k], e_ra[2*k]);
            check("copy rd_rst", rd_rst[2*k], e_rst[2*k]);
          end
        end
        default: begin
          check("nop", {wr_en, st_en, ld_en, rd_rst}, 0);
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
