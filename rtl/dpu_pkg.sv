// dpu_pkg: constants and types shared by the DAG processing unit.
//
// The default sizes are the minimum energy-delay configuration of the
// architecture template: D = 3 PE layers per tree, B = 64 register banks,
// R = 32 registers per bank, hence T = B / 2^D = 8 trees of 2^D - 1 = 7 PEs.
// Word width, memory depths, opcode values and the PE operation encoding are
// this implementation's own choices; the paper does not give them.
package dpu_pkg;

  // Architecture template parameters (paper's min-EDP point).
  localparam int unsigned D_DEF = 3;    // PE layers per tree
  localparam int unsigned B_DEF = 64;   // register banks = tree inputs
  localparam int unsigned R_DEF = 32;   // registers per bank

  // Implementation choices.
  localparam int unsigned W_DEF          = 32;    // data word width (4-byte words)
  localparam int unsigned DMEM_DEPTH_DEF = 2048;  // data-memory rows of B words (512 KB)
  localparam int unsigned IMEM_DEPTH_DEF = 4096;  // instruction-memory rows of IL bits (about 550 KB)

  // Number of store/copy slots of the short store_4 and copy_4 instructions.
  localparam int unsigned NSLOT = 4;

  // 4-bit opcode in the least-significant bits of every instruction.
  localparam int unsigned OPC_W = 4;
  typedef enum logic [OPC_W-1:0] {
    OP_NOP    = 4'd0,
    OP_EXEC   = 4'd1,
    OP_LOAD   = 4'd2,
    OP_STORE  = 4'd3,
    OP_STORE4 = 4'd4,
    OP_COPY4  = 4'd5
  } opcode_e;

  // PE operation.
  typedef enum logic [1:0] {
    PE_ADD   = 2'd0,
    PE_MUL   = 2'd1,
    PE_PASSA = 2'd2,   // bypass input a
    PE_PASSB = 2'd3    // bypass input b
  } pe_op_e;

  // Source of the data written into a register bank.
  typedef enum logic [1:0] {
    WSRC_EXEC = 2'd0,  // output interconnect (PE results)
    WSRC_LOAD = 2'd1,  // data memory
    WSRC_COPY = 2'd2   // crossbar output, copy between banks
  } wsrc_e;

  // ---------------------------------------------------------------------
  // Instruction lengths in bits, for D layers, B banks, R registers per bank
  // and a data memory of 2^MA rows. Fields are packed from bit 0 upwards,
  // opcode first; see the decoder for the field order.
  //   nop    : opcode
  //   load   : opcode, word mask (B), row address (MA)
  //   store  : opcode, word mask (B), row address (MA),
  //            B x {register address (LR), valid_rst (1)}
  //   store_4: opcode, row address (MA), 4 x {bank (LB), register (LR), valid_rst}
  //   copy_4 : opcode, 4 x {source bank (LB), register (LR), valid_rst, destination bank (LB)}
  //   exec   : opcode, B x {register address, valid_rst}, B x crossbar select (LB),
  //            (#PE) x PE operation (2), B x {write enable, layer select (LSEL)}
  // ---------------------------------------------------------------------
  function automatic int unsigned clog2i(int unsigned x);
    int unsigned r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  function automatic int unsigned lsel_w(int unsigned d);
    return (d > 1) ? clog2i(d) : 1;
  endfunction

  function automatic int unsigned num_pe(int unsigned d, int unsigned b);
    return (b >> d) * ((1 << d) - 1);
  endfunction

  function automatic int unsigned len_of(opcode_e op, int unsigned d, int unsigned b,
                                         int unsigned r, int unsigned ma);
    int unsigned lr = clog2i(r);
    int unsigned lb = clog2i(b);
    case (op)
      OP_EXEC:   return OPC_W + b*(lr+1) + b*lb + 2*num_pe(d, b) + b*(1 + lsel_w(d));
      OP_LOAD:   return OPC_W + b + ma;
      OP_STORE:  return OPC_W + b + ma + b*(lr+1);
      OP_STORE4: return OPC_W + ma + NSLOT*(lb + lr + 1);
      OP_COPY4:  return OPC_W + NSLOT*(2*lb + lr + 1);
      default:   return OPC_W;
    endcase
  endfunction

  // IL: the longest instruction, which is also the instruction-memory width.
  function automatic int unsigned instr_len_max(int unsigned d, int unsigned b,
                                                int unsigned r, int unsigned ma);
    int unsigned m = 0;
    for (int o = 0; o < 6; o++) begin
      int unsigned l = len_of(opcode_e'(o), d, b, r, ma);
      if (l > m) m = l;
    end
    return m;
  endfunction

endpackage
