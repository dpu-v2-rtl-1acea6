// decoder: instruction decoder.
//
// Turns the aligned instruction from the fetch unit into the control signals
// of every pipeline stage. The instruction set is the paper's (nop, load,
// store, store_4, copy_4, exec); the bit-level field layout is this design's
// and is listed in dpu_pkg. The decoder is combinational; the control
// pipeline delays each group of outputs to its stage:
//
//   read stage (now)   rd_addr/rd_rst per bank, crossbar selects
//   PE layer l         pe_op of that layer's PEs (delayed 1 + l cycles)
//   memory-read stage  ld_en, ld_addr (delayed D cycles)
//   write-back stage   wr_en, wr_lsel, wsrc, st_en, st_addr, st_mask
//                      (delayed D + 1 cycles)
//
// How each instruction drives them:
//   exec    reads one register per bank (with its valid_rst bit), routes the
//           reads to the tree inputs through the crossbar, sets every PE's
//           operation and, per bank, whether and from which PE layer to write.
//   load    reads a data-memory row and writes word j into bank j for each
//           bit j of the mask, at the bank's automatic address.
//   store   reads one register per masked bank; the crossbar passes bank j
//           to word j, and the row is written with the mask.
//   store_4 the same for four (bank, register) pairs.
//   copy_4  four transfers: the crossbar output of the destination bank
//           selects the source bank, and the destination bank writes it.
//   nop     nothing; an invalid instruction (instr_valid = 0) acts as nop.
module decoder
  import dpu_pkg::*;
#(
  parameter int unsigned D          = D_DEF,
  parameter int unsigned B          = B_DEF,
  parameter int unsigned R          = R_DEF,
  parameter int unsigned DMEM_DEPTH = DMEM_DEPTH_DEF,
  localparam int unsigned LR   = $clog2(R),
  localparam int unsigned LB   = $clog2(B),
  localparam int unsigned MA   = $clog2(DMEM_DEPTH),
  localparam int unsigned NPE  = num_pe(D, B),
  localparam int unsigned LSEL = lsel_w(D),
  localparam int unsigned IL   = instr_len_max(D, B, R, MA),
  localparam int unsigned LW   = 16
) (
  input  logic [IL-1:0]   instr,
  input  logic            instr_valid,
  output logic [LW-1:0]   len,
  // read stage
  output logic [LR-1:0]   rd_addr [B],
  output logic [B-1:0]    rd_rst,
  output logic [LB-1:0]   xsel    [B],
  // PE layers
  output pe_op_e          pe_op   [NPE],
  // memory read stage
  output logic            ld_en,
  output logic [MA-1:0]   ld_addr,
  // write-back stage
  output logic [B-1:0]    wr_en,
  output logic [LSEL-1:0] wr_lsel [B],
  output wsrc_e           wsrc,
  output logic            st_en,
  output logic [MA-1:0]   st_addr,
  output logic [B-1:0]    st_mask,
  output logic            is_exec,
  output opcode_e         opcode
);

  // exec field offsets
  localparam int unsigned E_RD   = OPC_W;
  localparam int unsigned E_XSEL = E_RD + B*(LR+1);
  localparam int unsigned E_OP   = E_XSEL + B*LB;
  localparam int unsigned E_WR   = E_OP + 2*NPE;
  // load / store offsets
  localparam int unsigned M_MASK = OPC_W;
  localparam int unsigned M_ADDR = OPC_W + B;
  localparam int unsigned S_RD   = OPC_W + B + MA;
  // store_4 / copy_4 slot sizes
  localparam int unsigned S4_SLOT = LB + LR + 1;
  localparam int unsigned C4_SLOT = 2*LB + LR + 1;

  always_comb begin
    opcode = instr_valid ? opcode_e'(instr[OPC_W-1:0]) : OP_NOP;
    len    = LW'(len_of(opcode, D, B, R, MA));
    // defaults: nothing happens
    for (int j = 0; j < B; j++) begin
      rd_addr[j] = '0;
      xsel[j]    = LB'(j);
      wr_lsel[j] = '0;
    end
    for (int p = 0; p < NPE; p++) pe_op[p] = PE_ADD;
    rd_rst  = '0;
    wr_en   = '0;
    wsrc    = WSRC_EXEC;
    ld_en   = 1'b0;
    ld_addr = '0;
    st_en   = 1'b0;
    st_addr = '0;
    st_mask = '0;
    is_exec = 1'b0;

    unique case (opcode)
      OP_EXEC: begin
        is_exec = 1'b1;
        for (int j = 0; j < B; j++) begin
          rd_addr[j] = instr[E_RD + j*(LR+1) +: LR];
          rd_rst[j]  = instr[E_RD + j*(LR+1) + LR];
          xsel[j]    = instr[E_XSEL + j*LB +: LB];
          wr_en[j]   = instr[E_WR + j*(LSEL+1)];
          wr_lsel[j] = instr[E_WR + j*(LSEL+1) + 1 +: LSEL];
        end
        for (int p = 0; p < NPE; p++) pe_op[p] = pe_op_e'(instr[E_OP + 2*p +: 2]);
      end
      OP_LOAD: begin
        wsrc    = WSRC_LOAD;
        wr_en   = instr[M_MASK +: B];
        ld_en   = 1'b1;
        ld_addr = instr[M_ADDR +: MA];
      end
      OP_STORE: begin
        st_en   = 1'b1;
        st_mask = instr[M_MASK +: B];
        st_addr = instr[M_ADDR +: MA];
        for (int j = 0; j < B; j++) begin
          rd_addr[j] = instr[S_RD + j*(LR+1) +: LR];
          rd_rst[j]  = instr[S_RD + j*(LR+1) + LR];
        end
      end
      OP_STORE4: begin
        st_en   = 1'b1;
        st_addr = instr[OPC_W +: MA];
        for (int k = 0; k < NSLOT; k++) begin
          automatic logic [LB-1:0] bk = instr[OPC_W + MA + k*S4_SLOT +: LB];
          rd_addr[bk] = instr[OPC_W + MA + k*S4_SLOT + LB +: LR];
          rd_rst[bk]  = instr[OPC_W + MA + k*S4_SLOT + LB + LR];
          st_mask[bk] = 1'b1;
        end
      end
      OP_COPY4: begin
        wsrc = WSRC_COPY;
        for (int k = 0; k < NSLOT; k++) begin
          automatic logic [LB-1:0] sb = instr[OPC_W + k*C4_SLOT +: LB];
          automatic logic [LB-1:0] db = instr[OPC_W + k*C4_SLOT + LB + LR + 1 +: LB];
          rd_addr[sb] = instr[OPC_W + k*C4_SLOT + LB +: LR];
          rd_rst[sb]  = instr[OPC_W + k*C4_SLOT + LB + LR];
          xsel[db]    = sb;
          wr_en[db]   = 1'b1;
        end
      end
      default: ;
    endcase
  end

endmodule
