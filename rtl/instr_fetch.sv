// instr_fetch: fetch and alignment of densely packed variable-length
// instructions.
//
// Instructions of different lengths are stored back to back in instruction
// memory rows of IL bits, so an instruction may start anywhere in a row and
// may continue into the next one. The unit keeps two consecutive rows, the
// Current and the Next row, and a shifter that moves the window {Next,Current}
// right by the bit offset of the current instruction: the IL low bits of the
// shifted window always contain the whole instruction, because no instruction
// is longer than IL. The decoder returns the instruction's length; the offset
// advances by it, and when it passes the end of Current, Next becomes Current
// and the row already read ahead from memory becomes Next. One instruction is
// issued every cycle, without stalls. This structure (shifter, Next, Current)
// follows the paper; the read-ahead and the start-up sequence are this
// design's.
//
// Timing: 'start' (one cycle, in idle) begins the program at bit 0 of row 0.
// Two cycles fill Current and Next; from the third cycle on, instr_valid is
// high and one instruction is presented per cycle until prog_bits bits have
// been issued. 'done' pulses in the cycle after the last instruction; busy is
// high from start until then. The memory has one cycle read latency.
module instr_fetch
  import dpu_pkg::*;
#(
  parameter int unsigned IL         = instr_len_max(D_DEF, B_DEF, R_DEF, clog2i(DMEM_DEPTH_DEF)),
  parameter int unsigned IMEM_DEPTH = IMEM_DEPTH_DEF,
  parameter int unsigned LW         = 16,   // width of an instruction length
  localparam int unsigned LA = $clog2(IMEM_DEPTH),
  localparam int unsigned LO = $clog2(IL)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   prog_bits,
  // instruction memory read port
  output logic [LA-1:0] imem_raddr,
  input  logic [IL-1:0] imem_rdata,
  // to and from the decoder
  output logic [IL-1:0] instr,
  output logic          instr_valid,
  input  logic [LW-1:0] instr_len,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_FILL0, S_FILL1, S_RUN} state_e;
  state_e state;

  logic [IL-1:0]   cur_row, nxt_row;
  logic [LO-1:0]   off;
  logic [31:0]     bit_ptr;
  logic [LA-1:0]   req_row;      // row whose data is on imem_rdata
  logic [2*IL-1:0] window;
  logic [LO+LW:0]  new_off;
  logic            adv;

  assign window      = {nxt_row, cur_row} >> off;
  assign instr       = window[IL-1:0];
  assign instr_valid = (state == S_RUN) && (bit_ptr < prog_bits);
  assign busy        = (state != S_IDLE);
  assign done        = (state == S_RUN) && !instr_valid;
  assign new_off     = (LO+LW+1)'(off) + (LO+LW+1)'(instr_len);
  assign adv         = instr_valid && (new_off >= (LO+LW+1)'(IL));

  always_comb begin
    unique case (state)
      S_IDLE:  imem_raddr = '0;
      S_FILL0: imem_raddr = LA'(1);
      S_FILL1: imem_raddr = LA'(2);
      default: imem_raddr = adv ? req_row + LA'(1) : req_row;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur_row <= '0;
      nxt_row <= '0;
      off     <= '0;
      bit_ptr <= '0;
      req_row <= '0;
    end else begin
      req_row <= imem_raddr;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state   <= S_FILL0;
            off     <= '0;
            bit_ptr <= '0;
          end
        end
        S_FILL0: begin
          cur_row <= imem_rdata;
          state   <= S_FILL1;
        end
        S_FILL1: begin
          nxt_row <= imem_rdata;
          state   <= S_RUN;
        end
        S_RUN: begin
          if (instr_valid) begin
            bit_ptr <= bit_ptr + 32'(instr_len);
            if (adv) begin
              cur_row <= nxt_row;
              nxt_row <= imem_rdata;
              off     <= LO'(new_off - (LO+LW+1)'(IL));
            end else begin
              off     <= LO'(new_off);
            end
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An instruction never spans more than the two buffered rows.
  assert property (@(posedge clk) disable iff (!rst_n)
                   instr_valid |-> (instr_len != '0 && instr_len <= LW'(IL)));

endmodule
