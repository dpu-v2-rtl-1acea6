// dpu_top: the DAG processing unit, version 2.
//
// A statically scheduled processor for irregular dataflow graphs. T = B/2^D
// binary trees of processing elements, each D layers deep, read their 2^D
// inputs from a shared file of B independently addressed register banks
// through a full crossbar (input interconnect) and write results back through
// a "one PE per layer" output interconnect. Banks choose their own write
// address (lowest empty register), so instructions carry only read addresses
// and a valid_rst bit per bank. A data memory B words wide is loaded and
// stored a row at a time with a word mask. Long, variable-length instructions
// are packed densely in an instruction memory and realigned by a shifter.
//
// Pipeline (one instruction per cycle, no stalls, no hazard detection: the
// compiler keeps dependent instructions D+1 apart and predicts every write
// address):
//   cycle s        fetch/align, decode, bank read (+ write-through), crossbar
//   cycle s+1..s+D PE layer 0 .. D-1 (registered after the crossbar and after
//                  every layer); copy and store data travel alongside;
//                  a load reads the data memory in cycle s+D
//   cycle s+D+1    write-back: output interconnect / load data / copy data
//                  into the banks, store data into the data memory
// The paper gives the stages (D+1) and the register positions; the placement
// of the memory read and write is this design's.
//
// Host side (this design's): while idle, the instruction memory is written
// through imem_*, and the data memory is read and written through dmem_*
// (read data one cycle later). 'start' runs the program of prog_bits bits
// from bit 0 of instruction row 0 with all register banks empty; busy stays
// high until the last instruction has written back; done then pulses.
// 'overflow' is a sticky flag set when a bank is written while full.
module dpu_top
  import dpu_pkg::*;
#(
  parameter int unsigned W          = W_DEF,
  parameter int unsigned D          = D_DEF,
  parameter int unsigned B          = B_DEF,
  parameter int unsigned R          = R_DEF,
  parameter int unsigned DMEM_DEPTH = DMEM_DEPTH_DEF,
  parameter int unsigned IMEM_DEPTH = IMEM_DEPTH_DEF,
  localparam int unsigned NIN  = 2 ** D,
  localparam int unsigned T    = B / NIN,
  localparam int unsigned NPT  = NIN - 1,
  localparam int unsigned NPE  = T * NPT,
  localparam int unsigned LR   = $clog2(R),
  localparam int unsigned LB   = $clog2(B),
  localparam int unsigned MA   = $clog2(DMEM_DEPTH),
  localparam int unsigned IA   = $clog2(IMEM_DEPTH),
  localparam int unsigned LSEL = lsel_w(D),
  localparam int unsigned IL   = instr_len_max(D, B, R, MA),
  localparam int unsigned LW   = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // run control
  input  logic          start,
  input  logic [31:0]   prog_bits,
  output logic          busy,
  output logic          done,
  output logic          overflow,
  // instruction memory load port
  input  logic          imem_we,
  input  logic [IA-1:0] imem_waddr,
  input  logic [IL-1:0] imem_wdata,
  // data memory host port
  input  logic          dmem_en,
  input  logic          dmem_we,
  input  logic [MA-1:0] dmem_addr,
  input  logic [B-1:0]  dmem_wmask,
  input  logic [W-1:0]  dmem_wdata [B],
  output logic [W-1:0]  dmem_rdata [B]
);

  // ------------------------------------------------------------------
  // Control signals grouped by the stage that uses them.
  typedef struct packed {
    logic [B-1:0]        wr_en;
    logic [B*LSEL-1:0]   wr_lsel;
    wsrc_e               wsrc;
    logic                st_en;
    logic [MA-1:0]       st_addr;
    logic [B-1:0]        st_mask;
  } wb_ctrl_t;

  typedef struct packed {
    logic          ld_en;
    logic [MA-1:0] ld_addr;
  } mem_ctrl_t;

  // ------------------------------------------------------------------
  // Fetch and decode
  logic [IA-1:0] imem_raddr;
  logic [IL-1:0] imem_rdata;
  logic [IL-1:0] instr;
  logic          instr_valid;
  logic [LW-1:0] instr_len;
  logic          fetch_busy, fetch_done;

  instr_mem #(.IL(IL), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk(clk), .raddr(imem_raddr), .rdata(imem_rdata),
    .we(imem_we && !busy), .waddr(imem_waddr), .wdata(imem_wdata)
  );

  instr_fetch #(.IL(IL), .IMEM_DEPTH(IMEM_DEPTH), .LW(LW)) u_fetch (
    .clk(clk), .rst_n(rst_n), .start(start && !busy), .prog_bits(prog_bits),
    .imem_raddr(imem_raddr), .imem_rdata(imem_rdata),
    .instr(instr), .instr_valid(instr_valid), .instr_len(instr_len),
    .busy(fetch_busy), .done(fetch_done)
  );

  logic [LR-1:0]   rd_addr [B];
  logic [B-1:0]    rd_rst;
  logic [LB-1:0]   xsel    [B];
  pe_op_e          dec_op  [NPE];
  logic            dec_ld_en, dec_st_en, dec_is_exec;
  logic [MA-1:0]   dec_ld_addr, dec_st_addr;
  logic [B-1:0]    dec_wr_en, dec_st_mask;
  logic [LSEL-1:0] dec_wr_lsel [B];
  wsrc_e           dec_wsrc;
  opcode_e         dec_opcode;

  decoder #(.D(D), .B(B), .R(R), .DMEM_DEPTH(DMEM_DEPTH)) u_dec (
    .instr(instr), .instr_valid(instr_valid), .len(instr_len),
    .rd_addr(rd_addr), .rd_rst(rd_rst), .xsel(xsel), .pe_op(dec_op),
    .ld_en(dec_ld_en), .ld_addr(dec_ld_addr),
    .wr_en(dec_wr_en), .wr_lsel(dec_wr_lsel), .wsrc(dec_wsrc),
    .st_en(dec_st_en), .st_addr(dec_st_addr), .st_mask(dec_st_mask),
    .is_exec(dec_is_exec), .opcode(dec_opcode)
  );

  // ------------------------------------------------------------------
  // Control pipeline
  wb_ctrl_t  wb_d, wb_q;
  mem_ctrl_t mem_d, mem_q;

  always_comb begin
    wb_d.wr_en   = dec_wr_en;
    for (int j = 0; j < B; j++) wb_d.wr_lsel[j*LSEL +: LSEL] = dec_wr_lsel[j];
    wb_d.wsrc    = dec_wsrc;
    wb_d.st_en   = dec_st_en;
    wb_d.st_addr = dec_st_addr;
    wb_d.st_mask = dec_st_mask;
    mem_d.ld_en  = dec_ld_en;
    mem_d.ld_addr = dec_ld_addr;
  end

  pipe_delay #(.WIDTH($bits(wb_ctrl_t)), .DEPTH(D + 1)) u_wb_pipe (
    .clk(clk), .rst_n(rst_n), .d(wb_d), .q(wb_q)
  );
  pipe_delay #(.WIDTH($bits(mem_ctrl_t)), .DEPTH(D)) u_mem_pipe (
    .clk(clk), .rst_n(rst_n), .d(mem_d), .q(mem_q)
  );

  // PE operations: op_stage[l] holds the operations for PE layer l, one
  // cycle per layer behind the previous one.
  logic [2*NPE-1:0] op_flat;
  logic [2*NPE-1:0] op_stage [D];
  always_comb begin
    for (int p = 0; p < NPE; p++) op_flat[2*p +: 2] = dec_op[p];
  end
  for (genvar l = 0; l < D; l++) begin : g_op_pipe
    if (l == 0) begin : g_first
      pipe_delay #(.WIDTH(2*NPE), .DEPTH(1)) u_op (
        .clk(clk), .rst_n(rst_n), .d(op_flat), .q(op_stage[0]));
    end else begin : g_next
      pipe_delay #(.WIDTH(2*NPE), .DEPTH(1)) u_op (
        .clk(clk), .rst_n(rst_n), .d(op_stage[l-1]), .q(op_stage[l]));
    end
  end

  // ------------------------------------------------------------------
  // Register banks
  logic [W-1:0]  bank_rdata [B];
  logic [W-1:0]  bank_wdata [B];
  logic [B-1:0]  bank_we;
  logic [B-1:0]  bank_ovf;
  logic          clear_banks;

  assign clear_banks = start && !busy;

  for (genvar j = 0; j < B; j++) begin : g_bank
    logic [LR-1:0] unused_waddr;
    logic [R-1:0]  unused_valid;
    reg_bank #(.W(W), .R(R)) u_bank (
      .clk(clk), .rst_n(rst_n), .clear(clear_banks),
      .rd_addr(rd_addr[j]), .rd_rst(rd_rst[j]), .rd_data(bank_rdata[j]),
      .we(bank_we[j]), .wdata(bank_wdata[j]),
      .wr_addr(unused_waddr), .overflow(bank_ovf[j]), .valid_o(unused_valid)
    );
  end

  // ------------------------------------------------------------------
  // Input interconnect and the pipeline register behind it
  logic [W-1:0] xbar_out [B];
  logic [W-1:0] p0 [B];

  input_xbar #(.W(W), .B(B)) u_xbar (.in_data(bank_rdata), .sel(xsel), .out_data(xbar_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int j = 0; j < B; j++) p0[j] <= '0;
    else        p0 <= xbar_out;
  end

  // Copy / store data path: D more registers, alongside the trees.
  logic [B*W-1:0] p0_flat, xfer_flat;
  logic [W-1:0]   xfer [B];
  always_comb begin
    for (int j = 0; j < B; j++) begin
      p0_flat[j*W +: W] = p0[j];
      xfer[j] = xfer_flat[j*W +: W];
    end
  end
  pipe_delay #(.WIDTH(B*W), .DEPTH(D)) u_xfer (
    .clk(clk), .rst_n(rst_n), .d(p0_flat), .q(xfer_flat)
  );

  // ------------------------------------------------------------------
  // PE trees
  logic [W-1:0] tree_y [T][NPT];

  for (genvar t = 0; t < T; t++) begin : g_tree
    logic [W-1:0] tin  [NIN];
    pe_op_e       top_ [NPT];
    logic [W-1:0] ty   [NPT];
    for (genvar k = 0; k < NIN; k++) begin : g_in
      assign tin[k] = p0[t*NIN + k];
    end
    for (genvar l = 0; l < D; l++) begin : g_lop
      for (genvar i = 0; i < (NIN >> (l + 1)); i++) begin : g_pop
        localparam int unsigned P = NIN - (NIN >> l) + i;
        assign top_[P] = pe_op_e'(op_stage[l][2*(t*NPT + P) +: 2]);
      end
    end
    pe_tree #(.W(W), .D(D)) u_tree (
      .clk(clk), .rst_n(rst_n), .in_data(tin), .op(top_), .y(ty)
    );
    for (genvar p = 0; p < NPT; p++) begin : g_out
      assign tree_y[t][p] = ty[p];
    end
  end

  // ------------------------------------------------------------------
  // Output interconnect and write-back
  logic [LSEL-1:0] wb_lsel [B];
  logic [W-1:0]    oic_out [B];
  logic [W-1:0]    mem_rdata [B];

  always_comb begin
    for (int j = 0; j < B; j++) wb_lsel[j] = wb_q.wr_lsel[j*LSEL +: LSEL];
  end

  output_interconnect #(.W(W), .D(D), .B(B)) u_oic (
    .pe_y(tree_y), .sel(wb_lsel), .out(oic_out)
  );

  always_comb begin
    bank_we = wb_q.wr_en;
    for (int j = 0; j < B; j++) begin
      unique case (wb_q.wsrc)
        WSRC_LOAD: bank_wdata[j] = mem_rdata[j];
        WSRC_COPY: bank_wdata[j] = xfer[j];
        default:   bank_wdata[j] = oic_out[j];
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Data memory, shared with the host port while idle
  logic          dm_re, dm_we;
  logic [MA-1:0] dm_raddr, dm_waddr;
  logic [B-1:0]  dm_wmask;
  logic [W-1:0]  dm_wdata [B];

  always_comb begin
    if (busy) begin
      dm_re    = mem_q.ld_en;
      dm_raddr = mem_q.ld_addr;
      dm_we    = wb_q.st_en;
      dm_waddr = wb_q.st_addr;
      dm_wmask = wb_q.st_mask;
      dm_wdata = xfer;
    end else begin
      dm_re    = dmem_en && !dmem_we;
      dm_raddr = dmem_addr;
      dm_we    = dmem_en && dmem_we;
      dm_waddr = dmem_addr;
      dm_wmask = dmem_wmask;
      dm_wdata = dmem_wdata;
    end
  end

  data_mem #(.W(W), .B(B), .DEPTH(DMEM_DEPTH)) u_dmem (
    .clk(clk), .re(dm_re), .raddr(dm_raddr), .rdata(mem_rdata),
    .we(dm_we), .waddr(dm_waddr), .wmask(dm_wmask), .wdata(dm_wdata)
  );
  assign dmem_rdata = mem_rdata;

  // ------------------------------------------------------------------
  // Run control: drain the pipeline after the last instruction.
  localparam int unsigned DW = $clog2(D + 3);
  logic [DW-1:0] drain;
  logic          draining;

  assign busy = fetch_busy || draining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain    <= '0;
      draining <= 1'b0;
      done     <= 1'b0;
      overflow <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear_banks) overflow <= 1'b0;
      else if (|bank_ovf) overflow <= 1'b1;
      if (fetch_done) begin
        draining <= 1'b1;
        drain    <= DW'(D);
      end else if (draining) begin
        if (drain == '0) begin
          draining <= 1'b0;
          done     <= 1'b1;
        end else begin
          drain <= drain - DW'(1);
        end
      end
    end
  end

  // A copy_4 or exec never writes a bank from two sources; a bank is never
  // written while full (the compiler spills instead).
  assert property (@(posedge clk) disable iff (!rst_n) !(|bank_ovf))
    else $error("register bank written while full");

endmodule
