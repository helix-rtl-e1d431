// Helix base-calling engine: one processing-in-memory dot-product engine that
// serves both the neural-network layers and CTC beam search, plus the read-vote
// unit that merges overlapping reads into a consensus.
//
//   dpe_pipeline - crossbar MACs digitised by SOT-MRAM ADC arrays (5 stages).
//                  The host loads its input register and crossbar and starts
//                  jobs (MAC mode for Conv/GRU/FC layers, CTC mode with merge
//                  switches), then reads the output register.
//   ctc_ctrl     - runs a CTC beam step on the same engine. While it is busy
//                  it owns the engine's ports; host writes and starts are not
//                  allowed then.
//   read_vote    - consensus of consecutive reads, with its SOT-MRAM binary
//                  comparator array.
// The paper's accelerator replicates the engine (8 crossbars per in-situ MAC
// unit, 12 units per tile, 168 tiles) and the comparator arrays (1024); this
// top holds one of each, and the tile buffer, bus, router and activation units
// it would sit among are outside it. The arbitration between host and CTC
// sequencer is this design's own.
module helix_top
  import helix_pkg::*;
#(
  parameter int unsigned N         = XBAR_N,
  parameter int unsigned IR_WORDS  = 128,
  parameter int unsigned BEAM_W    = 10,
  parameter int unsigned MAX_READS = 8,
  parameter int unsigned MAX_LEN   = 30,
  parameter int unsigned CMP_ROWS  = 256,
  parameter int unsigned CMP_COLS  = 256
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host access to the dot-product engine
  input  logic                                ir_we,
  input  logic [$clog2(IR_WORDS)-1:0]         ir_waddr,
  input  logic [N-1:0]                        ir_wdata,
  input  logic                                xb_we,
  input  logic [$clog2(N)-1:0]                xb_row,
  input  logic [N-1:0][CELL_BITS-1:0]         xb_data,
  input  logic                                mac_start,
  input  logic [$clog2(IR_WORDS)-1:0]         mac_base,
  input  logic [$clog2(Q_BITS+1)-1:0]         mac_nslices,
  input  logic                                mac_ctc_mode,
  input  logic [N-2:0]                        mac_merge_sw,
  output logic                                dpe_busy,
  output logic                                dpe_done,
  input  logic [$clog2(N)-1:0]                or_raddr,
  output logic [ACC_W-1:0]                    or_rdata,
  // CTC beam step
  input  logic                                ctc_start,
  input  logic [BEAM_W-1:0][Q_BITS-1:0]       ctc_p_prev,
  input  logic [BEAM_W-1:0][CELL_BITS-1:0]    ctc_p_cur,
  input  logic [BEAM_W*BEAM_W-2:0]            ctc_merge_sw,
  output logic                                ctc_busy,
  output logic                                ctc_done,
  output logic [BEAM_W*BEAM_W-1:0][ACC_W-1:0] ctc_cand_sum,
  // read vote
  input  logic                                rv_ld_we,
  input  logic                                rv_ld_len_we,
  input  logic [$clog2(MAX_READS)-1:0]        rv_ld_read,
  input  logic [$clog2(MAX_LEN)-1:0]          rv_ld_pos,
  input  dna_sym_e                            rv_ld_sym,
  input  logic [$clog2(MAX_LEN+1)-1:0]        rv_ld_len,
  input  logic                                rv_start,
  input  logic [$clog2(MAX_READS+1)-1:0]      rv_nreads,
  output logic                                rv_busy,
  output logic                                rv_cons_valid,
  output dna_sym_e                            rv_cons_sym,
  output logic                                rv_cons_last,
  output logic                                rv_done,
  output logic [15:0]                         rv_n_matched,
  output logic [15:0]                         rv_n_unmatched
);
  localparam int unsigned IAW = $clog2(IR_WORDS);
  localparam int unsigned NAW = $clog2(N);

  // CTC sequencer side of the engine ports
  logic                         c_xb_we, c_ir_we, c_start;
  logic [NAW-1:0]               c_xb_row, c_or_raddr;
  logic [N-1:0][CELL_BITS-1:0]  c_xb_data;
  logic [IAW-1:0]               c_ir_waddr, c_base;
  logic [N-1:0]                 c_ir_wdata;
  logic [$clog2(Q_BITS+1)-1:0]  c_nslices;
  logic [N-2:0]                 c_merge;

  // engine ports after arbitration
  logic                         e_xb_we, e_ir_we, e_start, e_ctc;
  logic [NAW-1:0]               e_xb_row, e_or_raddr;
  logic [N-1:0][CELL_BITS-1:0]  e_xb_data;
  logic [IAW-1:0]               e_ir_waddr, e_base;
  logic [N-1:0]                 e_ir_wdata;
  logic [$clog2(Q_BITS+1)-1:0]  e_nslices;
  logic [N-2:0]                 e_merge;

  ctc_ctrl #(.W(BEAM_W), .N(N), .IR_WORDS(IR_WORDS)) u_ctc (
    .clk, .rst_n, .start(ctc_start), .p_prev(ctc_p_prev), .p_cur(ctc_p_cur),
    .merge_sw(ctc_merge_sw), .busy(ctc_busy), .done(ctc_done), .cand_sum(ctc_cand_sum),
    .xb_we(c_xb_we), .xb_row(c_xb_row), .xb_data(c_xb_data),
    .ir_we(c_ir_we), .ir_waddr(c_ir_waddr), .ir_wdata(c_ir_wdata),
    .dpe_start(c_start), .dpe_base(c_base), .dpe_nslices(c_nslices), .dpe_merge(c_merge),
    .dpe_done(dpe_done), .or_raddr(c_or_raddr), .or_rdata(or_rdata)
  );

  always_comb begin
    if (ctc_busy) begin
      e_xb_we = c_xb_we;   e_xb_row = c_xb_row;     e_xb_data = c_xb_data;
      e_ir_we = c_ir_we;   e_ir_waddr = c_ir_waddr; e_ir_wdata = c_ir_wdata;
      e_start = c_start;   e_base = c_base;         e_nslices = c_nslices;
      e_ctc   = 1'b1;      e_merge = c_merge;       e_or_raddr = c_or_raddr;
    end else begin
      e_xb_we = xb_we;     e_xb_row = xb_row;       e_xb_data = xb_data;
      e_ir_we = ir_we;     e_ir_waddr = ir_waddr;   e_ir_wdata = ir_wdata;
      e_start = mac_start; e_base = mac_base;       e_nslices = mac_nslices;
      e_ctc   = mac_ctc_mode; e_merge = mac_merge_sw; e_or_raddr = or_raddr;
    end
  end

  dpe_pipeline #(.N(N), .IR_WORDS(IR_WORDS)) u_dpe (
    .clk, .rst_n, .ir_we(e_ir_we), .ir_waddr(e_ir_waddr), .ir_wdata(e_ir_wdata),
    .xb_we(e_xb_we), .xb_row(e_xb_row), .xb_data(e_xb_data),
    .start(e_start), .in_base(e_base), .nslices(e_nslices), .ctc_mode(e_ctc),
    .merge_sw(e_merge), .busy(dpe_busy), .done(dpe_done),
    .or_raddr(e_or_raddr), .or_rdata(or_rdata)
  );

  read_vote #(.MAX_READS(MAX_READS), .MAX_LEN(MAX_LEN), .ROWS(CMP_ROWS), .COLS(CMP_COLS)) u_rv (
    .clk, .rst_n, .ld_we(rv_ld_we), .ld_len_we(rv_ld_len_we), .ld_read(rv_ld_read),
    .ld_pos(rv_ld_pos), .ld_sym(rv_ld_sym), .ld_len(rv_ld_len), .start(rv_start),
    .nreads(rv_nreads), .busy(rv_busy), .cons_valid(rv_cons_valid), .cons_sym(rv_cons_sym),
    .cons_last(rv_cons_last), .done(rv_done), .n_matched(rv_n_matched), .n_unmatched(rv_n_unmatched)
  );

  // The host leaves the engine alone while a CTC step runs, and a CTC step
  // starts only while the engine is idle.
  a_host_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                                 ctc_busy |-> !(ir_we || xb_we || mac_start));
  a_ctc_idle:   assert property (@(posedge clk) disable iff (!rst_n)
                                 (ctc_start && !ctc_busy) |-> !dpe_busy);
endmodule
