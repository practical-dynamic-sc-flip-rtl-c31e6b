// fast_dscf_decoder -- Fast Dynamic SC-Flip polar decoder (top level).
//
// A frame is first decoded by the Fast-SSC core (sc_core). While it runs, the
// CRC unit absorbs the decoded information bits and the sorter datapath
// (metric_gen -> cand_shift_reg -> insertion_sorter) collects bit-flipping
// candidates with their decision metrics. If the CRC fails, the decoder
// starts additional attempts: the sorter shifts forward, its new head
// lambda_0 (the most likely flip set, order w) is handed to the core, which
// decodes again with those decisions flipped and, while w < OMEGA, adds
// candidates of order w+1 built on top of lambda_0. Decoding stops at the
// first attempt with a valid CRC, after TMAX additional attempts, or when
// no candidate is left. This is the DSCF procedure of the paper with its
// hardware simplifications: constant f* approximation, special nodes,
// reduced search spans (2 for Rate-1, 4 for SPC), metric normalisation and
// a sorter of SLEN <= TMAX elements.
//
// Defaults are the omega = 2 decoder: N = 1024, PE = 64, TMAX = 100,
// SLEN = 50, SPC nodes of at most 8 bits (OMEGA and the bit widths are in
// dscf_pkg).
//
// Interface: info_mask (1 = information bit, the last CRC_W of them carry the
// CRC) must be stable. Load the channel LLRs with ld_we / ld_row / ld_data
// (PE LLRs of QC bits per row, rows 0..N/PE-1) while idle, pulse start; busy
// is high until done pulses. With done, success tells whether the CRC
// matched, u_hat holds the estimated message vector u (information bits at
// the positions of info_mask) and attempts the number of additional
// attempts used. The ev_* outputs pulse on internal events (for
// monitoring). One idle cycle (INIT) precedes each frame, one (LAUNCH)
// each attempt, and after the core finishes the decoder waits until the
// last candidates have entered the sorter before testing the CRC.
module fast_dscf_decoder
  import dscf_pkg::*;
#(
  parameter int N       = 1024,
  parameter int PE      = 64,
  parameter int TMAX    = 100,
  parameter int SLEN    = 50,
  parameter int SPC_MAX = 8,
  localparam int LPE = $clog2(PE),
  localparam int SW  = $clog2(LPE + 1),
  localparam int RW  = (N / PE > 1) ? $clog2(N / PE) : 1,
  localparam int TW  = $clog2(TMAX + 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           info_mask,
  input  logic                   ld_we,
  input  logic [RW-1:0]          ld_row,
  input  logic [PE-1:0][QC-1:0]  ld_data,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic                   success,
  output logic [N-1:0]           u_hat,
  output logic [TW-1:0]          attempts,
  // event pulses
  output logic                   ev_attempt,    // an additional attempt starts
  output logic                   ev_flip,       // a decision is flipped
  output logic                   ev_r0_merge,   // Rate-0 left child merged into G
  output logic                   ev_spc_fix,    // SPC parity correction
  output logic                   ev_insert,     // candidates enter the sorter
  output logic [1:0]             ev_drop        // candidates fall off the sorter
);
  typedef enum logic [2:0] {T_IDLE, T_INIT, T_LAUNCH, T_RUN, T_DRAIN, T_CHECK} tst_t;
  tst_t st;

  elem_t [SLEN-1:0] lam;
  elem_t [5:0]      cand;
  elem_t [2:0]      grp;
  logic             grp_valid, csr_empty;

  logic             core_start, core_done, core_busy;
  logic             nd_valid, nd_after, nd_flip;
  node_type_t       nd_type;
  logic [SW-1:0]    nd_stage;
  llr_t [PE-1:0]    nd_llr;
  logic [NODE_W-1:0] nd_id;
  logic [PE-1:0]    nd_u, nd_umask;
  logic [N-1:0]     x_all;
  logic             crc_ok;
  logic [CRC_W-1:0] crc_val;
  metric_t          m2;

  logic sorter_init, sorter_shift, clr_attempt;

  sc_core #(.N(N), .PE(PE), .SPC_MAX(SPC_MAX)) u_core (
    .clk(clk), .rst_n(rst_n), .info_mask(info_mask),
    .ld_we(ld_we && st == T_IDLE), .ld_row(ld_row), .ld_data(ld_data),
    .start(core_start), .cur(lam[0]), .busy(core_busy), .done(core_done),
    .nd_valid(nd_valid), .nd_type(nd_type), .nd_stage(nd_stage), .nd_llr(nd_llr),
    .nd_id(nd_id), .nd_after(nd_after), .nd_flip(nd_flip), .nd_u(nd_u),
    .nd_umask(nd_umask), .ev_r0_merge(ev_r0_merge), .ev_spc_fix(ev_spc_fix),
    .u_all(u_hat), .x_all(x_all)
  );

  crc_unit #(.PE(PE)) u_crc (
    .clk(clk), .rst_n(rst_n), .clr(clr_attempt), .en(nd_valid),
    .bits(nd_u), .mask(nd_umask), .crc(crc_val), .ok(crc_ok)
  );

  metric_gen #(.PE(PE)) u_metric (
    .clk(clk), .rst_n(rst_n), .clr(clr_attempt), .node_valid(nd_valid),
    .ntype(nd_type), .stage(nd_stage), .llr(nd_llr), .node_id(nd_id),
    .accum_en(nd_after),
    .gen_en(nd_after && int'(lam[0].order) < OMEGA && TMAX > 0),
    .cur(lam[0]), .cand(cand), .m2(m2)
  );

  cand_shift_reg u_csr (
    .clk(clk), .rst_n(rst_n), .load(nd_valid), .in(cand),
    .out_valid(grp_valid), .out(grp), .empty(csr_empty)
  );

  insertion_sorter #(.SLEN(SLEN)) u_sorter (
    .clk(clk), .rst_n(rst_n), .init(sorter_init), .insert(grp_valid),
    .new_el(grp), .shift(sorter_shift), .lam(lam), .dropped(ev_drop)
  );

  logic check_fail;
  assign check_fail  = !crc_ok && (int'(attempts) < TMAX) && lam[1].valid;

  assign sorter_init  = (st == T_INIT);
  assign sorter_shift = (st == T_CHECK) && check_fail;
  assign clr_attempt  = (st == T_INIT) || sorter_shift;
  assign core_start   = (st == T_LAUNCH);
  assign ev_attempt   = sorter_shift;
  assign ev_flip      = nd_valid && nd_flip;
  assign ev_insert    = grp_valid;
  assign busy         = (st != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= T_IDLE;
      done     <= 1'b0;
      success  <= 1'b0;
      attempts <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        T_IDLE:   if (start) st <= T_INIT;
        T_INIT:   begin attempts <= '0; st <= T_LAUNCH; end
        T_LAUNCH: st <= T_RUN;
        T_RUN:    if (core_done) st <= T_DRAIN;
        T_DRAIN:  if (csr_empty) st <= T_CHECK;
        T_CHECK: begin
          if (check_fail) begin
            attempts <= attempts + 1'b1;
            st       <= T_LAUNCH;
          end else begin
            success <= crc_ok;
            done    <= 1'b1;
            st      <= T_IDLE;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // the sorter is never shifted while candidates are still on their way
  assert property (@(posedge clk) disable iff (!rst_n) sorter_shift |-> csr_empty);
endmodule
