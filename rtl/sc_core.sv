// sc_core -- semi-parallel Fast-SSC decoder core: one decoding attempt.
//
// The core walks the SC decoding tree depth first, left child first, and
// stops at special nodes (Rate-0, Rate-1, Rep, SPC), which it decodes in one
// cycle from their top LLRs. Branch operations use PE parallel processing
// elements, so a branch producing 2^s LLRs takes max(1, 2^s/PE) cycles:
//   F   parent -> left child LLRs
//   G   parent + left partial sums -> right child LLRs
//   DEC decode a special node, write its partial sums and message bits
//   CMB in-place partial-sum combine of a parent once its right child is done
// A Rate-0 node costs no cycle: a Rate-0 left child is never entered and the
// parent goes straight to G (the Rate-0/G merge); the partial-sum memory is
// cleared at the start of each attempt so its partial sums read as zero.
// Special nodes are limited to PE bits, SPC nodes to SPC_MAX bits; larger
// ones are split into their children.
//
// Bit flipping: cur is the flip set of this attempt (lambda_0 of the
// sorter). Decoded nodes are numbered in decoding order; when a node number
// matches a flip entry, node_decoder flips the corresponding decision. Every
// decoded node is reported on the nd_* outputs for the same cycle: its type,
// stage, top LLRs (for the metric generator), its message bits and
// information mask (for the CRC) and whether it comes after the last flip.
//
// Interface: load the channel with ld_we/ld_row/ld_data (PE LLRs per row,
// N/PE rows) while idle, then pulse start; done pulses in the cycle after the
// root completes; u_all then holds the estimated message vector.
// The instruction set and the semi-parallel structure follow the paper; the
// schedule, memory layout and node numbering are this design's own.
module sc_core
  import dscf_pkg::*;
#(
  parameter int N       = 1024,
  parameter int PE      = 64,
  parameter int SPC_MAX = 8,
  localparam int NL   = $clog2(N),
  localparam int LPE  = $clog2(PE),
  localparam int SW   = $clog2(LPE + 1),
  localparam int ROWS = llr_rows(NL, LPE),
  localparam int AW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int RW   = (N / PE > 1) ? $clog2(N / PE) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           info_mask,
  input  logic                   ld_we,
  input  logic [RW-1:0]          ld_row,
  input  logic [PE-1:0][QC-1:0]  ld_data,
  input  logic                   start,
  input  elem_t                  cur,
  output logic                   busy,
  output logic                   done,
  // decoded-node report
  output logic                   nd_valid,
  output node_type_t             nd_type,
  output logic [SW-1:0]          nd_stage,
  output llr_t [PE-1:0]          nd_llr,
  output logic [NODE_W-1:0]      nd_id,
  output logic                   nd_after,
  output logic                   nd_flip,
  output logic [PE-1:0]          nd_u,
  output logic [PE-1:0]          nd_umask,
  output logic                   ev_r0_merge,
  output logic                   ev_spc_fix,
  output logic [N-1:0]           u_all,
  output logic [N-1:0]           x_all
);
  typedef enum logic [2:0] {ST_IDLE, ST_F, ST_G, ST_DEC, ST_CMB} st_t;
  typedef struct packed {
    st_t               st;
    logic [SW+3:0]     s;
    logic [NL:0]       k;
  } go_t;

  st_t              st;
  logic [SW+3:0]    s;        // stage of the node operated on / parent stage
  logic [NL:0]      k;
  logic [NL:0]      c;        // chunk counter
  logic [NODE_W-1:0] node_id;

  node_type_t types [2*N];
  node_classifier #(.N(N)) u_cls (.info_mask(info_mask), .types(types));

  function automatic node_type_t eff_type(input int ss, input int kk);
    node_type_t t;
    int size;
    t = types[(1 << (NL - ss)) + kk];
    size = 1 << ss;
    if ((t == NT_R1 || t == NT_REP || t == NT_SPC) && size > PE) t = NT_GEN;
    if (t == NT_SPC && size > SPC_MAX) t = NT_GEN;
    return t;
  endfunction

  function automatic go_t finish(input int ss, input int kk);
    go_t g;
    if (ss == NL)            g = '{st: ST_IDLE, s: '0, k: '0};
    else if (kk % 2 == 1)    g = '{st: ST_CMB, s: (SW+4)'(ss + 1), k: (NL+1)'(kk / 2)};
    else                     g = '{st: ST_G,   s: (SW+4)'(ss + 1), k: (NL+1)'(kk / 2)};
    return g;
  endfunction

  function automatic go_t visit(input int ss, input int kk);
    node_type_t t;
    go_t g;
    t = eff_type(ss, kk);
    if (t == NT_R0)        g = finish(ss, kk);
    else if (t != NT_GEN)  g = '{st: ST_DEC, s: (SW+4)'(ss), k: (NL+1)'(kk)};
    else if (eff_type(ss - 1, 2 * kk) == NT_R0)
                           g = '{st: ST_G, s: (SW+4)'(ss), k: (NL+1)'(kk)};
    else                   g = '{st: ST_F, s: (SW+4)'(ss), k: (NL+1)'(kk)};
    return g;
  endfunction

  // ---------------------------------------------------------------- datapath
  logic          mem_we;
  logic [AW-1:0] mem_waddr, mem_ra0, mem_ra1;
  llr_t [PE-1:0] mem_wdata, mem_rd0, mem_rd1;
  llr_t [PE-1:0] pe_a, pe_b, pe_y;
  logic [PE-1:0] pe_beta;

  logic           ps_clr, ps_wr, ps_cmb;
  logic [RW-1:0]  ps_wrow, ps_rl, ps_rr, ps_rd;
  logic [LPE:0]   ps_sh;
  logic [PE-1:0]  ps_wmask, ps_wx, ps_wu, ps_cmask, ps_rdx;

  logic [PE-1:0]  dec_beta, dec_u;
  logic           dec_gamma;
  logic [IDX_W-1:0] dec_imin;
  logic           flip_en;
  logic [IDX_W-1:0] flip_i1, flip_i2;

  logic           last_chunk;
  go_t            nxt;

  llr_mem #(.ROWS(ROWS), .PE(PE)) u_llr (
    .clk(clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .raddr0(mem_ra0), .rdata0(mem_rd0), .raddr1(mem_ra1), .rdata1(mem_rd1)
  );

  pe_array #(.PE(PE)) u_pe (
    .op_g(st == ST_G), .a(pe_a), .b(pe_b), .beta(pe_beta), .y(pe_y)
  );

  psum_mem #(.N(N), .PE(PE)) u_ps (
    .clk(clk), .clr(ps_clr), .wr_en(ps_wr), .wr_row(ps_wrow), .wr_mask(ps_wmask),
    .wr_x(ps_wx), .wr_u(ps_wu), .cmb_en(ps_cmb), .cmb_row_l(ps_rl), .cmb_row_r(ps_rr),
    .cmb_shift(ps_sh), .cmb_mask(ps_cmask), .rd_row(ps_rd), .rd_x(ps_rdx),
    .u_all(u_all), .x_all(x_all)
  );

  node_decoder #(.PE(PE)) u_dec (
    .ntype(nd_type), .stage(nd_stage), .llr(mem_rd0), .flip_en(flip_en),
    .idx1(flip_i1), .idx2(flip_i2), .beta(dec_beta), .u(dec_u),
    .gamma(dec_gamma), .imin(dec_imin)
  );

  // flip-set lookup and "after the last flip" test
  always_comb begin
    flip_en = 1'b0;
    flip_i1 = '0;
    flip_i2 = '0;
    for (int e = 0; e < OMEGA; e++)
      if (e < int'(cur.order) && cur.flips[e].node == node_id) begin
        flip_en = 1'b1;
        flip_i1 = cur.flips[e].idx1;
        flip_i2 = cur.flips[e].idx2;
      end
    nd_after = 1'b1;
    for (int e = 0; e < OMEGA; e++)
      if (e + 1 == int'(cur.order) && node_id <= cur.flips[e].node) nd_after = 1'b0;
  end

  // control and addresses
  int sp, hh, nch, posl, posn, sizen, offn;
  always_comb begin
    sp    = int'(s);
    hh    = (sp > 0) ? (1 << (sp - 1)) : 0;
    nch   = (hh >= PE) ? hh / PE : 1;
    posl  = int'(k) << sp;
    sizen = 1 << sp;
    posn  = int'(k) << sp;
    offn  = posn % PE;

    mem_we = 1'b0; mem_waddr = '0; mem_ra0 = '0; mem_ra1 = '0;
    ps_clr = start && st == ST_IDLE; ps_wr = 1'b0; ps_cmb = 1'b0;
    ps_wrow = '0; ps_rl = '0; ps_rr = '0; ps_rd = '0; ps_sh = '0;
    ps_wmask = '0; ps_cmask = '0;
    nd_valid = 1'b0; nd_type = NT_R0; nd_stage = '0;
    last_chunk = 1'b1;

    unique case (st)
      ST_IDLE: begin
        mem_we    = ld_we;
        mem_waddr = AW'(row_base(NL, LPE) + int'(ld_row));
      end
      ST_F, ST_G: begin
        last_chunk = (int'(c) == nch - 1);
        if (hh >= PE) begin
          mem_ra0 = AW'(row_base(sp, LPE) + int'(c));
          mem_ra1 = AW'(row_base(sp, LPE) + int'(c) + hh / PE);
          ps_rd   = RW'(posl / PE + int'(c));
        end else begin
          mem_ra0 = AW'(row_base(sp, LPE));
          mem_ra1 = AW'(row_base(sp, LPE));
          ps_rd   = RW'(posl / PE);
        end
        mem_we    = 1'b1;
        mem_waddr = AW'(row_base(sp - 1, LPE) + int'(c));
      end
      ST_DEC: begin
        mem_ra0  = AW'(row_base(sp, LPE));
        nd_valid = 1'b1;
        nd_type  = eff_type(sp, int'(k));
        nd_stage = SW'(sp);
        ps_wr    = 1'b1;
        ps_wrow  = RW'(posn / PE);
        ps_wmask = ((PE'(1) << sizen) - PE'(1)) << offn;
      end
      ST_CMB: begin
        last_chunk = (int'(c) == nch - 1);
        ps_cmb = 1'b1;
        if (hh >= PE) begin
          ps_rl = RW'(posl / PE + int'(c));
          ps_rr = RW'(posl / PE + int'(c) + hh / PE);
          ps_sh = '0;
          ps_cmask = '1;
        end else begin
          ps_rl = RW'(posl / PE);
          ps_rr = RW'(posl / PE);
          ps_sh = (LPE+1)'(hh);
          ps_cmask = ((PE'(1) << hh) - PE'(1)) << (posl % PE);
        end
      end
      default: ;
    endcase
  end

  assign nd_id = node_id;

  // data steering
  logic [N-1:0] im_sh;
  always_comb begin
    im_sh = info_mask >> posn;
    pe_a  = mem_rd0;
    pe_b  = mem_rd1;
    if (hh < PE)
      for (int i = 0; i < PE; i++) pe_b[i] = (i + hh < PE) ? mem_rd0[i + hh] : '0;
    pe_beta = (hh >= PE) ? ps_rdx : (ps_rdx >> (posl % PE));
    if (st == ST_IDLE)
      for (int i = 0; i < PE; i++) mem_wdata[i] = llr_t'($signed(ld_data[i]));
    else
      mem_wdata = pe_y;
    nd_llr     = mem_rd0;
    nd_flip    = nd_valid && flip_en;
    ev_spc_fix = nd_valid && (nd_type == NT_SPC) && dec_gamma;
    ps_wx      = dec_beta << offn;
    ps_wu      = dec_u << offn;
    nd_u       = dec_u;
    nd_umask   = im_sh[PE-1:0] & ((PE'(1) << sizen) - PE'(1));
    if (sizen >= PE) nd_umask = im_sh[PE-1:0];
  end

  // next node after the current operation
  always_comb begin
    nxt = '{st: st, s: s, k: k};
    unique case (st)
      ST_IDLE: if (start) nxt = visit(NL, 0);
      ST_F:    if (last_chunk) nxt = visit(int'(s) - 1, 2 * int'(k));
      ST_G:    if (last_chunk) nxt = visit(int'(s) - 1, 2 * int'(k) + 1);
      ST_DEC:  nxt = finish(int'(s), int'(k));
      ST_CMB:  if (last_chunk) nxt = finish(int'(s), int'(k));
      default: ;
    endcase
  end

  // a G issued for a new parent whose left child is Rate-0 (merged Rate-0)
  always_comb begin
    logic new_op;
    new_op = (st == ST_IDLE) ? start : last_chunk;
    ev_r0_merge = new_op && nxt.st == ST_G && nxt.s != '0 &&
                  eff_type(int'(nxt.s) - 1, 2 * int'(nxt.k)) == NT_R0;
  end
  assign busy = (st != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; s <= '0; k <= '0; c <= '0; node_id <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == ST_IDLE && start) node_id <= '0;
      if (st == ST_DEC) node_id <= node_id + 1'b1;
      if (st != ST_IDLE && !last_chunk) begin
        c <= c + 1'b1;
      end else begin
        c  <= '0;
        st <= nxt.st;
        s  <= nxt.s;
        k  <= nxt.k;
        if ((st != ST_IDLE || start) && nxt.st == ST_IDLE) done <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ps_wr && ps_cmb));
endmodule
