// tb_sc_core -- checks one decoding attempt of the semi-parallel Fast-SSC
// core (N=64, PE=16, SPC nodes up to 8 bits) against a recursive reference
// decoder written here: min-sum F/G with saturation, nodes classified from
// their frozen pattern (Rate-0, Rate-1, Rep, SPC, limited in size like the
// hardware), Rate-0 left children skipped, special nodes numbered in
// decoding order and flipped as the flip set requests. For every decoded
// node the reported type, stage, top LLRs, message bits, information mask
// and "after the last flip" flag are compared; at the end the message
// vector and the attempt's cycle count (one cycle per F/G/combine chunk and
// per special node) are compared.
module tb_sc_core;
  import dscf_pkg::*;
  localparam int N = 64, PE = 16, SPC_MAX = 8, NL = 6;
  localparam int RW = $clog2(N / PE);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, ld_we = 0, start = 0;
  logic [N-1:0] info_mask = '0;
  logic [RW-1:0] ld_row = '0;
  logic [PE-1:0][QC-1:0] ld_data = '0;
  elem_t cur = '0;
  logic busy, done, nd_valid, nd_after, nd_flip, ev_r0_merge, ev_spc_fix;
  node_type_t nd_type;
  logic [2:0] nd_stage;
  llr_t [PE-1:0] nd_llr;
  logic [NODE_W-1:0] nd_id;
  logic [PE-1:0] nd_u, nd_umask;
  logic [N-1:0] u_all, x_all;
  int checks = 0, failures = 0;

  sc_core #(.N(N), .PE(PE), .SPC_MAX(SPC_MAX)) dut (.*);

  // ------------------------------------------------------------ reference
  typedef struct {
    node_type_t t;
    int stage, pos, after;
    int llr [];
    bit u [];
  } nrec_t;
  nrec_t recs [$];
  int chan [N];
  bit ref_u [N];
  int ref_cycles, n_merge, n_fix;
  elem_t rcur;

  function automatic node_type_t cls(int s, int pos);
    int sz, nf, first_info, last_frozen;
    sz = 1 << s; nf = 0;
    for (int i = 0; i < sz; i++) nf += !info_mask[pos + i];
    if (nf == sz) return NT_R0;
    if (nf == 0) return (sz <= PE) ? NT_R1 : NT_GEN;
    if (nf == sz - 1 && info_mask[pos + sz - 1]) return (sz <= PE) ? NT_REP : NT_GEN;
    if (sz >= 4 && nf == 1 && !info_mask[pos]) return (sz <= SPC_MAX) ? NT_SPC : NT_GEN;
    return NT_GEN;
  endfunction

  function automatic int sat(int v);
    return v > LLR_MAX ? LLR_MAX : (v < -LLR_MAX ? -LLR_MAX : v);
  endfunction
  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  // decodes node (s, pos) from alpha, returns beta
  function automatic void dec(int s, int pos, int alpha [], ref bit beta []);
    node_type_t t;
    int sz, h;
    sz = 1 << s; h = sz / 2;
    t = cls(s, pos);
    beta = new[sz];
    if (t == NT_R0) begin
      foreach (beta[i]) beta[i] = 0;
    end else if (t != NT_GEN) begin
      nrec_t r;
      int id, sum, par, im, fl, i1, i2;
      bit bb [];
      id = recs.size();
      ref_cycles += 1;
      r.t = t; r.stage = s; r.pos = pos; r.llr = alpha;
      fl = 0; i1 = 0; i2 = 0;
      for (int e = 0; e < int'(rcur.order); e++)
        if (int'(rcur.flips[e].node) == id) begin
          fl = 1; i1 = rcur.flips[e].idx1; i2 = rcur.flips[e].idx2;
        end
      r.after = (rcur.order == 0) || (id > int'(rcur.flips[rcur.order - 1].node));
      sum = 0; par = 0; im = 0;
      for (int i = 0; i < sz; i++) begin
        sum += alpha[i];
        beta[i] = alpha[i] < 0;
        par ^= beta[i];
        if (iabs(alpha[i]) < iabs(alpha[im])) im = i;
      end
      if (t == NT_REP) foreach (beta[i]) beta[i] = (sum < 0) ^ fl;
      if (t == NT_SPC) begin
        beta[im] ^= par;
        n_fix += par;
      end
      if (fl && t != NT_REP) begin
        beta[i1] ^= 1;
        if (t == NT_SPC) beta[i2] ^= 1;
      end
      // message bits: u = beta * G (the polar transform is an involution)
      bb = beta;
      for (int st = 1; st < sz; st *= 2)
        for (int i = 0; i < sz; i++)
          if ((i & st) == 0) bb[i] ^= bb[i + st];
      r.u = bb;
      foreach (bb[i]) ref_u[pos + i] = bb[i];
      recs.push_back(r);
    end else begin
      int al [], ar [];
      bit bl [], br [];
      int nch;
      nch = (h >= PE) ? h / PE : 1;
      al = new[h]; ar = new[h];
      if (cls(s - 1, pos) == NT_R0) begin
        n_merge++;
        bl = new[h];
        foreach (bl[i]) bl[i] = 0;
      end else begin
        ref_cycles += nch;
        for (int i = 0; i < h; i++) begin
          int a, b;
          a = alpha[i]; b = alpha[i + h];
          al[i] = ((a < 0) ^ (b < 0) ? -1 : 1) * (iabs(a) < iabs(b) ? iabs(a) : iabs(b));
        end
        dec(s - 1, pos, al, bl);
      end
      ref_cycles += nch;
      for (int i = 0; i < h; i++)
        ar[i] = sat(alpha[i + h] + (bl[i] ? -alpha[i] : alpha[i]));
      dec(s - 1, pos + h, ar, br);
      ref_cycles += nch;
      for (int i = 0; i < h; i++) begin
        beta[i] = bl[i] ^ br[i];
        beta[i + h] = br[i];
      end
    end
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got_nodes, got_cycles, got_merge, got_fix;
  always @(posedge clk) begin
    if (busy) got_cycles++;
    if (ev_r0_merge) got_merge++;
    if (ev_spc_fix) got_fix++;
    if (nd_valid) begin
      int id, sz;
      id = got_nodes;
      got_nodes++;
      checks++;
      if (id >= recs.size()) failures++;
      else begin
        logic [PE-1:0] em;
        int bad;
        sz = 1 << recs[id].stage;
        bad = 0;
        if (nd_type != recs[id].t || int'(nd_stage) != recs[id].stage ||
            int'(nd_id) != id || int'(nd_after) != recs[id].after) bad = 1;
        for (int i = 0; i < sz; i++) begin
          if (int'(nd_llr[i]) != recs[id].llr[i]) bad = 2;
          if (nd_u[i] != recs[id].u[i]) bad = 3;
        end
        em = '0;
        for (int i = 0; i < sz; i++) em[i] = info_mask[recs[id].pos + i];
        if (nd_umask != em) bad = 4;
        if (bad != 0) begin
          failures++;
          if (failures < 10) $display("node %0d mismatch %0d (type %0d/%0d stage %0d/%0d)",
                                      id, bad, nd_type, recs[id].t, nd_stage, recs[id].stage);
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 300; fr++) begin
      int al [];
      bit bt [];
      int nn;
      // random frozen set: mostly information towards the end
      for (int i = 0; i < N; i++) begin
        int p;
        p = (fr % 5 == 0) ? 50 : ((i * 100) / N);
        info_mask[i] = ($urandom_range(0, 99) < p);
      end
      if (fr == 1) info_mask = '0;
      if (fr == 2) info_mask = '1;
      for (int r = 0; r < N / PE; r++) begin
        ld_row = RW'(r);
        for (int i = 0; i < PE; i++) begin
          chan[r * PE + i] = $urandom_range(0, 63) - 32;
          ld_data[i] = QC'(chan[r * PE + i]);
        end
        ld_we = 1;
        @(negedge clk);
      end
      ld_we = 0;
      // first pass without flips to learn the nodes
      rcur = '0; rcur.valid = 1;
      recs.delete(); ref_cycles = 0; n_merge = 0; n_fix = 0;
      al = new[N];
      foreach (al[i]) al[i] = chan[i];
      dec(NL, 0, al, bt);
      nn = recs.size();
      // random flip set over the decoded nodes
      rcur = '0; rcur.valid = 1;
      if (nn > 0 && fr % 3 != 0) begin
        int last;
        rcur.order = ORD_W'($urandom_range(1, OMEGA));
        last = -1;
        for (int e = 0; e < int'(rcur.order); e++) begin
          int id, sz;
          id = $urandom_range(last + 1 < nn ? last + 1 : nn - 1, nn - 1);
          if (id <= last) begin rcur.order = ORD_W'(e); break; end
          last = id;
          sz = 1 << recs[id].stage;
          rcur.flips[e].node = NODE_W'(id);
          rcur.flips[e].idx1 = IDX_W'($urandom_range(0, sz - 1));
          rcur.flips[e].idx2 = IDX_W'($urandom_range(0, sz - 1));
          if (recs[id].t == NT_SPC)
            while (rcur.flips[e].idx2 == rcur.flips[e].idx1)
              rcur.flips[e].idx2 = IDX_W'($urandom_range(0, sz - 1));
        end
      end
      recs.delete(); ref_cycles = 0; n_merge = 0; n_fix = 0;
      foreach (ref_u[i]) ref_u[i] = 0;
      dec(NL, 0, al, bt);
      // run the hardware
      cur = rcur;
      got_nodes = 0; got_cycles = 0; got_merge = 0; got_fix = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks += 5;
      if (got_nodes != recs.size()) failures++;
      if (got_cycles != ref_cycles) begin
        failures++;
        if (failures < 10) $display("frame %0d cycles %0d exp %0d", fr, got_cycles, ref_cycles);
      end
      if (got_merge != n_merge) failures++;
      if (got_fix != n_fix) failures++;
      for (int i = 0; i < N; i++)
        if (u_all[i] != ref_u[i]) begin
          failures++;
          if (failures < 10) $display("frame %0d u[%0d] mismatch", fr, i);
          break;
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
