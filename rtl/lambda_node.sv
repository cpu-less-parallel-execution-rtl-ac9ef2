// lambda_node: one node of a work cluster. It holds a single lambda expression
// and rewrites the graph together with its neighbours by message passing.
//
// State (mnemonics of the original): EXR expression type, CLP/CRP child
// pointers (a Name keeps its value in them), RSF Resolve Flag, RDF the
// "allowed for transformation" mark a Name sets on CompareValue, EXB the
// expression buffer, FSP/BSP the stack pointers into the local node_stack, plus
// two small control registers: the reduction phase of a Function and the
// pending branch chop of an Application.
//
// Ports: `in` carries the parent buses (PEB, PIB, Irreducible Flag) and both
// child buses (CLE/CLI, CRE/CRI and the children's Resolve Flags); `out`
// drives the same buses the other way, plus the node's Resolve Flag and its
// child pointers for the selector layer. `nn_req`/`nn_id1`/`nn_id2` ask the
// new node tracker for fresh Undefined nodes (combinational, same cycle).
//
// Timing: all bus outputs are combinational functions of the bus inputs and
// the registers, so an instruction or expression crosses any number of
// routing nodes within one clock cycle; every register changes at the rising
// edge. One reduction step (one node queried and copied) takes one cycle.
//
// Behaviour per expression type, after the original (Tables 3, Algorithms
// 1-12, section 5):
//  * Any non-Undefined node passes Nullify / UpdateExpression /
//    UpdateChildLeft / UpdateChildRight / ReturnExpression from its parent to
//    both children and acts on it when the attached ID is its own; an
//    Undefined node only accepts UpdateExpression.
//  * GoTo: transparent wire between parent and its single (right) child.
//  * Name: drives its own expression upward; answers CompareValue with a
//    Mark; as Descendant input rebuilds the Ancestor's branch below itself;
//    as Ancestor input returns its value, and answers ImmediateResolution
//    with BranchChop.
//  * Application: with RSF raised it broadcasts parent buses to both children
//    and ORs the children's instructions upward; with RSF low it cross-routes
//    so that a Function on its left meets its argument on the right (Fig 4).
//    BranchChop from a child makes it nullify that child and become a GoTo.
//  * Function: reducible when the Irreducible Flag from the parent is low. Once
//    both children and the argument are resolved it runs
//    COMPARE -> TRANSFER -> RESOLVE, then turns into a GoTo. As Ancestor input
//    it walks its own branch with ReturnExpression, one node per cycle.
//
// Choices of this design where the original is silent or inconsistent:
//  * Resolve and Irreducible flags travel on dedicated wires beside the buses.
//    A Name's RSF is always 1, an Application's is the AND of its children's,
//    a GoTo's its child's, an irreducible Function's the AND of its
//    children's, and a reducible Function's 0 (RSF is registered, so it rises
//    one level per cycle). A node that has just changed its type (end of a
//    copy, Function turned GoTo, BranchChop) starts with RSF low, as after
//    UpdateExpression, so the root cannot see a stale resolved state.
//  * Application passes 0 as Irreducible Flag to its left child and its own
//    flag to its right child; Function passes 1 to both; GoTo passes its own.
//  * Application routing follows the text and Fig 4 (raised: broadcast down,
//    OR up; low: cross-route); Table 3 lists the two rows the other way round.
//  * The Ancestor input is removed with BranchChop (section 5.3, Fig 7), not
//    with GoToChop (Algorithm 10), and sends it when the Function answers the
//    completed copy with ImmediateResolution.
//  * BranchChop chops the child whose pointer equals the ID it carries, as
//    the original describes; when neither pointer matches (a GoTo sits
//    between the Application and the sender) it chops the side it arrived
//    from. The chopped child receives Nullify one cycle later, and the
//    Application then becomes a GoTo whose kept child is in CRP.
//  * GoTo reclaim (Algorithm 7): when the tracker reports no free node, a
//    non-root GoTo with idle buses offers GoToChop to its parent; an idle
//    parent takes over the GoTo's child pointer and acknowledges with GoToChop
//    on the child bus, and the GoTo then becomes Undefined.
//  * UpdateChildLeft writes CLP and UpdateChildRight writes CRP (Algorithms 3
//    and 4 swap the two).
//
// Circuit note: lint tools report a combinational loop through the bus
// outputs (e.g. the routed parent and child buses). The node's outputs
// towards its parent depend on its child inputs and its outputs towards the
// children depend on its parent input (plus the Function's own registers), so
// on a tree the paths never close; the loop exists only in the generic wiring
// of the connective bus, where every output can reach every input.
module lambda_node
  import lambda_pkg::*;
#(
  parameter uid_t        UNI   = uid_t'(1),
  parameter int unsigned DEPTH = NODES_DEFAULT,
  localparam int unsigned AW   = $clog2(DEPTH + 1)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  node_in_t  in,
  output node_out_t out,
  // new node tracker
  output logic [1:0] nn_req,
  input  uid_t       nn_id1,
  input  uid_t       nn_id2,
  input  logic       reclaim,
  // observation (Resolve LED and 3-bit expression display of the original)
  output exp_t       exr_o,
  output logic       rsf_o
);

  typedef enum logic [1:0] {F_IDLE, F_COMPARE, F_XFER, F_RESOLVE} fphase_t;

  exp_t          exr, exr_n, exb, exb_n;
  uid_t          clp, clp_n, crp, crp_n;
  logic          rsf, rsf_n, rdf, rdf_n;
  logic [AW-1:0] fsp, fsp_n, bsp, bsp_n;
  fphase_t       fph, fph_n;
  logic          chop, chop_n, chop_left, chop_left_n;

  // stack RAM
  logic          st_we1, st_we2;
  logic [AW-1:0] st_waddr;
  uid_t          st_wd1, st_wd2, target;

  node_stack #(.DEPTH(DEPTH)) u_stack (
    .clk   (clk),
    .we1   (st_we1),
    .we2   (st_we2),
    .waddr (st_waddr),
    .wdata1(st_wd1),
    .wdata2(st_wd2),
    .raddr (bsp),
    .rdata (target)
  );

  ebus_t own, q, w;
  ibus_t pin, cli_f, cri_f;
  logic  match, walking, last;
  logic [1:0] nch;
  logic  gochop_l, gochop_r, ack_ok, want_gochop;

  always_comb begin
    // ---------------- defaults: hold state, empty buses ----------------
    exr_n = exr; exb_n = exb; clp_n = clp; crp_n = crp;
    rsf_n = rsf; rdf_n = rdf; fsp_n = fsp; bsp_n = bsp; fph_n = fph;
    chop_n = chop; chop_left_n = chop_left;
    out     = '0;
    nn_req  = 2'd0;
    st_we1  = 1'b0; st_we2 = 1'b0; st_waddr = fsp;
    st_wd1  = '0;   st_wd2 = '0;
    q = '0; w = '0; nch = 2'd0; last = 1'b0;

    pin   = in.pib;
    match = (pin.uni == UNI);
    own   = '{rsf: rsf, exr: exr, clp: clp, crp: crp};
    walking = (pin.ins == INS_ANC_XFORM) ||
              (pin.ins == INS_DESC_XFORM && exr == EXP_NAME && rdf);

    // pointer information for the selector layer
    out.clp = clp;
    out.crp = crp;
    out.clp_valid = (exr == EXP_APP) || (exr == EXP_FUNC) ||
                    (exr == EXP_NAME && (exb == EXP_APP || exb == EXP_FUNC));
    out.crp_valid = out.clp_valid || (exr == EXP_GOTO) ||
                    (exr == EXP_NAME && exb == EXP_GOTO);
    out.rsf = rsf;

    // ---------------- Resolve / Irreducible flags ----------------
    unique case (exr)
      EXP_NAME: begin
        rsf_n = 1'b1;
        out.irf_cl = 1'b1; out.irf_cr = 1'b1;
      end
      EXP_APP:  begin rsf_n = in.rsf_cl & in.rsf_cr; out.irf_cr = in.irf; end
      EXP_FUNC: begin
        rsf_n = in.irf & in.rsf_cl & in.rsf_cr;
        out.irf_cl = 1'b1; out.irf_cr = 1'b1;
      end
      EXP_GOTO: begin rsf_n = in.rsf_cr; out.irf_cr = in.irf; end
      default:  rsf_n = 1'b0;
    endcase

    // stack is idle outside a walk: list = {own ID}, FSP = 1, BSP = 0
    if (!walking) begin
      fsp_n = AW'(1); bsp_n = '0;
      st_we1 = 1'b1; st_waddr = '0; st_wd1 = UNI;
    end

    // GoTo reclaim requests arriving from the children
    // (an offer is never routed further: it is for the direct parent only)
    gochop_l = (in.cli.ins == INS_GOTO_CHOP);
    gochop_r = (in.cri.ins == INS_GOTO_CHOP);
    cli_f = gochop_l ? '0 : in.cli;
    cri_f = gochop_r ? '0 : in.cri;
    // the offer stays up while the parent's acknowledgement is present, so
    // offer and acknowledgement form a stable pair within the cycle
    want_gochop = (exr == EXP_GOTO) && reclaim && (UNI != uid_t'(1)) &&
                  (pin.ins inside {INS_NONE, INS_GOTO_CHOP}) &&
                  (in.cri.ins == INS_NONE);
    ack_ok = (pin.ins == INS_NONE) && !chop && (fph == F_IDLE) &&
             (exr == EXP_APP || exr == EXP_FUNC || (exr == EXP_GOTO && !want_gochop));

    if (exr == EXP_UNDEF) begin
      // ---------------- Undefined ----------------
      if (pin.ins == INS_UPDATE_EXP && match) begin
        exr_n = pin.uni == '0 ? EXP_UNDEF : in.peb.exr;
        clp_n = in.peb.clp; crp_n = in.peb.crp; rsf_n = 1'b0;
        rdf_n = 1'b0; exb_n = EXP_UNDEF; fph_n = F_IDLE; chop_n = 1'b0;
      end
    end else if (pin.ins inside {INS_NULLIFY, INS_UPDATE_EXP, INS_UPDATE_CL,
                                 INS_UPDATE_CR, INS_RETURN_EXP}) begin
      // ---------------- instructions shared by all types ----------------
      out.cli = pin; out.cri = pin;
      out.cle = in.peb; out.cre = in.peb;
      unique case (pin.ins)
        INS_NULLIFY: begin  // Algorithm 1
          exr_n = EXP_UNDEF; clp_n = '0; crp_n = '0; rsf_n = 1'b0;
          rdf_n = 1'b0; exb_n = EXP_UNDEF; fph_n = F_IDLE; chop_n = 1'b0;
        end
        INS_UPDATE_EXP: if (match) begin  // Algorithm 2
          exr_n = in.peb.exr; clp_n = in.peb.clp; crp_n = in.peb.crp;
          rsf_n = 1'b0; rdf_n = 1'b0; exb_n = EXP_UNDEF; fph_n = F_IDLE;
          chop_n = 1'b0;
        end
        INS_UPDATE_CL: if (match) clp_n = in.peb.clp;
        INS_UPDATE_CR: if (match) crp_n = in.peb.crp;
        default: begin  // INS_RETURN_EXP, Algorithm 5
          out.cle = '0; out.cre = '0;
          if (match) begin
            out.peb = own; out.pib = '{ins: INS_MARK, uni: '0};
          end else if (in.cli.ins == INS_MARK) begin
            out.peb = in.cle; out.pib = in.cli;
          end else if (in.cri.ins == INS_MARK) begin
            out.peb = in.cre; out.pib = in.cri;
          end
        end
      endcase
    end else if (pin.ins == INS_ANC_XFORM && (exr == EXP_NAME || exr == EXP_FUNC)) begin
      // ---------------- Ancestor input: walk own branch (Alg 10, 8) ----------
      if (bsp != fsp) begin
        if (target == UNI) begin
          q = own;
          q.rsf = 1'b1;
        end else begin
          out.cli = '{ins: INS_RETURN_EXP, uni: target};
          out.cri = '{ins: INS_RETURN_EXP, uni: target};
          if (in.cli.ins == INS_MARK)      q = in.cle;
          else if (in.cri.ins == INS_MARK) q = in.cre;
        end
        out.peb = q;
        nch = n_children(q.exr);
        if (nch == 2'd2) begin
          st_we1 = 1'b1; st_we2 = 1'b1; st_wd1 = q.clp; st_wd2 = q.crp;
        end else if (nch == 2'd1) begin
          st_we1 = 1'b1; st_wd1 = q.crp;
        end
        fsp_n = fsp + AW'(nch);
        bsp_n = bsp + 1'b1;
      end
    end else if (pin.ins == INS_IMMED_RES && (exr == EXP_NAME || exr == EXP_FUNC)) begin
      // ---------------- Ancestor input: remove own branch (Alg 9) ----------
      out.pib = '{ins: INS_BRANCH_CHOP, uni: UNI};
    end else begin
      // ---------------- expression blocks ----------------
      unique case (exr)
        EXP_GOTO: begin
          out.peb = in.cre; out.pib = cri_f;
          out.cre = in.peb; out.cri = pin;
          if (want_gochop) begin
            // offer own child to the parent (Algorithm 7)
            out.peb = own; out.pib = '{ins: INS_GOTO_CHOP, uni: UNI};
            out.cre = '0;  out.cri = '0;
            if (pin.ins == INS_GOTO_CHOP) begin  // acknowledged: leave
              exr_n = EXP_UNDEF; clp_n = '0; crp_n = '0; rsf_n = 1'b0;
            end
          end else if (ack_ok && gochop_r) begin
            crp_n = in.cre.crp; out.cri = '{ins: INS_GOTO_CHOP, uni: '0};
          end
        end

        EXP_NAME: begin
          out.peb = '{rsf: 1'b1, exr: EXP_NAME, clp: clp, crp: crp};
          if (pin.ins == INS_COMPARE) begin  // Algorithm 11
            rdf_n = (in.peb.exr == EXP_NAME) && (in.peb.clp == clp) &&
                    (in.peb.crp == crp);
            if (rdf_n) out.pib = '{ins: INS_MARK, uni: '0};
          end else if (pin.ins == INS_DESC_XFORM && rdf) begin
            // Descendant input: rebuild the Ancestor's branch (Alg 12, 8)
            if (bsp != fsp) begin
              q   = in.peb;
              nch = n_children(q.exr);
              nn_req = nch;
              unique case (nch)
                2'd2:    w = '{rsf: q.rsf, exr: q.exr, clp: nn_id1, crp: nn_id2};
                2'd1:    w = '{rsf: q.rsf, exr: q.exr, clp: '0, crp: nn_id1};
                default: w = q;
              endcase
              if (nch == 2'd2) begin
                st_we1 = 1'b1; st_we2 = 1'b1; st_wd1 = nn_id1; st_wd2 = nn_id2;
              end else if (nch == 2'd1) begin
                st_we1 = 1'b1; st_wd1 = nn_id1;
              end
              if (target == UNI) begin
                // keep the Name type until the copy is complete
                exb_n = q.exr; clp_n = w.clp; crp_n = w.crp;
              end else begin
                out.cli = '{ins: INS_UPDATE_EXP, uni: target};
                out.cri = '{ins: INS_UPDATE_EXP, uni: target};
                out.cle = w; out.cre = w;
              end
              fsp_n = fsp + AW'(nch);
              bsp_n = bsp + 1'b1;
              last  = (bsp_n == fsp_n);
              if (last) begin
                out.pib = '{ins: INS_MARK, uni: '0};
                exr_n = (target == UNI) ? q.exr : exb;
                exb_n = EXP_UNDEF; rdf_n = 1'b0; rsf_n = 1'b0;
              end
            end
          end
        end

        EXP_APP: begin
          if (chop) begin
            // second cycle of BranchChop: nullify the chopped child (Alg 6)
            if (chop_left) begin
              out.cli = '{ins: INS_NULLIFY, uni: '0};
              clp_n = '0;
            end else begin
              out.cri = '{ins: INS_NULLIFY, uni: '0};
              crp_n = clp; clp_n = '0;
            end
            exr_n = EXP_GOTO; chop_n = 1'b0; rsf_n = 1'b0;
          end else begin
            if (rsf) begin
              out.cle = in.peb; out.cre = in.peb;
              out.cli = pin;    out.cri = pin;
              out.pib = '{ins: ins_t'(cli_f.ins | cri_f.ins),
                          uni: cli_f.uni | cri_f.uni};
            end else begin
              out.cre = in.peb; out.cli = pin;
              out.cle = in.cre; out.pib = cri_f;
              out.peb = in.cle; out.cri = cli_f;
            end
            // BranchChop from a child is consumed here
            if (in.cli.ins == INS_BRANCH_CHOP || in.cri.ins == INS_BRANCH_CHOP) begin
              chop_n = 1'b1;
              // the ID sent along picks the child it names; when it names
              // neither (a GoTo in between) the side it came from is chopped
              chop_left_n = (in.cli.ins == INS_BRANCH_CHOP) ? (in.cli.uni != crp)
                                                            : (in.cri.uni == clp);
              // (only the bus carrying it is silenced, so the ancestor keeps
              // seeing the ImmediateResolution that caused it)
              if (in.cri.ins == INS_BRANCH_CHOP || rsf) out.pib = '0;
              if (in.cli.ins == INS_BRANCH_CHOP && !rsf) out.cri = '0;
            end else if (ack_ok && (gochop_l || gochop_r)) begin
              // GoTo reclaim: jump over the GoTo child
              if (gochop_l) begin
                clp_n = in.cle.crp; out.cli = '{ins: INS_GOTO_CHOP, uni: '0};
              end else begin
                crp_n = in.cre.crp; out.cri = '{ins: INS_GOTO_CHOP, uni: '0};
              end
            end
          end
        end

        EXP_FUNC: begin
          out.peb = own;
          out.pib = cri_f;
          out.cre = in.peb;
          if (!(pin.ins inside {INS_COMPARE, INS_DESC_XFORM, INS_ANC_XFORM,
                                INS_IMMED_RES}))
            out.cri = pin;
          unique case (fph)
            F_IDLE: begin
              if (!in.irf && in.rsf_cl && in.rsf_cr && in.peb.rsf &&
                  (in.peb.exr == EXP_NAME || in.peb.exr == EXP_FUNC) &&
                  in.cle.exr == EXP_NAME)
                fph_n = F_COMPARE;
              if (ack_ok && gochop_r) begin
                crp_n = in.cre.crp; out.cri = '{ins: INS_GOTO_CHOP, uni: '0};
                fph_n = F_IDLE;
              end
            end
            F_COMPARE: begin
              out.pib = '0;
              out.cri = '{ins: INS_COMPARE, uni: '0};
              out.cre = in.cle;
              fph_n = (in.cri.ins == INS_MARK) ? F_XFER : F_RESOLVE;
            end
            F_XFER: begin
              out.pib = '{ins: INS_ANC_XFORM, uni: '0};
              out.cri = '{ins: INS_DESC_XFORM, uni: '0};
              out.cre = in.peb;
              if (in.cri.ins == INS_MARK) fph_n = F_RESOLVE;
            end
            default: begin  // F_RESOLVE
              out.pib = '{ins: INS_IMMED_RES, uni: '0};
              out.cli = '{ins: INS_NULLIFY, uni: '0};
              out.cri = '0;
              exr_n = EXP_GOTO; clp_n = '0; fph_n = F_IDLE; rsf_n = 1'b0;
            end
          endcase
        end

        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exr <= EXP_UNDEF; exb <= EXP_UNDEF; clp <= '0; crp <= '0;
      rsf <= 1'b0; rdf <= 1'b0; fsp <= AW'(1); bsp <= '0; fph <= F_IDLE;
      chop <= 1'b0; chop_left <= 1'b0;
    end else begin
      exr <= exr_n; exb <= exb_n; clp <= clp_n; crp <= crp_n;
      rsf <= rsf_n; rdf <= rdf_n; fsp <= fsp_n; bsp <= bsp_n; fph <= fph_n;
      chop <= chop_n; chop_left <= chop_left_n;
    end
  end

  assign exr_o = exr;
  assign rsf_o = rsf;

endmodule
