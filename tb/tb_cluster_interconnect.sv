// tb_cluster_interconnect: self-checking test of the pointer-steered
// cluster interconnect.
//
// Gives every node a distinct, recognisable output on each bus and random
// expression types and child pointers, then compares every node input and
// the host port with a reference routing computed here: a child side sees
// the parent-facing outputs of the node its pointer names (if the type
// uses that pointer and it is not NULL), a parent side sees the OR of the
// child-facing outputs of every node pointing at it, and node 0's parent
// side is the host port.
module tb_cluster_interconnect;
  import lambda_pkg::*;

  localparam int N = NODES;

  node_state_t st [N];
  ins_bus_t    pib_o [N], cli_o [N], cri_o [N];
  expr_bus_t   peb_o [N], cle_o [N], cre_o [N];
  ins_bus_t    pib_i [N], cli_i [N], cri_i [N];
  expr_bus_t   peb_i [N], cle_i [N], cre_i [N];
  ins_bus_t    host_pib_i, host_pib_o;
  expr_bus_t   host_peb_i, host_peb_o;

  int checks = 0, failures = 0;

  cluster_interconnect #(.N(N)) dut (
    .state_i (st),
    .pib_o_i (pib_o), .peb_o_i (peb_o), .cli_o_i (cli_o), .cle_o_i (cle_o),
    .cri_o_i (cri_o), .cre_o_i (cre_o),
    .pib_i_o (pib_i), .peb_i_o (peb_i), .cli_i_o (cli_i), .cle_i_o (cle_i),
    .cri_i_o (cri_i), .cre_i_o (cre_i),
    .host_pib_i (host_pib_i), .host_peb_i (host_peb_i),
    .host_pib_o (host_pib_o), .host_peb_o (host_peb_o)
  );

  function automatic bit ref_left(exp_t e);
    return e == EXP_APPLICATION || e == EXP_LIST || e == EXP_ADD || e == EXP_MULT ||
           e == EXP_GREATZERO || e == EXP_LESSZERO || e == EXP_EQUALZERO;
  endfunction

  function automatic bit ref_right(exp_t e);
    return ref_left(e) || e == EXP_GOTO;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      for (int i = 0; i < N; i++) begin
        st[i].exp = exp_t'($urandom_range(0, 10));
        st[i].rsf = 1'($urandom);
        st[i].rdf = 1'($urandom);
        st[i].clp = node_id_t'($urandom_range(0, 15));
        st[i].crp = node_id_t'($urandom_range(0, 15));
        pib_o[i] = ins_bus_t'(8'($urandom));
        cli_o[i] = ins_bus_t'(8'($urandom));
        cri_o[i] = ins_bus_t'(8'($urandom));
        peb_o[i] = expr_bus_t'(10'($urandom));
        cle_o[i] = expr_bus_t'(10'($urandom));
        cre_o[i] = expr_bus_t'(10'($urandom));
      end
      host_pib_i = ins_bus_t'(8'($urandom));
      host_peb_i = expr_bus_t'(10'($urandom));
      #1;
      for (int i = 0; i < N; i++) begin
        ins_bus_t  e_cli, e_cri, e_pib;
        expr_bus_t e_cle, e_cre, e_peb;
        bit lv, rv;
        lv = ref_left(st[i].exp) && st[i].clp != 0;
        rv = ref_right(st[i].exp) && st[i].crp != 0;
        e_cli = lv ? pib_o[st[i].clp] : '0;
        e_cle = lv ? peb_o[st[i].clp] : '0;
        e_cri = rv ? pib_o[st[i].crp] : '0;
        e_cre = rv ? peb_o[st[i].crp] : '0;
        check(cli_i[i] == e_cli && cle_i[i] == e_cle, $sformatf("trial %0d node %0d left side", trial, i));
        check(cri_i[i] == e_cri && cre_i[i] == e_cre, $sformatf("trial %0d node %0d right side", trial, i));
        if (i == 0) begin
          e_pib = host_pib_i;
          e_peb = host_peb_i;
        end else begin
          logic [7:0] p;
          logic [9:0] q;
          p = '0;
          q = '0;
          for (int k = 0; k < N; k++) begin
            if (ref_left(st[k].exp) && st[k].clp == i) begin p |= cli_o[k]; q |= cle_o[k]; end
            if (ref_right(st[k].exp) && st[k].crp == i) begin p |= cri_o[k]; q |= cre_o[k]; end
          end
          e_pib = ins_bus_t'(p);
          e_peb = expr_bus_t'(q);
        end
        check(pib_i[i] == e_pib && peb_i[i] == e_peb, $sformatf("trial %0d node %0d parent side", trial, i));
      end
      check(host_pib_o == pib_o[0] && host_peb_o == peb_o[0], "host port reads node 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
