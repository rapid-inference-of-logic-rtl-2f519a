// lgn_ref_pkg: reference arithmetic for the testbenches, written from the
// definitions rather than from the RTL.
//   ref_gate   - a gate given by its 4-bit truth-table code: output for
//                inputs (a,b) is code[{~a,~b}], i.e. bit 0 is f(1,1),
//                bit 1 f(1,0), bit 2 f(0,1), bit 3 f(0,0).
//   ref_thermo - thermometer code of one pixel: one bit per threshold,
//                1 when x >= t, threshold 1 in the most significant bit.
//   ref_net_init / ref_net_score - the whole default-size network evaluated
//                node by node on arrays of bits, with the gate and wiring
//                configuration read from lgn_pkg, then the ones counted;
//                gate_hits counts which input pairs each gate type has seen.
package lgn_ref_pkg;
  import lgn_pkg::*;

  function automatic logic ref_gate(input logic [3:0] code, input logic a, input logic b);
    int unsigned idx;
    idx = (a ? 0 : 2) + (b ? 0 : 1);
    return code[idx];
  endfunction

  function automatic logic [31:0] ref_thermo(input int unsigned x, input int unsigned thr[$]);
    logic [31:0] c;
    c = '0;
    foreach (thr[i]) begin
      if (x >= thr[i]) c[thr.size()-1-i] = 1'b1;
    end
    return c;
  endfunction

  int unsigned ref_thr[$] = '{10, 20, 30};
  int unsigned src_a[NUM_LAYERS][];
  int unsigned src_b[NUM_LAYERS][];
  logic [3:0]  gcode[NUM_LAYERS][];
  // Coverage: how often a node of gate code g saw inputs {a,b} = c.
  longint unsigned gate_hits[16][4];

  function automatic void ref_net_init();
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int unsigned in_w;
      in_w = (l == 0) ? N_PIX * N_THR : LAYER_W_DEFAULT[l-1];
      src_a[l] = new[LAYER_W_DEFAULT[l]];
      src_b[l] = new[LAYER_W_DEFAULT[l]];
      gcode[l] = new[LAYER_W_DEFAULT[l]];
      for (int n = 0; n < LAYER_W_DEFAULT[l]; n++) begin
        src_a[l][n] = node_src(l, n, 0, in_w);
        src_b[l][n] = node_src(l, n, 1, in_w);
        gcode[l][n] = 4'(node_gate(l, n));
      end
    end
  endfunction

  function automatic int unsigned ref_net_score(input logic [N_PIX-1:0][PIX_W-1:0] img);
    logic cur[];
    logic nxt[];
    int unsigned cnt;
    cur = new[N_PIX * N_THR];
    for (int p = 0; p < N_PIX; p++) begin
      logic [31:0] c;
      c = ref_thermo(int'(img[p]), ref_thr);
      for (int i = 0; i < N_THR; i++) cur[p*N_THR + i] = c[i];
    end
    for (int l = 0; l < NUM_LAYERS; l++) begin
      nxt = new[LAYER_W_DEFAULT[l]];
      for (int n = 0; n < LAYER_W_DEFAULT[l]; n++) begin
        logic a, b;
        a = cur[src_a[l][n]];
        b = cur[src_b[l][n]];
        nxt[n] = ref_gate(gcode[l][n], a, b);
        gate_hits[gcode[l][n]][{a, b}]++;
      end
      cur = nxt;
    end
    cnt = 0;
    foreach (cur[i]) cnt += cur[i];
    return cnt;
  endfunction

endpackage
