// tb_ub_mesh_pod: end-to-end test of a reduced Pod (2 x 2 racks, 2 x 2 NPUs
// per rack). Phases:
//  1. all-to-all: every NPU sends one packet to every other NPU, table
//     routed (intra-board, intra-rack and inter-rack paths);
//  2. All-Path Routing: NPU 0 of rack 0 gets two source-routed paths to NPU 3
//     (X-then-Y and Y-then-X); packets alternate between them;
//  3. link failure: the X link between NPU 0 and NPU 1 of rack 0 goes down;
//     NPU 1 sends a direct notification to NPU 0, which drops the path that
//     used the link; table traffic over the dead link is redirected via LRS;
//  4. 64+1 failover: NPU 1 of rack 3 fails, the backup NPU is activated and
//     must receive that NPU's traffic; traffic that passed through it is
//     redirected;
//  5. CPU-board ingress and Pod-switch egress.
// Every packet carries a unique id; the receiver checks it arrived once, at
// the expected core, with its source address. Each mechanism must be seen.
module tb_ub_mesh_pod;
  import ub_pkg::*;
  localparam int NX = 2, NY = 2, RR = 2, RC = 2;
  localparam int NN = NX * NY, NP = NX + NY, NE = RR + RC, NR = RR * RC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic [NR-1:0][NN-1:0][NP-1:0] npu_up;
  logic [NR-1:0][NE-1:0]         rack_up;
  logic     [NR-1:0][NN:0]       tx_valid, tx_sr, tx_ready, rx_valid, rx_ready;
  ub_addr_t [NR-1:0][NN:0]       tx_dst;
  logic     [NR-1:0][NN:0][1:0]  tx_flow;
  logic     [NR-1:0][NN:0][31:0] tx_pl;
  flit_t    [NR-1:0][NN:0]       rx_flit;
  logic  [NR-1:0] cpu_iv, cpu_ov, hrs_iv, hrs_ov, bk_act;
  flit_t [NR-1:0] cpu_if, cpu_of, hrs_if, hrs_of;
  logic  [NR-1:0][1:0] cpu_ir, cpu_or, hrs_ir, hrs_or;
  logic ev_sr, ev_redir, ev_backup, ev_ntx, ev_nrx;

  ub_mesh_pod #(.N_X(NX), .N_Y(NY), .RR(RR), .RC(RC)) dut (
    .clk, .rst_n, .pod_id(3'd0), .cfg, .npu_link_up(npu_up), .rack_link_up(rack_up),
    .core_tx_valid(tx_valid), .core_tx_dst(tx_dst), .core_tx_flow(tx_flow), .core_tx_sr(tx_sr),
    .core_tx_payload(tx_pl), .core_tx_ready(tx_ready), .core_rx_valid(rx_valid),
    .core_rx_flit(rx_flit), .core_rx_ready(rx_ready),
    .cpu_in_valid(cpu_iv), .cpu_in_flit(cpu_if), .cpu_in_ready(cpu_ir),
    .cpu_out_valid(cpu_ov), .cpu_out_flit(cpu_of), .cpu_out_ready(cpu_or),
    .hrs_in_valid(hrs_iv), .hrs_in_flit(hrs_if), .hrs_in_ready(hrs_ir),
    .hrs_out_valid(hrs_ov), .hrs_out_flit(hrs_of), .hrs_out_ready(hrs_or),
    .backup_active(bk_act), .ev_sr, .ev_redir, .ev_backup, .ev_notify_tx(ev_ntx), .ev_notify_rx(ev_nrx));

  int checks = 0, failures = 0, next_id = 1;
  int exp_core [int];            // id -> rack*(NN+1)+node
  ub_addr_t exp_src [int];
  int n_sr = 0, n_redir = 0, n_backup = 0, n_ntx = 0, n_nrx = 0, n_cpu = 0, n_hrs = 0;
  int cyc = 0;

  function automatic ub_addr_t addr_of(int k, int n);
    return '{pod: 3'd0, rrow: 2'(k / RC), rcol: 2'(k % RC), y: 3'(n / NX), x: 3'(n % NX)};
  endfunction

  // ---------------- receivers and event counters ----------------
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_sr += int'(ev_sr); n_redir += int'(ev_redir); n_backup += int'(ev_backup);
    n_ntx += int'(ev_ntx); n_nrx += int'(ev_nrx);
    for (int k = 0; k < NR; k++)
      for (int n = 0; n <= NN; n++)
        if (rx_valid[k][n]) begin
          int id;
          id = int'(rx_flit[k][n].payload);
          checks++;
          if (!exp_core.exists(id) || exp_core[id] != k * (NN + 1) + n || rx_flit[k][n].src !== exp_src[id]) begin
            failures++;
            $display("FAIL packet %0d at rack %0d node %0d (expected %0d)", id, k, n,
                     exp_core.exists(id) ? exp_core[id] : -1);
          end else begin
            exp_core.delete(id);
          end
        end
    for (int k = 0; k < NR; k++) if (hrs_ov[k]) begin
      checks++; n_hrs++;
      if (!exp_core.exists(int'(hrs_of[k].payload)) || exp_core[int'(hrs_of[k].payload)] != -100 - k) begin
        failures++; $display("FAIL unexpected HRS flit at rack %0d", k);
      end else exp_core.delete(int'(hrs_of[k].payload));
    end
    for (int k = 0; k < NR; k++) if (cpu_ov[k]) begin
      failures++; $display("FAIL unexpected CPU-port flit at rack %0d", k);
    end
  end

  // ---------------- senders ----------------
  task automatic send(int k, int n, ub_addr_t dst, int exp, bit sr, int flow);
    int id;
    id = next_id++;
    exp_core[id] = exp;
    exp_src[id]  = (n == NN) ? addr_of(k, 0) : addr_of(k, n);
    @(negedge clk);
    tx_valid[k][n] = 1'b1; tx_dst[k][n] = dst; tx_pl[k][n] = 32'(id);
    tx_sr[k][n] = sr; tx_flow[k][n] = 2'(flow);
    do @(posedge clk); while (!tx_ready[k][n]);
    #1 tx_valid[k][n] = 1'b0;
  endtask

  task automatic write_cfg(int k, logic [6:0] node, cfg_kind_e kind, logic [7:0] idx, logic [63:0] data);
    @(negedge clk);
    cfg = '{valid: 1'b1, rack: {2'(k / RC), 2'(k % RC)}, node: node, kind: kind, index: idx, data: data};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic drain(int cycles);
    repeat (cycles) @(posedge clk);
  endtask

  task automatic expect_empty(string what);
    checks++;
    if (exp_core.size() != 0) begin
      failures++; $display("FAIL %s: %0d packets not delivered", what, exp_core.size());
      exp_core.delete();
    end
  endtask

  function automatic logic [63:0] sr2(logic [7:0] i0, logic [7:0] i1);
    sr_hdr_t h;
    h = '0; h.bitmap = 12'b11; h.ptr = 4'd0; h.instr[0] = i0; h.instr[1] = i1;
    return 64'(h);
  endfunction

  initial begin
    cfg = '0; npu_up = '1; rack_up = '1;
    tx_valid = '0; tx_sr = '0; tx_dst = '0; tx_flow = '0; tx_pl = '0; rx_ready = '1;
    cpu_iv = '0; cpu_if = '0; cpu_or = '1; hrs_iv = '0; hrs_if = '0; hrs_or = '1;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- 1. all-to-all, all sources in parallel ----
    for (int k = 0; k < NR; k++)
      for (int n = 0; n < NN; n++)
        fork
          automatic int kk = k, nn = n;
          begin
            for (int k2 = 0; k2 < NR; k2++)
              for (int n2 = 0; n2 < NN; n2++)
                if (k2 != kk || n2 != nn) send(kk, nn, addr_of(k2, n2), k2 * (NN + 1) + n2, 1'b0, 0);
          end
        join_none
    wait fork;
    drain(40);
    expect_empty("all-to-all");

    // ---- 2. two source-routed paths from rack 0 NPU 0 (0,0) to NPU 3 (1,1) ----
    // path 0: X to x=1 (port 1), then Y to board 1 (port NX+1); VL 0
    // path 1: Y to board 1 (port NX+1), then X to x=1 (port 1); VL 1
    write_cfg(0, 7'd0, CFG_PATH, 8'b0000_0000, sr2({1'b0, 7'd1}, {1'b0, 7'(NX + 1)}));
    write_cfg(0, 7'd0, CFG_PATH, 8'b0000_0001, sr2({1'b1, 7'(NX + 1)}, {1'b1, 7'd1}));
    for (int i = 0; i < 6; i++) send(0, 0, addr_of(0, 3), 3, 1'b1, 0);
    drain(20);
    expect_empty("source routing");
    checks++; if (n_sr == 0) begin failures++; $display("FAIL no SR hop seen"); end

    // ---- 3. link (0,0)-(1,0) fails; NPU 1 notifies NPU 0 directly ----
    // notification entry at rack 0 node 1 (x=1,y=0), port 0 (X link to x=0), slot 0
    write_cfg(0, 7'd1, CFG_NOTIFY, 8'b000_0000_0,
              64'({1'b1, addr_of(0, 0), 2'd0, 2'd0}));
    @(negedge clk); npu_up[0][1][0] = 1'b0;
    drain(20);
    checks++; if (n_ntx == 0 || n_nrx == 0) begin failures++; $display("FAIL notification tx=%0d rx=%0d", n_ntx, n_nrx); end
    begin
      int sr_before;
      sr_before = n_redir;
      // all SR packets must now take path 1 (no redirection needed); table
      // traffic from 0 to 1 must be redirected through the LRS
      for (int i = 0; i < 4; i++) send(0, 0, addr_of(0, 3), 3, 1'b1, 0);
      drain(20);
      checks++; if (n_redir != sr_before) begin failures++; $display("FAIL SR traffic still used the dead link"); end
      send(0, 0, addr_of(0, 1), 1, 1'b0, 0);
      drain(20);
      checks++; if (n_redir == sr_before) begin failures++; $display("FAIL no redirection around dead link"); end
    end
    expect_empty("link failure");

    // ---- 4. 64+1: NPU 1 of rack 3 fails, backup takes over ----
    write_cfg(3, NODE_RACK, CFG_FAIL, 8'd0, 64'({1'b1, 6'd1}));
    drain(2);
    checks++; if (!bk_act[3]) begin failures++; $display("FAIL backup not active"); end
    send(0, 2, addr_of(3, 1), 3 * (NN + 1) + NN, 1'b0, 0);   // from another rack
    send(3, 0, addr_of(3, 1), 3 * (NN + 1) + NN, 1'b0, 0);   // direct neighbour 0-1 now via LRS
    send(3, 3, addr_of(3, 1), 3 * (NN + 1) + NN, 1'b0, 0);
    send(3, 0, addr_of(3, 3), 3 * (NN + 1) + 3, 1'b0, 0);    // X-then-Y would pass the failed NPU
    drain(30);
    expect_empty("backup NPU");
    checks++; if (n_backup == 0) begin failures++; $display("FAIL no flit to backup NPU"); end
    // the backup answers with the failed NPU's address
    begin
      int id;
      id = next_id++;
      exp_core[id] = 0 * (NN + 1) + 2; exp_src[id] = addr_of(3, 1);
      @(negedge clk);
      tx_valid[3][NN] = 1'b1; tx_dst[3][NN] = addr_of(0, 2); tx_pl[3][NN] = 32'(id); tx_sr[3][NN] = 1'b0;
      do @(posedge clk); while (!tx_ready[3][NN]);
      #1 tx_valid[3][NN] = 1'b0;
    end
    drain(30);
    expect_empty("backup reply");

    // ---- 5. CPU ingress into rack 1, Pod-switch egress ----
    begin
      int id;
      id = next_id++;
      exp_core[id] = 2 * (NN + 1) + 3; exp_src[id] = ub_addr_t'(13'h1fff);
      @(negedge clk);
      cpu_if[1] = '0; cpu_if[1].dst = addr_of(2, 3); cpu_if[1].src = ub_addr_t'(13'h1fff);
      cpu_if[1].payload = 32'(id); cpu_iv[1] = 1'b1;
      do @(posedge clk); while (!cpu_ir[1][0]);
      #1 cpu_iv[1] = 1'b0; n_cpu++;
      id = next_id++;
      exp_core[id] = -100 - 2;
      @(negedge clk);
      tx_valid[2][1] = 1'b1; tx_dst[2][1] = '{pod: 3'd5, default: '0}; tx_pl[2][1] = 32'(id); tx_sr[2][1] = 1'b0;
      do @(posedge clk); while (!tx_ready[2][1]);
      #1 tx_valid[2][1] = 1'b0;
    end
    drain(30);
    expect_empty("CPU/HRS");

    $display("mechanisms: sr=%0d redirect=%0d backup=%0d notify_tx=%0d notify_rx=%0d cpu_in=%0d hrs_out=%0d cycles=%0d",
             n_sr, n_redir, n_backup, n_ntx, n_nrx, n_cpu, n_hrs, cyc);
    checks++;
    if (n_sr == 0 || n_redir == 0 || n_backup == 0 || n_ntx == 0 || n_nrx == 0 || n_cpu == 0 || n_hrs == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
