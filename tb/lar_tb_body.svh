// lar_tb_body.svh: body shared by the end-to-end testbenches of
// lar_rnn_firmware. The including module defines NNET, M, NCH, NBC, NETW and
// CHW, imports rnn_pkg and rnn_ref_pkg, and instantiates the firmware as
// "dut" after this text (the signals are declared here).

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst, bc_strobe, bc_valid, cfg_we, energy_strobe;
  data_t              samples [NCH];
  logic [NETW-1:0]    cfg_net;
  logic [CHW-1:0]     cfg_ch;
  logic [WADDR_W-1:0] cfg_addr;
  weight_t            cfg_data;
  logic               energy_valid [NCH];
  data_t              energy [NCH];

  localparam int LOAD = NCH * int'(N_WADDR);
  localparam int MAXB = LOAD / M + NBC + 20;

  wset_t ws [NCH];
  int    xs [MAXB][NCH];
  logic  vb [MAXB];
  int    bc_at_edge [int];

  // mechanism counters
  int n_valid_ch [NCH];
  int n_inv_warm = 0, n_inv_bc = 0, n_relu1 = 0, n_relu_k = 0, n_round = 0, n_estrobe = 0;

  // Reference with counting of ReLU clipping and of rounding effects.
  function automatic int ref_count(input wset_t s, input int x [5]);
    int st [NS];
    int nx [NS];
    longint acc;
    for (int i = 0; i < NS; i++) begin
      int u;
      u = ref_u(s, x[0], i);
      if (u <= 0) n_relu1++;
      st[i] = relu(u);
    end
    for (int k = 1; k < 5; k++) begin
      for (int j = 0; j < NS; j++) begin
        longint tv;
        tv = wrap19(longint'(ref_t(s, st, j)) + ref_u(s, x[k], j));
        if (tv <= 0) n_relu_k++;
        nx[j] = relu(tv);
      end
      st = nx;
    end
    acc = longint'(s.bd) << DF;
    for (int i = 0; i < NS; i++) acc += longint'(st[i]) * s.wd[i];
    if (wrap19(fdiv(acc, WF)) != ref_dense(s, st)) n_round++;
    return ref_dense(s, st);
  endfunction

  initial begin
    int e, nb, cfg_i, first_data_bc, bad_bc, last_edge;
    rst = 1; bc_strobe = 0; bc_valid = 0; cfg_we = 0; cfg_net = '0; cfg_ch = '0;
    cfg_addr = '0; cfg_data = '0;
    for (int c = 0; c < NCH; c++) begin samples[c] = '0; n_valid_ch[c] = 0; ws[c] = rand_wset(); end
    repeat (3) @(posedge clk); #1;
    rst = 0;
    e = 0; nb = 0; cfg_i = 0; first_data_bc = -1; bad_bc = -1; last_edge = -1;
    while (last_edge < 0 || e <= last_edge) begin
      // ---- inputs for edge e ----
      cfg_we = 1'b0;
      if (cfg_i < LOAD) begin
        int c, a;
        c = cfg_i / int'(N_WADDR); a = cfg_i % int'(N_WADDR);
        cfg_we = 1'b1; cfg_net = NETW'(c / M); cfg_ch = CHW'(c % M);
        cfg_addr = WADDR_W'(a); cfg_data = 16'(wset_word(ws[c], a));
        cfg_i++;
      end
      bc_strobe = (e % M == 0);
      if (bc_strobe) begin
        if (first_data_bc < 0 && cfg_i >= LOAD) begin
          first_data_bc = nb + 1;      // weights complete before the next crossing
          bad_bc = first_data_bc + NBC/2;
        end
        vb[nb] = (first_data_bc >= 0) && (nb >= first_data_bc) && (nb < first_data_bc + NBC) && (nb != bad_bc);
        for (int c = 0; c < NCH; c++) begin
          xs[nb][c] = rand_range(-(1 << 13), (1 << 14));
          samples[c] = 19'(xs[nb][c]);
        end
        bc_valid = vb[nb];
        bc_at_edge[e] = nb;
        if (first_data_bc >= 0 && nb == first_data_bc + NBC + 5) last_edge = e + int'(NET_LAT) + M + 2;
        nb++;
      end
      @(posedge clk); #1;
      // ---- outputs after edge e ----
      if (energy_strobe) begin
        int se;
        n_estrobe++;
        se = e - int'(NET_LAT) - M;
        checks++;
        if (!bc_at_edge.exists(se)) begin
          failures++; $display("FAIL energy_strobe at edge %0d matches no crossing", e);
        end else begin
          int b;
          b = bc_at_edge[se];
          for (int c = 0; c < NCH; c++) begin
            logic ev;
            int win [5];
            ev = (b >= 4);
            for (int k = 0; k < 5; k++) if (b - 4 + k >= 0) begin
              ev &= vb[b-4+k]; win[k] = xs[b-4+k][c];
            end
            checks++;
            if (energy_valid[c] !== ev) begin
              failures++; $display("FAIL valid ch %0d bc %0d: %0b exp %0b", c, b, energy_valid[c], ev);
            end
            if (ev) begin
              int ex;
              ex = ref_count(ws[c], win);
              n_valid_ch[c]++;
              checks++;
              if (int'(energy[c]) != ex) begin
                failures++; $display("FAIL ch %0d bc %0d: e=%0d exp=%0d", c, b, energy[c], ex);
              end
            end else if (b >= first_data_bc && first_data_bc >= 0 && b < first_data_bc + NBC) begin
              if (b < first_data_bc + 4) n_inv_warm++; else n_inv_bc++;
            end
          end
        end
      end
      e++;
    end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (n_valid_ch[c] == 0) begin failures++; $display("FAIL channel %0d never produced a valid energy", c); end
    end
    $display("energy strobes %0d, warm-up invalid %0d, invalid-crossing windows %0d",
             n_estrobe, n_inv_warm, n_inv_bc);
    $display("first-cell ReLU clips %0d, later-cell ReLU clips %0d, rounding effects %0d",
             n_relu1, n_relu_k, n_round);
    checks += 5;
    if (n_inv_warm == 0) begin failures++; $display("FAIL no warm-up window seen"); end
    if (n_inv_bc == 0)   begin failures++; $display("FAIL no window hit by an invalid crossing"); end
    if (n_relu1 == 0)    begin failures++; $display("FAIL first-cell ReLU never clipped"); end
    if (n_relu_k == 0)   begin failures++; $display("FAIL cell ReLU never clipped"); end
    if (n_round == 0)    begin failures++; $display("FAIL output rounding never mattered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (LOAD + (NBC + 40) * M + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
