// tb_galapagos_node: end-to-end test of one encoder-cluster FPGA at its
// full default size (H = 768, M_MAX = 128, 16 tiles, 16 PEs, one-matrix
// FIFOs), with a sequence of SEQ = 20 tokens.
//
// What it does. The testbench plays the rest of the cluster and the network:
//   * K rows of head 0 arrive from "kern_35" (TID 35 -> kern_4), V rows of
//     head 0 arrive as inter-cluster messages with GMI header 16 (so the
//     gateway forwards them), and the encoder input rows arrive as
//     inter-cluster messages with header 39 (gateway broadcast).
//   * It plays the Softmax: it reads the scores on sm_* and returns
//     probability rows on p_* (P = clamp(score >>> 6)).
//   * It sends the outputs of heads 1..11 (TIDs 17..27 -> Kern_37) one row
//     at a time, after the gathered row before it has left.
//   * After the sequence, two chunks with gateway header 40 exercise the
//     gateway's own Gather, and one LayerNorm row enters on ln_*.
// A bit-exact model checks: the broadcast copies sent off-chip (kern 2, 3,
// 29), the Q row slices scattered off-chip (kern 5..15), every attention
// score, the gathered rows to kern_28 (head 0 part = Quant(P*V)), and the
// header + payload sent to the next cluster's IP. Each mechanism is counted
// and a mechanism that never happened is a failure. net_out_ready and
// sm_ready are random, so back-pressure runs through the whole node.
// Interface: drives galapagos_node with all default parameters (no overrides).
module tb_galapagos_node;
  import gp_pkg::*;
  localparam int H = 768, T = 16, CH = H / 64, NG = H / T, SEQ = 20, HEADS = 12;
  localparam ip_t IP_A = 32'h0A00_0001, IP_B = 32'h0A00_0002, IP_C = 32'h0A00_0103;
  localparam int LM = 1, LS = 5, SM = 3, SS = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ip_t my_ip; logic [7:0] seq_len;
  logic tbl_we, tbl_sel; kid_t tbl_addr; ip_t tbl_ip;
  logic w_we; logic [$clog2(T)-1:0] w_tile; logic [$clog2(NG*CH)-1:0] w_addr; logic [DATA_W-1:0] w_data;
  logic b_we; logic [$clog2(H)-1:0] b_addr; logic signed [31:0] b_data;
  logic [30:0] lin_mult, sm_mult; logic [5:0] lin_shift, sm_shift;
  flit_t net_in_flit; logic net_in_valid, net_in_ready;
  flit_t net_out_flit; ip_t net_out_ip; logic net_out_valid, net_out_ready;
  flit_t sm_flit; logic sm_valid, sm_ready;
  flit_t p_flit; logic p_valid, p_ready;
  flit_t ln_flit; logic ln_valid, ln_ready;
  logic [15:0] fwd_pkts, gather_rows, inter_pkts, dp_pad, sm_pad, dropped, gw_gather_out, fifo_peak;
  logic bcast_overflow;

  galapagos_node dut (.*);

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin repeat (400000) @(posedge clk); $display("watchdog: scores=%0d gath=%0d bc=%0d sc=%0d fwd=%0d txq=%0d dp_pad=%0d sm_pad=%0d gr=%0d nextc=%0d", n_scores, n_gather_rows, bc_cnt[0], sc_cnt[1], fwd_pkts, txq.size(), dp_pad, sm_pad, gather_rows, nextc.size()); failures++; finish(); end

  // ---------------- reference data ----------------
  byte X [SEQ][H];  byte W [H][H];  int bias [H];
  byte Q [SEQ][H];  byte K [SEQ][64];  byte V [SEQ][64];
  int  S [SEQ][SEQ]; byte P [SEQ][SEQ]; byte O [SEQ][64];
  byte HO [SEQ][HEADS][64];            // head outputs, [*][0] from the node
  byte LN [H];

  function automatic byte rq(longint x, int m, int s);
    longint p, q;
    p = x * longint'(m);
    q = p + (longint'(1) << (s - 1));
    q = (q >= 0) ? (q / (longint'(1) << s)) : -((-q + (longint'(1) << s) - 1) / (longint'(1) << s));
    if (q > 127) return 127;
    if (q < -128) return -128;
    return byte'(q);
  endfunction

  // ---------------- network input: one driver, whole packets queued ----------------
  flit_t txq [$];
  initial begin
    net_in_valid = 0; net_in_flit = '0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (txq.size() != 0) begin
        net_in_flit = txq.pop_front(); net_in_valid = 1;
        #1; while (!net_in_ready) begin @(negedge clk); #1; end
        @(negedge clk); net_in_valid = 0;
      end
    end
  end

  // ---------------- counters of mechanisms ----------------
  int n_bcast_remote = 0, n_scatter_remote = 0, n_gather_rows = 0, n_next_cluster = 0;
  int n_scores = 0, n_stall = 0, n_gwgather = 0;
  flit_t gath [$];  flit_t nextc [$];  flit_t gwg [$];
  int bc_cnt [3];   int sc_cnt [HEADS];

  // ---------------- network output: check everything that leaves ----------------
  always_ff @(posedge clk) begin
    net_out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && net_out_valid && !net_out_ready) n_stall++;
    if (rst_n && net_out_valid && net_out_ready) begin
      automatic flit_t f = net_out_flit;
      if (net_out_ip == IP_C) begin
        nextc.push_back(f);
      end else begin
        check(net_out_ip == IP_B, $sformatf("net ip %h", net_out_ip));
        check(!f.tuser[INTER_BIT], "intra flit has inter bit");
        if (f.tdest == 8'd2 || f.tdest == 8'd3 || f.tdest == 8'd29) begin
          automatic int d = (f.tdest == 8'd2) ? 0 : (f.tdest == 8'd3) ? 1 : 2;
          automatic int r = bc_cnt[d] / CH, c = bc_cnt[d] % CH;
          logic ok; ok = 1;
          for (int i = 0; i < 64; i++) if (f.tdata[i*8 +: 8] != X[r][c*64 + i]) ok = 0;
          check(ok && f.tlast == (c == CH - 1), $sformatf("bcast copy to %0d row %0d flit %0d", f.tdest, r, c));
          bc_cnt[d]++; n_bcast_remote++;
        end else if (f.tdest >= 8'd5 && f.tdest <= 8'd15) begin
          automatic int h = f.tdest - 4, r = sc_cnt[h];
          logic ok; ok = 1;
          if (r < SEQ) begin
            for (int i = 0; i < 64; i++) if (f.tdata[i*8 +: 8] != Q[r][h*64 + i]) ok = 0;
          end
          check(ok && f.tid == 8'd34 && f.tlast, $sformatf("scatter to %0d row %0d", f.tdest, r));
          sc_cnt[h]++; n_scatter_remote++;
        end else if (f.tdest == 8'd28) begin
          gath.push_back(f);
          if (f.tlast) n_gather_rows++;
        end else if (f.tdest == 8'd1 && f.tid == 8'd0) begin
          gwg.push_back(f);                // would be local: not expected here
        end else begin
          check(0, $sformatf("unexpected flit to %0d tid %0d", f.tdest, f.tid));
        end
      end
    end
  end

  // ---------------- the Softmax stand-in ----------------
  flit_t pq [$];
  initial begin
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (pq.size() != 0) begin
        p_flit = pq.pop_front(); p_valid = 1;
        #1; while (!p_ready) begin @(negedge clk); #1; end
        @(negedge clk); p_valid = 0;
      end
    end
  end
  initial begin
    automatic int got_row = 0, col = 0;
    p_valid = 0; p_flit = '0; sm_ready = 0;
    wait (rst_n);
    while (got_row < SEQ) begin
      @(negedge clk);
      sm_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (sm_valid && sm_ready) begin
        for (int l = 0; l < 16; l++) begin
          if (col + l < SEQ) begin
            check(int'(signed'(sm_flit.tdata[l*32 +: 32])) == S[got_row][col + l],
                  $sformatf("score S[%0d][%0d] got %0d exp %0d", got_row, col + l,
                            int'(signed'(sm_flit.tdata[l*32 +: 32])), S[got_row][col + l]));
            n_scores++;
          end else check(sm_flit.tdata[l*32 +: 32] == 32'd0, "score padding lane");
        end
        col += 16;
        if (sm_flit.tlast) begin
          check(col >= SEQ, "score row length");
          // return the probability row for this score row
          begin
            flit_t f; f = make_flit('0, 8'd4, 8'd16, 1'b1, 1'b0);
            for (int j = 0; j < SEQ; j++) f.tdata[j*8 +: 8] = P[got_row][j];
            pq.push_back(f);
          end
          got_row++; col = 0;
        end
      end
    end
    @(negedge clk); sm_ready = 0;
  end

  // ---------------- main sequence ----------------
  initial begin
    my_ip = IP_A; seq_len = 8'(SEQ);
    tbl_we = 0; tbl_sel = 0; tbl_addr = 0; tbl_ip = 0;
    w_we = 0; w_tile = 0; w_addr = 0; w_data = 0; b_we = 0; b_addr = 0; b_data = 0;
    lin_mult = LM; lin_shift = LS; sm_mult = SM; sm_shift = SS;
    ln_valid = 0; ln_flit = '0;

    // data and reference model
    foreach (W[k, c]) W[k][c] = byte'($urandom_range(0, 15) - 8);
    foreach (bias[c]) bias[c] = $urandom_range(0, 4000) - 2000;
    foreach (X[r, k]) X[r][k] = byte'($urandom);
    foreach (K[r, k]) K[r][k] = byte'($urandom);
    foreach (V[r, k]) V[r][k] = byte'($urandom);
    foreach (HO[r, h, k]) HO[r][h][k] = byte'($urandom);
    foreach (LN[k]) LN[k] = byte'($urandom);
    for (int r = 0; r < SEQ; r++)
      for (int c = 0; c < H; c++) begin
        int acc; acc = bias[c];
        for (int k = 0; k < H; k++) acc += int'(X[r][k]) * int'(W[k][c]);
        Q[r][c] = rq(acc, LM, LS);
      end
    for (int i = 0; i < SEQ; i++)
      for (int j = 0; j < SEQ; j++) begin
        int acc; acc = 0;
        for (int k = 0; k < 64; k++) acc += int'(Q[i][k]) * int'(K[j][k]);
        S[i][j] = acc;
        P[i][j] = (acc >>> 6) > 127 ? 8'sd127 : (acc >>> 6) < -128 ? -8'sd128 : byte'(acc >>> 6);
      end
    for (int i = 0; i < SEQ; i++)
      for (int n = 0; n < 64; n++) begin
        int acc; acc = 0;
        for (int j = 0; j < SEQ; j++) acc += int'(P[i][j]) * int'(V[j][n]);
        O[i][n] = rq(acc, SM, SS);
        HO[i][0][n] = O[i][n];
      end

    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);

    // routing tables: kernels of this FPGA -> my IP, the rest -> IP_B
    for (int k = 0; k < 256; k++) begin
      tbl_we = 1; tbl_sel = 0; tbl_addr = 8'(k);
      tbl_ip = (k == 0 || k == 1 || k == 4 || k == 16 || k == 34 || k == 37) ? IP_A : IP_B;
      @(negedge clk);
    end
    tbl_sel = 1; tbl_addr = 8'd1; tbl_ip = IP_C; @(negedge clk);
    tbl_we = 0;

    // weights and bias of kern_1
    for (int c = 0; c < H; c++)
      for (int ch = 0; ch < CH; ch++) begin
        w_we = 1; w_tile = 4'(c % T); w_addr = 10'((c / T) * CH + ch);
        for (int i = 0; i < 64; i++) w_data[i*8 +: 8] = W[ch * 64 + i][c];
        @(negedge clk);
      end
    w_we = 0;
    for (int c = 0; c < H; c++) begin b_we = 1; b_addr = 10'(c); b_data = bias[c]; @(negedge clk); end
    b_we = 0;

    // K of head 0 (from kern_35), V of head 0 (inter-cluster, header 16),
    // input rows (inter-cluster, header 39 = gateway broadcast)
    for (int r = 0; r < SEQ; r++) begin
      flit_t f; f = make_flit('0, 8'd35, 8'd4, 1'b1, 1'b0);
      for (int k = 0; k < 64; k++) f.tdata[k*8 +: 8] = K[r][k];
      txq.push_back(f);
    end
    for (int r = 0; r < SEQ; r++) begin
      flit_t f; f = make_flit('0, 8'd36, 8'd0, 1'b1, 1'b0);
      for (int k = 0; k < 64; k++) f.tdata[k*8 +: 8] = V[r][k];
      txq.push_back(make_flit(DATA_W'(16), 8'd36, 8'd0, 1'b0, 1'b1));
      f.tuser[INTER_BIT] = 1'b1;
      txq.push_back(f);
    end
    for (int r = 0; r < SEQ; r++) begin
      txq.push_back(make_flit(DATA_W'(39), 8'd32, 8'd0, 1'b0, 1'b1));
      for (int c = 0; c < CH; c++) begin
        flit_t f; f = make_flit('0, 8'd32, 8'd0, c == CH - 1, 1'b1);
        for (int i = 0; i < 64; i++) f.tdata[i*8 +: 8] = X[r][c*64 + i];
        txq.push_back(f);
      end
    end

    // heads 1..11 of row r, once gathered row r-1 has left
    for (int r = 0; r < SEQ; r++) begin
      while (n_gather_rows < r) @(negedge clk);
      for (int h = 1; h < HEADS; h++) begin
        flit_t f; f = make_flit('0, 8'(16 + h), 8'd37, 1'b1, 1'b0);
        for (int k = 0; k < 64; k++) f.tdata[k*8 +: 8] = HO[r][h][k];
        txq.push_back(f);
      end
    end
    while (n_gather_rows < SEQ) @(negedge clk);
    repeat (200) @(negedge clk);

    // gateway Gather (header 40): two 6-flit chunks from Kern_0 and Kern_1
    // of another cluster become one 12-flit row for kern_1 (Linear); its Q
    // row then appears as 11 more scattered slices
    for (int s = 1; s >= 0; s--) begin
      txq.push_back(make_flit(DATA_W'(40), 8'(s), 8'd0, 1'b0, 1'b1));
      for (int c = 0; c < 6; c++) begin
        flit_t f; f = make_flit('0, 8'(s), 8'd0, c == 5, 1'b1);
        for (int i = 0; i < 64; i++) f.tdata[i*8 +: 8] = X[0][(s*6 + c)*64 + i];
        txq.push_back(f);
      end
    end
    begin
      int t0; t0 = 0;
      while (sc_cnt[11] < SEQ + 1 && t0 < 5000) begin @(negedge clk); t0++; end
    end

    // LayerNorm output row to the next cluster
    for (int c = 0; c < CH; c++) begin
      flit_t f; f = make_flit('0, 8'd32, 8'd0, c == CH - 1, 1'b0);
      for (int i = 0; i < 64; i++) f.tdata[i*8 +: 8] = LN[c*64 + i];
      ln_flit = f; ln_valid = 1;
      #1; while (!ln_ready) begin @(negedge clk); #1; end
      @(negedge clk); ln_valid = 0;
    end
    begin
      int t0; t0 = 0;
      while (nextc.size() < CH + 1 && t0 < 2000) begin @(negedge clk); t0++; end
    end
    repeat (20) @(negedge clk);

    // ---------------- final checks ----------------
    // gathered rows: 12 flits each, flit h = head h
    check(gath.size() == SEQ * HEADS, $sformatf("gathered flits %0d", gath.size()));
    for (int i = 0; i < gath.size() && i < SEQ * HEADS; i++) begin
      automatic int r = i / HEADS, h = i % HEADS;
      logic ok; ok = 1;
      for (int k = 0; k < 64; k++) if (gath[i].tdata[k*8 +: 8] != HO[r][h][k]) ok = 0;
      check(ok && gath[i].tid == 8'd37 && gath[i].tlast == (h == HEADS - 1),
            $sformatf("gathered row %0d head %0d", r, h));
    end
    // the repeat of row 0 through the gateway gather gives the same Q row 0
    for (int h = 1; h < HEADS; h++) check(sc_cnt[h] == SEQ + 1, $sformatf("scatter count head %0d = %0d", h, sc_cnt[h]));
    for (int d = 0; d < 3; d++) check(bc_cnt[d] == SEQ * CH, $sformatf("bcast count %0d = %0d", d, bc_cnt[d]));
    // next cluster: header flit + payload, all with the inter bit
    check(nextc.size() == CH + 1, $sformatf("next-cluster flits %0d", nextc.size()));
    if (nextc.size() == CH + 1) begin
      check(nextc[0].tdata[7:0] == 8'd39 && !nextc[0].tlast, "header flit");
      for (int c = 0; c < CH; c++) begin
        logic ok; ok = 1;
        for (int i = 0; i < 64; i++) if (nextc[c+1].tdata[i*8 +: 8] != LN[c*64 + i]) ok = 0;
        check(ok && nextc[c+1].tlast == (c == CH - 1), $sformatf("next-cluster flit %0d", c));
      end
      foreach (nextc[i]) check(nextc[i].tuser[INTER_BIT] && nextc[i].tdest == 8'd1, "next-cluster addressing");
    end
    check(gwg.size() == 0, "no stray flits");
    check(dropped == 0, "no dropped packets");
    check(!bcast_overflow, "no broadcast overflow");

    // every mechanism must have happened
    check(n_bcast_remote > 0,          "mechanism: gateway broadcast to other FPGAs");
    check(fwd_pkts == 16'(SEQ),        $sformatf("mechanism: gateway forwarding (%0d)", fwd_pkts));
    check(n_scatter_remote > 0,        "mechanism: scatter to other FPGAs");
    check(n_scores == SEQ * SEQ,       $sformatf("mechanism: loopback Q -> dot-product (%0d scores)", n_scores));
    check(dp_pad == 16'(32 - SEQ),     $sformatf("mechanism: dot-product padding (%0d)", dp_pad));
    check(sm_pad == 16'(32 - SEQ),     $sformatf("mechanism: softmax-matmul padding (%0d)", sm_pad));
    check(gather_rows == 16'(SEQ),     $sformatf("mechanism: gather (%0d)", gather_rows));
    check(n_gather_rows == SEQ,        "mechanism: gathered rows leave to kern_28");
    check(gw_gather_out == 16'd1,      "mechanism: gateway gather");
    check(inter_pkts == 16'd1,         $sformatf("mechanism: inter-cluster routing (%0d)", inter_pkts));
    check(n_stall > 0,                 "mechanism: back-pressure from the network");
    check(fifo_peak > 16'd12,          $sformatf("mechanism: kernel FIFO buffering (%0d)", fifo_peak));
    $display("mechanisms: bcast=%0d fwd=%0d scatter=%0d scores=%0d dp_pad=%0d sm_pad=%0d gather=%0d gw_gather=%0d inter=%0d stall=%0d fifo_peak=%0d",
             n_bcast_remote, fwd_pkts, n_scatter_remote, n_scores, dp_pad, sm_pad, gather_rows, gw_gather_out, inter_pkts, n_stall, fifo_peak);
    finish();
  end
endmodule
