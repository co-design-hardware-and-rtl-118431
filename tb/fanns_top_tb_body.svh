// fanns_top_tb_body.svh: shared body of the two end-to-end testbenches of
// fanns_top (tb_fanns_top at reduced sizes, tb_fanns_top_full at the
// defaults). The including module defines the sizes (D, M, KSUB, NLIST,
// NPROBE, K, N_PQ, OPQ_EN, OPQ_FRAC), the dut instance, NQUERY, MAXV (most
// vectors per cell), RANGE (element magnitude) and RES_STALL (percent of
// cycles the result consumer refuses).
//
// It loads a random index (OPQ matrix, centroids, PQ codebooks, cell table
// and codes in the HBM model), sends NQUERY queries back to back, and checks
// every query's K results against a software model of the same arithmetic:
// OPQ rotation, squared L2 distance to every centroid, the NPROBE nearest
// cells, residual, distance look-up tables, ADC distance of every vector of
// those cells, and the K smallest. Results must come out sorted and each
// result's ID must carry its reported distance. It counts each mechanism the
// design relies on and fails on any that never happened.

  localparam int unsigned DSUB = D / M;
  localparam int unsigned RW   = ID_W + M * CODE_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      ld_valid = 1'b0;
  ld_target_e                ld_target = LD_OPQ_ROW;
  id_t                       ld_addr = '0;
  logic [D-1:0][ELEM_W-1:0]  ld_data = '0;
  logic                      q_valid = 1'b0, q_ready;
  logic [D-1:0][ELEM_W-1:0]  q_vec = '0;
  logic                      res_valid, res_ready = 1'b1, res_last;
  item_t                     res_item;
  logic [N_PQ-1:0]           mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [N_PQ-1:0][ADDR_W-1:0] mem_req_addr;
  logic [N_PQ-1:0][RW-1:0]   mem_rsp_data;

  hbm_model #(.NCH(N_PQ), .AW(ADDR_W), .DW(RW), .LAT(5), .STALL(20)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- model
  int            rmat   [D][D];
  int            cent   [NLIST][D];
  int            cbk    [KSUB][D];
  int            cstart [NLIST];
  int            ccount [NLIST];
  int            vcode  [int][M];       // codes of vector ID
  longint        vdist  [int];          // model distance of vector ID, this query
  int            qv     [D];

  function automatic int sat16(longint v);
    longint hi = (longint'(1) << (ELEM_W - 1)) - 1;
    if (v > hi) return int'(hi);
    if (v < -hi - 1) return int'(-hi - 1);
    return int'(v);
  endfunction

  // expected sorted distances of one query; fills vdist for ID checks
  function automatic void model(input int x [D], output longint exp_d [$]);
    int     y [D];
    longint cd [NLIST];
    int     order [$];
    longint all [$];
    for (int r = 0; r < int'(D); r++) begin
      longint acc = 0;
      for (int c = 0; c < int'(D); c++) acc += longint'(rmat[r][c]) * longint'(x[c]);
      y[r] = OPQ_EN ? sat16(acc >>> OPQ_FRAC) : x[r];
    end
    for (int l = 0; l < int'(NLIST); l++) begin
      cd[l] = 0;
      for (int i = 0; i < int'(D); i++) cd[l] += longint'(cent[l][i] - y[i]) ** 2;
    end
    for (int l = 0; l < int'(NLIST); l++) order.push_back(l);
    order.sort() with (cd[item]);
    vdist.delete();
    if (DEBUG) for (int p = 0; p < int'(NPROBE); p++) $display("model cell %0d d=%0d", order[p], cd[order[p]]);
    for (int p = 0; p < int'(NPROBE); p++) begin
      int     l = order[p];
      int     res [D];
      longint lut [M][KSUB];
      for (int i = 0; i < int'(D); i++) res[i] = sat16(longint'(y[i]) - cent[l][i]);
      for (int s = 0; s < int'(M); s++)
        for (int k = 0; k < int'(KSUB); k++) begin
          lut[s][k] = 0;
          for (int t = 0; t < int'(DSUB); t++)
            lut[s][k] += longint'(res[s*DSUB+t] - cbk[k][s*DSUB+t]) ** 2;
        end
      for (int j = 0; j < ccount[l]; j++) begin
        int     id = l * 1000 + j;
        longint dd = 0;
        for (int s = 0; s < int'(M); s++) dd += lut[s][vcode[id][s]];
        vdist[id] = dd;
        all.push_back(dd);
      end
    end
    all.sort();
    while (all.size() < K) all.push_back(longint'(DIST_MAX));
    exp_d = {};
    for (int i = 0; i < int'(K); i++) exp_d.push_back(all[i]);
  endfunction

  // ---------------------------------------------------------------- loading
  task automatic load(ld_target_e t, int a, logic [D-1:0][ELEM_W-1:0] d);
    @(negedge clk);
    ld_valid  = 1'b1;
    ld_target = t;
    ld_addr   = id_t'(a);
    ld_data   = d;
    @(negedge clk);
    ld_valid  = 1'b0;
  endtask

  task automatic load_index();
    logic [D-1:0][ELEM_W-1:0] w;
    int row = 0;
    for (int r = 0; r < int'(D); r++) begin
      for (int c = 0; c < int'(D); c++) begin
        // a scaled near-permutation with small mixing terms
        rmat[r][c] = (c == (r * 5 + 3) % int'(D)) ? (1 << OPQ_FRAC) - 7 * r
                   : int'($urandom_range(0, 600)) - 300;
        w[c] = ELEM_W'(rmat[r][c]);
      end
      load(LD_OPQ_ROW, r, w);
    end
    for (int l = 0; l < int'(NLIST); l++) begin
      for (int i = 0; i < int'(D); i++) begin
        cent[l][i] = int'($urandom_range(0, 2 * RANGE)) - RANGE;
        w[i] = ELEM_W'(cent[l][i]);
      end
      load(LD_CENTROID, l, w);
    end
    for (int k = 0; k < int'(KSUB); k++) begin
      for (int i = 0; i < int'(D); i++) begin
        cbk[k][i] = int'($urandom_range(0, 2 * RANGE)) - RANGE;
        w[i] = ELEM_W'(cbk[k][i]);
      end
      load(LD_CODEBOOK, k, w);
    end
    // cells: counts 0..MAXV, every fourth cell empty; rows packed per cell
    for (int l = 0; l < int'(NLIST); l++) begin
      int rows;
      ccount[l] = (l % 4 == 1) ? 0 : int'($urandom_range(1, MAXV));
      cstart[l] = row;
      rows = (ccount[l] + int'(N_PQ) - 1) / int'(N_PQ);
      if (rows == 0) rows = 1;
      row += rows;
      w = '0;
      w[0 +: ADDR_W/ELEM_W] = (ADDR_W)'(cstart[l]);
      w[ADDR_W/ELEM_W +: CNT_W/ELEM_W] = (CNT_W)'(ccount[l]);
      load(LD_CELLMETA, l, w);
      for (int j = 0; j < ccount[l]; j++) begin
        int id = l * 1000 + j;
        logic [RW-1:0] e;
        e = '0;
        e[M*CODE_W +: ID_W] = id_t'(id);
        for (int s = 0; s < int'(M); s++) begin
          vcode[id][s] = int'($urandom_range(0, KSUB - 1));
          e[s*CODE_W +: CODE_W] = CODE_W'(vcode[id][s]);
        end
        u_hbm.mem[(longint'(j % int'(N_PQ)) << 32) + longint'(cstart[l] + j / int'(N_PQ))] = e;
      end
    end
  endtask

  // ---------------------------------------------------------------- mechanisms
  int n_opq = 0, n_ivf = 0, n_cmd = 0, n_hdr = 0, n_pad = 0, n_memstall = 0;
  int n_selk_in = 0, n_selk_stall = 0, n_res_stall = 0, n_overlap = 0, n_pq_scan = 0;
  int q_in = 0, q_out = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.opq_valid && dut.opq_ready) n_opq++;
    if (dut.ivf_valid && dut.ivf_ready) n_ivf++;
    if (dut.cmd_valid && dut.cmd_ready) begin
      n_cmd++;
      if (DEBUG) $display("%0t cmd cell %0d start %0d rows %0d count %0d last %0b", $time, dut.cmd.cell_id, dut.cmd.start, dut.cmd.rows, dut.cmd.count, dut.cmd.last);
    end
    if (DEBUG && q_valid && q_ready) $display("%0t query in", $time);
    if (DEBUG && dut.opq_valid && dut.opq_ready) $display("%0t opq out", $time);
    if (DEBUG && dut.qa_valid && dut.qa_ready) $display("%0t qa", $time);
    if (DEBUG && dut.qb_valid && dut.qb_ready) $display("%0t qb", $time);
    if (DEBUG && dut.lq_valid && dut.lq_ready) $display("%0t lq", $time);
    if (DEBUG && dut.ivf_valid && dut.ivf_ready && dut.ivf_last) $display("%0t ivf last", $time);
    if (DEBUG && dut.sel_valid && dut.sel_ready) $display("%0t sel %0d d=%0d", $time, dut.sel_item.id, dut.sel_item.distance);
    if (dut.lut_valid && dut.lut_ready && dut.lut_hdr) n_hdr++;
    if (dut.all_valid && dut.selk_ready) begin
      n_selk_in++;
      for (int z = 0; z < int'(N_PQ); z++) if (dut.pq_item[z].distance == DIST_MAX) n_pad++;
    end
    if (dut.all_valid && !dut.selk_ready) n_selk_stall++;
    for (int z = 0; z < int'(N_PQ); z++) if (mem_req_valid[z] && !mem_req_ready[z]) n_memstall++;
    if (mem_rsp_valid[0]) n_pq_scan++;
    if (res_valid && !res_ready) n_res_stall++;
    if (q_valid && q_ready) begin
      if (q_in > q_out) n_overlap++;
      q_in++;
    end
  end

  // ---------------------------------------------------------------- results
  longint exp_all [$];   // expected distances, all queries in order
  int     exp_n = 0;
  int     rpos = 0;
  longint prev_d = 0;
  always @(posedge clk) res_ready <= ($urandom_range(99) >= RES_STALL);
  always @(negedge clk) if (rst_n && res_valid && res_ready) begin
    int k;
    k = rpos % int'(K);
    checks++;
    if (rpos >= exp_all.size() || longint'(res_item.distance) != exp_all[rpos]) begin
      failures++;
      if (failures < 20)
        $display("query %0d result %0d: distance %0d expected %0d", rpos / K, k,
                 res_item.distance, (rpos < exp_all.size()) ? exp_all[rpos] : -1);
    end
    checks++;
    if (res_last != (k == int'(K) - 1)) begin
      failures++;
      $display("query %0d result %0d: last flag %0b", rpos / K, k, res_last);
    end
    if (res_item.distance != DIST_MAX) begin
      // the ID must be a vector of this query's probed cells with that distance
      checks++;
      if (!vdist.exists(int'(res_item.id)) || vdist[int'(res_item.id)] != longint'(res_item.distance)) begin
        failures++;
        if (failures < 20) $display("query %0d result %0d: id %0d does not have distance %0d",
                                    rpos / K, k, res_item.id, res_item.distance);
      end
    end
    rpos++;
    if (k == int'(K) - 1) q_out++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("watchdog expired: %0d of %0d results", rpos, NQUERY * K);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mech(string name, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", name);
    end
  endtask

  initial begin
    int xs [NQUERY][D];
    rst_n = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    load_index();
    for (int q = 0; q < NQUERY; q++)
      for (int i = 0; i < int'(D); i++) xs[q][i] = int'($urandom_range(0, 2 * RANGE)) - RANGE;
    // The ID check uses the distances of the query being emitted, so queries
    // are modelled one ahead of their results. Queries overlap in the design.
    fork
      begin
        for (int q = 0; q < NQUERY; q++) begin
          @(negedge clk);
          for (int i = 0; i < int'(D); i++) q_vec[i] = ELEM_W'(xs[q][i]);
          q_valid = 1'b1;
          forever begin
            bit acc;
            acc = q_ready;
            @(posedge clk);
            if (acc) break;
            @(negedge clk);
          end
          @(negedge clk);
          q_valid = 1'b0;
        end
      end
      begin
        for (int q = 0; q < NQUERY; q++) begin
          longint e [$];
          int     xq [D];
          for (int i = 0; i < int'(D); i++) xq[i] = xs[q][i];
          while (rpos < q * int'(K)) @(negedge clk);
          model(xq, e);
          foreach (e[i]) exp_all.push_back(e[i]);
        end
      end
    join
    while (rpos < NQUERY * int'(K)) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (rpos != NQUERY * int'(K)) begin
      failures++;
      $display("%0d results, expected %0d", rpos, NQUERY * K);
    end
    mech("OPQ rotation of a query", n_opq);
    mech("IVFDist centroid distances", n_ivf);
    mech("SelCells cell commands", n_cmd);
    mech("BuildLUT tables delivered", n_hdr);
    mech("PQDist code reads", n_pq_scan);
    mech("PQDist padding overwrite", n_pad);
    mech("SelK input beats", n_selk_in);
    mech("HBM back-pressure", n_memstall);
    mech("result back-pressure", n_res_stall);
    mech("query accepted while an earlier one is in flight", n_overlap);
    $display("mechanisms: opq=%0d ivf=%0d cmd=%0d luts=%0d pqreads=%0d pad=%0d selk=%0d selkstall=%0d memstall=%0d resstall=%0d overlap=%0d",
             n_opq, n_ivf, n_cmd, n_hdr, n_pq_scan, n_pad, n_selk_in, n_selk_stall, n_memstall, n_res_stall, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
