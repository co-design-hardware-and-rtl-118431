// pq_dist_pe: one PE of Stage PQDist, asymmetric distance computation (ADC).
//
// For each probed cell the PE does two things in turn. Load: it takes the
// cell's LUT packet (header with the cell command, then KSUB rows of M
// distances), writes row j into address j of M column memories (one column
// per PQ sub-space, so M lookups can happen in the same cycle) and forwards
// every beat to the next PE through an output register (1-D array). Scan: it
// reads `rows` entries from its own memory channel, starting at the cell's
// start row; each entry is a vector ID plus M one-byte PQ codes. Code s
// addresses column s, the M looked-up partial distances enter a fully
// pipelined adder tree (log2(M) register levels) and one approximate distance
// per cycle leaves the PE. Padding detection: entry r of PE IDX holds vector
// r*NPE+IDX of the cell; if that index is not below the cell's count the slot
// is padding and its distance is forced to DIST_MAX. The item of the last row
// of the query's last cell carries last.
//
// Timing: KSUB+1 cycles to load a cell, then one code per cycle as long as
// the memory delivers and the output FIFO has room. Reads are issued against
// credits equal to the output FIFO depth, so responses (which cannot be
// stalled) always find room. Column memories, parallel lookup, the pipelined
// add tree, the nprobe-times load/scan loop and padding overwrite follow the
// paper's PE description; the entry format, the memory layout and the credit
// scheme are this design's choice.
module pq_dist_pe
  import fanns_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned KSUB = 256,
  parameter int unsigned NPE  = 36,
  parameter int unsigned IDX  = 0,
  parameter int unsigned OUTQ = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // LUT chain
  input  logic                      lut_in_valid,
  output logic                      lut_in_ready,
  input  logic                      lut_in_hdr,
  input  cell_cmd_t                 lut_in_cmd,
  input  logic [M-1:0][DIST_W-1:0]  lut_in_row,
  output logic                      lut_out_valid,
  input  logic                      lut_out_ready,
  output logic                      lut_out_hdr,
  output cell_cmd_t                 lut_out_cmd,
  output logic [M-1:0][DIST_W-1:0]  lut_out_row,
  // memory channel (in-order responses, no back-pressure on responses)
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic [ADDR_W-1:0]         mem_req_addr,
  input  logic                      mem_rsp_valid,
  input  logic [ID_W+M*CODE_W-1:0]  mem_rsp_data,   // {vector ID, code[M-1], ..., code[0]}
  // distances out
  output logic                      out_valid,
  input  logic                      out_ready,
  output item_t                     out_item,
  output logic                      out_last
);
  localparam int unsigned LG = $clog2(M);
  localparam int unsigned KW = $clog2(KSUB);
  localparam int unsigned QW = $clog2(OUTQ + 1);

  typedef enum logic {LOAD, SCAN} state_e;
  state_e    state;
  cell_cmd_t cmd;
  logic [KW-1:0]    rowi;
  logic [CNT_W-1:0] req_cnt, rsp_cnt;
  logic [QW-1:0]    credits;

  // ---- LUT columns: one memory per sub-space, one write and one read port ----
  logic                     col_we;
  logic [M-1:0][DIST_W-1:0] t0;
  assign col_we = lut_in_valid && lut_in_ready && !lut_in_hdr;
  for (genvar s = 0; s < int'(M); s++) begin : g_col
    logic [DIST_W-1:0] col [KSUB];
    logic [DIST_W-1:0] rd;
    always_ff @(posedge clk) begin
      if (col_we) col[rowi] <= lut_in_row[s];
      rd <= col[mem_rsp_data[s*CODE_W +: KW]];
    end
    assign t0[s] = rd;
  end

  // ---- load and forward ----
  logic lo_free;
  assign lo_free      = !lut_out_valid || lut_out_ready;
  assign lut_in_ready = (state == LOAD) && lo_free;

  always_ff @(posedge clk) begin
    if (!rst_n) lut_out_valid <= 1'b0;
    else if (lo_free) lut_out_valid <= lut_in_valid && lut_in_ready;
  end
  always_ff @(posedge clk) begin
    if (lut_in_valid && lut_in_ready) begin
      lut_out_hdr <= lut_in_hdr;
      lut_out_cmd <= lut_in_cmd;
      lut_out_row <= lut_in_row;
    end
  end

  // ---- scan ----
  logic out_pop;
  assign mem_req_valid = (state == SCAN) && (req_cnt < cmd.rows) && (credits != '0);
  assign mem_req_addr  = cmd.start + ADDR_W'(req_cnt);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= LOAD;
      rowi    <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
      credits <= QW'(OUTQ);
    end else begin
      credits <= credits - QW'(mem_req_valid && mem_req_ready) + QW'(out_pop);
      unique case (state)
        LOAD: if (lut_in_valid && lut_in_ready) begin
          if (lut_in_hdr) begin
            cmd  <= lut_in_cmd;
            rowi <= '0;
          end else if (rowi == KW'(KSUB - 1)) begin
            state   <= SCAN;
            req_cnt <= '0;
            rsp_cnt <= '0;
          end else begin
            rowi <= rowi + 1'b1;
          end
        end
        SCAN: begin
          if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 1'b1;
          if (mem_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt == cmd.rows - 1'b1) state <= LOAD;
          end
        end
        default: state <= LOAD;
      endcase
    end
  end

  // ---- lookup stage ----
  logic [LG:0] tv, tp, tl;
  id_t         tid [LG+1];
  always_ff @(posedge clk) begin
    if (!rst_n) tv[0] <= 1'b0;
    else        tv[0] <= mem_rsp_valid && (state == SCAN);
    tid[0] <= mem_rsp_data[M*CODE_W +: ID_W];
    tp[0]  <= (rsp_cnt * CNT_W'(NPE) + CNT_W'(IDX)) >= cmd.count;
    tl[0]  <= cmd.last && (rsp_cnt == cmd.rows - 1'b1);
  end

  // ---- pipelined add tree ----
  logic [M-1:0][DIST_W-1:0] lvl [LG+1];
  assign lvl[0] = t0;
  for (genvar k = 1; k <= int'(LG); k++) begin : g_add
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(M >> k); i++) lvl[k][i] <= lvl[k-1][2*i] + lvl[k-1][2*i+1];
      for (int i = int'(M >> k); i < int'(M); i++) lvl[k][i] <= '0;
      if (!rst_n) tv[k] <= 1'b0;
      else        tv[k] <= tv[k-1];
      tp[k]  <= tp[k-1];
      tl[k]  <= tl[k-1];
      tid[k] <= tid[k-1];
    end
  end

  item_t dist_item;
  assign dist_item = '{distance: tp[LG] ? DIST_MAX : lvl[LG][0], id: tid[LG]};

  logic                 fifo_in_ready;
  logic [QW-1:0]        fifo_count;
  logic [$bits(item_t):0] fifo_out;
  stream_fifo #(.WIDTH($bits(item_t) + 1), .DEPTH(OUTQ)) u_outq (
    .clk, .rst_n,
    .in_valid(tv[LG]), .in_ready(fifo_in_ready), .in_data({tl[LG], dist_item}),
    .out_valid, .out_ready, .out_data(fifo_out), .count(fifo_count)
  );
  assign out_pop  = out_valid && out_ready;
  assign out_item = fifo_out[$bits(item_t)-1:0];
  assign out_last = fifo_out[$bits(item_t)];

  // Credits guarantee that a response always finds room in the output FIFO.
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
                              tv[LG] |-> fifo_in_ready);
  initial begin
    assert ((1 << LG) == M) else $error("M must be a power of two");
    assert (KSUB <= (1 << CODE_W)) else $error("KSUB exceeds the code range");
  end
endmodule
