// tom_vu: the vector unit shared by the MVUs of one processing lane.
//
// It holds the lane's activations in two vector buffers of DEPTH entries, each entry K
// Q16.16 words, runs element-wise arithmetic on them in a K-wide SFU, and is the lane's
// only port to the MVU chain, the reduction tree and the host:
//   * buffer 1 feeds the MVU chain and receives the results of the reduction tree;
//   * buffer 0 receives the MVU results and feeds the reduction tree;
//   * the SFU may read and write either buffer (operand buffers are chosen per
//     instruction).
// The host may write or read any entry while the unit is idle (h_* port; reads are
// combinational).
//
// Local control executes one broadcast instruction at a time (issue pulse, busy while
// running):
//   OP_GEMV  Streams entries a'..a'+len-1 of buffer abuf (a' = a + LANE_ID*len when lofs
//            is set, so each lane takes its own slice of a vector held by every lane),
//            converted to FP8, into the MVU chain, rows times over (one pass per output
//            row of each MVU). Beat i of pass r carries (i, r, last = (i == len-1)). If
//            len < N the unit idles N-len cycles after each pass so that the MVUs never
//            produce more than one result per cycle. It then collects rows*N results
//            from the result chain: the result of MVU n for row r is element
//            e = r*N + n of the vector at entry d of buffer dbuf (entry d + e/K,
//            element e % K), converted to Q16.16. Done when all have arrived.
//   OP_KVW   Streams len entries the same way once, marked as cache writes, then stays
//            busy N+1 more cycles so that the last beat has reached the last MVU before
//            the lanes' configuration can change.
//   OP_VOP   For j < len: dbuf[d+j] = sfu(abuf[a+j], B), B = bbuf[b+j], or element 0 of
//            bbuf[b] copied to all K elements when bscalar is set, negated when negb is
//            set. One entry per cycle.
//   OP_VRED  Sum (sfu = SFU_ADD) or maximum (SFU_MAX) of all K*len elements of
//            abuf[a..a+len-1]; the scalar is written to all K elements of dbuf[d].
//            One entry per cycle plus one cycle to write.
//   OP_GRED  Sends abuf[a+j], j < len, one per cycle, to the reduction tree, and
//            writes each returned vector j to buffer 1 entry d+j. Done when len have
//            returned.
//
// The source gives the VU's role (activation buffer, exp / div / sqrt etc. for softmax,
// LayerNorm, GELU), its two buffers, local control and SFU, and which way data flows
// between buffers, MVUs and the reduction tree. The operand format, buffer depth and
// this instruction set are this design's own.
module tom_vu
  import tom_pkg::*;
#(
  parameter int unsigned K       = 16,
  parameter int unsigned N       = 10,
  parameter int unsigned DEPTH   = 512,
  parameter int unsigned LANE_ID = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction from the global controller
  input  logic                issue,
  input  instr_t              instr,
  output logic                busy,
  // stream into MVU 0
  output logic                s_valid,
  output logic                s_kvw,
  output logic                s_last,
  output logic [LEN_W-1:0]    s_i,
  output logic [ROWS_W-1:0]   s_r,
  output fp8_t [K-1:0]        s_data,
  // results from MVU 0's result slot
  input  logic                r_valid,
  output logic                r_ready,
  input  acc_t                r_acc,
  input  logic [MVUID_W-1:0]  r_mvu,
  input  logic [ROWS_W-1:0]   r_row,
  // to / from the global reduction tree
  output logic                g_valid,
  output logic [ADDR_W-1:0]   g_idx,
  output vword_t [K-1:0]      g_data,
  input  logic                gin_valid,
  input  logic [ADDR_W-1:0]   gin_idx,
  input  vword_t [K-1:0]      gin_data,
  // host access
  input  logic                h_we,
  input  logic                h_buf,
  input  logic [ADDR_W-1:0]   h_addr,
  input  vword_t [K-1:0]      h_wdata,
  output vword_t [K-1:0]      h_rdata
);

  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_STREAM, S_GAP, S_COLLECT, S_VOP, S_VRED, S_GSEND, S_GWAIT, S_DRAIN
  } state_e;

  state_e state;
  instr_t ir;

  vword_t [K-1:0] mem [2][DEPTH];

  logic [LEN_W-1:0]  j;          // entry counter
  logic [ROWS_W-1:0] r;          // row pass counter
  logic [LEN_W-1:0]  gap;        // idle cycles after a pass
  logic [23:0]       got;        // results / vectors received
  logic [23:0]       want;
  vword_t            red;        // VRED running value

  assign busy    = (state != S_IDLE);
  assign r_ready = 1'b1;

  // ---------------------------------------------------------------- operand reads
  logic [ADDR_W-1:0] a_eff;
  vword_t [K-1:0]    opa, opb_raw, opb, sfu_y;

  assign a_eff   = ir.a + (ir.lofs ? ADDR_W'(LANE_ID * 32'(ir.len)) : '0) + ADDR_W'(j);
  assign opa     = mem[ir.abuf][AW'(a_eff)];
  assign opb_raw = mem[ir.bbuf][AW'(ir.b + (ir.bscalar ? '0 : ADDR_W'(j)))];

  always_comb begin
    for (int k = 0; k < K; k++) begin
      opb[k] = ir.bscalar ? opb_raw[0] : opb_raw[k];
      if (ir.negb) opb[k] = -opb[k];
    end
  end

  tom_sfu #(.K(K)) u_sfu (
    .op (ir.sfu),
    .a  (opa),
    .b  (opb),
    .y  (sfu_y)
  );

  // ---------------------------------------------------------------- stream and tree outputs
  always_comb begin
    for (int k = 0; k < K; k++) s_data[k] = vword_to_fp8(opa[k]);
  end
  assign s_valid = (state == S_STREAM);
  assign s_kvw   = (ir.op == OP_KVW);
  assign s_last  = (j == ir.len - LEN_W'(1));
  assign s_i     = j;
  assign s_r     = r;

  assign g_valid = (state == S_GSEND);
  assign g_idx   = ADDR_W'(j);
  assign g_data  = opa;

  assign h_rdata = mem[h_buf][AW'(h_addr)];

  // in-lane reduction of one entry
  function automatic vword_t red_pair(sfu_op_e o, vword_t x, vword_t y);
    logic signed [VW:0] s;
    if (o == SFU_MAX) return (x > y) ? x : y;
    s = (VW+1)'(x) + (VW+1)'(y);
    if (s > (VW+1)'(32'sh7fffffff))  return 32'sh7fffffff;
    if (s < -(VW+1)'(32'sh7fffffff)) return -32'sh7fffffff;
    return vword_t'(s);
  endfunction

  vword_t red_entry;
  always_comb begin
    red_entry = opa[0];
    for (int k = 1; k < K; k++) red_entry = red_pair(ir.sfu, red_entry, opa[k]);
  end

  // result placement
  logic [23:0] res_e;
  assign res_e = 24'(r_row) * 24'(N) + 24'(r_mvu);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ir    <= '0;
      j     <= '0;
      r     <= '0;
      gap   <= '0;
      got   <= '0;
      want  <= '0;
      red   <= '0;
    end else begin
      case (state)
        S_IDLE: if (issue) begin
          ir  <= instr;
          j   <= '0;
          r   <= '0;
          got <= '0;
          case (instr.op)
            OP_GEMV: begin
              state <= S_STREAM;
              want  <= 24'(instr.rows) * 24'(N);
            end
            OP_KVW:  state <= S_STREAM;
            OP_VOP:  state <= S_VOP;
            OP_VRED: state <= S_VRED;
            OP_GRED: state <= S_GSEND;
            default: state <= S_IDLE;
          endcase
        end

        S_STREAM: begin
          if (j == ir.len - LEN_W'(1)) begin
            j <= '0;
            if (ir.op == OP_KVW || r == ir.rows - ROWS_W'(1)) begin
              state <= (ir.op == OP_KVW) ? S_DRAIN : S_COLLECT;
              gap   <= LEN_W'(N + 1);
            end else begin
              r <= r + ROWS_W'(1);
              if (32'(ir.len) < N) begin
                gap   <= LEN_W'(N - 32'(ir.len));
                state <= S_GAP;
              end
            end
          end else begin
            j <= j + LEN_W'(1);
          end
        end

        S_GAP: begin
          if (gap == LEN_W'(1)) state <= S_STREAM;
          gap <= gap - LEN_W'(1);
        end

        S_COLLECT: if (got == want) state <= S_IDLE;

        S_DRAIN: begin                      // let the last cache write reach MVU N-1
          if (gap == LEN_W'(1)) state <= S_IDLE;
          gap <= gap - LEN_W'(1);
        end

        S_VOP: begin
          if (j == ir.len - LEN_W'(1)) state <= S_IDLE;
          j <= j + LEN_W'(1);
        end

        S_VRED: begin
          red <= (j == '0) ? red_entry : red_pair(ir.sfu, red, red_entry);
          if (j == ir.len) state <= S_IDLE;
          else             j <= j + LEN_W'(1);
        end

        S_GSEND: begin
          if (j == ir.len - LEN_W'(1)) state <= S_GWAIT;
          j <= j + LEN_W'(1);
        end

        S_GWAIT: if (got == 24'(ir.len)) state <= S_IDLE;

        default: state <= S_IDLE;
      endcase

      // results and reduced vectors arrive independently of the state above
      if (r_valid || gin_valid) got <= got + 24'd1;
    end
  end

  // ---------------------------------------------------------------- buffer writes
  always_ff @(posedge clk) begin
    if (h_we && state == S_IDLE) mem[h_buf][AW'(h_addr)] <= h_wdata;
    if (state == S_VOP) mem[ir.dbuf][AW'(ir.d + ADDR_W'(j))] <= sfu_y;
    if (state == S_VRED && j == ir.len) begin
      for (int k = 0; k < K; k++) mem[ir.dbuf][AW'(ir.d)][k] <= red;
    end
    if (r_valid) mem[ir.dbuf][AW'(32'(ir.d) + 32'(res_e) / K)][32'(res_e) % K] <= acc_to_vword(r_acc);
    if (gin_valid) mem[1][AW'(ir.d + gin_idx)] <= gin_data;
  end

  // The host may only touch the buffers while the unit is idle.
  a_host_idle : assert property (@(posedge clk) disable iff (!rst_n) h_we |-> state == S_IDLE);

endmodule
