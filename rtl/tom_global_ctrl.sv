// tom_global_ctrl: the global controller, which runs the program and steers all lanes.
//
// The host loads a program of instr_t words into the instruction memory (p_we port)
// and pulses start. The controller then fetches instructions in order and:
//   * OP_NOP   does nothing;
//   * OP_LAYER makes instr.layer the active layer: the number is broadcast to every
//              MVU (it selects the ROM bank that is read) and given to the power
//              controller (tom_power_ctrl, inside this module), which powers that layer
//              and the next and gates off the rest;
//   * OP_GEMV, OP_KVW, OP_VOP, OP_VRED, OP_GRED are broadcast to every lane with a
//              one-cycle issue pulse; the controller then waits until no lane is busy
//              before it fetches the next instruction, so each instruction sees the
//              results of the previous one (this is how dependencies are handled);
//   * OP_HALT  ends the program (done goes high, busy low).
// A GEMV that reads ROM (mode GM_FFN) waits until the active layer's banks report
// ready; these waiting cycles are counted in pg_stall_cycles. With the next layer
// pre-powered, a program that spends at least WAKE cycles per layer never waits.
//
// Timing: one cycle per NOP / LAYER, issue the cycle after fetch, then the lanes' time.
// The source gives the controller's tasks (decode instructions, manage dependencies,
// broadcast control, know the active layer for power gating); the instruction format,
// the memory depth and the strictly serial issue are this design's own.
module tom_global_ctrl
  import tom_pkg::*;
#(
  parameter int unsigned M          = 16,
  parameter int unsigned LAYERS     = 30,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned WAKE       = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // program load and start
  input  logic                          p_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] p_addr,
  input  instr_t                        p_data,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // lanes
  output logic                          issue,
  output instr_t                        instr,
  input  logic [M-1:0]                  lane_busy,
  output logic [LAYER_W-1:0]            layer,
  output logic [LAYERS-1:0]             pwr_en,
  // statistics
  output logic [31:0]                   pg_stall_cycles,
  output logic [31:0]                   layer_switches
);

  localparam int unsigned PW = $clog2(IMEM_DEPTH);

  typedef enum logic [1:0] { C_IDLE, C_FETCH, C_WAIT } cstate_e;

  instr_t          imem [IMEM_DEPTH];
  cstate_e         state;
  logic [PW-1:0]   pc;
  instr_t          cur;
  logic            pg_set;
  logic [LAYERS-1:0] pg_ready;

  always_ff @(posedge clk) begin
    if (p_we && state == C_IDLE) imem[p_addr] <= p_data;
  end

  assign cur   = imem[pc];
  assign busy  = (state != C_IDLE);

  tom_power_ctrl #(
    .LAYERS (LAYERS),
    .WAKE   (WAKE)
  ) u_pg (
    .clk    (clk),
    .rst_n  (rst_n),
    .set    (pg_set),
    .layer  (cur.layer),
    .pwr_en (pwr_en),
    .ready  (pg_ready)
  );

  logic need_rom, rom_wait;
  assign need_rom = (cur.op == OP_GEMV) && (cur.mode == GM_FFN);
  assign rom_wait = need_rom && !pg_ready[layer];
  assign pg_set   = (state == C_FETCH) && (cur.op == OP_LAYER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= C_IDLE;
      pc              <= '0;
      done            <= 1'b0;
      issue           <= 1'b0;
      instr           <= '0;
      layer           <= '0;
      pg_stall_cycles <= '0;
      layer_switches  <= '0;
    end else begin
      issue <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          state           <= C_FETCH;
          pc              <= '0;
          done            <= 1'b0;
          pg_stall_cycles <= '0;
          layer_switches  <= '0;
        end

        C_FETCH: begin
          case (cur.op)
            OP_NOP: pc <= pc + PW'(1);
            OP_LAYER: begin
              layer          <= cur.layer;
              layer_switches <= layer_switches + 32'd1;
              pc             <= pc + PW'(1);
            end
            OP_HALT: begin
              state <= C_IDLE;
              done  <= 1'b1;
            end
            default: begin
              if (rom_wait) begin
                pg_stall_cycles <= pg_stall_cycles + 32'd1;
              end else begin
                issue <= 1'b1;
                instr <= cur;
                state <= C_WAIT;
              end
            end
          endcase
        end

        C_WAIT: begin
          // lanes raise busy the cycle after the issue pulse
          if (!issue && lane_busy == '0) begin
            state <= C_FETCH;
            pc    <= pc + PW'(1);
          end
        end

        default: state <= C_IDLE;
      endcase
    end
  end

  a_issue_idle : assert property (@(posedge clk) disable iff (!rst_n) issue |-> lane_busy == '0);

endmodule
