// ccm: central control module with its instruction RAM (IR).
//
// The host writes a program of 128-bit block-level instructions into the
// IR and pulses start. The CCM then fetches one instruction (1 cycle),
// decodes it into a DMA command, a compute-block command or a wait, and
// moves on as soon as the unit it needs accepts (valid/ready); DMA
// transfers and compute blocks therefore run concurrently, which is how the
// ping-pong buffers hide the external-memory time. WAIT stalls the program
// until the selected units are idle; HALT waits for both, raises done and
// returns to idle. Status registers (pc, the units' busy flags, stall and
// instruction counters) are outputs.
//
// Opcodes and fields: see lpfp_pkg (instr_t, dma_cmd_t, comp_cmd_t,
// wait_cmd_t). An unknown opcode is skipped like NOP.
//
// From the paper: the CCM decodes instructions from the IR, drives the other
// units and decides from their status when to fetch the next one. Own choices:
// the instruction set, the valid/ready hand-off and the WAIT/HALT rules.
module ccm
  import lpfp_pkg::*;
#(
  parameter int IR_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // host access to the IR
  input  logic               ir_we,
  input  logic [ADDR_W-1:0]  ir_waddr,
  input  logic [INSTR_W-1:0] ir_wdata,
  // DMA
  output dma_cmd_t           dma_cmd,
  output logic               dma_cmd_valid,
  input  logic               dma_cmd_ready,
  input  logic               dma_busy,
  // FPFU
  output comp_cmd_t          comp_cmd,
  output logic               comp_cmd_valid,
  input  logic               comp_cmd_ready,
  input  logic               comp_busy,
  // status registers
  output logic [ADDR_W-1:0]  pc,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        instr_count
);

  typedef enum logic [1:0] {C_IDLE, C_FETCH, C_EXEC} cstate_e;

  cstate_e            state;
  logic [INSTR_W-1:0] ir_rdata;
  instr_t             ins;
  wait_cmd_t          wcmd;
  logic               advance, finish;
  logic               dma_busy_r, comp_busy_r;   // control registers

  instr_ram #(.DEPTH(IR_DEPTH)) u_ir (
    .clk, .we (ir_we), .waddr (ir_waddr), .wdata (ir_wdata),
    .re (state == C_FETCH), .raddr (pc), .rdata (ir_rdata)
  );

  always_comb begin
    ins      = instr_t'(ir_rdata);
    dma_cmd  = dma_cmd_t'(ins.body[$bits(dma_cmd_t)-1:0]);
    comp_cmd = comp_cmd_t'(ins.body[$bits(comp_cmd_t)-1:0]);
    wcmd     = wait_cmd_t'(ins.body[$bits(wait_cmd_t)-1:0]);

    dma_cmd_valid  = 1'b0;
    comp_cmd_valid = 1'b0;
    advance        = 1'b0;
    finish         = 1'b0;
    if (state == C_EXEC) begin
      unique case (ins.op)
        OP_LOAD_IFM, OP_LOAD_W, OP_LOAD_OFM, OP_STORE_OFM: begin
          dma_cmd_valid = 1'b1;
          advance       = dma_cmd_ready;
        end
        OP_COMPUTE: begin
          comp_cmd_valid = 1'b1;
          advance        = comp_cmd_ready;
        end
        OP_WAIT:
          advance = !(wcmd.wait_dma && (dma_busy_r || dma_busy)) &&
                    !(wcmd.wait_comp && (comp_busy_r || comp_busy));
        OP_HALT:
          finish = !dma_busy_r && !dma_busy && !comp_busy_r && !comp_busy;
        default:
          advance = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state        <= C_IDLE;
      pc           <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
      instr_count  <= '0;
      dma_busy_r   <= 1'b0;
      comp_busy_r  <= 1'b0;
    end else begin
      dma_busy_r  <= dma_busy;
      comp_busy_r <= comp_busy;
      unique case (state)
        C_IDLE:
          if (start) begin
            state        <= C_FETCH;
            pc           <= '0;
            done         <= 1'b0;
            stall_cycles <= '0;
            instr_count  <= '0;
          end
        C_FETCH: state <= C_EXEC;
        C_EXEC:
          if (finish) begin
            state       <= C_IDLE;
            done        <= 1'b1;
            instr_count <= instr_count + 32'd1;
          end else if (advance) begin
            state       <= C_FETCH;
            pc          <= pc + ADDR_W'(1);
            instr_count <= instr_count + 32'd1;
          end else begin
            stall_cycles <= stall_cycles + 32'd1;
          end
        default: state <= C_IDLE;
      endcase
    end

  assign busy = (state != C_IDLE);

  // The DMA-side bits of a DMA instruction must match its opcode.
  a_dma_target: assert property (@(posedge clk) disable iff (!rst_n)
      dma_cmd_valid |-> ((ins.op == OP_LOAD_IFM  && dma_cmd.target == BUF_IFM && !dma_cmd.store) ||
                         (ins.op == OP_LOAD_W    && dma_cmd.target == BUF_W   && !dma_cmd.store) ||
                         (ins.op == OP_LOAD_OFM  && dma_cmd.target == BUF_OFM && !dma_cmd.store) ||
                         (ins.op == OP_STORE_OFM && dma_cmd.target == BUF_OFM &&  dma_cmd.store)))
    else $error("ccm: DMA instruction fields disagree with its opcode");

endmodule
