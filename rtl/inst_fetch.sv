// inst_fetch -- instruction memory (I$) and fetch pipeline of a reasoning
// core.
//
// The host writes the core's program into the instruction memory through
// the imem_we/imem_addr/imem_wdata port, then pulses `start`. Fetch begins at
// address 0 and reads one 128-bit instruction per cycle (one-cycle read
// latency). Each instruction is dispatched by its opcode into the queue of
// the pipeline that executes it: MEM_LOAD/MEM_STORE to the memory pipeline,
// VMM to the compute pipeline, NET_SEND to the network pipeline. NOP is
// dropped, HALT stops fetching. When the target queue is full, fetch waits.
// Each queue is a QDEPTH-entry FIFO drained by its pipeline through
// valid/ready. `halted` is high from reset or HALT until the next start.
//
// Because all three pipelines synchronise through the valid counters of
// the buffers, fetch never waits for an instruction to finish: the queues
// let the memory pipeline run ahead of the compute pipeline, and the
// compute pipeline ahead of the network pipeline, as far as the data allows.
//
// From the paper: a lightweight per-core instruction-fetch pipeline running
// a small set of long-running instructions, a 64 KB I$, separate control
// for the compute, memory and network pipelines. This design's choices: the
// instruction width, the per-pipeline queues and their depth, the host
// load port.
module inst_fetch
  import rpu_pkg::*;
#(
  parameter int unsigned DEPTH  = 4096,      // 4096 x 128b = 64 KB
  parameter int unsigned QDEPTH = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      imem_we,
  input  logic [$clog2(DEPTH)-1:0]  imem_addr,
  input  instr_t                    imem_wdata,
  input  logic                      start,
  output logic                      halted,
  // pipeline queues: 0 memory, 1 compute, 2 network
  output logic                      q_valid [3],
  input  logic                      q_ready [3],
  output instr_t                    q_instr [3]
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned QW = $clog2(QDEPTH);

  instr_t        imem [DEPTH];
  logic [AW-1:0] pc;
  logic          running;
  instr_t        iq;                  // fetched instruction
  logic          iv;

  instr_t        qm   [3][QDEPTH];
  logic [QW-1:0] qwp  [3];
  logic [QW-1:0] qrp  [3];
  logic [QW:0]   qcnt [3];

  always_ff @(posedge clk) if (imem_we) imem[imem_addr] <= imem_wdata;

  // dispatch decision
  logic [1:0] tgt;
  logic       drop, is_halt, can_go;
  always_comb begin
    is_halt = iq.op == OP_HALT;
    drop    = is_halt || (iq.op == OP_NOP) ||
              !(iq.op inside {OP_MEM_LOAD, OP_MEM_STORE, OP_VMM, OP_NET_SEND});
    case (iq.op)
      OP_VMM:      tgt = 2'd1;
      OP_NET_SEND: tgt = 2'd2;
      default:     tgt = 2'd0;
    endcase
    can_go = iv && (drop || qcnt[tgt] != (QW+1)'(QDEPTH));
  end

  logic push [3];
  logic pop  [3];
  always_comb
    for (int q = 0; q < 3; q++) begin
      push[q]    = can_go && !drop && (tgt == q[1:0]);
      q_valid[q] = qcnt[q] != 0;
      q_instr[q] = qm[q][qrp[q]];
      pop[q]     = q_valid[q] && q_ready[q];
    end

  assign halted = !running && !iv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
      iv      <= 1'b0;
      iq      <= '0;
      for (int q = 0; q < 3; q++) begin
        qwp[q] <= '0; qrp[q] <= '0; qcnt[q] <= '0;
      end
    end else begin
      if (start) begin
        pc      <= '0;
        running <= 1'b1;
        iv      <= 1'b0;
      end else if (can_go && is_halt) begin
        running <= 1'b0;
        iv      <= 1'b0;
      end else if (running && (!iv || can_go)) begin
        iq <= imem[pc];
        iv <= 1'b1;
        pc <= pc + 1'b1;
      end else if (can_go) begin
        iv <= 1'b0;
      end
      for (int q = 0; q < 3; q++) begin
        if (push[q]) begin
          qm[q][qwp[q]] <= iq;
          qwp[q]        <= qwp[q] + 1'b1;
        end
        if (pop[q]) qrp[q] <= qrp[q] + 1'b1;
        qcnt[q] <= qcnt[q] + (QW+1)'(push[q]) - (QW+1)'(pop[q]);
      end
    end
  end
endmodule
