// sc_sequencer: the SparseCore Sequencer.
//
// Holds the instruction program and steps through it. The host writes the
// program one instruction per cycle through the imem write port (the "host
// metadata" of the paper's block diagram), then pulses start. From then on
// the sequencer offers instruction pc to the dispatch stage
// (instr_valid/instr_ready) and moves to the next one each time it is
// taken. When a HALT has been taken it stops and raises done until the next
// start. The paper names the sequencer and says it generates the CISC
// instructions the units run; the program memory and its depth are this
// design's choice. The program memory is read combinationally.
module sc_sequencer
  import sc_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned IAW        = $clog2(IMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           imem_we,
  input  logic [IAW-1:0] imem_addr,
  input  instr_t         imem_wdata,
  input  logic           start,
  output logic           done,
  output logic           instr_valid,
  input  logic           instr_ready,
  output instr_t         instr,
  output logic [31:0]    issued
);

  instr_t         imem [IMEM_DEPTH];
  logic [IAW-1:0] pc;
  logic           running;

  always_ff @(posedge clk) if (imem_we) imem[imem_addr] <= imem_wdata;

  assign instr       = imem[pc];
  assign instr_valid = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; done <= 1'b0; issued <= '0;
    end else if (start) begin
      pc <= '0; running <= 1'b1; done <= 1'b0; issued <= '0;
    end else if (running && instr_ready) begin
      issued <= issued + 32'd1;
      if (instr.op == OP_HALT) begin
        running <= 1'b0;
        done    <= 1'b1;
      end else begin
        pc <= pc + IAW'(1);
      end
    end
  end

endmodule
