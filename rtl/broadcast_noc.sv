// broadcast_noc: fixed broadcast network from the memory controllers to the
// processing engines of one NMA.
//
// Each 136-byte DRAM beat (68 FP16 elements) is registered once and offered
// to every active engine at the same time, so one DRAM read serves all
// query vectors of the batch (the data reuse the paper describes). The beat
// leaves the register only when every active engine takes it, which keeps
// the engines in lockstep. Inactive engines see no valid beat.
//
// The tag of the beat (dimension j, last flag, block base, vectors in
// block) comes from the control unit's tag queue and is popped with the
// beat. qv_raddr gives the engines the dimension of the beat that will be
// on the output in the next cycle, so their query scratchpads (synchronous
// read) deliver QV[PE][j] together with EV[..][j].
//
// Interface: valid/ready on both sides; one register stage of latency.
// The single register stage and the all-engines join are own choices.
module broadcast_noc
  import iks_pkg::*;
#(
  parameter int unsigned NPE    = N_PE,
  parameter int unsigned NLANES = LANES,
  parameter int unsigned QDEPTH = MAX_VD
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // from memory controllers + tag queue
  input  logic                      in_valid,
  output logic                      in_ready,
  input  fp16_t [NLANES-1:0]        in_data,
  input  beat_tag_t                 in_tag,
  // to processing engines
  input  logic [NPE-1:0]            pe_active,
  output logic [NPE-1:0]            pe_valid,
  input  logic [NPE-1:0]            pe_ready,
  output fp16_t [NLANES-1:0]        out_data,
  output beat_tag_t                 out_tag,
  output logic [$clog2(QDEPTH)-1:0] qv_raddr,
  output logic                      busy,
  output logic                      stall     // beat held back by an engine
);

  logic out_valid;
  logic all_ready;
  logic fire;
  logic load;

  always_comb begin
    all_ready = &(pe_ready | ~pe_active);
    fire      = out_valid && all_ready;
    in_ready  = !out_valid || fire;
    load      = in_valid && in_ready;
    pe_valid  = {NPE{out_valid && all_ready}} & pe_active;
    qv_raddr  = load ? in_tag.dim[$clog2(QDEPTH)-1:0] : out_tag.dim[$clog2(QDEPTH)-1:0];
    busy      = out_valid;
    stall     = out_valid && !all_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      if (load) begin
        out_valid <= 1'b1;
        out_data  <= in_data;
        out_tag   <= in_tag;
      end else if (fire) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
