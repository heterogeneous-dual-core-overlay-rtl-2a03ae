// core_controller: issues instructions to the engines of one core and
// sequences the compute pipeline.
//
// The head instruction is issued when its engine is free: LOAD to the load
// engine, COMPUTE to the compute sequencer in this module, POST to the
// post-processing unit; SIGNAL gives one token to the other core, WAIT
// takes one (and blocks until one is available); END waits for all engines
// to be idle and raises `done`. An instruction with `barrier` set is held
// until every engine is idle, which is how a program orders dependent
// steps (a LOAD into the bank a COMPUTE is reading, a POST after the
// COMPUTE that fills the output buffer). Load and compute on different
// ping-pong banks therefore run concurrently.
// The compute sequencer streams `count` feature-map words (fm_addr+t) and
// holds the weight word at w_addr, one per cycle, and then waits DRAIN
// cycles for the pipeline to empty before it reports idle. The output
// buffer write address is generated downstream from ob_addr. The paper
// names the controller; everything in it is this design's choice.
module core_controller
  import opu_pkg::*;
#(
  parameter int DRAIN = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          running,
  output logic          done,
  // instruction queue head
  input  logic          head_valid,
  input  instr_t        head,
  output logic          pop,
  // load engine
  output logic          ld_start,
  output load_body_t    ld_cmd,
  input  logic          ld_busy,
  // post-processing
  output logic          pp_start,
  output post_body_t    pp_cmd,
  input  logic          pp_busy,
  // compute pipeline control
  output logic          cmp_busy,
  output logic          cmp_rd,       // read fm/weight words this cycle
  output logic          cmp_first,    // first read of the instruction
  output logic [15:0]   cmp_fm_addr,
  output logic [15:0]   cmp_w_addr,
  output compute_body_t cmp_cmd,      // held for the whole instruction
  // inter-core tokens
  output logic          sig_out,
  input  logic          tok_avail,
  output logic          tok_take
);
  logic        all_idle, can_issue, cmp_start;
  logic [15:0] t;
  logic [$clog2(DRAIN+1)-1:0] drain;
  logic        streaming;
  compute_body_t head_cmp;

  assign head_cmp = compute_body_t'(head.body);

  assign all_idle = !ld_busy && !pp_busy && !cmp_busy && !ld_start && !pp_start;

  always_comb begin
    can_issue = 1'b0;
    if (running && head_valid && (!head.barrier || all_idle)) begin
      case (head.op)
        OP_LOAD:    can_issue = !ld_busy && !ld_start;
        OP_COMPUTE: can_issue = !cmp_busy;
        OP_POST:    can_issue = !pp_busy && !pp_start;
        OP_WAIT:    can_issue = tok_avail;
        OP_END:     can_issue = all_idle;
        default:    can_issue = 1'b1;
      endcase
    end
  end

  assign pop       = can_issue;
  assign sig_out   = can_issue && head.op == OP_SIGNAL;
  assign tok_take  = can_issue && head.op == OP_WAIT;
  assign cmp_start = can_issue && head.op == OP_COMPUTE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      done     <= 1'b0;
      ld_start <= 1'b0;
      pp_start <= 1'b0;
      ld_cmd   <= '0;
      pp_cmd   <= '0;
    end else begin
      ld_start <= 1'b0;
      pp_start <= 1'b0;
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
      end else if (can_issue) begin
        case (head.op)
          OP_LOAD: begin ld_start <= 1'b1; ld_cmd <= load_body_t'(head.body); end
          OP_POST: begin pp_start <= 1'b1; pp_cmd <= post_body_t'(head.body); end
          OP_END:  begin running <= 1'b0; done <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  // compute sequencer
  assign cmp_rd      = streaming;
  assign cmp_first   = streaming && (t == 0);
  assign cmp_fm_addr = cmp_cmd.fm_addr + t;
  assign cmp_w_addr  = cmp_cmd.w_addr;
  assign cmp_busy    = streaming || (drain != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streaming <= 1'b0;
      t         <= '0;
      drain     <= '0;
      cmp_cmd   <= '0;
    end else begin
      if (cmp_start) begin
        cmp_cmd   <= head_cmp;
        t         <= '0;
        streaming <= (head_cmp.count != 0);
      end else if (streaming) begin
        if (t == cmp_cmd.count - 1) begin
          streaming <= 1'b0;
          drain     <= ($bits(drain))'(DRAIN);
        end
        t <= t + 1;
      end else if (drain != 0) begin
        drain <= drain - 1'b1;
      end
    end
  end
endmodule
