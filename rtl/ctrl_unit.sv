// ctrl_unit -- control unit of the NTT.
//
// On `start` it loads the index generator, takes the memories over
// (`sel_ntt`) and issues one butterfly read whenever the butterfly unit can
// accept it: `rd_en` reads both coefficients and the twiddle, steps the index
// generator and asks the memory rule checker to check the indices of that
// read. One clock later (`bf_valid`) the read data reaches the butterfly unit
// together with the two write-back addresses captured here.
//
// Reads are issued only while no read is in flight and the butterfly unit's
// input buffer is free. Before the first butterfly of each stage the unit
// waits until the butterfly pipeline is empty, so that a stage never reads a
// coefficient the previous stage has not yet written back (the paper does not
// describe its hazard handling; this drain is this design's choice and costs a
// few clocks per stage). After the last butterfly it waits for the pipeline
// to drain and pulses `done`.
module ctrl_unit #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          sel_ntt,
  // index generator
  output logic          gen_load,
  output logic          gen_step,
  input  logic          gen_first,
  input  logic          gen_last,
  input  logic [AW-1:0] gen_addr0,
  input  logic [AW-1:0] gen_addr1,
  // memories and checker
  output logic          rd_en,
  output logic          rc_valid,
  // butterfly unit
  input  logic          bf_ready,
  input  logic          bf_empty,
  output logic          bf_valid,
  output logic [AW-1:0] bf_addr0,
  output logic [AW-1:0] bf_addr1
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t state;

  logic issue;

  always_comb begin
    issue    = (state == S_RUN) && bf_ready && !bf_valid &&
               (!gen_first || bf_empty);
    rd_en    = issue;
    rc_valid = issue;
    gen_step = issue;
    gen_load = (state == S_IDLE) && start;
    busy     = (state != S_IDLE);
    sel_ntt  = busy;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      bf_valid <= 1'b0;
      bf_addr0 <= '0;
      bf_addr1 <= '0;
    end else begin
      done     <= 1'b0;
      bf_valid <= issue;
      if (issue) begin
        bf_addr0 <= gen_addr0;
        bf_addr1 <= gen_addr1;
      end
      case (state)
        S_IDLE:  if (start) state <= S_RUN;
        S_RUN:   if (issue && gen_last) state <= S_DRAIN;
        S_DRAIN: if (bf_empty && !bf_valid) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
