// tensor_cache: on-chip copy of the last non-Bayesian tensor of one exit.
//
// Only the layers after the first MCD layer of an exit are random, so the
// tensor entering the Bayesian part is computed once per input and reused for
// every Monte-Carlo sample. This block stores that tensor (LOAD) and then
// reads it out N_ROUND times back to back (REPLAY). Every replayed element is
// offered to all MC engines of the exit at once (the copies of the clone);
// the rounds are the concatenated copies that share engines in time.
// N_ROUND = 1 is pure spatial mapping, N_ROUND = samples is pure temporal.
//
// Storage is a plain array of TENSOR_LEN words written in order and read in
// order with an asynchronous read port (distributed RAM on an FPGA). Loading
// and replaying do not overlap: a new tensor is accepted only after the last
// round has been read out. This, the array style and the absence of double
// buffering are this design's choices.
//
// Interface: in_* is a valid/ready stream of exactly TENSOR_LEN elements per
// tensor (no last flag needed). out_* is a valid/ready stream; out_last marks
// the final element of each round and out_round tells the round index.
// Timing: one element per clock in both phases; replay starts the clock after
// the last element is written, so a tensor occupies the cache for
// TENSOR_LEN + N_ROUND * TENSOR_LEN cycles without stalls.
module tensor_cache
  import mcd_pkg::*;
#(
  parameter int unsigned DATA_W     = mcd_pkg::DFLT_DATA_W,
  parameter int unsigned TENSOR_LEN = 400,
  parameter int unsigned N_ROUND    = 1,
  localparam int unsigned ADDR_W    = idx_w(TENSOR_LEN),
  localparam int unsigned RND_W     = idx_w(N_ROUND)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // tensor from the last non-Bayesian layer
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  // replayed copies
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_last,
  output logic [RND_W-1:0]         out_round,
  output logic                     busy
);

  typedef enum logic {LOAD, REPLAY} state_t;

  state_t                   state;
  logic [ADDR_W-1:0]        ptr;
  logic [RND_W-1:0]         round;
  logic signed [DATA_W-1:0] mem [TENSOR_LEN];

  localparam logic [ADDR_W-1:0] LAST_ADDR  = ADDR_W'(TENSOR_LEN - 1);
  localparam logic [RND_W-1:0]  LAST_ROUND = RND_W'(N_ROUND - 1);

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == REPLAY);
  assign out_data  = mem[ptr];
  assign out_last  = (state == REPLAY) && (ptr == LAST_ADDR);
  assign out_round = round;
  assign busy      = (state == REPLAY) || (ptr != '0);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= LOAD;
      ptr   <= '0;
      round <= '0;
    end else begin
      unique case (state)
        LOAD: if (in_valid) begin
          if (ptr == LAST_ADDR) begin
            ptr   <= '0;
            round <= '0;
            state <= REPLAY;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        REPLAY: if (out_ready) begin
          if (ptr == LAST_ADDR) begin
            ptr <= '0;
            if (round == LAST_ROUND) begin
              round <= '0;
              state <= LOAD;
            end else begin
              round <= round + 1'b1;
            end
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        default: state <= LOAD;
      endcase
    end
  end

  initial begin
    assert (TENSOR_LEN >= 1 && N_ROUND >= 1)
      else $error("tensor_cache: TENSOR_LEN and N_ROUND must be at least 1");
  end

endmodule
