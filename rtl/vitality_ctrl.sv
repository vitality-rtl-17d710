// vitality_ctrl: sequencer of one Taylor-attention head (Algorithm steps 1-6).
// After start it issues one command per cycle (cmd) that the datapath delays to
// meet the one-cycle SRAM read latency:
//   KSUM    n cycles    read K rows, accumulator bank 0 sums 1^T K        (Step 1)
//   KMEAN   5 cycles    divider in single-divisor mode: mean = 1^T K / n,
//                       then bank 0 is cleared for k_sum                  (Step 1)
//   per chunk of DIM tokens (ceil(n/DIM) chunks):
//     VLOAD   DIM cycles  V rows become the stationary operands of
//                         SA-General, bank 1 sums v_sum                   (Steps 2,3)
//     KSTREAM DIM cycles  K rows go through the adder array (K - mean); each
//                         K-hat row is handed to the systolic array as soon as
//                         it exists and is summed into k_sum              (Steps 1,2,3)
//     KDRAIN              until the last column has delivered DIM G rows
//   GLOAD   DIM cycles  requantised G rows into SA-General, k_sum into SA-Diag
//   QSTREAM n cycles    one Q row per cycle; QG and Q k_sum^T are computed in
//                       parallel and the adder and divider arrays turn them
//                       into Z on the fly                                (Steps 4-6)
//   QDRAIN              until n rows of Z have been written (o_write)
// done pulses for one cycle at the end; busy is high from start to done.
// Tokens beyond n in the last chunk are marked tok_valid = 0 (zero padding).
// The step order and the overlaps follow the paper's intra-layer pipeline; the
// phase boundaries and their cycle counts are this design's.
module vitality_ctrl
  import vit_pkg::*;
#(
  parameter int unsigned DIM = vit_pkg::DEF_DIM
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IDX_W-1:0] n_tokens,
  input  logic             g_last_valid,  // last SA column delivered a G row
  input  logic             o_write,       // one Z row written to the O buffer
  output cmd_t             cmd,
  output logic [1:0]       acc_clr,
  output logic             gbuf_clr,
  output logic             div_issue,     // single-divisor division of 1^T K
  output logic             q_active,      // post-processing path is in use
  output logic             busy,
  output logic             done
);
  typedef enum logic [3:0] {
    PH_IDLE, PH_KSUM, PH_KMEAN, PH_VLOAD, PH_KSTREAM, PH_KDRAIN,
    PH_GLOAD, PH_QSTREAM, PH_QDRAIN, PH_DONE
  } phase_e;

  localparam int unsigned CW = IDX_W + 1;

  phase_e           ph;
  logic [CW-1:0]    cnt;
  logic [IDX_W-1:0] n_q;
  logic [IDX_W-1:0] chunk, last_chunk;
  logic [IDX_W-1:0] token;
  logic [CW-1:0]    ev_cnt;

  assign token = IDX_W'(chunk * IDX_W'(DIM)) + IDX_W'(cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph         <= PH_IDLE;
      cnt        <= '0;
      n_q        <= '0;
      chunk      <= '0;
      last_chunk <= '0;
      ev_cnt     <= '0;
    end else begin
      unique case (ph)
        PH_IDLE: if (start) begin
          ph         <= PH_KSUM;
          cnt        <= '0;
          n_q        <= n_tokens;
          chunk      <= '0;
          last_chunk <= IDX_W'((32'(n_tokens) + DIM - 1) / DIM - 1);
        end
        PH_KSUM: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(n_q) - 1'b1) begin ph <= PH_KMEAN; cnt <= '0; end
        end
        PH_KMEAN: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(4)) begin ph <= PH_VLOAD; cnt <= '0; end
        end
        PH_VLOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DIM - 1)) begin ph <= PH_KSTREAM; cnt <= '0; end
        end
        PH_KSTREAM: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DIM - 1)) begin ph <= PH_KDRAIN; cnt <= '0; ev_cnt <= '0; end
        end
        PH_KDRAIN: begin
          if (g_last_valid) ev_cnt <= ev_cnt + 1'b1;
          if (g_last_valid && ev_cnt == CW'(DIM - 1)) begin
            cnt <= '0;
            if (chunk == last_chunk) ph <= PH_GLOAD;
            else begin ph <= PH_VLOAD; chunk <= chunk + 1'b1; end
          end
        end
        PH_GLOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DIM - 1)) begin ph <= PH_QSTREAM; cnt <= '0; ev_cnt <= '0; end
        end
        PH_QSTREAM: begin
          cnt <= cnt + 1'b1;
          if (o_write) ev_cnt <= ev_cnt + 1'b1;
          if (cnt == CW'(n_q) - 1'b1) begin ph <= PH_QDRAIN; cnt <= '0; end
        end
        PH_QDRAIN: begin
          if (o_write) ev_cnt <= ev_cnt + 1'b1;
          if (o_write && ev_cnt == CW'(n_q) - 1'b1) ph <= PH_DONE;
        end
        PH_DONE: ph <= PH_IDLE;
        default: ph <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    cmd       = '0;
    cmd.op    = OP_NONE;
    acc_clr   = 2'b00;
    gbuf_clr  = 1'b0;
    div_issue = 1'b0;
    unique case (ph)
      PH_IDLE: if (start) begin acc_clr = 2'b11; gbuf_clr = 1'b1; end
      PH_KSUM: begin
        cmd.op = OP_KSUM; cmd.addr = IDX_W'(cnt); cmd.tok_valid = 1'b1;
      end
      PH_KMEAN: begin
        // cnt 0: last K row is summed; cnt 1: sum visible, divide;
        // cnt 2: dividend registered, clear bank 0; cnt 3: mean captured
        div_issue = (cnt == CW'(1));
        acc_clr   = (cnt == CW'(2)) ? 2'b01 : 2'b00;
      end
      PH_VLOAD, PH_KSTREAM: begin
        cmd.op        = (ph == PH_VLOAD) ? OP_VLOAD : OP_KHAT;
        cmd.addr      = token;
        cmd.row       = IDX_W'(cnt);
        cmd.tok_valid = (token < n_q);
      end
      PH_GLOAD: begin
        cmd.op = OP_GLOAD; cmd.addr = IDX_W'(cnt); cmd.row = IDX_W'(cnt); cmd.tok_valid = 1'b1;
      end
      PH_QSTREAM: begin
        cmd.op = OP_Q; cmd.addr = IDX_W'(cnt); cmd.tok_valid = 1'b1;
      end
      default: ;
    endcase
  end

  assign q_active = (ph == PH_QSTREAM) || (ph == PH_QDRAIN) || (ph == PH_DONE);
  assign busy     = (ph != PH_IDLE);
  assign done     = (ph == PH_DONE);

  // n must fit in the buffers and be non-zero
  a_n_range: assert property (@(posedge clk) disable iff (!rst_n)
                              (ph == PH_IDLE && start) |-> (n_tokens != '0));
endmodule
