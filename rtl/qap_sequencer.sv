// qap_sequencer: the controller that broadcasts the wiring diagram.
//
// The processor has no per-register program: one gate per clock is sent to
// every register at once. This block produces that gate stream for the graph
// it is given. On start it sends one OP_INIT slot (pair results, scratch and
// flag to 0, enables to 1), then runs an edge detector for every vertex pair
// i = 0 .. n-1, for every programmed edge j = 0 .. num_edges-1 and for both
// directions of that edge (u->v, then v->u, since the graph is undirected),
// and finally the closing step that ANDs the pair results into the flag. The
// gates of each step come from detector_op_gen and final_op_gen.
//
// Interface and timing: the graph is given as num_edges edges (edge_u[j],
// edge_v[j]), vertex codes 0 .. n-1, and must stay stable while busy_o is 1.
// start is taken in the idle state. The gate for slot t shows on op_* with
// op_valid in cycle t+1 after start; done_o pulses for one cycle after the
// last gate. For m edges the run takes
//   1 + 2m(4k+2)n - 2m + (2n-3)  slots with enables (ENABLES = 1),
//   1 + 2m(4k+1)n + (2n-3)       slots without (ENABLES = 0),
// both close to the paper's operation count of about 8kmn.
//
// From the paper: a detector for each of the 2m directed edges for each of
// the n pairs, followed by the final result, and the time-slot view of the
// operation count. This design's own choices: the order of the loops, the
// INIT slot, the edge-list interface and the start/done handshake.
module qap_sequencer
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  parameter int unsigned MAX_M = 10,
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES),
  localparam int unsigned LW = $clog2(BITS),
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned MW = $clog2(MAX_M + 1),
  localparam int unsigned SW = $clog2(4*K+2),
  localparam int unsigned FW = $clog2(2*N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [MW-1:0]   num_edges,
  input  logic [K-1:0]    edge_u [MAX_M],
  input  logic [K-1:0]    edge_v [MAX_M],
  output logic            op_valid,
  output opcode_e         op_code,
  output logic [LW-1:0]   op_a,
  output logic [LW-1:0]   op_b,
  output logic [LW-1:0]   op_t,
  output logic [BITS-1:0] op_mask,
  output logic            busy_o,
  output logic            done_o
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_DETECT, S_FINAL} state_e;

  state_e         state_q;
  logic [PW-1:0]  pair_q;
  logic [MW-1:0]  edge_q;
  logic           dir_q;
  logic [SW-1:0]  step_q;
  logic [FW-1:0]  fstep_q;

  logic [K-1:0]   src, dst;
  logic [MW-1:0]  edge_idx;

  opcode_e         d_code, f_code;
  logic [LW-1:0]   d_a, d_b, d_t, f_a, f_b, f_t;
  logic [BITS-1:0] d_mask;
  logic            d_last, f_last;

  assign edge_idx = (edge_q < MW'(MAX_M)) ? edge_q : '0;
  assign src = dir_q ? edge_v[edge_idx] : edge_u[edge_idx];
  assign dst = dir_q ? edge_u[edge_idx] : edge_v[edge_idx];

  detector_op_gen #(.N(N), .K(K), .ENABLES(ENABLES)) u_det (
    .pair_i  (pair_q),
    .src_code(src),
    .dst_code(dst),
    .step    (step_q),
    .op_code (d_code),
    .op_a    (d_a),
    .op_b    (d_b),
    .op_t    (d_t),
    .op_mask (d_mask),
    .last_o  (d_last)
  );

  final_op_gen #(.N(N), .K(K), .ENABLES(ENABLES)) u_fin (
    .step   (fstep_q),
    .op_code(f_code),
    .op_a   (f_a),
    .op_b   (f_b),
    .op_t   (f_t),
    .last_o (f_last)
  );

  always_comb begin
    op_valid = 1'b0;
    op_code  = OP_NOP;
    op_a     = '0;
    op_b     = '0;
    op_t     = '0;
    op_mask  = '0;
    unique case (state_q)
      S_INIT: begin
        op_valid = 1'b1;
        op_code  = OP_INIT;
      end
      S_DETECT: begin
        op_valid = 1'b1;
        op_code  = d_code;
        op_a = d_a; op_b = d_b; op_t = d_t; op_mask = d_mask;
      end
      S_FINAL: begin
        op_valid = 1'b1;
        op_code  = f_code;
        op_a = f_a; op_b = f_b; op_t = f_t;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pair_q  <= '0;
      edge_q  <= '0;
      dir_q   <= 1'b0;
      step_q  <= '0;
      fstep_q <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) state_q <= S_INIT;
        S_INIT: begin
          pair_q  <= '0;
          edge_q  <= '0;
          dir_q   <= 1'b0;
          step_q  <= '0;
          fstep_q <= '0;
          state_q <= (num_edges == '0) ? S_FINAL : S_DETECT;
        end
        S_DETECT: begin
          if (!d_last) begin
            step_q <= step_q + 1'b1;
          end else begin
            step_q <= '0;
            if (!dir_q) begin
              dir_q <= 1'b1;
            end else begin
              dir_q <= 1'b0;
              if (edge_q + 1'b1 < num_edges) begin
                edge_q <= edge_q + 1'b1;
              end else begin
                edge_q <= '0;
                if (32'(pair_q) == N - 1) state_q <= S_FINAL;
                else                      pair_q  <= pair_q + 1'b1;
              end
            end
          end
        end
        S_FINAL: begin
          if (!f_last) begin
            fstep_q <= fstep_q + 1'b1;
          end else begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);

  // The edge count must fit the edge table.
  a_num_edges: assert property (@(posedge clk) disable iff (!rst_n)
                                (state_q == S_INIT) |-> (32'(num_edges) <= MAX_M));

endmodule
