// control_unit: decoding-tree walker with on-line special-node identification.
//
// The FSM performs the depth-first traversal of the SC decoding tree and
// issues one datapath command per cycle. At every node (stage t, first bit
// i, size T = 2^t) it reads v_i, v_{i+1}, v_{i+T-2} and v_{i+T-1} from the
// reliability memory (FETCH, one cycle of synchronous read) and feeds them
// with K to the node identifier (DECIDE). This is the paper's proposal:
// the list of operations is inferred from v and K, nothing is stored per
// code rate. The resulting class and the stage give the paper's NodeType
// and NodeSize = 2^t:
//   Rate-0 (T <= MAX_R0)    : OP_R0
//   Rate-1 (T <= MAX_R1)    : OP_R1_SORT x S1, OP_R1_EST x S1, OP_R1_HARD,
//                             with S1 = min(L_MAX - 1, T)
//   Rep    (T <= MAX_REP)   : OP_REP
//   SPC    (T <= MAX_SPC)   : OP_SPC_SORT x S2, OP_SPC_EST x (S2 - 1),
//                             OP_SPC_HARD, OP_SPC_PAR, with S2 = min(L_MAX, T)
//   otherwise               : F_{t-1} in max(1, 2^(t-1)/N_PE) chunks, then
//                             the left child is visited
// A leaf (T = 1) is always Rate-0 or Rate-1. When a node is finished its bit
// index i stays on the node's first bit during the node and then moves on by
// NodeSize. Going up: a finished right child is merged into its parent
// (OP_COMBINE, or OP_UCOMBINE above stage TB); a finished left child is
// followed by G_t for its sibling. A finished node of stage TB = n - log2 P
// (a subtree of N/P bits) triggers OP_BOUNDARY, where LPSCL prunes the list to
// L_UP paths. Size limits are clipped to min(limit, N_PE, N/P), so special
// nodes never straddle a partition (paper: 16 for Rate-0/Rep, 64 for
// Rate-1/SPC).
//
// Interface: start (one cycle, with k_info valid) launches a frame; busy is
// high until done pulses for one cycle, when the datapath holds the decoded
// codeword. Reset: synchronous, active low.
module control_unit
  import rf_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned NPE     = 64,
  parameter int unsigned L_MAX   = 4,
  parameter int unsigned P       = 4,
  parameter int unsigned MAX_R0  = 16,
  parameter int unsigned MAX_REP = 16,
  parameter int unsigned MAX_R1  = 64,
  parameter int unsigned MAX_SPC = 64,
  localparam int unsigned NL     = $clog2(N),
  localparam int unsigned TB     = NL - $clog2(P),
  localparam int unsigned NSUB   = N / P
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [NL-1:0]  k_info,
  output logic [NL-1:0]  v_addr [4],
  input  logic [NL-1:0]  v_data [4],
  output cmd_t           cmd,
  output node_e          node_type,   // class of the node in DECIDE
  output logic           busy,
  output logic           done
);

  function automatic int unsigned clip(input int unsigned m);
    int unsigned r;
    r = m;
    if (r > NPE)  r = NPE;
    if (r > NSUB) r = NSUB;
    return r;
  endfunction

  localparam int unsigned LIM_R0  = clip(MAX_R0);
  localparam int unsigned LIM_REP = clip(MAX_REP);
  localparam int unsigned LIM_R1  = clip(MAX_R1);
  localparam int unsigned LIM_SPC = clip(MAX_SPC);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_FETCH, S_DECIDE, S_F, S_NODE, S_UP, S_G, S_BND, S_UPPER,
    S_DONE
  } state_e;

  state_e          state;
  op_e             nop;        // current node sub-phase
  logic [STW-1:0]  t;
  logic [NL:0]     i;
  logic [CHW-1:0]  chunk;
  logic [STPW-1:0] step;
  logic [NL-1:0]   k_reg;
  logic            id_rate0, id_rate1, id_rep, id_spc;
  logic            is_right;   // node (t, i) is a right child: bit t of i

  localparam int unsigned LNPE = $clog2(NPE);

  // node size, number of N_PE-wide chunks of F (half the node) and of G
  // (a node of the same stage), sub-step counts of Rate-1 and SPC nodes
  logic [NL:0] tsz, nchunk_down, nchunk_same;
  logic [NL:0] s1, s2;
  assign tsz         = (NL+1)'(1) << t;
  assign nchunk_down = (32'(t) <= LNPE + 1) ? (NL+1)'(1) : (NL+1)'(1) << (32'(t) - LNPE - 1);
  assign nchunk_same = (32'(t) <= LNPE) ? (NL+1)'(1) : (NL+1)'(1) << (32'(t) - LNPE);
  assign s1          = ((NL+1)'(L_MAX - 1) < tsz) ? (NL+1)'(L_MAX - 1) : tsz;
  assign s2          = ((NL+1)'(L_MAX) < tsz) ? (NL+1)'(L_MAX) : tsz;

  assign is_right = |(i & ((NL+1)'(1) << t));

  // reliability fetch addresses: v_i, v_{i+1}, v_{i+T-2}, v_{i+T-1}
  always_comb begin
    v_addr[0] = NL'(i);
    v_addr[1] = (t >= 1) ? NL'(i + 1) : NL'(i);
    v_addr[2] = (t >= 1) ? NL'(32'(i) + 32'(tsz) - 2) : NL'(i);
    v_addr[3] = NL'(32'(i) + 32'(tsz) - 1);
  end

  node_identifier #(.VW(NL), .EXT(1'b0)) u_nid (
    .k_info(k_reg), .t(t), .v(v_data),
    .rate0(id_rate0), .rate1(id_rate1), .rep(id_rep), .spc(id_spc),
    .type_n()
  );

  always_comb begin
    node_type = NODE_NONE;
    if (t == 0)                                  node_type = id_rate1 ? NODE_RATE1 : NODE_RATE0;
    else if (id_rate0 && 32'(tsz) <= LIM_R0)          node_type = NODE_RATE0;
    else if (id_rate1 && 32'(tsz) <= LIM_R1)          node_type = NODE_RATE1;
    else if (id_rep   && 32'(tsz) <= LIM_REP)         node_type = NODE_REP;
    else if (id_spc   && 32'(tsz) <= LIM_SPC)         node_type = NODE_SPC;
  end

  // command word
  always_comb begin
    cmd       = '0;
    cmd.op    = OP_NOP;
    cmd.stage = t;
    cmd.idx   = IDXW'(i);
    cmd.chunk = chunk;
    cmd.step  = step;
    unique case (state)
      S_INIT:  cmd.op = OP_INIT;
      S_F:     begin cmd.op = OP_F; cmd.stage = t - 1'b1; end
      S_G:     cmd.op = OP_G;                    // t: stage of the sibling, i: its first bit
      S_NODE:  cmd.op = nop;
      S_UP:    if (32'(t) < TB && is_right) cmd.op = OP_COMBINE;
      S_BND:   cmd.op = OP_BOUNDARY;
      S_UPPER: if (32'(t) < NL && is_right) cmd.op = OP_UCOMBINE;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      t     <= '0;
      i     <= '0;
      chunk <= '0;
      step  <= '0;
      nop   <= OP_NOP;
      k_reg <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k_reg <= k_info;
          state <= S_INIT;
        end
        S_INIT: begin
          t     <= STW'(NL);
          i     <= '0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECIDE;
        S_DECIDE: begin
          chunk <= '0;
          step  <= '0;
          unique case (node_type)
            NODE_RATE0: begin nop <= OP_R0;       state <= S_NODE; end
            NODE_REP:   begin nop <= OP_REP;      state <= S_NODE; end
            NODE_RATE1: begin nop <= OP_R1_SORT;  state <= S_NODE; end
            NODE_SPC:   begin nop <= OP_SPC_SORT; state <= S_NODE; end
            default:    state <= S_F;
          endcase
        end
        S_F: begin
          if (32'(chunk) + 1 >= nchunk_down) begin
            chunk <= '0;
            t     <= t - 1'b1;
            state <= S_FETCH;
          end else chunk <= chunk + 1'b1;
        end
        S_G: begin
          if (32'(chunk) + 1 >= nchunk_same) begin
            chunk <= '0;
            state <= S_FETCH;
          end else chunk <= chunk + 1'b1;
        end
        S_NODE: begin
          step <= step + 1'b1;
          unique case (nop)
            OP_R0, OP_REP, OP_R1_HARD, OP_SPC_PAR: begin
              step  <= '0;
              state <= (32'(t) == TB) ? S_BND : S_UP;
            end
            OP_R1_SORT: if (32'(step) + 1 >= s1) begin
              step <= '0;
              nop  <= (s1 == 0) ? OP_R1_HARD : OP_R1_EST;
            end
            OP_R1_EST: if (32'(step) + 1 >= s1) begin
              step <= '0;
              nop  <= OP_R1_HARD;
            end
            OP_SPC_SORT: if (32'(step) + 1 >= s2) begin
              step <= 4'd1;
              nop  <= (s2 > 1) ? OP_SPC_EST : OP_SPC_HARD;
            end
            OP_SPC_EST: if (32'(step) + 1 >= s2) begin
              step <= '0;
              nop  <= OP_SPC_HARD;
            end
            OP_SPC_HARD: begin
              step <= '0;
              nop  <= OP_SPC_PAR;
            end
            default: state <= S_UP;
          endcase
        end
        S_UP: begin
          // node (t, i) is finished; t < TB here
          if (is_right) begin
            // right child: COMBINE issued this cycle, parent is finished
            i <= i - (NL+1)'(tsz);
            t <= t + 1'b1;
            if (32'(t) + 1 == TB) state <= S_BND;
          end else begin
            i     <= i + (NL+1)'(tsz);
            chunk <= '0;
            state <= S_G;
          end
        end
        S_BND: state <= S_UPPER;   // node (TB, i) finished: prune + transfer
        S_UPPER: begin
          // node (t, i) with t >= TB is finished and transferred
          if (32'(t) == NL) begin
            state <= S_DONE;
          end else if (is_right) begin
            i <= i - (NL+1)'(tsz);
            t <= t + 1'b1;
          end else begin
            i     <= i + (NL+1)'(tsz);
            chunk <= '0;
            state <= S_G;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The stage never leaves 0..n while a frame is decoded.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> (32'(t) <= NL))
    else $error("control_unit: stage out of range");

endmodule
