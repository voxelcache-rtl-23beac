// vc_controller: the VoxelCache part of the cache controller.
//
// Takes one VoxelCache request at a time (lookup or insert; a remove arrives
// as an insert of the invalid pointer) with its pseudoaddress and walks the
// reserved lines of the hierarchy:
//
//   lookup  L1D entire-line hit  -> compare keys in the line; key found:
//                                   return pointer, update LRU; not found:
//                                   return invalid (the request stops here)
//           L1D entire-line miss -> forward to L2 (CPU); return invalid (GPU)
//           L2 entire-line hit   -> compare keys; key found: return pointer
//                                   and write the line back into L1D
//           L2 entire-line miss  -> return invalid; nothing goes to memory
//   insert  the line is taken from L1D if present, else from L2 if present,
//           else an empty line is started; the pair is placed by the
//           within-line policy; the modified line, with its LRU bits, is then
//           written through to every level (over the line with the same tag,
//           or over the LRU reserved line of the set).
//
// Taking the line from L2 on an L1D insert miss keeps the other pairs of that
// line intact when the new copy is written through; the paper does not say
// how an L1D write miss obtains the rest of the line. Entire-line LRU is also
// updated on a lookup that hits the line but misses the key.
//
// Timing: req is accepted when req_ready (controller idle). A probe of L1D
// takes L1_LAT cycles and of L2 L2_LAT more (1 and 4 in the paper's CPU
// configuration). The response is a one-cycle pulse on resp_valid, L1_LAT
// cycles after acceptance for requests settled in L1D and L1_LAT + L2_LAT
// cycles after for those that reach L2. Line writes are issued in the cycle
// the response is decided; the write-through to L2 is posted.
module vc_controller
  import vc_pkg::*;
#(
  parameter bit          HAS_L2 = 1'b1,
  parameter int unsigned PAIRS  = 3,
  parameter int unsigned PA_W   = 10,
  parameter int unsigned L1_LAT = 1,
  parameter int unsigned L2_LAT = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // request from the load-store queue
  input  logic                    req_valid,
  output logic                    req_ready,
  input  vc_req_t                 req,      // req.pa: pseudoaddress
  // response to the core
  output logic                    resp_valid,
  output vc_resp_t                resp,
  // L1D reserved section
  output logic [PA_W-1:0]         l1_rd_pa,
  input  logic                    l1_rd_hit,
  input  pair_t       [PAIRS-1:0] l1_rd_pairs,
  input  slot_state_t [PAIRS-1:0] l1_rd_st,
  output logic                    l1_wr_en,
  output logic [PA_W-1:0]         l1_wr_pa,
  output pair_t       [PAIRS-1:0] l1_wr_pairs,
  output slot_state_t [PAIRS-1:0] l1_wr_st,
  // L2 reserved section (unused when HAS_L2 = 0)
  output logic [PA_W-1:0]         l2_rd_pa,
  input  logic                    l2_rd_hit,
  input  pair_t       [PAIRS-1:0] l2_rd_pairs,
  input  slot_state_t [PAIRS-1:0] l2_rd_st,
  output logic                    l2_wr_en,
  output logic [PA_W-1:0]         l2_wr_pa,
  output pair_t       [PAIRS-1:0] l2_wr_pairs,
  output slot_state_t [PAIRS-1:0] l2_wr_st,
  // event pulses, for counters
  output logic                    ev_l1_line_miss,
  output logic                    ev_l2_line_miss,
  output logic                    ev_l2_writeback,
  output logic                    ev_item_evict
);

  localparam int unsigned CNT_W = 4;
  localparam int unsigned IDX_W = (PAIRS > 1) ? $clog2(PAIRS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_L1, S_L2} state_e;

  state_e           state_q;
  logic [CNT_W-1:0] cnt_q;
  vc_req_t          req_q;
  logic [PA_W-1:0]  pa_q;
  vc_resp_t         resp_q;
  logic             resp_valid_q;

  // within-line logic on the line of the level being examined
  pair_t       [PAIRS-1:0] base_pairs, new_pairs;
  slot_state_t [PAIRS-1:0] base_st, new_st;
  logic                    key_hit, item_evict;
  logic        [IDX_W-1:0] hit_idx, slot_idx;
  ptr_t                    rvalue;
  logic                    is_wr;

  assign is_wr = (req_q.op == VC_INSERT);

  always_comb begin
    base_pairs = '0;
    base_st    = '0;
    if (state_q == S_L1 && l1_rd_hit) begin
      base_pairs = l1_rd_pairs;
      base_st    = l1_rd_st;
    end else if (state_q == S_L2 && l2_rd_hit) begin
      base_pairs = l2_rd_pairs;
      base_st    = l2_rd_st;
    end
  end

  vc_line_logic #(.PAIRS(PAIRS)) u_line (
    .pairs_in (base_pairs),
    .st_in    (base_st),
    .key      (req_q.key),
    .wr       (is_wr),
    .wvalue   (req_q.value),
    .hit      (key_hit),
    .hit_idx  (hit_idx),
    .rvalue   (rvalue),
    .slot_idx (slot_idx),
    .evict    (item_evict),
    .pairs_out(new_pairs),
    .st_out   (new_st)
  );

  assign l1_rd_pa    = pa_q;
  assign l2_rd_pa    = pa_q;
  assign l1_wr_pa    = pa_q;
  assign l2_wr_pa    = pa_q;
  assign l1_wr_pairs = new_pairs;
  assign l1_wr_st    = new_st;
  assign l2_wr_pairs = new_pairs;
  assign l2_wr_st    = new_st;

  logic eval;    // the probe of the current level completes this cycle
  logic done;    // the request is settled this cycle
  assign eval = (state_q != S_IDLE) && (cnt_q == '0);

  always_comb begin
    l1_wr_en        = 1'b0;
    l2_wr_en        = 1'b0;
    done            = 1'b0;
    ev_l1_line_miss = 1'b0;
    ev_l2_line_miss = 1'b0;
    ev_l2_writeback = 1'b0;
    ev_item_evict   = 1'b0;
    if (eval && state_q == S_L1) begin
      ev_l1_line_miss = !l1_rd_hit;
      if (!is_wr) begin
        if (l1_rd_hit) begin
          l1_wr_en = 1'b1;             // LRU update
          done     = 1'b1;
        end else if (!HAS_L2) begin
          done     = 1'b1;             // GPU: return invalid
        end
      end else if (l1_rd_hit || !HAS_L2) begin
        l1_wr_en      = 1'b1;
        l2_wr_en      = HAS_L2;        // write-through
        done          = 1'b1;
        ev_item_evict = item_evict;
      end
    end else if (eval && state_q == S_L2) begin
      ev_l2_line_miss = !l2_rd_hit;
      done            = 1'b1;
      if (!is_wr) begin
        if (l2_rd_hit) begin
          l2_wr_en        = 1'b1;      // LRU update
          l1_wr_en        = key_hit;   // write the line back into L1D
          ev_l2_writeback = key_hit;
        end
      end else begin
        l1_wr_en      = 1'b1;
        l2_wr_en      = 1'b1;
        ev_item_evict = item_evict;
      end
    end
  end

  assign req_ready  = (state_q == S_IDLE);
  assign resp_valid = resp_valid_q;
  assign resp       = resp_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      cnt_q        <= '0;
      req_q        <= '0;
      pa_q         <= '0;
      resp_q       <= '0;
      resp_valid_q <= 1'b0;
    end else begin
      resp_valid_q <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (req_valid) begin
            req_q   <= req;
            pa_q    <= req.pa[PA_W-1:0];
            cnt_q   <= CNT_W'(L1_LAT - 1);
            state_q <= S_L1;
          end
        end
        default: begin
          if (!eval) begin
            cnt_q <= cnt_q - 1'b1;
          end else if (done) begin
            resp_valid_q <= 1'b1;
            resp_q.id    <= req_q.id;
            resp_q.op    <= req_q.op;
            resp_q.value <= is_wr ? INVALID_PTR : rvalue;
            resp_q.found <= is_wr ? key_hit : (key_hit && rvalue != INVALID_PTR);
            state_q      <= S_IDLE;
          end else begin
            cnt_q   <= CNT_W'(L2_LAT - 1);
            state_q <= S_L2;
          end
        end
      endcase
    end
  end

  // handshake: a request is held until it is accepted
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               req_valid && !req_ready |=> req_valid);
  // one response per accepted request, never while idle and waiting
  a_resp_once: assert property (@(posedge clk) disable iff (!rst_n)
                                resp_valid |-> state_q == S_IDLE);

endmodule
