// pe: one processing element of a linear PE array (PE_i).
//
// PE_i owns row i of the result block C_{i,j} = SA_i x SB_j. Stream A carries
// the columns of SA (one element per PE, tagged with its row index), stream B
// carries the rows of SB. Both streams pass through the PE in one register
// stage each (f_a and f_b here) and are forwarded to PE_{i+1} only while
// S_i - 1 > PID; beyond the last active PE the forwarded stream is null.
//
// Ra is double buffered: the element of column k+1 addressed to this PE is
// caught into ra_next while row k of SB is multiplied with ra_cur; the first
// element of each B row swaps the two. Each product a_ik * b_kj goes through
// the FMAC (fp32_mul then fp32_add) and is added to the partial sum of C[i][j]
// read from the local memory M_c (zero in the first iteration). The sum is
// written back to M_c, or, in the last iteration, pushed into the result
// FIFO f_c.
//
// Write back: f_c is fed by a two-way multiplexer. After the PE has pushed
// its own S_j results it switches to pass mode and forwards the results of
// PE_{i+1}..PE_{S_i-1} (stream C) until the token marked last has passed;
// the last active PE marks its own final result as last. Stream C has a
// valid/ready handshake; streams A and B have none, because the array is
// never stalled inside (stalls are inserted at the array head by the phase
// synchronization unit, see psu).
//
// Timing: a B element in register rb at cycle t reads M_c at t+1, enters the
// adder at t+2 and its sum is written at t+5. Two uses of the same M_c word
// must therefore be at least ACC_GAP = 5 cycles apart, which psu guarantees.
//
// Follows the paper: registers Ra/Rb, FIFOs f_a/f_b/f_c, the null-forwarding
// test S_i-1 > PID_i, M_c accumulation and the last-iteration multiplexer.
// This design's own choices: f_a and f_b are single registers, tokens carry
// their indices and flags, and the pass/own ordering of stream C.
module pe
  import mm_pkg::*;
#(
  parameter int unsigned FC_DEPTH = BZ_MAX,
  parameter int unsigned MC_DEPTH = BZ_MAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IDXW-1:0] pid,        // PE identifier within its (chained) array
  // stream A
  input  logic            a_in_valid,
  input  a_tok_t          a_in,
  output logic            a_out_valid,
  output a_tok_t          a_out,
  // stream B
  input  logic            b_in_valid,
  input  b_tok_t          b_in,
  output logic            b_out_valid,
  output b_tok_t          b_out,
  // stream C from PE_{i+1}
  input  logic            c_in_valid,
  input  c_tok_t          c_in,
  output logic            c_in_ready,
  // stream C to PE_{i-1} (or the MAC for PE_0)
  output logic            c_out_valid,
  output c_tok_t          c_out,
  input  logic            c_out_ready
);
  localparam int unsigned MCW = $clog2(MC_DEPTH);

  // ---------------- f_a / R_b: stream registers
  logic   fa_v, rb_v;
  a_tok_t fa;
  b_tok_t rb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fa_v <= 1'b0;
      rb_v <= 1'b0;
    end else begin
      fa_v <= a_in_valid;
      rb_v <= b_in_valid;
    end
  end
  always_ff @(posedge clk) begin
    fa <= a_in;
    rb <= b_in;
  end

  assign a_out_valid = fa_v && (fa.si_m1 > pid);
  assign a_out       = fa;
  assign b_out_valid = rb_v && (rb.si_m1 > pid);
  assign b_out       = rb;

  // ---------------- R_a double buffer
  fp32_t ra_next, ra_cur, ra_sel;
  always_ff @(posedge clk) begin
    if (fa_v && fa.idx == pid) ra_next <= fa.data;
    if (rb_v && rb.row_first)  ra_cur  <= ra_next;
  end
  assign ra_sel = rb.row_first ? ra_next : ra_cur;

  // ---------------- FMAC
  typedef struct packed {
    logic            v;
    logic [IDXW-1:0] col;
    logic            first_it;
    logic            last_it;
    logic            row_last;
    logic            last_c;
  } ctl_t;

  localparam int unsigned DEPTH_CTL = FMUL_LAT + FADD_LAT;
  ctl_t ctl [DEPTH_CTL + 1];   // ctl[0] = stage of rb

  always_comb begin
    ctl[0].v        = rb_v;
    ctl[0].col      = rb.col;
    ctl[0].first_it = rb.first_it;
    ctl[0].last_it  = rb.last_it;
    ctl[0].row_last = rb.row_last;
    ctl[0].last_c   = rb.row_last && (rb.si_m1 == pid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 1; s <= DEPTH_CTL; s++) ctl[s] <= '0;
    end else begin
      for (int s = 1; s <= DEPTH_CTL; s++) ctl[s] <= ctl[s-1];
    end
  end

  fp32_t prod, addend, sum;
  fp32_mul u_mul (.clk, .a(ra_sel), .b(rb.data), .y(prod));

  // M_c: partial sums of row i, read one cycle before the product is ready
  fp32_t mc [MC_DEPTH];
  fp32_t mc_rd;
  always_ff @(posedge clk) begin
    mc_rd <= mc[ctl[FMUL_LAT-1].col[MCW-1:0]];
  end
  assign addend = ctl[FMUL_LAT].first_it ? 32'd0 : mc_rd;

  fp32_add u_add (.clk, .a(prod), .b(addend), .y(sum));

  ctl_t wb;
  assign wb = ctl[DEPTH_CTL];

  always_ff @(posedge clk) begin
    if (wb.v && !wb.last_it) mc[wb.col[MCW-1:0]] <= sum;
  end

  // ---------------- f_c and its input multiplexer
  typedef enum logic {OWN, PASS} wb_mode_t;
  wb_mode_t mode;

  logic   own_push, pass_push, fc_push, fc_full, fc_empty;
  c_tok_t fc_in;
  logic [$clog2(FC_DEPTH+1)-1:0] fc_count;

  assign own_push   = wb.v && wb.last_it;
  assign c_in_ready = (mode == PASS) && !fc_full;
  assign pass_push  = c_in_valid && c_in_ready;
  assign fc_push    = own_push || pass_push;
  assign fc_in      = own_push ? '{data: sum, last: wb.last_c} : c_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode <= OWN;
    else if (own_push && wb.row_last && !wb.last_c) mode <= PASS;
    else if (pass_push && c_in.last) mode <= OWN;
  end

  sync_fifo #(.T(c_tok_t), .DEPTH(FC_DEPTH)) u_fc (
    .clk, .rst_n,
    .push(fc_push), .wr_data(fc_in),
    .pop(c_out_valid && c_out_ready), .rd_data(c_out),
    .full(fc_full), .empty(fc_empty), .count(fc_count)
  );
  assign c_out_valid = !fc_empty;

  a_own_in_own_mode: assert property (@(posedge clk) disable iff (!rst_n) own_push |-> mode == OWN);
  a_own_not_full:    assert property (@(posedge clk) disable iff (!rst_n) own_push |-> !fc_full);
endmodule
