// mac_engine: the part of the memory access controller that serves one PE
// array (one workload queue).
//
// It takes buffer descriptors from its workload queue and, for each one:
//   - hands (S_i, S_j, K) to the array's phase synchronization unit;
//   - reads the K rows of the transposed block SA^T (ADDR_A + k*STR_A, BZ_A
//     words each) into the stream-A buffer and the K rows of SB (ADDR_B +
//     k*STR_B, BZ_B words) into the stream-B buffer, as one burst per row;
//   - writes the S_i x S_j results arriving on stream C to ADDR_C + i*STR_C
//     + j and pulses c_done when the block's last result has been written.
// Loading of the next descriptor overlaps the computation and write-back of
// the previous ones.
//
// Memory side: two burst read ports (request addr/len with valid/ready,
// in-order response beats with valid only) and one single-word write port
// with valid/ready. A read burst is requested only when the stream buffer
// has room for all of it, counting beats still in flight, so responses never
// need back-pressure.
//
// The descriptor fields ADDR, STR, BZ and ITER_K and the transposed storage
// of A follow the paper. The C address fields, the port protocol, buffer
// depths and one burst per row are this design's own choices.
module mac_engine
  import mm_pkg::*;
#(
  parameter int unsigned SDEPTH = 2 * BZ_MAX   // stream buffer depth (words)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,      // this array is a head
  // workload queue
  input  logic             q_valid,
  input  desc_t            q_desc,
  output logic             q_ready,
  // to the phase synchronization unit
  output logic             job_valid,
  output logic [BZW-1:0]   job_si,
  output logic [BZW-1:0]   job_sj,
  output logic [KW-1:0]    job_k,
  input  logic             job_ready,
  output logic             a_valid,
  output fp32_t            a_data,
  input  logic             a_ready,
  output logic             b_valid,
  output fp32_t            b_data,
  input  logic             b_ready,
  // from the array head
  input  logic             c_valid,
  input  c_tok_t           c_data,
  output logic             c_ready,
  output logic             c_done,
  // memory: read port A
  output logic             ra_req_valid,
  output logic [ADDRW-1:0] ra_req_addr,
  output logic [BZW-1:0]   ra_req_len,
  input  logic             ra_req_ready,
  input  logic             ra_rsp_valid,
  input  fp32_t            ra_rsp_data,
  // memory: read port B
  output logic             rb_req_valid,
  output logic [ADDRW-1:0] rb_req_addr,
  output logic [BZW-1:0]   rb_req_len,
  input  logic             rb_req_ready,
  input  logic             rb_rsp_valid,
  input  fp32_t            rb_rsp_data,
  // memory: write port
  output logic             wr_valid,
  output logic [ADDRW-1:0] wr_addr,
  output fp32_t            wr_data,
  input  logic             wr_ready
);
  localparam int unsigned SCW = $clog2(SDEPTH + 1);

  // ---------------- descriptor being loaded
  desc_t         cur;
  logic          cur_v;
  logic [KW-1:0] ka, kb;            // next row to request on each port
  logic [ADDRW-1:0] row_a, row_b;   // address of that row

  logic jf_full, jf_empty, wf_full, wf_empty;
  desc_t jf_out, wf_out;
  logic [1:0] jf_cnt, wf_cnt;

  assign q_ready = enable && !cur_v && !jf_full && !wf_full;

  sync_fifo #(.T(desc_t), .DEPTH(2)) u_job_fifo (
    .clk, .rst_n, .push(q_valid && q_ready), .wr_data(q_desc),
    .pop(job_valid && job_ready), .rd_data(jf_out),
    .full(jf_full), .empty(jf_empty), .count(jf_cnt)
  );
  assign job_valid = !jf_empty;
  assign job_si    = jf_out.bz_a;
  assign job_sj    = jf_out.bz_b;
  assign job_k     = jf_out.iter_k;

  // ---------------- read ports with buffer reservation
  logic [SCW-1:0] a_cnt, b_cnt, a_fly, b_fly;
  logic a_full, a_empty, b_full, b_empty;
  logic a_more, b_more;

  assign a_more       = cur_v && ka != cur.iter_k;
  assign b_more       = cur_v && kb != cur.iter_k;
  assign ra_req_valid = a_more && (a_cnt + a_fly + SCW'(cur.bz_a) <= SCW'(SDEPTH));
  assign rb_req_valid = b_more && (b_cnt + b_fly + SCW'(cur.bz_b) <= SCW'(SDEPTH));
  assign ra_req_addr  = row_a;
  assign rb_req_addr  = row_b;
  assign ra_req_len   = cur.bz_a;
  assign rb_req_len   = cur.bz_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v <= 1'b0;
      cur   <= '0;
      ka    <= '0;
      kb    <= '0;
      row_a <= '0;
      row_b <= '0;
      a_fly <= '0;
      b_fly <= '0;
    end else begin
      if (q_valid && q_ready) begin
        cur   <= q_desc;
        cur_v <= 1'b1;
        ka    <= '0;
        kb    <= '0;
        row_a <= q_desc.addr_a;
        row_b <= q_desc.addr_b;
      end else begin
        if (ra_req_valid && ra_req_ready) begin
          ka    <= ka + 1'b1;
          row_a <= row_a + cur.str_a;
        end
        if (rb_req_valid && rb_req_ready) begin
          kb    <= kb + 1'b1;
          row_b <= row_b + cur.str_b;
        end
        if (cur_v && !a_more && !b_more) cur_v <= 1'b0;
      end
      a_fly <= a_fly + ((ra_req_valid && ra_req_ready) ? SCW'(cur.bz_a) : '0) - SCW'(ra_rsp_valid);
      b_fly <= b_fly + ((rb_req_valid && rb_req_ready) ? SCW'(cur.bz_b) : '0) - SCW'(rb_rsp_valid);
    end
  end

  sync_fifo #(.T(fp32_t), .DEPTH(SDEPTH)) u_a_buf (
    .clk, .rst_n, .push(ra_rsp_valid), .wr_data(ra_rsp_data),
    .pop(a_valid && a_ready), .rd_data(a_data),
    .full(a_full), .empty(a_empty), .count(a_cnt)
  );
  sync_fifo #(.T(fp32_t), .DEPTH(SDEPTH)) u_b_buf (
    .clk, .rst_n, .push(rb_rsp_valid), .wr_data(rb_rsp_data),
    .pop(b_valid && b_ready), .rd_data(b_data),
    .full(b_full), .empty(b_empty), .count(b_cnt)
  );
  assign a_valid = !a_empty;
  assign b_valid = !b_empty;

  // ---------------- write-back of C
  sync_fifo #(.T(desc_t), .DEPTH(2)) u_wb_fifo (
    .clk, .rst_n, .push(q_valid && q_ready), .wr_data(q_desc),
    .pop(c_done), .rd_data(wf_out),
    .full(wf_full), .empty(wf_empty), .count(wf_cnt)
  );

  logic [BZW-1:0]   wj;        // column within the row
  logic [ADDRW-1:0] wrow;      // address of the current row of C
  logic             wfirst;    // next result is the first of a block

  assign c_ready  = wr_ready && !wf_empty;
  assign wr_valid = c_valid && !wf_empty;
  assign wr_addr  = (wfirst ? wf_out.addr_c : wrow) + ADDRW'(wj);
  assign wr_data  = c_data.data;
  assign c_done   = c_valid && c_ready && c_data.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wj     <= '0;
      wrow   <= '0;
      wfirst <= 1'b1;
    end else if (c_valid && c_ready) begin
      if (c_data.last) begin
        wj     <= '0;
        wfirst <= 1'b1;
      end else if (wj == wf_out.bz_b - 1'b1) begin
        wj     <= '0;
        wrow   <= (wfirst ? wf_out.addr_c : wrow) + wf_out.str_c;
        wfirst <= 1'b0;
      end else begin
        wj     <= wj + 1'b1;
        if (wfirst) wrow <= wf_out.addr_c;
        wfirst <= 1'b0;
      end
    end
  end

  a_no_buf_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(ra_rsp_valid && a_full) && !(rb_rsp_valid && b_full));
endmodule
