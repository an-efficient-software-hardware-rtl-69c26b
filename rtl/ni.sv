// ni: network interface between a router's local port and the core.
//
// Receive side: a flit is held in the input register. A spike flit is
// translated by the address LUT into a pre-synaptic index and folded into the
// spike array being collected (o_set; o_rset for recurrent sources of the same
// layer). A memory-access flit goes to the core instead: weight writes and
// reads use the address generator's running address (no address travels in
// the flit); look-up-table and register writes configure the interface and
// the neurons. A weight read returns its data one cycle later in a reply flit
// whose data field carries this PE's address and the 8-bit weight.
// Send side: i_send_start loads the core's output spike array into a
// decoder (the same lowest-index-first decoder as the core); every spike index
// is sent as one spike flit to each valid entry of the destination table.
// Both sides use a stop/go link: a flit moves when valid is high and the
// receiver's stop is low. o_stop is high while the input register is full and
// cannot be emptied this cycle. Flits with bad parity are dropped and counted.
// Data-field encoding of configuration writes (this design's choice):
//   sparse RAM : d[18:17]=0 table 1 {src d[12:4], valid d[3], rec d[2], conn d[1:0]}
//                d[18:17]=1 table 2 {conn d[9:8], base d[7:0]}
//                d[18:17]=2 destination {idx d[11:10], valid d[9], PE d[8:0]}
//   other reg  : d[18:16]=0 weight address d[15:0]; 1 threshold d[15:0] of the
//                next neuron; 2 threshold neuron pointer d[7:0]; 3 learn d[0]
//   weight RAM : write d[7:0]; read request d[8:0] = PE to reply to.
module ni
  import snn_pkg::*;
#(
  parameter int N      = 256,
  parameter int N_PRE  = 256,
  parameter int W      = 8,
  parameter int V_W    = 16,
  parameter int CPE_W  = 2,
  parameter int N_DEST = 4,
  parameter int IW     = $clog2(N),
  parameter int RW     = $clog2(N_PRE)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  pe_addr_t              i_my_addr,
  // from router
  input  flit_t                 i_flit,
  input  logic                  i_flit_valid,
  output logic                  o_stop,
  // to router
  output flit_t                 o_flit,
  output logic                  o_flit_valid,
  input  logic                  i_stop,
  // spike arrays
  output logic                  o_set,
  output logic [RW-1:0]         o_set_idx,
  output logic                  o_rset,
  output logic [IW-1:0]         o_rset_idx,
  input  logic                  i_send_start,
  input  logic [N-1:0]          i_out_array,
  output logic                  o_send_busy,
  // serial weight access
  output logic                  o_w_en,
  output logic                  o_r_en,
  output logic [RW+IW-1:0]      o_addr,
  output logic [W-1:0]          o_w_data,
  input  logic [W-1:0]          i_r_data,
  input  logic                  i_mem_busy,
  // neuron configuration
  output logic                  o_th_we,
  output logic [IW-1:0]         o_th_idx,
  output logic signed [V_W-1:0] o_th,
  output logic                  o_learn,
  output logic                  o_parity_err
);
  localparam int DW = $clog2(N_DEST);

  flit_t         in_q;
  logic          in_v;
  logic          consume;
  logic          rd_pend;
  pe_addr_t      ret_q;
  flit_t         reply_q;
  logic          reply_v;

  // ---------------- address LUT ----------------
  logic          hit, rec;
  logic [RW-1:0] lut_idx;
  logic [N_DEST-1:0] dest_v;
  logic [N_DEST-1:0][PE_AW-1:0] dest;
  logic [DATA_W-1:0] d;
  logic is_mem, par_ok, wr;
  mem_type_e mt;

  assign d      = f_data(in_q);
  assign is_mem = f_is_mem(in_q);
  assign par_ok = f_parity_ok(in_q);
  assign wr     = f_write(in_q);
  assign mt     = f_mtype(in_q);

  logic t1_we, t2_we, d_we;
  assign t1_we = consume && par_ok && is_mem && wr && mt == MEM_SPARSE && d[18:17] == 2'd0;
  assign t2_we = consume && par_ok && is_mem && wr && mt == MEM_SPARSE && d[18:17] == 2'd1;
  assign d_we  = consume && par_ok && is_mem && wr && mt == MEM_SPARSE && d[18:17] == 2'd2;

  address_lut #(.PE_AW(PE_AW), .CPE_W(CPE_W), .IW(RW), .NID_W(NID_W), .N_DEST(N_DEST)) u_lut (
    .clk, .rst_n,
    .i_t1_we(t1_we), .i_t1_src(d[12:4]), .i_t1_valid(d[3]), .i_t1_rec(d[2]), .i_t1_conn(d[CPE_W-1:0]),
    .i_t2_we(t2_we), .i_t2_conn(d[8 +: CPE_W]), .i_t2_base(d[RW-1:0]),
    .i_d_we(d_we), .i_d_idx(d[10 +: DW]), .i_d_valid(d[9]), .i_d_addr(d[8:0]),
    .i_src(f_src(in_q)), .i_nid(f_nid(in_q)),
    .o_hit(hit), .o_rec(rec), .o_index(lut_idx),
    .o_dest_valid(dest_v), .o_dest(dest));

  // ---------------- receive side ----------------
  logic weight_acc, weight_rd, other_wr;
  assign weight_acc = is_mem && par_ok && mt == MEM_WEIGHT;
  assign weight_rd  = weight_acc && !wr;
  assign other_wr   = is_mem && par_ok && wr && mt == MEM_OTHER;

  // a weight access waits for the memory port; a read also for the reply slot
  always_comb begin
    consume = in_v;
    if (weight_acc && i_mem_busy)                  consume = 1'b0;
    if (weight_rd && (reply_v || rd_pend))         consume = 1'b0;
  end
  assign o_stop = in_v && !consume;

  assign o_set        = consume && par_ok && !is_mem && hit && !rec;
  assign o_rset       = consume && par_ok && !is_mem && hit && rec;
  assign o_set_idx    = lut_idx;
  assign o_rset_idx   = IW'(lut_idx);
  assign o_parity_err = consume && !par_ok;

  logic [RW+IW-1:0] waddr;
  logic [IW-1:0]    thptr;
  address_generator #(.AW(RW+IW)) u_wgen (
    .clk, .rst_n,
    .i_set(consume && other_wr && d[18:16] == 3'd0), .i_set_addr(d[RW+IW-1:0]),
    .i_step(consume && weight_acc), .o_addr(waddr));
  address_generator #(.AW(IW)) u_tgen (
    .clk, .rst_n,
    .i_set(consume && other_wr && d[18:16] == 3'd2), .i_set_addr(d[IW-1:0]),
    .i_step(o_th_we), .o_addr(thptr));

  assign o_w_en   = consume && weight_acc && wr;
  assign o_r_en   = consume && weight_rd;
  assign o_addr   = waddr;
  assign o_w_data = d[W-1:0];
  assign o_th_we  = consume && other_wr && d[18:16] == 3'd1;
  assign o_th_idx = thptr;
  assign o_th     = V_W'(signed'(d[15:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q    <= '0;
      in_v    <= 1'b0;
      o_learn <= 1'b0;
      rd_pend <= 1'b0;
      ret_q   <= '0;
    end else begin
      if (consume || !in_v) begin
        in_v <= i_flit_valid;
        if (i_flit_valid) in_q <= i_flit;
      end
      if (consume && other_wr && d[18:16] == 3'd3) o_learn <= d[0];
      rd_pend <= o_r_en;
      if (o_r_en) ret_q <= d[PE_AW-1:0];
    end
  end

  // ---------------- send side ----------------
  logic          dec_ready, dec_valid, dec_vq, dec_empty;
  logic [IW-1:0] dec_idx;
  logic [DW-1:0] dc;
  logic          out_free, send_take;

  spike_decoder #(.N(N)) u_out_dec (
    .clk, .rst_n, .i_load(i_send_start), .i_spike_array(i_out_array), .i_ready(dec_ready),
    .o_index(dec_idx), .o_valid(dec_valid), .o_valid_q(dec_vq), .o_empty(dec_empty));

  assign out_free    = !o_flit_valid || !i_stop;
  // the reply has priority over spikes for the output register
  assign send_take   = out_free && !reply_v && dec_valid && !i_send_start;
  assign dec_ready   = send_take && (dc == DW'(N_DEST-1));
  assign o_send_busy = dec_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_flit       <= '0;
      o_flit_valid <= 1'b0;
      reply_q      <= '0;
      reply_v      <= 1'b0;
      dc           <= '0;
    end else begin
      if (rd_pend) begin
        reply_q <= mk_mem(ret_q, MEM_REPLY, 1'b0,
                          DATA_W'({i_my_addr, 2'b00, i_r_data}));
        reply_v <= 1'b1;
      end
      if (i_send_start) dc <= '0;
      if (out_free) begin
        if (reply_v) begin
          o_flit       <= reply_q;
          o_flit_valid <= 1'b1;
          reply_v      <= 1'b0;
        end else if (send_take) begin
          o_flit_valid <= dest_v[dc];
          o_flit       <= mk_spike(dest[dc], i_my_addr, NID_W'(dec_idx));
          dc           <= (dc == DW'(N_DEST-1)) ? '0 : dc + 1'b1;
        end else begin
          o_flit_valid <= 1'b0;
        end
      end
    end
  end
endmodule
