// cloak_slice: one slice of the Cloak LLC with its controller (L3 Ctrl).
//
// A slice is an STT-RAM data array with SRAM tags, laid out so that all
// lines of a 4KB page share one 4KB physical row, plus NUM_PB SRAM Page
// Buffers (PBs) of 2KB and their PB Tags. It serves two request kinds:
//
//  * CLR (Cache Line Request) from the L2s: read (L2 miss), write (L2
//    victim installed) or invalidate. The PPN check in the PB Tags runs
//    alongside the 2-cycle LLC tag read. A read that misses the tags is
//    forwarded to main memory (mem_*). A read hit then spends one more cycle
//    checking the Region bit of the line's PB slot: on a PB hit the line is
//    read from the PB (1 cycle); otherwise it is read from the NVM array,
//    which is busy (not pipelined) for NVM_RD_BUSY cycles and delivers the
//    line NVM_RD_LAT cycles after the request. NVM reads complete in the
//    background, so younger PB hits are answered while an NVM read is in
//    flight; both share one response port (resp_*), through a FIFO. A write
//    updates the tags (allocating a way if needed; an evicted line lowers
//    the Residency of a PB that held it), writes the NVM array and, if a PB
//    holds the page and the slot's Region bit names the line's region,
//    writes the PB copy too (Residency +1). An invalidation clears the tag
//    and lowers the Residency of a PB that held the line. Write and
//    invalidate are acknowledged by accepting them (clr_ready).
//  * PTR (Page Transfer Request) from a core's TLB hint logic: if no PB has
//    the page, the row's tags are searched on Tag-High; if at least
//    cfg_threshold lines of the page are resident and a PB is free (empty or
//    Replacement counter at zero), the whole row is read from the NVM array
//    once and its two 2KB regions are written into the PB in two
//    consecutive cycles (pb_promote picks the winner of a contested slot).
//    The promotion runs in the background; until it ends, further PTRs are
//    not accepted (ptr_ready stays low) and CLR writes/invalidates to the
//    same row are held back so that the copy stays coherent. It has
//    priority over CLRs for the NVM array, and a CLR write waits while the
//    promotion writes the PB data (one write port).
//
// The controller takes one request at a time (no overlap of tag lookups).
// Which request goes first when a CLR and a PTR both wait alternates. These
// and the response FIFO depth are this design's choices. Defaults follow the
// evaluated slice: 16MB (4096 rows), 20 PBs, 10/22-cycle NVM read, threshold
// 6 lines and activation period 20 cycles per line (given at cfg_* inputs).
// `ready` is low for 2^ROW_BITS cycles after reset while the tags clear.
// Timing from accepting a CLR read to its response leaving the FIFO: PB hit
// 5 cycles (tags 2, Region check 1, PB read, FIFO), NVM hit 27 (the same
// plus the 22-cycle array read).
module cloak_slice
  import cloak_pkg::*;
#(
  parameter int unsigned ROW_BITS    = 12,
  parameter int unsigned NUM_PB      = 20,
  parameter int unsigned NVM_RD_LAT  = 22,
  parameter int unsigned NVM_RD_BUSY = 10,
  parameter int unsigned NVM_WR_BUSY = 25,
  parameter int unsigned RESP_DEPTH  = 8,
  localparam int unsigned PB_W  = (NUM_PB > 1) ? $clog2(NUM_PB) : 1,
  localparam int unsigned TH_W  = PA_BITS - PAGE_BITS - ROW_BITS,
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 ready,
  input  logic [SLOT_W:0]      cfg_threshold,
  input  logic [9:0]           cfg_activation_period,
  // CLRs from the L2s
  input  logic                 clr_valid,
  input  clr_req_t             clr_req,
  output logic                 clr_ready,
  // PTRs from the TLB hint logic
  input  logic                 ptr_valid,
  input  ptr_req_t             ptr_req,
  output logic                 ptr_ready,
  // read responses to the L2s
  output logic                 resp_valid,
  output clr_resp_t            resp,
  input  logic                 resp_ready,
  // LLC misses to main memory
  output logic                 mem_valid,
  output mem_req_t             mem_req,
  input  logic                 mem_ready,
  // events
  output slice_events_t        events
);
  localparam int unsigned ID_W = CORE_W + PA_BITS;
  localparam int unsigned FW   = (RESP_DEPTH > 1) ? $clog2(RESP_DEPTH) : 1;

  // ================= request register and decode =====================
  typedef enum logic [3:0] {
    S_IDLE, S_TAG, S_PBCHK, S_PBRESP, S_NVMRD, S_WRITE, S_MISS
  } state_e;
  state_e state;

  logic                cur_ptr;
  clr_op_e             cur_op;
  logic [CORE_W-1:0]   cur_core;
  logic [PA_BITS-1:0]  cur_addr;
  logic [LINE_W-1:0]   cur_data;

  logic [TH_W-1:0]     c_th;
  logic [ROW_BITS-1:0] c_row;
  logic [TAGLO_W-1:0]  c_tl;
  logic [SET_BITS-1:0] c_set;
  logic [LINE_BITS-1:0] c_off;
  logic [PPN_W-1:0]    c_ppn;
  logic                c_half, c_region;

  cloak_addr_decode #(.ROW_BITS(ROW_BITS)) u_dec_cur (
    .addr(cur_addr), .tag_high(c_th), .row(c_row), .tag_low(c_tl), .set_idx(c_set),
    .offset(c_off), .ppn(c_ppn), .page_half(c_half), .region(c_region));

  // incoming request (selected in S_IDLE)
  logic                in_take_ptr, in_take_clr, pri_ptr;
  logic [PA_BITS-1:0]  in_addr;
  logic [TH_W-1:0]     i_th;
  logic [ROW_BITS-1:0] i_row;
  logic [TAGLO_W-1:0]  i_tl;
  logic [SET_BITS-1:0] i_set;
  logic [LINE_BITS-1:0] i_off;
  logic [PPN_W-1:0]    i_ppn;
  logic                i_half, i_region;

  cloak_addr_decode #(.ROW_BITS(ROW_BITS)) u_dec_in (
    .addr(in_addr), .tag_high(i_th), .row(i_row), .tag_low(i_tl), .set_idx(i_set),
    .offset(i_off), .ppn(i_ppn), .page_half(i_half), .region(i_region));

  // ================= sub-blocks ======================================
  logic                     tag_ready, tag_rd_valid, tag_hit, vic_valid;
  logic [WAY_W-1:0]         tag_way, vic_way;
  logic [TH_W-1:0]          vic_th;
  logic [LINES_PER_ROW-1:0] ptr_match, row_half;
  logic                     tag_wr_en, tag_wr_valid;
  logic [SLOT_W-1:0]        tag_wr_slot;

  logic                     nvm_busy, nvm_rd_line, nvm_rd_row, nvm_wr;
  logic [ROW_BITS-1:0]      nvm_row;
  logic [SLOT_W-1:0]        nvm_slot;
  logic                     nvm_line_valid, nvm_row_valid;
  logic [ID_W-1:0]          nvm_line_id;
  logic [LINE_W-1:0]        nvm_line_data;
  logic [LINES_PER_ROW-1:0][LINE_W-1:0] nvm_row_data;

  logic                     lk_hit, q_region_ok, vic_avail, vic_in_use, nt_dec;
  logic [PB_W-1:0]          lk_idx, vic_idx;
  logic [PB_SLOT_W-1:0]     q_slot;
  logic                     ld_en, drop_en, acc_en, acc_write, nt_en;
  logic [PPN_W-1:0]         nt_ppn;
  logic [PB_SLOT_W-1:0]     nt_slot;
  logic                     nt_region;

  logic                     pbd_rd, pbd_wr_line, pbd_wr_region;
  logic [PB_SLOTS-1:0]      pbd_mask;
  logic [PB_SLOTS-1:0][LINE_W-1:0] pbd_region_data;
  logic [LINE_W-1:0]        pbd_rd_data;

  logic [PB_SLOTS-1:0]      pm_step1, pm_step2, pm_region;
  logic [SLOT_W:0]          pm_pop;
  logic [PB_SLOT_W:0]       pm_res;
  logic                     pm_ok, pm_conflict;

  logic [SLOT_W-1:0]        hit_slot, wr_slot;
  assign hit_slot = {c_set, tag_way};
  assign wr_slot  = tag_hit ? {c_set, tag_way} : {c_set, vic_way};

  llc_tag_array #(.ROW_BITS(ROW_BITS)) u_tags (
    .clk, .rst_n, .ready(tag_ready),
    .rd_en(in_take_ptr || in_take_clr), .rd_row(i_row), .rd_tag_high(i_th),
    .rd_tag_low(i_tl), .rd_set(i_set),
    .rd_valid(tag_rd_valid), .clr_hit(tag_hit), .clr_way(tag_way),
    .ptr_match(ptr_match), .row_page_half(row_half),
    .victim_way(vic_way), .victim_valid(vic_valid), .victim_tag_high(vic_th),
    .wr_en(tag_wr_en), .wr_row(c_row), .wr_slot(tag_wr_slot), .wr_valid(tag_wr_valid),
    .wr_tag_high(c_th), .wr_tag_low(c_tl));

  // promotion state (declared early: it steers the NVM array)
  typedef enum logic [2:0] { P_IDLE, P_ISSUE, P_READ, P_STEP1, P_STEP2 } pstate_e;
  pstate_e              pstate;
  logic [PB_W-1:0]      p_pb;
  logic [PPN_W-1:0]     p_ppn;
  logic [ROW_BITS-1:0]  p_row;
  logic [PB_SLOTS-1:0]  p_step1, p_step2, p_region;
  logic [PB_SLOT_W:0]   p_res;
  logic                 p_conflict;

  always_comb begin
    nvm_row  = (pstate == P_ISSUE) ? p_row : c_row;
    nvm_slot = (state == S_WRITE) ? wr_slot : hit_slot;
  end

  nvm_data_array #(.ROW_BITS(ROW_BITS), .RD_LAT(NVM_RD_LAT), .RD_BUSY(NVM_RD_BUSY),
                   .WR_BUSY(NVM_WR_BUSY), .ID_W(ID_W)) u_nvm (
    .clk, .rst_n, .busy(nvm_busy),
    .rd_line_en(nvm_rd_line), .rd_row_en(nvm_rd_row), .wr_en(nvm_wr),
    .row(nvm_row), .slot(nvm_slot), .rd_id({cur_core, cur_addr}), .wr_data(cur_data),
    .rd_line_valid(nvm_line_valid), .rd_line_id(nvm_line_id), .rd_line_data(nvm_line_data),
    .row_valid(nvm_row_valid), .row_data(nvm_row_data));

  pb_tags #(.NUM_PB(NUM_PB)) u_pbt (
    .clk, .rst_n, .activation_period(cfg_activation_period),
    .lk_ppn(c_ppn), .lk_hit, .lk_idx,
    .q_idx(lk_idx), .q_slot, .q_region(c_region), .q_region_ok,
    .vic_avail, .vic_idx, .vic_in_use,
    .ld_en, .ld_idx(p_pb), .ld_ppn(p_ppn), .ld_region(p_region),
    .ld_residency(6'(p_res)),
    .drop_en, .drop_idx(vic_idx),
    .acc_en, .acc_write, .acc_idx(lk_idx),
    .nt_en, .nt_ppn, .nt_slot, .nt_region, .nt_dec,
    .st_valid(), .st_residency(), .st_replacement());

  page_buffer_data #(.NUM_PB(NUM_PB)) u_pbd (
    .clk,
    .rd_en(pbd_rd), .rd_pb(lk_idx), .rd_slot(hit_slot[PB_SLOT_W-1:0]), .rd_data(pbd_rd_data),
    .wr_line_en(pbd_wr_line), .wr_line_pb(lk_idx), .wr_line_slot(wr_slot[PB_SLOT_W-1:0]),
    .wr_line_data(cur_data),
    .wr_region_en(pbd_wr_region), .wr_region_pb(p_pb), .wr_mask(pbd_mask),
    .wr_region_data(pbd_region_data));

  pb_promote u_prom (
    .ptr_match, .line_half(row_half), .trig_half(c_half), .threshold(cfg_threshold),
    .step1_mask(pm_step1), .step2_mask(pm_step2), .region_bits(pm_region),
    .population(pm_pop), .residency(pm_res), .promote_ok(pm_ok), .conflict(pm_conflict));

  // ================= response FIFO ===================================
  logic          fifo_push;
  clr_resp_t     fifo_in;
  logic [FW:0]   fifo_count;
  logic [4:0]    nvm_outstanding;
  logic          pb_push_ok, nvm_credit;

  sync_fifo #(.DEPTH(RESP_DEPTH), .T(clr_resp_t)) u_resp_fifo (
    .clk, .rst_n, .push(fifo_push), .in_data(fifo_in),
    .out_valid(resp_valid), .out_data(resp), .out_ready(resp_ready), .count(fifo_count));

  assign nvm_credit = (32'(fifo_count) + 32'(nvm_outstanding)) < RESP_DEPTH;
  assign pb_push_ok = !nvm_line_valid && nvm_credit;

  always_comb begin
    fifo_push = 1'b0;
    fifo_in   = '0;
    if (nvm_line_valid) begin
      fifo_push    = 1'b1;
      fifo_in.core = nvm_line_id[ID_W-1 -: CORE_W];
      fifo_in.addr = nvm_line_id[PA_BITS-1:0];
      fifo_in.src  = SRC_NVM;
      fifo_in.data = nvm_line_data;
    end else if (state == S_PBRESP && nvm_credit) begin
      fifo_push    = 1'b1;
      fifo_in.core = cur_core;
      fifo_in.addr = cur_addr;
      fifo_in.src  = SRC_PB;
      fifo_in.data = pbd_rd_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nvm_outstanding <= '0;
    else nvm_outstanding <= nvm_outstanding + 5'(nvm_rd_line) - 5'(nvm_line_valid);
  end

  // ================= controller ======================================
  logic promo_busy, row_blocked, nvm_free_for_ctrl;
  assign promo_busy        = pstate != P_IDLE;
  assign ready             = tag_ready;
  // a CLR write/invalidate to the row being promoted waits
  assign row_blocked       = promo_busy && clr_req.op != OP_READ
                             && clr_req.addr[PAGE_BITS +: ROW_BITS] == p_row;
  assign nvm_free_for_ctrl = !nvm_busy && pstate != P_ISSUE;

  always_comb begin
    in_take_ptr = 1'b0;
    in_take_clr = 1'b0;
    if (state == S_IDLE && tag_ready) begin
      if (ptr_valid && !promo_busy && (pri_ptr || !clr_valid || row_blocked))
        in_take_ptr = 1'b1;
      else if (clr_valid && !row_blocked)
        in_take_clr = 1'b1;
    end
    in_addr   = in_take_ptr ? ptr_req.addr : clr_req.addr;
    clr_ready = in_take_clr;
    ptr_ready = in_take_ptr;
  end

  // datapath controls
  logic pb_hit_now;
  assign pb_hit_now = lk_hit && q_region_ok;

  always_comb begin
    q_slot        = (state == S_WRITE) ? wr_slot[PB_SLOT_W-1:0] : hit_slot[PB_SLOT_W-1:0];
    tag_wr_en     = 1'b0;
    tag_wr_valid  = 1'b0;
    tag_wr_slot   = wr_slot;
    nvm_rd_line   = 1'b0;
    nvm_wr        = 1'b0;
    pbd_rd        = 1'b0;
    pbd_wr_line   = 1'b0;
    acc_en        = 1'b0;
    acc_write     = 1'b0;
    nt_en         = 1'b0;
    nt_ppn        = c_ppn;
    nt_slot       = hit_slot[PB_SLOT_W-1:0];
    nt_region     = c_region;
    drop_en       = 1'b0;
    mem_valid     = (state == S_MISS);
    mem_req.core  = cur_core;
    mem_req.addr  = cur_addr;
    events        = '0;
    events.ptr_in = in_take_ptr;
    case (state)
      S_TAG: if (tag_rd_valid) begin
        if (cur_ptr) begin
          if (lk_hit)          events.ptr_present   = 1'b1;
          else if (!pm_ok)     events.ptr_below_thr = 1'b1;
          else if (!vic_avail) events.ptr_no_pb     = 1'b1;
          else begin
            drop_en           = 1'b1;
            events.pb_replace = vic_in_use;
          end
        end else if (cur_op == OP_INV && tag_hit) begin
          tag_wr_en   = 1'b1;
          tag_wr_slot = hit_slot;
          nt_en       = 1'b1;
        end else if (cur_op == OP_READ && !tag_hit) begin
          events.clr_miss = 1'b1;
        end
      end
      S_PBCHK: begin
        if (pb_hit_now) begin
          pbd_rd             = 1'b1;
          acc_en             = 1'b1;
          events.pb_hit      = 1'b1;
          events.pb_parallel = nvm_outstanding != '0;
        end
      end
      S_NVMRD: begin
        if (nvm_free_for_ctrl && nvm_credit) begin
          nvm_rd_line    = 1'b1;
          events.nvm_hit = 1'b1;
        end else begin
          events.nvm_stall = 1'b1;
        end
      end
      S_WRITE: begin
        // the PB data has one write port: wait while promotion writes it
        if (nvm_free_for_ctrl && !pbd_wr_region) begin
          nvm_wr       = 1'b1;
          tag_wr_en    = 1'b1;
          tag_wr_valid = 1'b1;
          if (!tag_hit && vic_valid) begin
            events.llc_evict = 1'b1;
            nt_en     = 1'b1;
            nt_ppn    = {vic_th, c_row};
            nt_slot   = wr_slot[PB_SLOT_W-1:0];
          end
          if (pb_hit_now) begin
            pbd_wr_line     = 1'b1;
            acc_en          = 1'b1;
            acc_write       = 1'b1;
            events.pb_write = 1'b1;
          end
        end else begin
          events.nvm_stall = 1'b1;
        end
      end
      default: ;
    endcase
    events.residency_dec    = nt_dec;
    events.promote          = (pstate == P_STEP2);
    events.promote_conflict = (pstate == P_STEP2) && p_conflict;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pri_ptr <= 1'b0;
      cur_ptr <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (in_take_ptr || in_take_clr) begin
          state   <= S_TAG;
          cur_ptr <= in_take_ptr;
          pri_ptr <= in_take_clr;      // alternate when both wait
        end
        S_TAG: if (tag_rd_valid) begin
          if (cur_ptr)                        state <= S_IDLE;
          else case (cur_op)
            OP_READ:  state <= tag_hit ? S_PBCHK : S_MISS;
            OP_WRITE: state <= S_WRITE;
            default:  state <= S_IDLE;
          endcase
        end
        S_PBCHK:  state <= pb_hit_now ? S_PBRESP : S_NVMRD;
        S_PBRESP: if (fifo_push && !nvm_line_valid) state <= S_IDLE;
        S_NVMRD:  if (nvm_rd_line) state <= S_IDLE;
        S_WRITE:  if (nvm_wr)      state <= S_IDLE;
        S_MISS:   if (mem_ready)   state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_take_ptr) begin
      cur_op   <= OP_READ;
      cur_core <= ptr_req.core;
      cur_addr <= ptr_req.addr;
      cur_data <= '0;
    end else if (in_take_clr) begin
      cur_op   <= clr_req.op;
      cur_core <= clr_req.core;
      cur_addr <= clr_req.addr;
      cur_data <= clr_req.data;
    end
  end

  // ================= promotion engine ================================
  always_comb begin
    nvm_rd_row      = (pstate == P_ISSUE) && !nvm_busy;
    pbd_wr_region   = (pstate == P_STEP1) || (pstate == P_STEP2);
    pbd_mask        = (pstate == P_STEP1) ? p_step1 : p_step2;
    for (int s = 0; s < PB_SLOTS; s++)
      pbd_region_data[s] = (pstate == P_STEP1) ? nvm_row_data[s] : nvm_row_data[s + PB_SLOTS];
    ld_en           = (pstate == P_STEP2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate <= P_IDLE;
    end else begin
      case (pstate)
        P_IDLE:  if (drop_en) pstate <= P_ISSUE;
        P_ISSUE: if (nvm_rd_row) pstate <= P_READ;
        P_READ:  if (nvm_row_valid) pstate <= P_STEP1;
        P_STEP1: pstate <= P_STEP2;
        default: pstate <= P_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (drop_en) begin
      p_pb       <= vic_idx;
      p_ppn      <= c_ppn;
      p_row      <= c_row;
      p_step1    <= pm_step1;
      p_step2    <= pm_step2;
      p_region   <= pm_region;
      p_res      <= pm_res;
      p_conflict <= pm_conflict;
    end
  end

  // ================= checks ==========================================
  a_one_nvm_op: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({nvm_rd_line, nvm_rd_row, nvm_wr}));
  a_resp_room: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_push |-> 32'(fifo_count) < RESP_DEPTH || (resp_valid && resp_ready));
endmodule
