// quad_lsu: the load-store unit, which executes mld.w and mst.w.
//
// A matrix register row is 128 bits, and so is the memory port: one row moves
// per granted request. Row r of a load or store lives at address
// rs1 + r * rs2 (rs1 = base, rs2 = row stride in bytes, both scalar operands
// sent by the host core with the instruction).
//
// Memory and register file are decoupled by two row buffers of 4 x 128 bits,
// as the paper describes: every row passes through a buffer on its way.
//   mld.w: the unit sends four read requests (one per cycle while granted),
//          the in-order responses fill the buffer, and once it is full the
//          rows are written to the MRF, one per cycle, through the unit's
//          MRF write port.
//   mst.w: the four rows are read from the MRF into the buffer, one per cycle,
//          through the unit's MRF read port, then sent as four write requests.
// With two buffers two loads (or two stores) are in flight at once: one is
// talking to memory while the other is talking to the register file, so the
// memory port stays busy. A load buffer is released as soon as its first row
// has been written to the MRF: a write-back engine writes the other rows,
// one per cycle, and always stays ahead of the rows of the next load, which
// arrive at least two cycles later. Loads and stores are never in flight together
// (the paper forbids it to avoid data hazards): an mst waits until no mld
// holds a buffer, and the reverse.
// The request/response protocol and the address formula are this design's
// choices; the paper gives the 128-bit port, the buffers, the two-at-a-time
// overlap (hence two buffers) and the load/store exclusion.
//
// Memory protocol: mem_req_o with mem_we_o, mem_addr_o, mem_wdata_o is held
// until mem_gnt_i; each granted read returns one mem_rvalid_i with
// mem_rdata_i at least one cycle later, in request order.
// Scoreboard events: ld_start_o / ld_done_o when the first / last row of a
// load is written to the MRF (ld_reg_o belongs to ld_start_o, ld_id_o to
// ld_done_o); st_read_o when the first row of a store is read
// from the MRF; st_done_o when the last row of a store has been granted by
// memory. A load is dispatched without waiting for earlier readers and
// writers of its destination; instead its MRF write phase waits until the
// scoreboard counters wstart_i/rstart_i reach the load's tickets, i.e. all of
// them have started (see quad_scoreboard; rstart_i includes the reads that
// start in the current cycle). Both MRF phases run one row per
// cycle without pausing once started.
module quad_lsu
  import quad_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // issue
  input  logic        issue_valid_i,
  output logic        issue_ready_o,
  input  instr_t      issue_i,
  // MRF ports
  output mrf_raddr_t  rd_addr_o,
  input  row_t        rd_data_i,
  output mrf_wr_t     wr_o,
  // memory port
  output logic        mem_req_o,
  output logic        mem_we_o,
  output logic [31:0] mem_addr_o,
  output row_t        mem_wdata_o,
  input  logic        mem_gnt_i,
  input  logic        mem_rvalid_i,
  input  row_t        mem_rdata_i,
  // scoreboard start counters
  input  tk_vec_t     wstart_i,
  input  tk_vec_t     rstart_i,
  // events
  output logic        ld_start_o,
  output logic        ld_done_o,
  output reg_idx_t    ld_reg_o,
  output id_t         ld_id_o,
  output logic        st_read_o,   // row 0 of the store's register read
  output reg_idx_t    st_reg_o,
  output logic        st_done_o,
  output id_t         st_id_o,
  output logic        busy_o
);

  localparam int NBUF = 2;

  typedef enum logic [2:0] {
    B_FREE,   // unused
    B_LREQ,   // load: sending read requests
    B_LWAIT,  // load: all requests sent, waiting for responses
    B_LFULL,  // load: all rows buffered, writing the MRF
    B_SRD,    // store: reading the MRF
    B_SFULL   // store: all rows buffered, sending write requests
  } bstate_e;

  typedef struct packed {
    bstate_e     st;
    reg_idx_t    rg;
    id_t         id;
    logic [31:0] base;
    logic [31:0] stride;
    tk_t         tk_md;
    tk_t         tk_rd;
  } buf_t;

  buf_t     b_q   [NBUF];
  row_t     data_q[NBUF][NROWS];
  logic     alloc_q, req_q, rsp_q, wb_q, srd_q, sreq_q;   // buffer pointers
  row_idx_t req_row_q, rsp_row_q, srd_row_q, sreq_row_q;

  // load write-back engine: writes rows 1..NROWS-1 of a load whose row 0 was
  // written in its first cycle, after which the buffer was already released
  logic     wbe_v_q, wbe_buf_q;
  reg_idx_t wbe_rg_q;
  id_t      wbe_id_q;
  row_idx_t wbe_row_q;

  // ---------------- issue ----------------
  logic any_ld, any_st;
  always_comb begin
    any_ld = 1'b0; any_st = 1'b0;
    for (int i = 0; i < NBUF; i++) begin
      if (b_q[i].st inside {B_LREQ, B_LWAIT, B_LFULL} || wbe_v_q) any_ld = 1'b1;
      if (b_q[i].st inside {B_SRD, B_SFULL})           any_st = 1'b1;
    end
  end

  assign issue_ready_o = (b_q[alloc_q].st == B_FREE)
                         && (issue_i.is_store ? !any_ld : !any_st);

  // ---------------- activity conditions ----------------
  logic do_req, do_rsp, do_wb, wb_start, do_srd, do_sreq;
  assign do_req  = (b_q[req_q].st  == B_LREQ);
  assign do_rsp  = mem_rvalid_i;
  // a load starts writing the MRF only when every earlier reader and writer
  // of its destination has started (WAR, WAW); once started it does not pause
  logic wb_dep_ok;
  assign wb_dep_ok = tk_reached(wstart_i[b_q[wb_q].rg], b_q[wb_q].tk_md)
                     && tk_reached(rstart_i[b_q[wb_q].rg], b_q[wb_q].tk_rd);
  assign wb_start = (b_q[wb_q].st == B_LFULL) && wb_dep_ok && !wbe_v_q;
  assign do_wb    = wb_start || wbe_v_q;
  assign do_srd  = (b_q[srd_q].st  == B_SRD);
  assign do_sreq = (b_q[sreq_q].st == B_SFULL);

  // memory port: load requests and store requests never coexist
  always_comb begin
    mem_req_o   = do_req || do_sreq;
    mem_we_o    = do_sreq;
    mem_addr_o  = do_sreq ? b_q[sreq_q].base + 32'(sreq_row_q) * b_q[sreq_q].stride
                          : b_q[req_q].base  + 32'(req_row_q)  * b_q[req_q].stride;
    mem_wdata_o = data_q[sreq_q][sreq_row_q];
  end

  assign rd_addr_o = '{rg: b_q[srd_q].rg, row: srd_row_q};
  assign wr_o      = wb_start ? '{en: 1'b1, rg: b_q[wb_q].rg, row: '0, data: data_q[wb_q][0]}
                              : '{en: wbe_v_q, rg: wbe_rg_q, row: wbe_row_q,
                                  data: data_q[wbe_buf_q][wbe_row_q]};

  logic last_req, last_rsp, last_wb, last_srd, last_sreq;
  assign last_req  = do_req  && mem_gnt_i && (req_row_q  == row_idx_t'(NROWS-1));
  assign last_rsp  = do_rsp  && (rsp_row_q  == row_idx_t'(NROWS-1));
  assign last_wb   = wbe_v_q && (wbe_row_q  == row_idx_t'(NROWS-1));
  assign last_srd  = do_srd  && (srd_row_q  == row_idx_t'(NROWS-1));
  assign last_sreq = do_sreq && mem_gnt_i && (sreq_row_q == row_idx_t'(NROWS-1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NBUF; i++) b_q[i] <= '{st: B_FREE, default: '0};
      alloc_q <= 1'b0; req_q <= 1'b0; rsp_q <= 1'b0; wb_q <= 1'b0; srd_q <= 1'b0; sreq_q <= 1'b0;
      req_row_q <= '0; rsp_row_q <= '0; srd_row_q <= '0; sreq_row_q <= '0;
      wbe_v_q <= 1'b0; wbe_buf_q <= 1'b0; wbe_rg_q <= '0; wbe_id_q <= '0; wbe_row_q <= '0;
    end else begin
      // load: requests
      if (do_req && mem_gnt_i) begin
        req_row_q <= req_row_q + 1'b1;
        if (last_req) begin
          if (b_q[req_q].st == B_LREQ) b_q[req_q].st <= B_LWAIT;
          req_q <= ~req_q;
        end
      end
      // load: responses fill the buffer in order
      if (do_rsp) begin
        rsp_row_q <= rsp_row_q + 1'b1;
        if (last_rsp) begin
          b_q[rsp_q].st <= B_LFULL;
          rsp_q <= ~rsp_q;
        end
      end
      // load: write the MRF
      // (row 0 in the start cycle releases the buffer: the remaining rows
      // are read from it one per cycle, always ahead of the rows a new load
      // can write into it, which arrive no earlier than two cycles later)
      if (wb_start) begin
        b_q[wb_q].st <= B_FREE;
        wb_q      <= ~wb_q;
        wbe_v_q   <= 1'b1;
        wbe_buf_q <= wb_q;
        wbe_rg_q  <= b_q[wb_q].rg;
        wbe_id_q  <= b_q[wb_q].id;
        wbe_row_q <= row_idx_t'(1);
      end else if (wbe_v_q) begin
        wbe_row_q <= wbe_row_q + 1'b1;
        if (last_wb) wbe_v_q <= 1'b0;
      end
      // store: read the MRF
      if (do_srd) begin
        srd_row_q <= srd_row_q + 1'b1;
        if (last_srd) begin
          b_q[srd_q].st <= B_SFULL;
          srd_q <= ~srd_q;
        end
      end
      // store: write requests
      if (do_sreq && mem_gnt_i) begin
        sreq_row_q <= sreq_row_q + 1'b1;
        if (last_sreq) begin
          b_q[sreq_q].st <= B_FREE;
          sreq_q <= ~sreq_q;
        end
      end
      // allocation
      if (issue_valid_i && issue_ready_o) begin
        b_q[alloc_q] <= '{st: issue_i.is_store ? B_SRD : B_LREQ, rg: issue_i.md,
                          id: issue_i.id, base: issue_i.rs1, stride: issue_i.rs2,
                          tk_md: issue_i.tk_md, tk_rd: issue_i.tk_rd};
        alloc_q <= ~alloc_q;
        // the first load (store) after the unit drained of loads (stores)
        // starts the load (store) pointers at the allocated buffer
        if (!issue_i.is_store && !any_ld) begin
          req_q <= alloc_q; rsp_q <= alloc_q; wb_q <= alloc_q;
        end
        if (issue_i.is_store && !any_st) begin
          srd_q <= alloc_q; sreq_q <= alloc_q;
        end
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_rsp) data_q[rsp_q][rsp_row_q] <= mem_rdata_i;
    if (do_srd) data_q[srd_q][srd_row_q] <= rd_data_i;
  end

  assign ld_start_o = wb_start;
  assign ld_done_o = last_wb;
  assign ld_reg_o  = b_q[wb_q].rg;   // register of the load starting now
  assign ld_id_o   = wbe_id_q;       // id of the load finishing now
  assign st_read_o = do_srd && (srd_row_q == '0);
  assign st_reg_o  = b_q[srd_q].rg;
  assign st_done_o = last_sreq;
  assign st_id_o   = b_q[sreq_q].id;
  assign busy_o    = any_ld || any_st;

  // memory handshake rules: a response only arrives for an outstanding load
  // request, and a request is held stable until granted
  logic        req_held_q;
  logic [31:0] req_addr_q;
  logic        req_we_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_held_q <= 1'b0;
      req_addr_q <= '0;
      req_we_q   <= 1'b0;
    end else begin
      req_held_q <= mem_req_o && !mem_gnt_i;
      req_addr_q <= mem_addr_o;
      req_we_q   <= mem_we_o;
      assert (!mem_rvalid_i || (b_q[rsp_q].st inside {B_LREQ, B_LWAIT}))
        else $error("memory response without a request");
      if (req_held_q)
        assert (mem_req_o && mem_addr_o == req_addr_q && mem_we_o == req_we_q)
          else $error("memory request changed before it was granted");
    end
  end

endmodule
