// rand_cache: randomized set-associative L1 data cache with a configurable
// replacement policy.
//
// An address is split into line offset, set index and tag. In place of
// using the set index directly, every way w looks the line up at its own
// index rnd_set_i[w] = f_w(tag, index): an external keyed cipher (SCARF in
// the intended system, one instance and key per way) receives the tag as
// tweak (rnd_tweak_o) and the index as plaintext (rnd_index_o) and returns
// one index per way in the same cycle. A line may therefore sit in any of W
// scattered entries, and its candidate entries differ from those of
// addresses that share its index. Because two addresses with different
// indices can now meet in one entry, each entry stores the full line address
// (tag and index) and a valid bit. The replacement policy (repl_policy,
// POLICY) picks the victim among the W candidate entries and keeps its state
// in RAMs of its own.
//
// Default geometry: 4 ways x 1024 sets x 16-byte lines (64 KiB), 22-bit byte
// addresses, VARP-64 replacement. The CPU port is a single-outstanding
// request/grant/response port in the style of the CV32E40P data interface;
// the memory port takes one request (a whole-line read, or a one-word
// write) and answers with mem_rvalid_i, a read returning the full line at
// once. Both port protocols, write-through without write allocation, the
// reset sweep and the latencies below are this design's choices; the source
// design states only geometry, indexing, policy behaviour and state sizes.
//
// Timing (cycles after the request is granted): read hit, response 3 cycles
// later; read miss, line request to memory 3 cycles later and response 2
// cycles after the memory answers; writes go to memory and answer after it.
// Every hit and every fill after a read miss updates the policy state; a
// write miss leaves the cache untouched. After reset the cache spends SETS
// cycles clearing valid bits and policy state (ready_o low, no grant).
// stat_* outputs pulse once per hit, miss, eviction of a valid line, and
// random tie-break among several equally old candidates on a read miss.
module rand_cache #(
  parameter rc_pkg::policy_e POLICY     = rc_pkg::RP_VARP,
  parameter int unsigned     WAYS       = rc_pkg::WAYS,
  parameter int unsigned     SETS       = rc_pkg::SETS,
  parameter int unsigned     LINE_BYTES = rc_pkg::LINE_BYTES,
  parameter int unsigned     ADDR_W     = rc_pkg::ADDR_W,
  parameter int unsigned     AGES       = rc_pkg::VARP_AGES,
  parameter int unsigned     TWEAK_W    = rc_pkg::TWEAK_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  output logic                                  ready_o,
  // CPU data port
  input  logic                                  cpu_req_i,
  output logic                                  cpu_gnt_o,
  input  logic [ADDR_W-1:0]                     cpu_addr_i,
  input  logic                                  cpu_we_i,
  input  logic [3:0]                            cpu_be_i,
  input  logic [rc_pkg::WORD_W-1:0]             cpu_wdata_i,
  output logic                                  cpu_rvalid_o,
  output logic [31:0]                           cpu_rdata_o,
  // index randomization (one cipher instance per way, outside)
  output logic [TWEAK_W-1:0]                    rnd_tweak_o,
  output logic [$clog2(SETS)-1:0]               rnd_index_o,
  input  logic [WAYS-1:0][$clog2(SETS)-1:0]     rnd_set_i,
  // memory port
  output logic                                  mem_req_o,
  input  logic                                  mem_gnt_i,
  output logic                                  mem_we_o,
  output logic [ADDR_W-1:0]                     mem_addr_o,
  output logic [3:0]                            mem_be_o,
  output logic [31:0]                           mem_wdata_o,
  input  logic                                  mem_rvalid_i,
  input  logic [LINE_BYTES*8-1:0]               mem_rdata_i,
  // event pulses
  output logic                                  stat_hit_o,
  output logic                                  stat_miss_o,
  output logic                                  stat_evict_o,
  output logic                                  stat_tie_o
);

  localparam int unsigned OFF_W  = $clog2(LINE_BYTES);
  localparam int unsigned IDX_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned LA_W   = ADDR_W - OFF_W;        // line address
  localparam int unsigned LINE_W = LINE_BYTES * 8;
  localparam int unsigned WSEL_W = OFF_W - 2;              // word in line

  typedef struct packed {
    logic            valid;
    logic [LA_W-1:0] laddr;
  } tag_entry_t;

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_TAG, S_MREQ, S_MWAIT, S_FILL, S_UPD
  } state_e;

  state_e                         state_q;
  logic [IDX_W-1:0]               init_cnt_q;

  // accepted request
  logic [ADDR_W-1:0]              addr_q;
  logic                           we_q;
  logic [3:0]                     be_q;
  logic [31:0]                    wdata_q;
  logic [LA_W-1:0]                laddr;
  logic [WSEL_W-1:0]              wsel;

  // per-way RAM ports
  tag_entry_t [WAYS-1:0]          tag_rd;
  logic [WAYS-1:0][LINE_W-1:0]    data_rd;
  logic                           ram_rd;
  logic [WAYS-1:0]                tag_we, data_we;
  tag_entry_t                     tag_wdata;
  logic [LINE_W-1:0]              data_wdata;

  // lookup result
  logic [WAYS-1:0]                hit_vec;
  logic                           hit;
  logic [WAY_W-1:0]               hit_way;
  logic [WAYS-1:0]                cand_valid;
  logic                           hit_q;
  logic [WAY_W-1:0]               way_q;          // hit way, or victim on a miss
  logic [LINE_W-1:0]              line_q;         // line from memory
  logic [LINE_W-1:0]              merged;

  // policy
  logic [WAY_W-1:0]               victim;
  logic [WAYS-1:0][7:0]           cand_age;
  logic                           tie;
  logic                           upd_en;
  logic [WAY_W-1:0]               upd_way;
  logic                           upd_done;

  assign laddr       = addr_q[ADDR_W-1:OFF_W];
  assign wsel        = addr_q[OFF_W-1:2];
  assign rnd_index_o = laddr[IDX_W-1:0];
  assign rnd_tweak_o = TWEAK_W'(laddr[LA_W-1:IDX_W]);
  assign ready_o     = (state_q != S_INIT);
  assign cpu_gnt_o   = (state_q == S_IDLE);

  // ---------------------------------------------------------------- RAMs
  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [IDX_W-1:0] addr;
    assign addr = (state_q == S_INIT) ? init_cnt_q : rnd_set_i[w];
    sp_ram #(.DEPTH(SETS), .WIDTH(LA_W + 1)) u_tag (
      .clk, .en(ram_rd | tag_we[w]), .we(tag_we[w]), .addr,
      .wdata(tag_wdata), .rdata(tag_rd[w])
    );
    sp_ram #(.DEPTH(SETS), .WIDTH(LINE_W)) u_data (
      .clk, .en(ram_rd | data_we[w]), .we(data_we[w]), .addr,
      .wdata(data_wdata), .rdata(data_rd[w])
    );
    assign hit_vec[w]    = tag_rd[w].valid && (tag_rd[w].laddr == laddr);
    assign cand_valid[w] = tag_rd[w].valid;
  end

  always_comb begin
    hit     = |hit_vec;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (hit_vec[w]) hit_way = WAY_W'(w);
  end

  // Write data merged into the cached line on a write hit.
  always_comb begin
    merged = data_rd[way_q];
    for (int b = 0; b < 4; b++)
      if (be_q[b]) merged[wsel*32 + b*8 +: 8] = wdata_q[b*8 +: 8];
  end

  // --------------------------------------------------------- policy
  repl_policy #(.POLICY(POLICY), .W(WAYS), .SETS(SETS), .AGES(AGES)) u_policy (
    .clk, .rst_n,
    .init_en   (state_q == S_INIT),
    .init_idx  (init_cnt_q),
    .rd_en     (ram_rd),
    .cand_idx  (rnd_set_i),
    .cand_valid(cand_valid),
    .victim, .cand_age, .tie,
    .upd_en, .upd_way(upd_way), .upd_done
  );

  // --------------------------------------------------------- control
  always_comb begin
    ram_rd     = (state_q == S_LOOKUP);
    tag_we     = '0;
    data_we    = '0;
    tag_wdata  = '{valid: 1'b1, laddr: laddr};
    data_wdata = we_q ? merged : line_q;
    upd_en     = 1'b0;
    if (state_q == S_INIT) begin
      tag_we    = '1;
      tag_wdata = '0;
    end
    if (state_q == S_TAG && hit && !we_q)
      upd_en = 1'b1;
    if (state_q == S_FILL && (hit_q || !we_q)) begin
      upd_en          = 1'b1;
      data_we[way_q]  = 1'b1;
      tag_we[way_q]   = !we_q;
    end
  end

  // A read hit updates the policy in the compare cycle, before way_q is set.
  assign upd_way = (state_q == S_TAG) ? hit_way : way_q;

  assign mem_req_o   = (state_q == S_MREQ);
  assign mem_we_o    = we_q;
  assign mem_addr_o  = we_q ? addr_q : {laddr, {OFF_W{1'b0}}};
  assign mem_be_o    = be_q;
  assign mem_wdata_o = wdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_INIT;
      init_cnt_q   <= '0;
      addr_q       <= '0;
      we_q         <= 1'b0;
      be_q         <= '0;
      wdata_q      <= '0;
      hit_q        <= 1'b0;
      way_q        <= '0;
      line_q       <= '0;
      cpu_rvalid_o <= 1'b0;
      cpu_rdata_o  <= '0;
      stat_hit_o   <= 1'b0;
      stat_miss_o  <= 1'b0;
      stat_evict_o <= 1'b0;
      stat_tie_o   <= 1'b0;
    end else begin
      cpu_rvalid_o <= 1'b0;
      stat_hit_o   <= 1'b0;
      stat_miss_o  <= 1'b0;
      stat_evict_o <= 1'b0;
      stat_tie_o   <= 1'b0;
      unique case (state_q)
        S_INIT: begin
          init_cnt_q <= init_cnt_q + IDX_W'(1);
          if (init_cnt_q == IDX_W'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (cpu_req_i) begin
            addr_q  <= cpu_addr_i;
            we_q    <= cpu_we_i;
            be_q    <= cpu_be_i;
            wdata_q <= cpu_wdata_i;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: state_q <= S_TAG;
        S_TAG: begin
          hit_q       <= hit;
          stat_hit_o  <= hit;
          stat_miss_o <= !hit;
          if (hit) way_q <= hit_way;
          else     way_q <= victim;
          if (hit && !we_q) begin
            cpu_rvalid_o <= 1'b1;
            cpu_rdata_o  <= data_rd[hit_way][wsel*32 +: 32];
            state_q      <= S_UPD;
          end else begin
            if (!hit && !we_q) begin
              stat_evict_o <= cand_valid[victim];
              stat_tie_o   <= tie;
            end
            state_q <= S_MREQ;
          end
        end
        S_MREQ: if (mem_gnt_i) state_q <= S_MWAIT;
        S_MWAIT: begin
          if (mem_rvalid_i) begin
            if (!we_q) line_q <= mem_rdata_i;
            state_q <= S_FILL;
          end
        end
        S_FILL: begin
          cpu_rvalid_o <= 1'b1;
          cpu_rdata_o  <= line_q[wsel*32 +: 32];
          state_q      <= (hit_q || !we_q) ? S_UPD : S_IDLE;
        end
        S_UPD: if (upd_done) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // An address is cached in at most one of its candidate entries.
  always_ff @(posedge clk) begin
    if (state_q == S_TAG)
      assert ((hit_vec & (hit_vec - WAYS'(1))) == '0) else $error("line cached in several ways");
  end

  logic unused;
  assign unused = ^{cand_age};

endmodule
