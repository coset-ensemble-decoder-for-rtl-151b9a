// efe: one Ensemble Forest Exploration instance (candidate i of K).
//
// Builds one spanning forest of the compressed graph under its own random
// priorities and peels it with Reverse-Order Elimination (ROE), giving one
// candidate correction, its weight |E_i| and its logical class L_i.
//
// Adjacency storage (overlaps with clustering): while the clustering engine
// runs, compressed edges arrive one per cycle on e_valid/e_in and are
// appended to an edge table; each node keeps a linked list of its incident
// edges (head[] per node, a next pointer per edge end), so insertion is O(1).
//
// Forest construction (the paper's PriorityForests algorithm):
//  PICK  scans all nodes, one per cycle, for the unvisited node of lowest
//        priority and makes it the root of a new tree (this equals visiting
//        the nodes in ascending priority order without a sorter);
//  DEQ   takes the next node x from the BFS FIFO;
//  SCAN  walks x's adjacency list repeatedly; each walk selects the incident
//        edge of lowest (priority, index) above the last one selected, so
//        edges are handled in ascending priority; an unvisited far end y
//        gets parent x and parent edge e, and is pushed on the FIFO and on
//        the traversal stack (the discovery order sigma).
// ROE   pops the traversal stack (reverse discovery order); a node with odd
//       parity and a parent flips its own and its parent's parity and adds
//       its parent edge to the correction. All nodes start odd because every
//       root of the compressed graph is a defect.
// Decode logical: the XOR of the selected edges' homology labels; the weight
// is the sum of their path lengths.
//
// Timing: PICK costs n_nodes cycles per tree, SCAN deg+1 walks of deg
// cycles per node, ROE one cycle per node. 'done' stays high until 'clear'.
// The algorithm is the paper's; the sequencing, the linked-list adjacency
// and the select-by-threshold ordering are this design's.
module efe
  import ced_pkg::*;
#(
  parameter int unsigned NR = ced_pkg::MAX_ROOTS,
  parameter int unsigned NE = ced_pkg::MAX_CEDGES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          e_valid,
  input  cedge_t        e_in,
  input  logic          start,
  input  logic [RW:0]   n_nodes,
  input  logic [31:0]   seed,
  input  logic [4:0]    inst,
  output logic          busy,
  output logic          done,
  output logic [LOGW-1:0] cand_logical,
  output logic [WW-1:0] cand_weight,
  output logic [NE-1:0] cand_mask,
  output logic [EIW:0]  n_edges,
  output logic          overflow,
  input  logic [EIW-1:0] rd_idx,
  output cedge_t        rd_edge
);

  localparam int unsigned NIW = RW;           // node index width
  localparam int unsigned PTR = EIW + 1;      // {valid, index}

  typedef enum logic [2:0] {S_IDLE, S_PICK, S_DEQ, S_SCAN, S_ROE, S_DONE} state_e;
  state_e st;

  // edge table and adjacency lists
  cedge_t        et   [NE];
  logic [PTR-1:0] nxa [NE];
  logic [PTR-1:0] nxb [NE];
  logic [PTR-1:0] head [NR];

  // traversal state
  logic [NR-1:0]  visited, par, haspar;
  logic [NIW-1:0] parent [NR];
  logic [EIW-1:0] pedge  [NR];
  logic [NIW-1:0] fifo   [NR];   // BFS queue
  logic [NIW-1:0] stk    [NR];   // traversal stack (LIFO), discovery order
  logic [NIW:0]   qh, qt, sp;

  logic [NIW:0]   j;              // PICK scan index
  logic           bfound;
  logic [NIW-1:0] bnode;
  logic [NIW-1:0] x;
  logic [PTR-1:0] ptr;
  logic           thr_v;
  logic [PW+EIW-1:0] thr, best;
  logic [EIW-1:0] bedge;

  // priority generator, shared by PICK (nodes) and SCAN (edges)
  logic          pg_edge;
  logic [EIW-1:0] pg_id;
  logic [PW-1:0] pg_prio;
  priority_gen #(.IDW(EIW)) u_pg (.seed, .inst, .is_edge(pg_edge), .id(pg_id), .prio(pg_prio));

  always_comb begin
    pg_edge = (st == S_SCAN);
    pg_id   = (st == S_SCAN) ? ptr[EIW-1:0] : EIW'(j);
  end

  assign busy    = (st != S_IDLE) && (st != S_DONE);
  assign done    = (st == S_DONE);
  assign rd_edge = et[rd_idx];

  // current list entry seen from node x
  logic          cur_is_a;
  logic [PTR-1:0] cur_next;
  logic [NIW-1:0] cur_other;
  logic [PW+EIW-1:0] cur_key;
  always_comb begin
    cur_is_a  = (et[ptr[EIW-1:0]].a == x);
    cur_next  = cur_is_a ? nxa[ptr[EIW-1:0]] : nxb[ptr[EIW-1:0]];
    cur_other = cur_is_a ? et[ptr[EIW-1:0]].b : et[ptr[EIW-1:0]].a;
    cur_key   = {pg_prio, ptr[EIW-1:0]};
  end

  logic [NIW-1:0] y;
  assign y = (et[bedge].a == x) ? et[bedge].b : et[bedge].a;

  logic [NIW-1:0] rx;
  assign rx = stk[sp[NIW-1:0] - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      n_edges <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < NR; i++) head[i] <= '0;
      {qh, qt, sp, j} <= '0;
      {visited, par, haspar} <= '0;
      cand_logical <= '0;
      cand_weight <= '0;
      cand_mask <= '0;
      {bfound, thr_v} <= '0;
      {bnode, x, ptr, thr, best, bedge} <= '0;
    end else if (clear) begin
      st <= S_IDLE;
      n_edges <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < NR; i++) head[i] <= '0;
    end else begin
      // adjacency-list construction, any time before 'start'
      if (e_valid && st == S_IDLE) begin
        if (32'(n_edges) < NE) begin
          et[n_edges[EIW-1:0]]  <= e_in;
          nxa[n_edges[EIW-1:0]] <= head[e_in.a];
          nxb[n_edges[EIW-1:0]] <= head[e_in.b];
          head[e_in.a] <= {1'b1, n_edges[EIW-1:0]};
          head[e_in.b] <= {1'b1, n_edges[EIW-1:0]};
          n_edges <= n_edges + 1'b1;
        end else begin
          overflow <= 1'b1;
        end
      end
      case (st)
        S_IDLE: if (start) begin
          visited <= '0;
          haspar  <= '0;
          for (int i = 0; i < NR; i++) par[i] <= (32'(i) < 32'(n_nodes));
          cand_logical <= '0;
          cand_weight  <= '0;
          cand_mask    <= '0;
          {qh, qt, sp, j} <= '0;
          bfound <= 1'b0;
          st <= S_PICK;
        end
        S_PICK: begin
          if (32'(j) < 32'(n_nodes)) begin
            if (!visited[j[NIW-1:0]] && (!bfound || pg_prio < best[PW+EIW-1:EIW])) begin
              bfound <= 1'b1;
              bnode  <= j[NIW-1:0];
              best   <= {pg_prio, EIW'(0)};
            end
            j <= j + 1'b1;
          end else if (bfound) begin
            visited[bnode]   <= 1'b1;
            fifo[qt[NIW-1:0]] <= bnode;
            stk[sp[NIW-1:0]]  <= bnode;
            qt <= qt + 1'b1;
            sp <= sp + 1'b1;
            bfound <= 1'b0;
            j <= '0;
            st <= S_DEQ;
          end else begin
            st <= (sp == '0) ? S_DONE : S_ROE;
          end
        end
        S_DEQ: begin
          if (qh == qt) begin
            j <= '0;
            bfound <= 1'b0;
            st <= S_PICK;
          end else begin
            x      <= fifo[qh[NIW-1:0]];
            ptr    <= head[fifo[qh[NIW-1:0]]];
            qh     <= qh + 1'b1;
            thr_v  <= 1'b0;
            bfound <= 1'b0;
            st     <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (ptr[EIW]) begin
            if ((!thr_v || cur_key > thr) && (!bfound || cur_key < best)) begin
              bfound <= 1'b1;
              best   <= cur_key;
              bedge  <= ptr[EIW-1:0];
            end
            ptr <= cur_next;
          end else if (bfound) begin
            if (!visited[y]) begin
              visited[y] <= 1'b1;
              haspar[y]  <= 1'b1;
              parent[y]  <= x;
              pedge[y]   <= bedge;
              fifo[qt[NIW-1:0]] <= y;
              stk[sp[NIW-1:0]]  <= y;
              qt <= qt + 1'b1;
              sp <= sp + 1'b1;
            end
            thr    <= best;
            thr_v  <= 1'b1;
            bfound <= 1'b0;
            ptr    <= head[x];
          end else begin
            st <= S_DEQ;
          end
        end
        S_ROE: begin
          if (haspar[rx] && par[rx]) begin
            cand_mask[pedge[rx]] <= 1'b1;
            cand_weight  <= cand_weight + et[pedge[rx]].weight;
            cand_logical <= cand_logical ^ et[pedge[rx]].label;
            par[rx] <= 1'b0;
            par[parent[rx]] <= ~par[parent[rx]];
          end
          sp <= sp - 1'b1;
          if (sp == 1) st <= S_DONE;
        end
        S_DONE: ;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
