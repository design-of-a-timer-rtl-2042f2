// tq_ref_pkg - reference model of the timer queue for the testbenches.
//
// A plain sorted list, head first. PUSH removes the ID if present and inserts
// the element after every element with smaller or equal DATA (equal DATA
// keeps arrival order); if the list then exceeds the capacity, its last
// element is dropped and recorded. POP removes the head, DELETE removes an ID.
// The model also classifies every operation by the mechanism the hardware
// must use for it, from the positions before and after (block = position/M):
// update towards the head or the tail, an update that crosses blocks towards
// the tail (push + pop passed between blocks) or towards the head (delete +
// push-first passed between blocks), a full block pushing its last element
// into the next one (push-first), a placement decided by the comparison with
// the next block's first element, equal-DATA ties, overflow, delete hit and
// miss, pop and pop of an empty queue.
package tq_ref_pkg;

  typedef struct {
    int id;
    longint unsigned data;
  } ent_t;

  class tq_ref;
    ent_t q[$];
    ent_t drops[$];
    int   cap;
    int   m;
    int   n_enqueue, n_upd_head, n_upd_tail, n_cross_tail, n_cross_head, n_pf_carry;
    int   n_next_cmp, n_tie, n_overflow, n_del_hit, n_del_miss, n_pop, n_pop_empty;

    function new(int cap_, int m_);
      cap = cap_;
      m   = m_;
    endfunction

    function int find(int id);
      foreach (q[i]) if (q[i].id == id) return i;
      return -1;
    endfunction

    function void push(int id, longint unsigned data);
      int old_idx, pos;
      longint unsigned old_data;
      old_idx = find(id);
      old_data = (old_idx >= 0) ? q[old_idx].data : 0;
      if (old_idx >= 0) q.delete(old_idx);
      foreach (q[i]) if (q[i].data == data) begin n_tie++; break; end
      pos = q.size();
      foreach (q[i]) if (q[i].data > data) begin pos = i; break; end
      q.insert(pos, '{id, data});
      if (old_idx < 0) begin
        n_enqueue++;
        // the block receiving the element was full: its last one moves on
        if (q.size() - 1 >= (pos / m + 1) * m) n_pf_carry++;
      end else if (data < old_data) begin
        n_upd_head++;
        if (pos / m < old_idx / m) n_cross_head++;
      end else begin
        n_upd_tail++;
        if (pos / m > old_idx / m) n_cross_tail++;
        if (pos % m == m - 1 && pos + 1 < q.size()) n_next_cmp++;
      end
      if (q.size() > cap) begin
        n_overflow++;
        drops.push_back(q[q.size() - 1]);
        q.delete(q.size() - 1);
      end
    endfunction

    function ent_t pop();
      ent_t e = '{0, 0};
      n_pop++;
      if (q.size() == 0) n_pop_empty++;
      else e = q.pop_front();
      return e;
    endfunction

    function void del(int id);
      int i = find(id);
      if (i >= 0) begin
        n_del_hit++;
        q.delete(i);
      end else n_del_miss++;
    endfunction

    function ent_t head();
      return (q.size() > 0) ? q[0] : '{0, 0};
    endfunction
  endclass

endpackage
