# REXA VM in hardware: a multi-threaded stack machine for sensor nodes

REXA VM is a small stack virtual machine for sensor nodes embedded in materials. Such a node
samples a sensor, runs some signal processing and a small neural network on the samples, and
reports the result. Programs are written in a Forth dialect and compiled to a dense bytecode.
The VM runs that bytecode in bounded slices, so a node can always be interrupted, and it reaches
sensors and co-processors through a narrow function-call interface (the IOS, input-output
system).

This repository holds a synthesizable SystemVerilog version of the hardware VM. It replicates the
execution loop into two threads and gives each thread its own stacks and task scheduler. The
threads share:

- one byte-wide code segment, which holds both code and data;
- a dictionary of exported words;
- an IOS scheduler with a fixed-point function unit, a vector unit for neural networks, and an
  ADC sample buffer.

The design follows the published description of REXA VM (Bosse et al., "Virtualization of Tiny
Embedded Systems with a robust real-time capable and extensible Stack Virtual Machine REXAVM").
That description names the hardware blocks and gives the bytecode format, the scheduling model,
the fixed-point algorithms and the table layouts. It does not give the internal interfaces, the
op-code numbering or the timing. Everything of that kind here is this design's own, and is marked
as such in the header comment of each file and in the section "Departures and gaps" below.

## The machine at a glance

```
              host port (load code, read results)      run_valid/run_pc
                         |                                   |
                         v                                   v
   +-------------------------------------+          +----------------+
   | mem_arbiter (round robin, 6 ports)  |          |  thread_sched  |  frame -> least busy thread
   +-------------------------------------+          +----------------+
         |  single byte port                          |            |
   +--------------+                          +-------------+  +-------------+
   | code_segment |                          | task_sched0 |  | task_sched1 |  task tables, ms clock,
   | 4096 bytes   |                          +-------------+  +-------------+  await polling
   +--------------+                           token |  ^ status  token | ^
                                             +-----------+       +-----------+
                                             |  vmexec0  |       |  vmexec1  |  bytecode loop
                                             | DS RS FS  |       | DS RS FS  |  (vm_stack x3 each)
                                             +-----------+       +-----------+
                                                 |  FCALL  export/import  |
                                       +----------------+   +------+
                                       |   ios_sched    |   | dict |
                                       | dsp_func       |   +------+
                                       | vec_unit       |
                                       | sample_buf     |--- ADC samples in, DAC registers out
                                       +----------------+
   lst_search: word-table lookup for a compiler, reachable from the host side
```

The code segment has a single port. It is shared by six requesters, in this order:

| Port | Requester |
|---|---|
| 0, 1 | the two VMEXECs (instruction fetch and data access) |
| 2, 3 | the two task schedulers, which poll variables that a task awaits |
| 4 | the vector unit, which reads and writes arrays |
| 5 | the host port |

All of these use the same handshake:

1. The requester holds `req` until its `gnt` bit is set.
2. The access happens in the grant cycle.
3. Read data arrives one clock later, flagged by `rvalid`.

The arbiter starts its search for the next grant one place above the last winner. So no
requester waits longer than five other accesses.

Default sizes are those of the published FPGA build:

- code segment 4096 bytes;
- data stack 1024 cells;
- return stack 32 cells;
- 70 MHz clock.

The loop stack and the number of tasks per thread are not published. They are set to 32 cells
and 4 tasks.

## Bytecode and the execution loop (`vmexec`)

### Format

Each code byte's two top bits give its kind:

| Bits 7:6 | Length | Meaning |
|---|---|---|
| `00` | 2 bytes | short literal: 14-bit signed value, most significant byte first |
| `01` | 4 bytes | long literal: 30-bit signed value. Pushed as two cells: the high word, then the low word on top |
| `10` | 1 byte | operation 0..63 |
| `11` | 1 byte | operation 64..127 |

Some operations carry operands after the op byte:

- Branch, conditional branch, call and loop carry a 16-bit absolute target address (3 bytes in
  all).
- FCALL carries an 8-bit IOS function number (2 bytes in all).

The op-code numbers are listed in `rexa_pkg.sv`. They cover:

- arithmetic and logic;
- comparisons, which return -1 or 0 in Forth style;
- stack shuffling;
- variable and array access;
- control flow with counted loops (`do` ... `loop`, `i`);
- scheduling words (`yield`, `sleep`, `await`, `end`, `task`);
- streams (`out`, `in`, `send`, `receive`, and `sendn`, which sends a slice of a
  code-segment array one cell per handshake, each index bounds-checked);
- exceptions (`throw`, `catch`);
- the dictionary (`export`, `import`);
- `fcall`.

### Data addresses

A data address is 16 bits wide.

**Bit 15 clear: a byte address in the code segment.**

- A variable is a 2-byte big-endian cell.
- An array is a 2-byte element count followed by its cells.
- `read` and `write` check the index against that count. An index out of range raises the
  I/O exception.

This is how the original VM embeds variables and arrays inside a code frame, next to the code
that uses them.

**Bit 15 set: an IOS data object.**

| Address | Object |
|---|---|
| `0x8000` | the sample buffer |
| `0x8001` | the conversion status `sampled` |
| `0x8002` | the ring offset `sample0` |

`@`, `!`, `read` and `write` on such addresses are turned into IOS calls. So a program reads
samples with exactly the words it uses for its own arrays.

### Task tokens and the run loop

A VMEXEC never runs on its own. Its task scheduler hands it a **task token**, which holds:

- the task number;
- the resume address;
- a "fresh" bit, which empties the task's stacks;
- optionally, a status value to push first.

The VMEXEC then fetches and executes instructions until one of these happens:

- the step budget (`STEPS`, default 16) is used up;
- `preempt` is raised;
- the task executes `yield`, `sleep`, `await` or `end`;
- an exception is not caught.

Then it sends one **status token** back and waits. The status token holds:

- the reason;
- the resume address;
- for `sleep` and `await`, the time-out, the awaited value and the variable.

This is the published execution loop ("at least one, at most *steps* instructions"). The queue
between the loop and its scheduler is here a single register in each direction.

### Timing

The code segment is byte-wide and shared, so every byte access costs at least two clocks: the
grant, then the data. Typical costs are:

| Instruction | Clocks |
|---|---|
| one-byte stack operation | about 4 (fetch plus one execute clock) |
| short literal, or branch | about 6–8 |
| `@` or `!` on a code-segment variable | 4 more |

When both threads and a vector operation compete for the port, each of them slows down in
proportion.

### Stacks (`vm_stack`)

Each thread has three stacks:

- a data stack (DS);
- a return stack (RS);
- a loop stack (FS), which holds loop limits and indices.

Each stack memory is split into one partition per task, so switching tasks is just a change of
partition select. The top two cells are always readable. That lets a binary operator pop two
cells and push the result in one clock.

An operation that would overflow or underflow a partition is refused. Instead it raises the
stack exception in the same clock. The return stack can only be reached by `call`, `ret` and
the exception unwinding, never by user words.

## Tasks, time and events (`task_sched`, `thread_sched`)

### Starting a code frame

The host loads a code frame into the code segment and offers its entry address on `run_pc`. The
**thread scheduler** gives the frame, as a new task, to the thread with the fewest busy task
slots. A tie goes to the lower thread number. If every thread is full, the frame waits.

### The task table

Each thread's **task scheduler** keeps up to `MAXTASKS` tasks. Each task is in one of these
states: free, ready, running, sleeping or awaiting.

A running task can create another task with the `task` word, which gives the new task's start
address. Requests from the `task` word win over frames from the thread scheduler.

### Choosing the next task

When its VMEXEC is idle, the scheduler scans the table once, starting after the task that ran
last.

- An awaiting task whose event has happened is taken at once and gets `1` pushed.
- A sleeping or awaiting task whose deadline has passed is taken at once. An awaiting task then
  gets `-1` pushed.
- Otherwise the first ready task in the rotation is taken.

This mirrors the published multitasking loop, which checks events and time-outs before it
resumes plain ready tasks. The only change is the rotating start, which makes `yield` fair.

### Time and events

Time is counted in milliseconds. The count is derived from the clock, with `CLK_PER_MS` clocks
per millisecond (70 000 at 70 MHz).

- `sleep ( ms -- )` sets a deadline.
- `await ( ms value addr -- status )` suspends the task until the variable at `addr` equals
  `value`, or until `ms` milliseconds have passed. A time-out of 0 waits without limit.

The awaited variable is watched in one of two ways:

- The IOS status variables (`sampled`, `sample0`) arrive as signals and are compared directly.
- A code-segment variable is polled. The scheduler reads its two bytes through its own arbiter
  port, one awaiting task after the other. The event is therefore seen a few clocks after the
  store.

The typical use is the published acquisition pattern: `1000 1 sampled await` followed by
`<0 if error endif`.

### Ending a task

A task that reaches `end`, or stops on an uncaught exception, frees its slot. This is reported
on `fin_valid`, `fin_err` and `fin_pc`. Releasing the code frame itself is the host's job: it
calls the dictionary's `gc` with the frame's address range.

## Exceptions and catch points

There is no try/catch block. Instead a task sets a **catch point** by executing `catch`. The
catch point records:

- the address of the `catch` instruction;
- the current depths of the return and loop stacks.

`catch` pushes the pending exception code, or 0 if none is pending. So the usual pattern is
`catch if ... handle ... endif`.

An exception can come from:

- a stack overflow or underflow;
- division by zero;
- an unknown op code;
- a failed IOS call, array index or import;
- `throw`.

When one happens, the VMEXEC does three things:

1. It unwinds the return and loop stacks to the recorded depths.
2. It makes the exception code pending.
3. It jumps back to the catch instruction.

That instruction then pushes the code. The data stack is left as it is.

If a task has no catch point, the exception ends the task with status "error". User codes from
8 upward are reported as the generic user exception.

User-defined handler words bound to exception kinds are not built.

## The input-output system (`ios_sched`)

`fcall n` pops the arguments of IOS function `n` from the data stack and sends them to the IOS
scheduler. It then waits for the response, which may push one result. A failed call raises the
I/O exception. The scheduler serves one call at a time and takes turns between the threads.

| n | Word | Stack effect | Unit |
|---|---|---|---|
| 0 | sigmoid | ( x -- y ) | dsp_func |
| 1 | log10 | ( x -- y ) | dsp_func |
| 2 | relu | ( x -- y ) | dsp_func |
| 3 | vecload | ( src off dst -- ) | vec_unit |
| 4 | vecscale | ( src dst scale -- ) | vec_unit |
| 5 | vecadd | ( a b dst scale -- ) | vec_unit |
| 6 | vecmul | ( a b dst scale -- ) | vec_unit |
| 7 | vecfold | ( in w out scale -- ) | vec_unit |
| 8 | vecmap | ( src dst func scale -- ) | vec_unit, using dsp_func |
| 9 | adc | ( trigmode depth gain freq device -- ) | sample_buf, ADC port |
| 10 | dac | ( wave interval ampl freq device -- ) | DAC registers |
| 11–13 | sampled, samples, sample0 | ( -- addr ) | IOS data addresses |
| 14, 15 | internal data read / write | used by `@ ! read write` on IOS addresses | sample_buf |

The ADC and the DAC are outside the design.

- **ADC.** The `adc` word's five arguments appear on `adc_*` registers, together with a start
  pulse. The converter returns samples on `adc_valid`/`adc_data`, plus a trigger input.
- **DAC.** The `dac` word's arguments are latched on `dac_*` with a start pulse. What a converter
  makes of wave number, interval and amplitude is its own business.

## Fixed-point functions (`dsp_func`)

This block is the least obvious part of the design. It reproduces the published integer
algorithms exactly, including their errors.

### Scales

| Function | Input scale | Output scale |
|---|---|---|
| sigmoid | x/1000 | y/1000, so 0..1000 |
| log10 | x/10 | y/100 |
| relu | unchanged | unchanged |

### log10

1. Divide the argument by 10 until it is below 100, adding 100 to the result for each division.
2. Add a 90-entry table value for the two-digit remainder r (10..99). The table holds
   `int(100*log10(r/10))`.

Arguments below 10 are multiplied up instead. Zero and negative arguments return -32768.

The division loop truncates. So, for example, 1089 is treated as 10. The error of this algorithm
reaches 0.04 in log10.

### sigmoid

The sigmoid is built from the symmetry y(-x) = 1000 - y(x) and four ranges of |x|:

| Range of \|x\| | Method |
|---|---|
| up to 1000 | the straight line 500 + 0.231·x |
| 1000 to 3000 | 731 + a 24-entry table |
| 3000 to 10 000 | 952 + a 6-entry table |
| above 10 000 | 1000 |

The table indices come from the integer log10 itself:

- 1000–3000 table: `fplog10(x/5)/2 - 65`;
- 3000–10 000 table: `fplog10(x/10)/10 - 14`.

This spaces the entries logarithmically where the curve flattens.

The table contents are not listed in the publication. They are computed here from the published
construction rule: for each index, take the first x in a 0.05 or 0.1 grid that maps to it, and
store `int(1000*sigmoid(x))` minus the segment base. The header of `dsp_func.sv` gives the exact
formulas.

### Measured error

The testbench sweeps the whole input range. The largest sigmoid error is 22/1000, at the segment
borders. That is more than the "below 1%" the publication claims for its version, but it is what
this construction gives.

### Timing

The unit is combinational with a registered output. It gives one result per clock, and `done`
follows `start` by one clock.

## Vector unit for neural networks (`vec_unit`)

Vectors are arrays in the code segment (count cell plus cells), or the sample buffer at `0x8000`.
The sample buffer has the current window length as its size and is indexed cyclically.

All arithmetic is 32-bit. Each result is then scaled with the element of a scale vector:

| Scale element s | Result |
|---|---|
| s > 0 | multiply by s |
| s < 0 | divide by -s |
| s = 0 | unchanged |

A scale-vector address of 0 turns scaling off. The scaled result is saturated to 16 bits.

`vecfold` is one dense layer: `out[j] = S(sum_i in[i]*w[j*|in| + i], scale[j])`. The weights are
stored neuron by neuron, and their count must equal |in|·|out|. A network layer is then
`vecfold`, followed by `vecmap` with the sigmoid or relu function number.

Size rules are checked before anything is written. A violation makes the call fail and leaves
the destination untouched.

The unit has one multiply-accumulate and reads cells byte by byte through its arbiter port. A
fold over n inputs and m outputs therefore costs about 4·(n·m + n + m) byte accesses. The
publication mentions fixed-width parallel vector operations but gives no width. This design keeps
the simplest form.

### Forward-pass cost of whole networks

Networks of the sizes used in the published ANN evaluation were run on the full VM. Each layer
is one `vecfold` followed by one `vecmap sigmoid`. Inputs, weights and all intermediate vectors
live in one code frame.

| Layers | Code + data (bytes) | Forward pass (clocks) | At 70 MHz |
|---|---|---|---|
| [2,3,1] | 120 | 482 | 7 µs |
| [4,3,2] | 148 | 612 | 9 µs |
| [4,8,8,4] | 482 | 2 398 | 34 µs |
| [8,32,32,8] | 3 618 | 20 438 | 0.29 ms |

The cost is dominated by the byte-serial weight reads. [8,32,32,8] is the largest evaluated
network that fits the 4096-byte code segment. [8,64,32,8] needs 5.6 KB for its weights alone,
so it needs a larger `CS_SIZE`.

## Sample buffer (`sample_buf`)

The buffer holds `SB_DEPTH` = 8192 16-bit samples, written by DMA from the converter port. The
`adc` word's `depth` argument is in kS: 1024 samples, capped at the buffer size.

- **Free-running mode** (trigger mode 10, as in the published example `const FREE 10`). The
  window starts with the first sample.
- **Any other mode.** Samples circulate in the ring until the trigger input fires. The window is
  then the next `depth` samples.

When the window is complete:

- `sampled` becomes 1;
- `sample0` holds the ring position of the oldest sample.

A program reads from there, wrapping modulo the window length, like this:
`offset @ samples read`, then `offset @ 1 + N mod offset !`.

A second port serves the VM's reads and writes and the vector unit. So signal processing can
work in place on the buffer. This is one of the points of the original design: the ADC buffer
doubles as working memory.

## Dictionary (`dict`)

Code frames can publish words to each other:

- `export ( key addr -- )` binds a 16-bit name key to a code-segment address. An existing key is
  overwritten, so a newer version of a word replaces an older one.
- `import ( key -- addr )` looks a key up. An unknown key raises the I/O exception.
- `gc` removes every entry whose address lies in a given range. The host calls it when it
  releases a code frame.

The table has 32 entries and is searched linearly, one entry per clock. An operation takes
ENTRIES+2 clocks. The two threads' requests are served in turn.

Forming the name key from the word's text is left to the compiler.

## Linear search table (`lst_search`)

The compiler of the original VM maps word names to op codes with a **linear search table**. This
is a byte array with two parts.

- **Head.** For each word length L, a 2-byte address of the first slice of the sub-tree of words
  with L characters.
- **Slices.** Runs of 2-byte entries, each an 8-bit character and an 8-bit value.
  - Before a word's last character, the value is the forward distance, in entries, to the slice
    of the next character.
  - At the last character, the value is the word's index.
  - A character of 0 closes a slice and means "not found".

The lookup state machine does the following:

1. Read the head entry for the word's length.
2. Compare one entry per clock with the current character.
3. On a match, jump forward to the next slice.
4. Stop with the index, or with "not found" at the closing entry.

The search time depends on the word length and the slice sizes, not on the number of words.
`probes` reports how many entries were compared.

The text compiler around it is not built. The unit is reachable through the `lst_*` ports of the
top.

## Departures and gaps

**Changes from the published description:**

- The op-code numbering, IOS function numbering, argument order, the data address map
  (bit 15 = IOS objects) and all internal handshakes are this design's own. The publication
  generates them from tables it does not print.
- The code segment is accessed one byte at a time through one shared port. Threads and the
  vector unit slow each other down. There are no caches or wide ports.
- Task selection rotates instead of always starting at task 0.
- The log10 output scale is 1/100, as in the published algorithm. The published word table says
  1/1000. The algorithm is followed because the sigmoid depends on it.
- The published log10 table formula indexes with the argument, but its code indexes with the
  argument minus 10. The code is followed.

**Not built:**

- user exception handler words;
- double-word (32-bit) arithmetic;
- the `sin` function and the in-place filters `hull`, `lowp` and `highp`, which the
  publication lists without giving their algorithm;
- the programmable `wave` buffer of the DAC, and `vecmap` with a user-defined word instead of a built-in function;
- the profiler;
- the energy-aware real-time scheduler (task priorities, deadlines and energy budgets);
- the I2C driver;
- the host message protocol: the top offers a plain byte port and a run port instead;
- the text-to-bytecode compiler itself, apart from its table lookup.

**Sizes:**

- All published sizes are used as defaults.
- The loop stack depth, the task count per thread, the dictionary size and the step budget are
  not published. They are chosen here.
- The published configurations with larger return and loop stacks (128–256 cells) need
  `RS_DEPTH`/`FS_DEPTH` raised.
- A 16 KB code segment needs `CS_SIZE` raised.

At the default sizes the top synthesises (generic yosys) to about 6100 cells, 4500 flip-flop
bits and 315 kbit of memory arrays. Most of the memory is the stacks (three per thread, four
partitions each), the sample buffer and the code segment.

## Testbenches and simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and contains a watchdog. Stimulus is random where that makes
sense, and the expected values come from models in the testbench.

`tb_rexa_top` runs the whole VM at its default parameters. It loads two code frames as
hand-assembled bytecode through the host port. Between them they exercise:

- loops and calls;
- export and import;
- spawning a task;
- yield, sleep and await with both an event and a time-out;
- a caught division by zero and an uncaught `throw`;
- the DAC and ADC words, with a behavioural converter in the testbench;
- `vecfold` and `vecmap` on small arrays;
- all four stream words.

The testbench counts how often each mechanism occurred (steps, yields, sleeps, awaits, event and
time-out resumes, spawns, IOS and vector calls, samples, dictionary operations, gc, LST hits and
misses, arbiter conflicts) and fails a count that stays at zero. It runs in well under a second.

`tb_ann_workload` also runs at the default size. It executes the four networks of the table
above with random weights and inputs. It then reads every layer's fold output back and checks
it exactly. Each activation is checked against the real sigmoid.

To run a testbench with plain Verilator 5 (from the repository root):

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl +libext+.sv rtl/rexa_pkg.sv tb/tb_rexa_top.sv \
          --top-module tb_rexa_top -o sim
./obj_dir/sim
```

Replace the testbench name to run the others. The package file must come first. Every module
resets asynchronously on `rst_n` low and uses a single clock.
