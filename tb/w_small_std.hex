0b61
4fa5
83e9
c72d
c5e7
81a3
4d6f
092b
8f6d
c3a1
07e5
4b29
49e3
05af
c16b
8d27
60a4
e82c
60a4
e82c
2a2a
2a2a
2a2a
2a2a
e4a0
6c28
e4a0
6c28
ae26
ae26
ae26
ae26
