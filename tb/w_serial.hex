1
6
b
0
4
a
0
6
