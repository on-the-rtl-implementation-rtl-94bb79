c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
c72d83e94fa50b61
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
e82c60a4e82c60a4
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
092b4d6f81a3c5e7
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
2a2a2a2a2a2a2a2a
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
4b2907e5c3a18f6d
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
6c28e4a06c28e4a0
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
8d27c16b05af49e3
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
ae26ae26ae26ae26
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
cf258be147ad0369
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
e02468ace02468ac
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
0123456789abcdef
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
2222222222222222
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
43210fedcba98765
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
6420eca86420eca8
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
852fc9630da741eb
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
a62ea62ea62ea62e
