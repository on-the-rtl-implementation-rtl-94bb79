c72d83e94fa50b61
e82c60a4e82c60a4
